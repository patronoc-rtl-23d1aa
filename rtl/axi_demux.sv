// axi_demux: splits one AXI4 slave port onto NoMstPorts master ports ("Demux" of the crossbar).
//
// Write and read requests are steered by the port indices slv_aw_select_i / slv_ar_select_i,
// which the address decoders compute from the same address. AXI requires that transactions
// with the same ID stay ordered; the demux guarantees it by never having the same ID
// outstanding at two different master ports. Per ID it keeps a counter of outstanding
// transactions and the port they went to (one table for writes, one for reads). A new
// request whose ID is outstanding at another port, or that would exceed MaxTrans outstanding
// transactions for its ID, waits. This is also what bounds the number of outstanding
// transactions (the MOT parameter of the NoC).
//
// W beats follow their AW: the port of every accepted AW is queued in a FIFO of MaxTrans
// entries and W beats go to the port at its head until the beat with last set. An AW for a
// different port than the previous AW waits until the FIFO is empty, i.e. until all earlier
// write bursts have been forwarded. Without this rule, two demuxes writing to the same two
// muxes in opposite orders deadlock: each mux waits for the W beats of the AW it granted first,
// and each demux is sending the W beats of another burst first. B and R
// responses from the master ports are merged with a round-robin arbiter; B and the last R
// beat retire one outstanding transaction. Requests pass through combinationally (no added
// latency); W is accepted from the cycle after its AW handshake on.
//
// The paper gives the function (split by write/read select, support multiple outstanding and
// ordered transactions); the per-ID counter table and the W-order FIFO are this design's.
module axi_demux #(
  parameter int unsigned NoMstPorts = 6,
  parameter int unsigned MaxTrans   = 8,
  localparam int unsigned SelW      = (NoMstPorts > 1) ? $clog2(NoMstPorts) : 1
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  axi_pkg::req_t   slv_req_i,
  input  logic [SelW-1:0] slv_aw_select_i,
  input  logic [SelW-1:0] slv_ar_select_i,
  output axi_pkg::resp_t  slv_resp_o,
  output axi_pkg::req_t   mst_req_o  [NoMstPorts],
  input  axi_pkg::resp_t  mst_resp_i [NoMstPorts]
);
  import axi_pkg::*;

  localparam int unsigned NoIds = 2 ** IdWidth;
  localparam int unsigned CntW  = $clog2(MaxTrans + 1);
  typedef logic [CntW-1:0] cnt_t;
  typedef logic [SelW-1:0] sel_t;

  // ---------------------------------------------------------------- per-ID tables
  cnt_t w_cnt_q [NoIds];
  sel_t w_sel_q [NoIds];
  cnt_t r_cnt_q [NoIds];
  sel_t r_sel_q [NoIds];

  logic aw_ok, ar_ok, aw_hs, ar_hs, b_hs, r_last_hs;
  logic w_fifo_full, w_fifo_empty, w_hs;
  sel_t w_sel_head;

  // An AW may only go to another port than the previous one once all earlier W bursts have
  // been forwarded: otherwise two demuxes and two muxes could wait for each other's W beats.
  sel_t w_last_sel_q;
  logic aw_w_ok;
  assign aw_w_ok = w_fifo_empty || (w_last_sel_q == slv_aw_select_i);

  assign aw_ok = ((w_cnt_q[slv_req_i.aw.id] == '0) || (w_sel_q[slv_req_i.aw.id] == slv_aw_select_i))
              && (w_cnt_q[slv_req_i.aw.id] != cnt_t'(MaxTrans)) && !w_fifo_full && aw_w_ok;
  assign ar_ok = ((r_cnt_q[slv_req_i.ar.id] == '0) || (r_sel_q[slv_req_i.ar.id] == slv_ar_select_i))
              && (r_cnt_q[slv_req_i.ar.id] != cnt_t'(MaxTrans));

  // ---------------------------------------------------------------- response arbiters
  logic [NoMstPorts-1:0] b_valids, b_readies, r_valids, r_readies;
  b_chan_t               b_chans [NoMstPorts];
  r_chan_t               r_chans [NoMstPorts];
  b_chan_t               b_out;
  r_chan_t               r_out;
  logic                  b_out_valid, r_out_valid;

  for (genvar i = 0; i < NoMstPorts; i++) begin : g_resp
    assign b_valids[i] = mst_resp_i[i].b_valid;
    assign b_chans[i]  = mst_resp_i[i].b;
    assign r_valids[i] = mst_resp_i[i].r_valid;
    assign r_chans[i]  = mst_resp_i[i].r;
  end

  rr_arb #(.N(NoMstPorts), .T(b_chan_t)) i_b_arb (
    .clk_i, .rst_ni,
    .valid_i(b_valids), .ready_o(b_readies), .data_i(b_chans),
    .valid_o(b_out_valid), .ready_i(slv_req_i.b_ready), .data_o(b_out), .idx_o()
  );

  rr_arb #(.N(NoMstPorts), .T(r_chan_t)) i_r_arb (
    .clk_i, .rst_ni,
    .valid_i(r_valids), .ready_o(r_readies), .data_i(r_chans),
    .valid_o(r_out_valid), .ready_i(slv_req_i.r_ready), .data_o(r_out), .idx_o()
  );

  // ---------------------------------------------------------------- W order FIFO
  fifo #(.T(sel_t), .Depth(MaxTrans)) i_w_fifo (
    .clk_i, .rst_ni,
    .push_i (aw_hs),
    .data_i (slv_aw_select_i),
    .pop_i  (w_hs && slv_req_i.w.last),
    .data_o (w_sel_head),
    .full_o (w_fifo_full),
    .empty_o(w_fifo_empty)
  );

  // ---------------------------------------------------------------- request routing
  always_comb begin
    for (int unsigned i = 0; i < NoMstPorts; i++) begin
      mst_req_o[i]          = slv_req_i;
      mst_req_o[i].aw_valid = 1'b0;
      mst_req_o[i].w_valid  = 1'b0;
      mst_req_o[i].ar_valid = 1'b0;
      mst_req_o[i].b_ready  = b_readies[i];
      mst_req_o[i].r_ready  = r_readies[i];
    end
    mst_req_o[slv_aw_select_i].aw_valid = slv_req_i.aw_valid && aw_ok;
    mst_req_o[slv_ar_select_i].ar_valid = slv_req_i.ar_valid && ar_ok;
    mst_req_o[w_sel_head].w_valid       = slv_req_i.w_valid && !w_fifo_empty;

    slv_resp_o          = '0;
    slv_resp_o.aw_ready = aw_ok && mst_resp_i[slv_aw_select_i].aw_ready;
    slv_resp_o.ar_ready = ar_ok && mst_resp_i[slv_ar_select_i].ar_ready;
    slv_resp_o.w_ready  = !w_fifo_empty && mst_resp_i[w_sel_head].w_ready;
    slv_resp_o.b_valid  = b_out_valid;
    slv_resp_o.b        = b_out;
    slv_resp_o.r_valid  = r_out_valid;
    slv_resp_o.r        = r_out;
  end

  assign aw_hs     = slv_req_i.aw_valid && slv_resp_o.aw_ready;
  assign ar_hs     = slv_req_i.ar_valid && slv_resp_o.ar_ready;
  assign w_hs      = slv_req_i.w_valid && slv_resp_o.w_ready;
  assign b_hs      = b_out_valid && slv_req_i.b_ready;
  assign r_last_hs = r_out_valid && slv_req_i.r_ready && r_out.last;

  // ---------------------------------------------------------------- table update
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)     w_last_sel_q <= '0;
    else if (aw_hs)  w_last_sel_q <= slv_aw_select_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int unsigned i = 0; i < NoIds; i++) begin
        w_cnt_q[i] <= '0;
        w_sel_q[i] <= '0;
        r_cnt_q[i] <= '0;
        r_sel_q[i] <= '0;
      end
    end else begin
      for (int unsigned i = 0; i < NoIds; i++) begin
        automatic logic inc_w = aw_hs && (slv_req_i.aw.id == id_t'(i));
        automatic logic dec_w = b_hs && (b_out.id == id_t'(i));
        automatic logic inc_r = ar_hs && (slv_req_i.ar.id == id_t'(i));
        automatic logic dec_r = r_last_hs && (r_out.id == id_t'(i));
        w_cnt_q[i] <= w_cnt_q[i] + cnt_t'(inc_w) - cnt_t'(dec_w);
        r_cnt_q[i] <= r_cnt_q[i] + cnt_t'(inc_r) - cnt_t'(dec_r);
        if (inc_w) w_sel_q[i] <= slv_aw_select_i;
        if (inc_r) r_sel_q[i] <= slv_ar_select_i;
      end
    end
  end

  // A response must belong to an outstanding transaction.
  always_ff @(posedge clk_i) begin
    if (rst_ni && (b_hs)) assert (w_cnt_q[b_out.id] != '0)
      else $error("axi_demux: B response without outstanding write");
  end
  always_ff @(posedge clk_i) begin
    if (rst_ni && (r_last_hs)) assert (r_cnt_q[r_out.id] != '0)
      else $error("axi_demux: R response without outstanding read");
  end
  // AXI: a request may not be withdrawn before it is accepted.
  logic aw_wait_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) aw_wait_q <= 1'b0;
    else         aw_wait_q <= slv_req_i.aw_valid && !slv_resp_o.aw_ready;
  end
  always_ff @(posedge clk_i) begin
    if (rst_ni && aw_wait_q) assert (slv_req_i.aw_valid)
      else $error("axi_demux: AW valid dropped");
  end
endmodule
