// axi_mux: merges NoSlvPorts AXI4 slave ports onto one master port ("Mux" of the crossbar).
//
// AW and AR requests are arbitrated round-robin, independently. To send each response back
// to where its request came from, the mux prepends the index of the winning slave port to the
// ID: the master port carries IDs of IdWidth + XbarIdExtra bits (axi_pkg::*_wide_t). B and R
// responses are routed by those upper ID bits and reach the slave port with the upper bits
// removed. Because two slave ports never share a widened ID, the ordering of every original
// ID is kept.
//
// W beats carry no ID in AXI4, so the mux queues the slave-port index of each granted AW in
// a FIFO of MaxWTrans entries and takes W beats from the port at the head until last. While
// the FIFO is full no further AW is granted. No cycle of latency is added.
//
// The paper gives the function; ID prefixing, the W FIFO and round-robin arbitration follow
// the way AXI crossbars are commonly built and are this design's choices.
module axi_mux #(
  parameter int unsigned NoSlvPorts = 5,
  parameter int unsigned MaxWTrans  = 8,
  localparam int unsigned SelW      = (NoSlvPorts > 1) ? $clog2(NoSlvPorts) : 1
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  axi_pkg::req_t       slv_reqs_i  [NoSlvPorts],
  output axi_pkg::resp_t      slv_resps_o [NoSlvPorts],
  output axi_pkg::req_wide_t  mst_req_o,
  input  axi_pkg::resp_wide_t mst_resp_i
);
  import axi_pkg::*;

  typedef logic [SelW-1:0]        sel_t;
  typedef logic [XbarIdExtra-1:0] prefix_t;

  initial assert (NoSlvPorts <= 2 ** XbarIdExtra)
    else $fatal(1, "axi_mux: too many slave ports for the ID prefix");

  // ---------------------------------------------------------------- AW / AR arbitration
  logic [NoSlvPorts-1:0] aw_valids, aw_readies, ar_valids, ar_readies;
  ax_chan_t              aw_chans [NoSlvPorts];
  ax_chan_t              ar_chans [NoSlvPorts];
  ax_chan_t              aw_win, ar_win;
  logic                  aw_win_valid, ar_win_valid, aw_arb_ready;
  sel_t                  aw_idx, ar_idx;
  logic                  w_fifo_full, w_fifo_empty;
  sel_t                  w_sel_head;

  for (genvar i = 0; i < NoSlvPorts; i++) begin : g_in
    assign aw_valids[i] = slv_reqs_i[i].aw_valid;
    assign aw_chans[i]  = slv_reqs_i[i].aw;
    assign ar_valids[i] = slv_reqs_i[i].ar_valid;
    assign ar_chans[i]  = slv_reqs_i[i].ar;
  end

  rr_arb #(.N(NoSlvPorts), .T(ax_chan_t)) i_aw_arb (
    .clk_i, .rst_ni,
    .valid_i(aw_valids), .ready_o(aw_readies), .data_i(aw_chans),
    .valid_o(aw_win_valid), .ready_i(aw_arb_ready), .data_o(aw_win), .idx_o(aw_idx)
  );
  rr_arb #(.N(NoSlvPorts), .T(ax_chan_t)) i_ar_arb (
    .clk_i, .rst_ni,
    .valid_i(ar_valids), .ready_o(ar_readies), .data_i(ar_chans),
    .valid_o(ar_win_valid), .ready_i(mst_resp_i.ar_ready), .data_o(ar_win), .idx_o(ar_idx)
  );

  assign aw_arb_ready = mst_resp_i.aw_ready && !w_fifo_full;

  fifo #(.T(sel_t), .Depth(MaxWTrans)) i_w_fifo (
    .clk_i, .rst_ni,
    .push_i (aw_win_valid && aw_arb_ready),
    .data_i (aw_idx),
    .pop_i  (mst_req_o.w_valid && mst_resp_i.w_ready && mst_req_o.w.last),
    .data_o (w_sel_head),
    .full_o (w_fifo_full),
    .empty_o(w_fifo_empty)
  );

  function automatic ax_wide_chan_t widen(ax_chan_t ax, sel_t idx);
    ax_wide_chan_t o;
    o.id     = {prefix_t'(idx), ax.id};
    o.addr   = ax.addr;
    o.len    = ax.len;
    o.size   = ax.size;
    o.burst  = ax.burst;
    o.lock   = ax.lock;
    o.cache  = ax.cache;
    o.prot   = ax.prot;
    o.qos    = ax.qos;
    o.region = ax.region;
    o.user   = ax.user;
    return o;
  endfunction

  // ---------------------------------------------------------------- response routing
  sel_t b_sel, r_sel;
  assign b_sel = sel_t'(mst_resp_i.b.id[IdWideWidth-1 -: XbarIdExtra]);
  assign r_sel = sel_t'(mst_resp_i.r.id[IdWideWidth-1 -: XbarIdExtra]);

  always_comb begin
    mst_req_o          = '0;
    mst_req_o.aw       = widen(aw_win, aw_idx);
    mst_req_o.aw_valid = aw_win_valid && !w_fifo_full;
    mst_req_o.ar       = widen(ar_win, ar_idx);
    mst_req_o.ar_valid = ar_win_valid;
    mst_req_o.w        = slv_reqs_i[w_sel_head].w;
    mst_req_o.w_valid  = !w_fifo_empty && slv_reqs_i[w_sel_head].w_valid;
    mst_req_o.b_ready  = slv_reqs_i[b_sel].b_ready;
    mst_req_o.r_ready  = slv_reqs_i[r_sel].r_ready;

    for (int unsigned i = 0; i < NoSlvPorts; i++) begin
      slv_resps_o[i]          = '0;
      slv_resps_o[i].aw_ready = aw_readies[i];
      slv_resps_o[i].ar_ready = ar_readies[i];
      slv_resps_o[i].w_ready  = !w_fifo_empty && (w_sel_head == sel_t'(i)) && mst_resp_i.w_ready;
      slv_resps_o[i].b_valid  = mst_resp_i.b_valid && (b_sel == sel_t'(i));
      slv_resps_o[i].b.id     = mst_resp_i.b.id[IdWidth-1:0];
      slv_resps_o[i].b.resp   = mst_resp_i.b.resp;
      slv_resps_o[i].b.user   = mst_resp_i.b.user;
      slv_resps_o[i].r_valid  = mst_resp_i.r_valid && (r_sel == sel_t'(i));
      slv_resps_o[i].r.id     = mst_resp_i.r.id[IdWidth-1:0];
      slv_resps_o[i].r.data   = mst_resp_i.r.data;
      slv_resps_o[i].r.resp   = mst_resp_i.r.resp;
      slv_resps_o[i].r.last   = mst_resp_i.r.last;
      slv_resps_o[i].r.user   = mst_resp_i.r.user;
    end
  end

  // Responses must carry a prefix of an existing slave port.
  always_ff @(posedge clk_i) begin
    if (rst_ni && (mst_resp_i.b_valid)) assert (int'(b_sel) < NoSlvPorts)
      else $error("axi_mux: B with unknown ID prefix");
  end
  always_ff @(posedge clk_i) begin
    if (rst_ni && (mst_resp_i.r_valid)) assert (int'(r_sel) < NoSlvPorts)
      else $error("axi_mux: R with unknown ID prefix");
  end
endmodule
