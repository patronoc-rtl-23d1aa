// axi_id_remap: maps the widened crossbar IDs back onto IdWidth-bit IDs ("ID Remapper").
//
// The crossbar widens every ID by the index of its ingress port, so without remapping the ID
// width would grow at every hop of the mesh. The remapper on each crosspoint master port turns
// the IdWideWidth-bit IDs back into IdWidth bits, so that all crosspoint ports are alike and
// crosspoints can be chained freely.
//
// Writes and reads each have a table of MaxUniqIds entries; the output ID is the entry's
// index. An entry holds an input ID and the number of its transactions in flight. A request
// whose input ID is already in the table reuses that entry, so same-ID transactions stay
// ordered; otherwise it takes the lowest free entry. A request waits while its entry already
// has MaxTxnsPerId transactions in flight, or while no entry is free. The entry chosen for a
// waiting request is held until the handshake, so the output ID never changes under a valid.
// B and the last R beat look their input ID up by the returned index and retire one
// transaction. W passes straight through. Requests and responses pass combinationally.
//
// The paper gives the function (restore the port ID width so that ports are isomorphic); the
// table organisation is this design's.
module axi_id_remap #(
  parameter int unsigned MaxUniqIds   = 2 ** axi_pkg::IdWidth,
  parameter int unsigned MaxTxnsPerId = 8
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  axi_pkg::req_wide_t  slv_req_i,
  output axi_pkg::resp_wide_t slv_resp_o,
  output axi_pkg::req_t       mst_req_o,
  input  axi_pkg::resp_t      mst_resp_i
);
  import axi_pkg::*;

  localparam int unsigned CntW = $clog2(MaxTxnsPerId + 1);
  localparam int unsigned IdxW = (MaxUniqIds > 1) ? $clog2(MaxUniqIds) : 1;
  typedef logic [CntW-1:0] cnt_t;
  typedef logic [IdxW-1:0] idx_t;

  initial assert (MaxUniqIds <= 2 ** IdWidth)
    else $fatal(1, "axi_id_remap: MaxUniqIds exceeds the output ID space");

  // ---------------------------------------------------------------- tables
  id_wide_t w_in_id_q [MaxUniqIds];
  cnt_t     w_cnt_q   [MaxUniqIds];
  id_wide_t r_in_id_q [MaxUniqIds];
  cnt_t     r_cnt_q   [MaxUniqIds];

  logic w_lock_q, r_lock_q;
  idx_t w_lock_idx_q, r_lock_idx_q;

  idx_t aw_idx, ar_idx;
  logic aw_ok, ar_ok;

  // Look an input ID up: hit entry if present, else lowest free entry.
  always_comb begin
    logic hit, free;
    idx_t hit_idx, free_idx;
    hit = 1'b0; free = 1'b0; hit_idx = '0; free_idx = '0;
    for (int unsigned i = 0; i < MaxUniqIds; i++) begin
      if (!hit && w_cnt_q[i] != '0 && w_in_id_q[i] == slv_req_i.aw.id) begin
        hit = 1'b1; hit_idx = idx_t'(i);
      end
      if (!free && w_cnt_q[i] == '0) begin
        free = 1'b1; free_idx = idx_t'(i);
      end
    end
    aw_idx = hit ? hit_idx : free_idx;
    aw_ok  = hit ? (w_cnt_q[hit_idx] != cnt_t'(MaxTxnsPerId)) : free;
    if (w_lock_q) begin
      aw_idx = w_lock_idx_q;
      aw_ok  = 1'b1;
    end
  end

  always_comb begin
    logic hit, free;
    idx_t hit_idx, free_idx;
    hit = 1'b0; free = 1'b0; hit_idx = '0; free_idx = '0;
    for (int unsigned i = 0; i < MaxUniqIds; i++) begin
      if (!hit && r_cnt_q[i] != '0 && r_in_id_q[i] == slv_req_i.ar.id) begin
        hit = 1'b1; hit_idx = idx_t'(i);
      end
      if (!free && r_cnt_q[i] == '0) begin
        free = 1'b1; free_idx = idx_t'(i);
      end
    end
    ar_idx = hit ? hit_idx : free_idx;
    ar_ok  = hit ? (r_cnt_q[hit_idx] != cnt_t'(MaxTxnsPerId)) : free;
    if (r_lock_q) begin
      ar_idx = r_lock_idx_q;
      ar_ok  = 1'b1;
    end
  end

  // ---------------------------------------------------------------- datapath
  idx_t b_idx, r_idx;
  assign b_idx = idx_t'(mst_resp_i.b.id);
  assign r_idx = idx_t'(mst_resp_i.r.id);

  always_comb begin
    mst_req_o           = '0;
    mst_req_o.aw.id     = id_t'(aw_idx);
    mst_req_o.aw.addr   = slv_req_i.aw.addr;
    mst_req_o.aw.len    = slv_req_i.aw.len;
    mst_req_o.aw.size   = slv_req_i.aw.size;
    mst_req_o.aw.burst  = slv_req_i.aw.burst;
    mst_req_o.aw.lock   = slv_req_i.aw.lock;
    mst_req_o.aw.cache  = slv_req_i.aw.cache;
    mst_req_o.aw.prot   = slv_req_i.aw.prot;
    mst_req_o.aw.qos    = slv_req_i.aw.qos;
    mst_req_o.aw.region = slv_req_i.aw.region;
    mst_req_o.aw.user   = slv_req_i.aw.user;
    mst_req_o.aw_valid  = slv_req_i.aw_valid && aw_ok;
    mst_req_o.ar.id     = id_t'(ar_idx);
    mst_req_o.ar.addr   = slv_req_i.ar.addr;
    mst_req_o.ar.len    = slv_req_i.ar.len;
    mst_req_o.ar.size   = slv_req_i.ar.size;
    mst_req_o.ar.burst  = slv_req_i.ar.burst;
    mst_req_o.ar.lock   = slv_req_i.ar.lock;
    mst_req_o.ar.cache  = slv_req_i.ar.cache;
    mst_req_o.ar.prot   = slv_req_i.ar.prot;
    mst_req_o.ar.qos    = slv_req_i.ar.qos;
    mst_req_o.ar.region = slv_req_i.ar.region;
    mst_req_o.ar.user   = slv_req_i.ar.user;
    mst_req_o.ar_valid  = slv_req_i.ar_valid && ar_ok;
    mst_req_o.w         = slv_req_i.w;
    mst_req_o.w_valid   = slv_req_i.w_valid;
    mst_req_o.b_ready   = slv_req_i.b_ready;
    mst_req_o.r_ready   = slv_req_i.r_ready;

    slv_resp_o          = '0;
    slv_resp_o.aw_ready = aw_ok && mst_resp_i.aw_ready;
    slv_resp_o.ar_ready = ar_ok && mst_resp_i.ar_ready;
    slv_resp_o.w_ready  = mst_resp_i.w_ready;
    slv_resp_o.b_valid  = mst_resp_i.b_valid;
    slv_resp_o.b.id     = w_in_id_q[b_idx];
    slv_resp_o.b.resp   = mst_resp_i.b.resp;
    slv_resp_o.b.user   = mst_resp_i.b.user;
    slv_resp_o.r_valid  = mst_resp_i.r_valid;
    slv_resp_o.r.id     = r_in_id_q[r_idx];
    slv_resp_o.r.data   = mst_resp_i.r.data;
    slv_resp_o.r.resp   = mst_resp_i.r.resp;
    slv_resp_o.r.last   = mst_resp_i.r.last;
    slv_resp_o.r.user   = mst_resp_i.r.user;
  end

  // ---------------------------------------------------------------- table update
  logic aw_hs, ar_hs, b_hs, r_last_hs;
  assign aw_hs     = mst_req_o.aw_valid && mst_resp_i.aw_ready;
  assign ar_hs     = mst_req_o.ar_valid && mst_resp_i.ar_ready;
  assign b_hs      = mst_resp_i.b_valid && slv_req_i.b_ready;
  assign r_last_hs = mst_resp_i.r_valid && slv_req_i.r_ready && mst_resp_i.r.last;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int unsigned i = 0; i < MaxUniqIds; i++) begin
        w_in_id_q[i] <= '0;
        w_cnt_q[i]   <= '0;
        r_in_id_q[i] <= '0;
        r_cnt_q[i]   <= '0;
      end
      w_lock_q     <= 1'b0;
      r_lock_q     <= 1'b0;
      w_lock_idx_q <= '0;
      r_lock_idx_q <= '0;
    end else begin
      w_lock_q <= mst_req_o.aw_valid && !mst_resp_i.aw_ready;
      r_lock_q <= mst_req_o.ar_valid && !mst_resp_i.ar_ready;
      if (mst_req_o.aw_valid) w_lock_idx_q <= aw_idx;
      if (mst_req_o.ar_valid) r_lock_idx_q <= ar_idx;
      for (int unsigned i = 0; i < MaxUniqIds; i++) begin
        automatic logic inc_w = aw_hs && (aw_idx == idx_t'(i));
        automatic logic dec_w = b_hs && (b_idx == idx_t'(i));
        automatic logic inc_r = ar_hs && (ar_idx == idx_t'(i));
        automatic logic dec_r = r_last_hs && (r_idx == idx_t'(i));
        w_cnt_q[i] <= w_cnt_q[i] + cnt_t'(inc_w) - cnt_t'(dec_w);
        r_cnt_q[i] <= r_cnt_q[i] + cnt_t'(inc_r) - cnt_t'(dec_r);
        if (inc_w) w_in_id_q[i] <= slv_req_i.aw.id;
        if (inc_r) r_in_id_q[i] <= slv_req_i.ar.id;
      end
    end
  end

  always_ff @(posedge clk_i) begin
    if (rst_ni && (b_hs)) assert (w_cnt_q[b_idx] != '0)
      else $error("axi_id_remap: B for an unused entry");
  end
  always_ff @(posedge clk_i) begin
    if (rst_ni && (r_last_hs)) assert (r_cnt_q[r_idx] != '0)
      else $error("axi_id_remap: R for an unused entry");
  end
endmodule
