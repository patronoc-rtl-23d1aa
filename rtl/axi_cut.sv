// axi_cut: register slice on an AXI4 link (the "Cut" of the crossbar).
//
// Places a spill_reg on each of the five AXI channels selected by CutMask ({R, AR, B, W, AW},
// one bit each). A cut channel gains one cycle of latency and keeps full throughput; its
// valid, ready and payload are registered, which shortens the timing paths between crosspoints.
// The paper lets the slice be inserted on a single channel or on all channels, all being the
// default; the default mask here is all five. Slave side: slv_req_i/slv_resp_o; master side:
// mst_req_o/mst_resp_i.
module axi_cut #(
  parameter logic [4:0] CutMask = axi_pkg::CUT_ALL
) (
  input  logic           clk_i,
  input  logic           rst_ni,
  input  axi_pkg::req_t  slv_req_i,
  output axi_pkg::resp_t slv_resp_o,
  output axi_pkg::req_t  mst_req_o,
  input  axi_pkg::resp_t mst_resp_i
);
  import axi_pkg::*;

  spill_reg #(.T(ax_chan_t), .Bypass(!CutMask[0])) i_aw (
    .clk_i, .rst_ni,
    .valid_i(slv_req_i.aw_valid),  .ready_o(slv_resp_o.aw_ready), .data_i(slv_req_i.aw),
    .valid_o(mst_req_o.aw_valid),  .ready_i(mst_resp_i.aw_ready), .data_o(mst_req_o.aw)
  );
  spill_reg #(.T(w_chan_t), .Bypass(!CutMask[1])) i_w (
    .clk_i, .rst_ni,
    .valid_i(slv_req_i.w_valid),   .ready_o(slv_resp_o.w_ready),  .data_i(slv_req_i.w),
    .valid_o(mst_req_o.w_valid),   .ready_i(mst_resp_i.w_ready),  .data_o(mst_req_o.w)
  );
  spill_reg #(.T(b_chan_t), .Bypass(!CutMask[2])) i_b (
    .clk_i, .rst_ni,
    .valid_i(mst_resp_i.b_valid),  .ready_o(mst_req_o.b_ready),   .data_i(mst_resp_i.b),
    .valid_o(slv_resp_o.b_valid),  .ready_i(slv_req_i.b_ready),   .data_o(slv_resp_o.b)
  );
  spill_reg #(.T(ax_chan_t), .Bypass(!CutMask[3])) i_ar (
    .clk_i, .rst_ni,
    .valid_i(slv_req_i.ar_valid),  .ready_o(slv_resp_o.ar_ready), .data_i(slv_req_i.ar),
    .valid_o(mst_req_o.ar_valid),  .ready_i(mst_resp_i.ar_ready), .data_o(mst_req_o.ar)
  );
  spill_reg #(.T(r_chan_t), .Bypass(!CutMask[4])) i_r (
    .clk_i, .rst_ni,
    .valid_i(mst_resp_i.r_valid),  .ready_o(mst_req_o.r_ready),   .data_i(mst_resp_i.r),
    .valid_o(slv_resp_o.r_valid),  .ready_i(slv_req_i.r_ready),   .data_o(slv_resp_o.r)
  );
endmodule
