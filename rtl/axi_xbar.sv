// axi_xbar: configurable AXI4 crossbar switch, the core of a crosspoint ("XBAR").
//
// Every slave (ingress) port has two address decoders, one for AW and one for AR, that look
// the address up in the routing table addr_map_i and produce the write and read select of an
// axi_demux. The demux has one output per master (egress) port plus one to a private
// axi_err_slv, which receives requests whose address matches no rule, or whose route is not
// connected. Each demux output that is connected goes through an axi_cut (register slice on
// the channels set in CutMask) to one input of the axi_mux of that master port. The mux
// arbitrates among the slave ports and widens the ID by the slave-port index, so the master
// ports carry axi_pkg::*_wide_t.
//
// Connectivity[s][m] says whether slave port s can reach master port m: all ones gives a
// fully connected crossbar, fewer ones the partially connected crossbar a mesh needs (no
// U-turns, no turns that YX routing never takes), which saves the corresponding cuts and mux
// inputs. MaxTrans bounds the outstanding transactions per ID in each demux and the W order
// FIFO of each mux. Latency through the crossbar is the latency of the cut (one cycle per
// registered channel). The structure follows the paper's crossbar figure; widths of the
// select signals and the error-slave placement per slave port follow that figure too.
module axi_xbar #(
  parameter int unsigned NoSlvPorts  = 5,
  parameter int unsigned NoMstPorts  = 5,
  parameter int unsigned NoAddrRules = 16,
  parameter int unsigned MaxTrans    = 8,
  parameter logic [4:0]  CutMask     = axi_pkg::CUT_ALL,
  parameter bit [NoSlvPorts-1:0][NoMstPorts-1:0] Connectivity = '1
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  axi_pkg::req_t       slv_reqs_i  [NoSlvPorts],
  output axi_pkg::resp_t      slv_resps_o [NoSlvPorts],
  output axi_pkg::req_wide_t  mst_reqs_o  [NoMstPorts],
  input  axi_pkg::resp_wide_t mst_resps_i [NoMstPorts],
  input  axi_pkg::xbar_rule_t addr_map_i  [NoAddrRules]
);
  import axi_pkg::*;

  localparam int unsigned DecIdxW = (NoMstPorts > 1) ? $clog2(NoMstPorts) : 1;
  localparam int unsigned SelW    = $clog2(NoMstPorts + 1);
  typedef logic [SelW-1:0] sel_t;

  // Demux outputs / mux inputs, indexed [slave port][master port].
  req_t  cross_req  [NoSlvPorts][NoMstPorts];
  resp_t cross_resp [NoSlvPorts][NoMstPorts];
  req_t  cut_req    [NoSlvPorts][NoMstPorts];
  resp_t cut_resp   [NoSlvPorts][NoMstPorts];

  for (genvar s = 0; s < NoSlvPorts; s++) begin : g_slv
    logic [DecIdxW-1:0] aw_idx, ar_idx;
    logic               aw_dec_valid, ar_dec_valid, aw_dec_error, ar_dec_error;
    sel_t               aw_sel, ar_sel;
    req_t               demux_req  [NoMstPorts+1];
    resp_t              demux_resp [NoMstPorts+1];

    addr_decode #(.NoIdx(NoMstPorts), .NoRules(NoAddrRules)) i_aw_dec (
      .addr_i(slv_reqs_i[s].aw.addr), .addr_map_i,
      .idx_o(aw_idx), .dec_valid_o(aw_dec_valid), .dec_error_o(aw_dec_error)
    );
    addr_decode #(.NoIdx(NoMstPorts), .NoRules(NoAddrRules)) i_ar_dec (
      .addr_i(slv_reqs_i[s].ar.addr), .addr_map_i,
      .idx_o(ar_idx), .dec_valid_o(ar_dec_valid), .dec_error_o(ar_dec_error)
    );

    // Unmapped or unconnected destinations go to the error slave (last demux output).
    always_comb begin
      aw_sel = sel_t'(NoMstPorts);
      ar_sel = sel_t'(NoMstPorts);
      if (aw_dec_valid && !aw_dec_error && int'(aw_idx) < NoMstPorts
          && Connectivity[s][aw_idx]) aw_sel = sel_t'(aw_idx);
      if (ar_dec_valid && !ar_dec_error && int'(ar_idx) < NoMstPorts
          && Connectivity[s][ar_idx]) ar_sel = sel_t'(ar_idx);
    end

    axi_demux #(.NoMstPorts(NoMstPorts + 1), .MaxTrans(MaxTrans)) i_demux (
      .clk_i, .rst_ni,
      .slv_req_i       (slv_reqs_i[s]),
      .slv_aw_select_i (aw_sel),
      .slv_ar_select_i (ar_sel),
      .slv_resp_o      (slv_resps_o[s]),
      .mst_req_o       (demux_req),
      .mst_resp_i      (demux_resp)
    );

    axi_err_slv i_err_slv (
      .clk_i, .rst_ni,
      .slv_req_i (demux_req[NoMstPorts]),
      .slv_resp_o(demux_resp[NoMstPorts])
    );

    for (genvar m = 0; m < NoMstPorts; m++) begin : g_cross
      assign cross_req[s][m] = demux_req[m];
      assign demux_resp[m]   = cross_resp[s][m];
      if (Connectivity[s][m]) begin : g_cut
        axi_cut #(.CutMask(CutMask)) i_cut (
          .clk_i, .rst_ni,
          .slv_req_i (cross_req[s][m]),
          .slv_resp_o(cross_resp[s][m]),
          .mst_req_o (cut_req[s][m]),
          .mst_resp_i(cut_resp[s][m])
        );
      end else begin : g_open
        // No route: the demux never selects this output, the mux input stays idle.
        assign cross_resp[s][m] = '0;
        assign cut_req[s][m]    = '0;
      end
    end
  end

  for (genvar m = 0; m < NoMstPorts; m++) begin : g_mst
    req_t  mux_req  [NoSlvPorts];
    resp_t mux_resp [NoSlvPorts];
    for (genvar s = 0; s < NoSlvPorts; s++) begin : g_in
      assign mux_req[s]     = cut_req[s][m];
      assign cut_resp[s][m] = mux_resp[s];
    end
    axi_mux #(.NoSlvPorts(NoSlvPorts), .MaxWTrans(MaxTrans)) i_mux (
      .clk_i, .rst_ni,
      .slv_reqs_i (mux_req),
      .slv_resps_o(mux_resp),
      .mst_req_o  (mst_reqs_o[m]),
      .mst_resp_i (mst_resps_i[m])
    );
  end
endmodule
