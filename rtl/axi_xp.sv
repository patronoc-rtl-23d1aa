// axi_xp: AXI4 crosspoint, the routing element of the NoC ("XP").
//
// An axi_xbar with NoPorts slave and NoPorts master ports, followed on every master port by
// an axi_id_remap. The crossbar widens IDs by the ingress-port index; the remappers bring them
// back to axi_pkg::IdWidth bits, so every port of the crosspoint, ingress or egress, has the
// same AXI4 type (req_t/resp_t) and crosspoints can be connected to each other and to
// endpoints without adapters. Each crosspoint has its own address-based routing table
// (addr_map_i) and connectivity matrix (Connectivity, [ingress][egress], only the first
// NoPorts rows and columns are used). MaxTrans is the maximum number of outstanding
// transactions per ID (MOT). Latency per crosspoint: one cycle per cut channel. Structure as in
// the paper's crosspoint figure (crossbar surrounded by ID remappers on the master ports).
module axi_xp #(
  parameter int unsigned NoPorts     = 5,
  parameter int unsigned NoAddrRules = 16,
  parameter int unsigned MaxTrans    = 8,
  parameter logic [4:0]  CutMask     = axi_pkg::CUT_ALL,
  parameter bit [axi_pkg::MaxXpPorts-1:0][axi_pkg::MaxXpPorts-1:0] Connectivity = '1
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  axi_pkg::req_t       slv_reqs_i  [NoPorts],
  output axi_pkg::resp_t      slv_resps_o [NoPorts],
  output axi_pkg::req_t       mst_reqs_o  [NoPorts],
  input  axi_pkg::resp_t      mst_resps_i [NoPorts],
  input  axi_pkg::xbar_rule_t addr_map_i  [NoAddrRules]
);
  import axi_pkg::*;

  typedef bit [NoPorts-1:0][NoPorts-1:0] conn_t;

  function automatic conn_t trim(bit [MaxXpPorts-1:0][MaxXpPorts-1:0] c);
    conn_t t;
    for (int unsigned s = 0; s < NoPorts; s++)
      for (int unsigned m = 0; m < NoPorts; m++) t[s][m] = c[s][m];
    return t;
  endfunction

  localparam conn_t XbarConn = trim(Connectivity);

  req_wide_t  xbar_reqs  [NoPorts];
  resp_wide_t xbar_resps [NoPorts];

  axi_xbar #(
    .NoSlvPorts  (NoPorts),
    .NoMstPorts  (NoPorts),
    .NoAddrRules (NoAddrRules),
    .MaxTrans    (MaxTrans),
    .CutMask     (CutMask),
    .Connectivity(XbarConn)
  ) i_xbar (
    .clk_i, .rst_ni,
    .slv_reqs_i,
    .slv_resps_o,
    .mst_reqs_o (xbar_reqs),
    .mst_resps_i(xbar_resps),
    .addr_map_i
  );

  for (genvar m = 0; m < NoPorts; m++) begin : g_remap
    axi_id_remap #(.MaxUniqIds(2 ** IdWidth), .MaxTxnsPerId(MaxTrans)) i_remap (
      .clk_i, .rst_ni,
      .slv_req_i (xbar_reqs[m]),
      .slv_resp_o(xbar_resps[m]),
      .mst_req_o (mst_reqs_o[m]),
      .mst_resp_i(mst_resps_i[m])
    );
  end
endmodule
