// patronoc_mesh: PATRONoC, an AXI4 network-on-chip built as a NumX x NumY 2D mesh.
//
// Every node holds one axi_xp crosspoint. Its local port pair connects to the node's
// endpoints: slv_reqs_i[n]/slv_resps_o[n] is where the AXI master of node n (a core, an
// accelerator or its DMA engine) injects transactions, mst_reqs_o[n]/mst_resps_i[n] is where
// the AXI slave of node n (its memory or I/O tile) receives them. The other crosspoint ports
// connect to the neighbours N, E, S and W, so corner, edge and inner crosspoints have 3, 4 and
// 5 ports. Node n = y * NumX + x, row 0 at the top.
//
// Everything in the network is plain AXI4 with bursts, multiple outstanding transactions and
// per-ID ordering: no packetisation, no serialisation, no protocol conversion at the
// endpoints. A transaction addressed to [AddrBase + n * RegionSize, AddrBase + (n+1) *
// RegionSize) is routed YX to node n (along the column first, then along the row). Addresses
// outside all regions are answered with DECERR by the error slave of the first crosspoint.
// The routing tables and the partial connectivity of each crosspoint are computed from the
// node position by patronoc_pkg at elaboration time (FullyConnected = 1 connects every port to
// every port instead).
//
// Defaults are the paper's 4x4 mesh with AW = 32, IW = 4, MOT = 8 and a register slice on all
// channels. The data width is set in axi_pkg: 32 bits, the paper's slim NoC; its wide NoC is
// the same design with 512 bits there. Each hop costs one cycle per direction on every channel.
// RegionSize and AddrBase are this design's choice.
//
// Lint notes: a combinational loop (UNOPTFLAT) is reported through in_req/out_req and
// in_resp/out_resp. It is not a real loop: each array is one signal to the tool, but a link
// entry only ever feeds a different crosspoint port, and every crosspoint-to-crosspoint path
// passes a register slice (axi_cut) inside the crossbar. The reset also appears in the
// conditions of immediate assertions (SYNCASYNCNET); those are simulation checks only.
module patronoc_mesh #(
  parameter int unsigned    NumX           = 4,
  parameter int unsigned    NumY           = 4,
  parameter int unsigned    MaxTrans       = 8,
  parameter logic [4:0]     CutMask        = axi_pkg::CUT_ALL,
  parameter bit             FullyConnected = 1'b0,
  parameter axi_pkg::addr_t AddrBase       = 32'h0000_0000,
  parameter axi_pkg::addr_t RegionSize     = 32'h0100_0000,
  localparam int unsigned   NumNodes       = NumX * NumY
) (
  input  logic           clk_i,
  input  logic           rst_ni,
  input  axi_pkg::req_t  slv_reqs_i  [NumNodes],
  output axi_pkg::resp_t slv_resps_o [NumNodes],
  output axi_pkg::req_t  mst_reqs_o  [NumNodes],
  input  axi_pkg::resp_t mst_resps_i [NumNodes]
);
  import axi_pkg::*;
  import patronoc_pkg::*;

  // Per node and direction: what enters a crosspoint port (in_*) and what leaves it (out_*).
  req_t  in_req   [NumNodes][NumDirs];
  resp_t in_resp  [NumNodes][NumDirs];
  req_t  out_req  [NumNodes][NumDirs];
  resp_t out_resp [NumNodes][NumDirs];

  for (genvar y = 0; y < NumY; y++) begin : g_y
    for (genvar x = 0; x < NumX; x++) begin : g_x
      localparam int unsigned Node = y * NumX + x;
      localparam int unsigned NP   = num_ports(x, y, NumX, NumY);

      req_t       xp_slv_req  [NP];
      resp_t      xp_slv_resp [NP];
      req_t       xp_mst_req  [NP];
      resp_t      xp_mst_resp [NP];
      xbar_rule_t rules       [NumNodes];

      for (genvar n = 0; n < NumNodes; n++) begin : g_rule
        assign rules[n] = yx_rule(x, y, NumX, NumY, n, AddrBase, RegionSize);
      end

      for (genvar p = 0; p < NP; p++) begin : g_port
        localparam int unsigned D = dir_of_port(x, y, NumX, NumY, p);
        assign xp_slv_req[p]    = in_req[Node][D];
        assign in_resp[Node][D] = xp_slv_resp[p];
        assign out_req[Node][D] = xp_mst_req[p];
        assign xp_mst_resp[p]   = out_resp[Node][D];
      end

      axi_xp #(
        .NoPorts     (NP),
        .NoAddrRules (NumNodes),
        .MaxTrans    (MaxTrans),
        .CutMask     (CutMask),
        .Connectivity(xp_connectivity(x, y, NumX, NumY, FullyConnected))
      ) i_xp (
        .clk_i, .rst_ni,
        .slv_reqs_i (xp_slv_req),
        .slv_resps_o(xp_slv_resp),
        .mst_reqs_o (xp_mst_req),
        .mst_resps_i(xp_mst_resp),
        .addr_map_i (rules)
      );

      // Local endpoints.
      assign in_req[Node][DIR_L]   = slv_reqs_i[Node];
      assign slv_resps_o[Node]     = in_resp[Node][DIR_L];
      assign mst_reqs_o[Node]      = out_req[Node][DIR_L];
      assign out_resp[Node][DIR_L] = mst_resps_i[Node];

      // Links to the neighbours: what leaves this node towards d enters the neighbour from
      // the opposite side. Directions at the mesh border do not exist and are tied off.
      for (genvar d = 1; d < NumDirs; d++) begin : g_dir
        if (has_dir(x, y, NumX, NumY, d)) begin : g_link
          localparam int unsigned Nbr = (d == DIR_N) ? Node - NumX :
                                        (d == DIR_S) ? Node + NumX :
                                        (d == DIR_E) ? Node + 1    : Node - 1;
          assign in_req[Nbr][opposite(d)] = out_req[Node][d];
          assign out_resp[Node][d]        = in_resp[Nbr][opposite(d)];
        end else begin : g_edge
          assign in_req[Node][d]   = '0;
          assign in_resp[Node][d]  = '0;
          assign out_req[Node][d]  = '0;
          assign out_resp[Node][d] = '0;
        end
      end
    end
  end
endmodule
