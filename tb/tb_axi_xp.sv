// tb_axi_xp: end-to-end check of a 3-port crosspoint (the size of a mesh corner).
//
// Three behavioural masters write random bursts with random IDs to three behavioural
// memories (one 16 MiB region each, routed by the crosspoint's rule table) and to unmapped
// addresses, then read everything back. Every read beat must match, unmapped accesses must
// end in DECERR, no memory may see an address outside its region, and every ID leaving the
// crosspoint must fit the port ID width (isomorphic ports).
module tb_axi_xp;
  import axi_pkg::*;

  localparam int unsigned N = 3;
  localparam addr_t RegionSize = 32'h0100_0000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  req_t        m_req [N];
  resp_t       m_resp [N];
  req_t        s_req [N];
  resp_t       s_resp [N];
  xbar_rule_t  map [N];
  logic        done [N];
  int unsigned errs [N], chks [N], bursts [N], decerr [N];
  int unsigned maxo [N], reuse [N], turns [N];
  int unsigned checks = 0, failures = 0;

  for (genvar i = 0; i < N; i++) begin : g_ep
    assign map[i] = '{idx: 8'(i), start_addr: addr_t'(i) * RegionSize,
                      end_addr: addr_t'(i + 1) * RegionSize};
    axi_traffic_master #(.MasterIdx(i), .NumNodes(N), .NumX(N), .NumTxns(24), .MaxOut(8),
                         .MaxLen(6), .ErrPct(10), .RegionSize(RegionSize), .Seed(31)) i_master (
      .clk_i(clk), .rst_ni(rst_n), .req_o(m_req[i]), .resp_i(m_resp[i]), .done_o(done[i]),
      .errors_o(errs[i]), .checks_o(chks[i]), .n_bursts_o(bursts[i]), .n_decerr_o(decerr[i]),
      .max_out_o(maxo[i]), .n_id_reuse_o(reuse[i]), .n_turns_o(turns[i])
    );
    axi_mem_model #(.StallPct(25), .RegionBase(addr_t'(i) * RegionSize),
                    .RegionSize(RegionSize)) i_mem (
      .clk_i(clk), .rst_ni(rst_n), .req_i(s_req[i]), .resp_o(s_resp[i]));
  end

  axi_xp #(.NoPorts(N), .NoAddrRules(N), .MaxTrans(8)) dut (
    .clk_i(clk), .rst_ni(rst_n), .slv_reqs_i(m_req), .slv_resps_o(m_resp),
    .mst_reqs_o(s_req), .mst_resps_i(s_resp), .addr_map_i(map)
  );

  initial begin : watchdog
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("masters done: %0b %0b %0b", done[0], done[1], done[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned n_dec = 0, n_mis = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done[0] && done[1] && done[2]);
    repeat (5) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      checks += chks[i];
      failures += errs[i];
      n_dec += decerr[i];
    end
    n_mis = g_ep[0].i_mem.n_misrouted + g_ep[1].i_mem.n_misrouted + g_ep[2].i_mem.n_misrouted;
    checks += 2;
    if (n_dec == 0) begin
      failures++;
      $display("FAIL: no decode error exercised");
    end
    if (n_mis != 0) begin
      failures++;
      $display("FAIL: %0d misrouted requests", n_mis);
    end
    $display("decode errors %0d", n_dec);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
