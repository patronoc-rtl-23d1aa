// tb_patronoc_mesh: end-to-end test of the mesh NoC at its default size (4x4 mesh, 32-bit data).
//
// One behavioural DMA-like master and one behavioural memory sit at every node. Every master
// writes NumTxns random bursts to random nodes (plus some to unmapped addresses), then reads
// them back; the data read must be what was written, unmapped accesses must end in DECERR, and
// no memory may receive a request outside its own region. The test also counts how often
// each mechanism of the network happened and fails if one never did: bursts, several
// outstanding transactions, same-ID requests to different destinations (ordering stall),
// YX turns, decode errors, backpressure from the memories and arbitration contention at a
// crosspoint output.
module tb_patronoc_mesh;
  import axi_pkg::*;

  localparam int unsigned NumX = 4, NumY = 4, NumNodes = NumX * NumY;
  localparam addr_t RegionSize = 32'h0100_0000;
  localparam int unsigned NumTxns = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  req_t  m_req  [NumNodes];
  resp_t m_resp [NumNodes];
  req_t  s_req  [NumNodes];
  resp_t s_resp [NumNodes];

  patronoc_mesh dut (
    .clk_i(clk), .rst_ni(rst_n),
    .slv_reqs_i(m_req), .slv_resps_o(m_resp),
    .mst_reqs_o(s_req), .mst_resps_i(s_resp)
  );

  logic        done [NumNodes];
  int unsigned errs [NumNodes], chks [NumNodes], bursts [NumNodes], decerr [NumNodes];
  int unsigned maxo [NumNodes], reuse [NumNodes], turns [NumNodes];
  int unsigned misr [NumNodes], stalls [NumNodes];

  for (genvar n = 0; n < NumNodes; n++) begin : g_ep
    axi_traffic_master #(
      .MasterIdx(n), .NumNodes(NumNodes), .NumX(NumX), .NumTxns(NumTxns), .MaxOut(8),
      .MaxLen(8), .ErrPct(8), .RegionSize(RegionSize), .Seed(3)
    ) i_master (
      .clk_i(clk), .rst_ni(rst_n), .req_o(m_req[n]), .resp_i(m_resp[n]),
      .done_o(done[n]), .errors_o(errs[n]), .checks_o(chks[n]), .n_bursts_o(bursts[n]),
      .n_decerr_o(decerr[n]), .max_out_o(maxo[n]), .n_id_reuse_o(reuse[n]),
      .n_turns_o(turns[n])
    );
    axi_mem_model #(
      .StallPct(20), .RegionBase(addr_t'(n) * RegionSize), .RegionSize(RegionSize)
    ) i_mem (
      .clk_i(clk), .rst_ni(rst_n), .req_i(s_req[n]), .resp_o(s_resp[n])
    );
    assign misr[n]   = i_mem.n_misrouted;
    assign stalls[n] = i_mem.n_stalls;
  end

  // Arbitration contention: two or more ingress ports request the same egress port of a
  // crosspoint's crossbar in the same cycle (observed at node 5's local egress port).
  int unsigned n_contention = 0;
  always @(posedge clk)
    if ($countones(dut.g_y[1].g_x[1].i_xp.i_xbar.g_mst[0].i_mux.aw_valids) > 1 ||
        $countones(dut.g_y[1].g_x[1].i_xp.i_xbar.g_mst[0].i_mux.ar_valids) > 1)
      n_contention++;

  int unsigned checks = 0, failures = 0, cycles = 0;

  task automatic expect_event(string what, int unsigned count);
    checks++;
    $display("event %-28s : %0d", what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL: mechanism '%s' never happened", what);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all_done;
    int unsigned s_bursts = 0, s_decerr = 0, s_maxo = 0, s_reuse = 0, s_turns = 0;
    int unsigned s_stalls = 0, s_misrouted = 0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    do begin
      @(posedge clk);
      cycles++;
      all_done = 1'b1;
      foreach (done[n]) all_done &= done[n];
    end while (!all_done);
    repeat (10) @(posedge clk);
    foreach (done[n]) begin
      checks   += chks[n];
      failures += errs[n];
      s_bursts += bursts[n];
      s_decerr += decerr[n];
      s_reuse  += reuse[n];
      s_turns  += turns[n];
      s_stalls    += stalls[n];
      s_misrouted += misr[n];
      if (maxo[n] > s_maxo) s_maxo = maxo[n];
    end
    $display("all %0d masters done after %0d cycles", NumNodes, cycles);
    expect_event("bursts (len > 0)", s_bursts);
    expect_event("outstanding > 1", (s_maxo > 1) ? s_maxo : 0);
    expect_event("same ID, other destination", s_reuse);
    expect_event("YX turn", s_turns);
    expect_event("decode error", s_decerr);
    expect_event("memory backpressure", s_stalls);
    expect_event("arbitration contention", n_contention);
    checks++;
    if (s_misrouted != 0) begin
      failures++;
      $display("FAIL: %0d requests reached the wrong memory", s_misrouted);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
