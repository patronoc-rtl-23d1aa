// tb_axi_demux: checks routing, ordering and response merging of the demux.
//
// One behavioural master drives the demux; its three outputs go to three behavioural
// memories, each owning a 16 MiB region. The testbench derives the write and read selects
// from address bits [25:24], as an address decoder would. The master writes random bursts with
// random IDs to all three regions and reads them back: each memory must only see its own
// region and every read beat must match. Random IDs make the same ID go to two outputs while
// still outstanding, so the demux must hold it back to keep AXI ordering; that case must occur.
module tb_axi_demux;
  import axi_pkg::*;

  localparam int unsigned NoMst = 3;
  localparam addr_t RegionSize = 32'h0100_0000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  req_t  m_req, s_req [NoMst];
  resp_t m_resp, s_resp [NoMst];
  logic  done;
  int unsigned errs, chks, bursts, decerr, maxo, reuse, turns;
  int unsigned checks = 0, failures = 0;
  logic [1:0] aw_sel, ar_sel;

  axi_traffic_master #(.MasterIdx(0), .NumNodes(NoMst), .NumX(NoMst), .NumTxns(32),
                       .MaxOut(8), .MaxLen(6), .ErrPct(0), .RegionSize(RegionSize),
                       .Seed(11)) i_master (
    .clk_i(clk), .rst_ni(rst_n), .req_o(m_req), .resp_i(m_resp), .done_o(done),
    .errors_o(errs), .checks_o(chks), .n_bursts_o(bursts), .n_decerr_o(decerr),
    .max_out_o(maxo), .n_id_reuse_o(reuse), .n_turns_o(turns)
  );

  assign aw_sel = m_req.aw.addr[25:24];
  assign ar_sel = m_req.ar.addr[25:24];

  axi_demux #(.NoMstPorts(NoMst), .MaxTrans(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .slv_req_i(m_req), .slv_aw_select_i(aw_sel),
    .slv_ar_select_i(ar_sel), .slv_resp_o(m_resp), .mst_req_o(s_req), .mst_resp_i(s_resp)
  );

  for (genvar i = 0; i < NoMst; i++) begin : g_mem
    axi_mem_model #(.StallPct(25), .RegionBase(addr_t'(i) * RegionSize),
                    .RegionSize(RegionSize)) i_mem (
      .clk_i(clk), .rst_ni(rst_n), .req_i(s_req[i]), .resp_o(s_resp[i]));
  end

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done);
    repeat (5) @(posedge clk);
    checks += chks + 3;
    failures += errs;
    if (g_mem[0].i_mem.n_misrouted + g_mem[1].i_mem.n_misrouted + g_mem[2].i_mem.n_misrouted != 0) begin
      failures++;
      $display("FAIL: misrouted requests");
    end
    if (reuse == 0) begin
      failures++;
      $display("FAIL: same-ID reuse towards another output never happened");
    end
    if (maxo < 2) begin
      failures++;
      $display("FAIL: never more than one transaction outstanding");
    end
    $display("id reuse %0d, max outstanding %0d", reuse, maxo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
