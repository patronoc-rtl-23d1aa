// tb_axi_cut: checks that the register slice passes AXI traffic unchanged and registers it.
//
// A behavioural master writes and reads back random bursts through the cut into a
// behavioural memory with random backpressure on both sides; every read beat must match.
// With all five channels cut, the master side may only show a request (AW, W, AR) or the slave
// side a response (B, R) that entered the cut in an earlier cycle: this is checked by counting
// handshakes on both sides at every clock edge.
module tb_axi_cut;
  import axi_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  req_t  m_req, s_req;
  resp_t m_resp, s_resp;
  logic  done;
  int unsigned errs, chks, bursts, decerr, maxo, reuse, turns;
  int unsigned checks = 0, failures = 0;

  axi_traffic_master #(.MasterIdx(0), .NumNodes(1), .NumX(1), .NumTxns(24), .MaxOut(4),
                       .MaxLen(8), .ErrPct(0), .Seed(5)) i_master (
    .clk_i(clk), .rst_ni(rst_n), .req_o(m_req), .resp_i(m_resp), .done_o(done),
    .errors_o(errs), .checks_o(chks), .n_bursts_o(bursts), .n_decerr_o(decerr),
    .max_out_o(maxo), .n_id_reuse_o(reuse), .n_turns_o(turns)
  );

  axi_cut dut (.clk_i(clk), .rst_ni(rst_n), .slv_req_i(m_req), .slv_resp_o(m_resp),
               .mst_req_o(s_req), .mst_resp_i(s_resp));

  axi_mem_model #(.StallPct(30)) i_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(s_req), .resp_o(s_resp));

  // Handshake counters on both sides of the cut.
  int unsigned aw_in = 0, aw_out = 0, w_in = 0, w_out = 0, ar_in = 0, ar_out = 0;
  int unsigned b_in = 0, b_out = 0, r_in = 0, r_out = 0;
  always @(posedge clk) if (rst_n) begin
    checks++;
    if ((s_req.aw_valid && aw_in <= aw_out) || (s_req.w_valid && w_in <= w_out) ||
        (s_req.ar_valid && ar_in <= ar_out) || (m_resp.b_valid && b_in <= b_out) ||
        (m_resp.r_valid && r_in <= r_out)) begin
      failures++;
      $display("FAIL: item leaves the cut in the cycle it enters");
    end
    aw_in  += (m_req.aw_valid && m_resp.aw_ready);  aw_out += (s_req.aw_valid && s_resp.aw_ready);
    w_in   += (m_req.w_valid  && m_resp.w_ready);   w_out  += (s_req.w_valid  && s_resp.w_ready);
    ar_in  += (m_req.ar_valid && m_resp.ar_ready);  ar_out += (s_req.ar_valid && s_resp.ar_ready);
    b_in   += (s_resp.b_valid && s_req.b_ready);    b_out  += (m_resp.b_valid && m_req.b_ready);
    r_in   += (s_resp.r_valid && s_req.r_ready);    r_out  += (m_resp.r_valid && m_req.r_ready);
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
    checks += chks;
    failures += errs;
    checks++;
    if (chks < 24 * 2) begin
      failures++;
      $display("FAIL: only %0d response checks", chks);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
