// tb_axi_id_remap: checks the ID remapper between a mux and a memory.
//
// Three behavioural masters with random 4-bit IDs reach one memory through an axi_mux, whose
// output has 7-bit IDs (up to 48 distinct ones here), and the remapper under test, which must
// squeeze them into 16 output IDs. Checks that every output ID is below 16, that every read
// beat and response still reaches the right master with the right ID and data, and that the
// remapper had to hold a request back at least once (table full or same ID at its limit).
module tb_axi_id_remap;
  import axi_pkg::*;

  localparam int unsigned NoSlv = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  req_t       m_req [NoSlv];
  resp_t      m_resp [NoSlv];
  req_wide_t  x_req;
  resp_wide_t x_resp;
  req_t       s_req;
  resp_t      s_resp;
  logic        done [NoSlv];
  int unsigned errs [NoSlv], chks [NoSlv], bursts [NoSlv], decerr [NoSlv];
  int unsigned maxo [NoSlv], reuse [NoSlv], turns [NoSlv];
  int unsigned checks = 0, failures = 0, n_event = 0;

  for (genvar i = 0; i < NoSlv; i++) begin : g_m
    axi_traffic_master #(.MasterIdx(i), .NumNodes(1), .NumX(1), .NumTxns(24), .MaxOut(8),
                         .MaxLen(6), .ErrPct(0), .Seed(21)) i_master (
      .clk_i(clk), .rst_ni(rst_n), .req_o(m_req[i]), .resp_i(m_resp[i]), .done_o(done[i]),
      .errors_o(errs[i]), .checks_o(chks[i]), .n_bursts_o(bursts[i]), .n_decerr_o(decerr[i]),
      .max_out_o(maxo[i]), .n_id_reuse_o(reuse[i]), .n_turns_o(turns[i])
    );
  end

  axi_mux #(.NoSlvPorts(NoSlv), .MaxWTrans(8)) i_mux (
    .clk_i(clk), .rst_ni(rst_n), .slv_reqs_i(m_req), .slv_resps_o(m_resp),
    .mst_req_o(x_req), .mst_resp_i(x_resp)
  );

  axi_id_remap #(.MaxUniqIds(16), .MaxTxnsPerId(2)) i_remap (
    .clk_i(clk), .rst_ni(rst_n), .slv_req_i(x_req), .slv_resp_o(x_resp),
    .mst_req_o(s_req), .mst_resp_i(s_resp)
  );

  axi_mem_model #(.StallPct(25)) i_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(s_req), .resp_o(s_resp));

  always @(posedge clk) if (rst_n) begin
    if (s_req.aw_valid || s_req.ar_valid) begin
      checks++;
      if ((s_req.aw_valid && int'(s_req.aw.id) >= 16) || (s_req.ar_valid && int'(s_req.ar.id) >= 16)) begin
        failures++;
        $display("FAIL: remapped ID out of range");
      end
    end
    if ((x_req.aw_valid && !s_req.aw_valid) || (x_req.ar_valid && !s_req.ar_valid)) n_event++;
  end

  initial begin : watchdog
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done[0] && done[1] && done[2]);
    repeat (5) @(posedge clk);
    for (int i = 0; i < NoSlv; i++) begin
      checks += chks[i];
      failures += errs[i];
    end
    checks++;
    $display("event count %0d", n_event);
    if (n_event == 0) begin
      failures++;
      $display("FAIL: the mechanism under test never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
