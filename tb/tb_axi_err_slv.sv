// tb_axi_err_slv: checks the error slave's write and read answers.
//
// Sends write bursts of several lengths (AW, then the W beats) and read bursts, with random
// IDs, and checks that each write gets exactly one B with DECERR and the right ID after its
// last W beat, and each read gets len+1 R beats with DECERR, the right ID and last only on the
// final beat.
module tb_axi_err_slv;
  import axi_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  req_t  req;
  resp_t resp;
  int unsigned checks = 0, failures = 0;

  axi_err_slv dut (.clk_i(clk), .rst_ni(rst_n), .slv_req_i(req), .slv_resp_o(resp));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic do_write(id_t id, int len);
    req.aw     <= '{id: id, len: len_t'(len), burst: BURST_INCR, default: '0};
    req.aw_valid <= 1'b1;
    do @(posedge clk); while (!resp.aw_ready);
    req.aw_valid <= 1'b0;
    for (int b = 0; b <= len; b++) begin
      req.w       <= '{data: data_t'(b), strb: '1, last: (b == len), user: '0};
      req.w_valid <= 1'b1;
      do begin
        @(posedge clk);
        check(!resp.b_valid, "B before last W");
      end while (!resp.w_ready);
    end
    req.w_valid <= 1'b0;
    req.b_ready <= 1'b1;
    do @(posedge clk); while (!resp.b_valid);
    check(resp.b.id == id && resp.b.resp == RESP_DECERR, "B id/resp");
    req.b_ready <= 1'b0;
    @(posedge clk);
  endtask

  task automatic do_read(id_t id, int len);
    int beats = 0;
    req.ar       <= '{id: id, len: len_t'(len), burst: BURST_INCR, default: '0};
    req.ar_valid <= 1'b1;
    do @(posedge clk); while (!resp.ar_ready);
    req.ar_valid <= 1'b0;
    req.r_ready  <= 1'b1;
    forever begin
      @(posedge clk);
      if (resp.r_valid) begin
        check(resp.r.id == id && resp.r.resp == RESP_DECERR, "R id/resp");
        check(resp.r.last == (beats == len), $sformatf("R last at beat %0d of %0d", beats, len));
        beats++;
        if (resp.r.last || beats > len + 1) break;
      end
    end
    check(beats == len + 1, $sformatf("R beats %0d, expected %0d", beats, len + 1));
    req.r_ready <= 1'b0;
    @(posedge clk);
  endtask

  initial begin
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int k = 0; k < 12; k++) begin
      do_write(id_t'($urandom_range(15)), (k % 4) * 3);
      do_read(id_t'($urandom_range(15)), (k % 5) * 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
