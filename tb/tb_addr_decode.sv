// tb_addr_decode: checks the routing-table lookup against an independent reference.
//
// Builds a table of five rules with a gap and an overlap (first match must win), applies
// 2000 random addresses plus every range edge, and compares index, valid and error outputs
// with a reference computed by scanning the rules in the testbench.
module tb_addr_decode;
  import axi_pkg::*;

  localparam int unsigned NoRules = 5, NoIdx = 5;
  xbar_rule_t      map [NoRules];
  addr_t           addr;
  logic [2:0]      idx;
  logic            dv, de;
  int unsigned     checks = 0, failures = 0;

  addr_decode #(.NoIdx(NoIdx), .NoRules(NoRules)) dut (
    .addr_i(addr), .addr_map_i(map), .idx_o(idx), .dec_valid_o(dv), .dec_error_o(de)
  );

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(addr_t a);
    int exp_idx = -1;
    addr = a;
    #1;
    for (int i = 0; i < NoRules; i++)
      if (exp_idx < 0 && a >= map[i].start_addr && a < map[i].end_addr) exp_idx = int'(map[i].idx);
    checks++;
    if ((exp_idx < 0 && (dv || !de)) || (exp_idx >= 0 && (!dv || de || int'(idx) != exp_idx))) begin
      failures++;
      $display("addr %h: idx %0d dv %0b de %0b, expected %0d", a, idx, dv, de, exp_idx);
    end
  endtask

  initial begin
    map[0] = '{idx: 8'd3, start_addr: 32'h0000_0000, end_addr: 32'h0000_1000};
    map[1] = '{idx: 8'd1, start_addr: 32'h0000_1000, end_addr: 32'h0010_0000};
    map[2] = '{idx: 8'd4, start_addr: 32'h0008_0000, end_addr: 32'h0020_0000}; // overlaps rule 1
    map[3] = '{idx: 8'd0, start_addr: 32'h1000_0000, end_addr: 32'h2000_0000}; // gap before
    map[4] = '{idx: 8'd2, start_addr: 32'h8000_0000, end_addr: 32'hFFFF_0000};
    foreach (map[i]) begin
      check(map[i].start_addr);
      check(map[i].end_addr - 1);
      check(map[i].end_addr);
      if (map[i].start_addr != 0) check(map[i].start_addr - 1);
    end
    for (int k = 0; k < 2000; k++) begin
      addr_t a = $urandom();
      if (k % 2 == 0) a = a & 32'h003F_FFFF;
      check(a);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
