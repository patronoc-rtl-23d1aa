// spill_reg: two-entry register slice for one valid/ready stream.
//
// Cuts every combinational path between its two sides (data, valid and ready are all driven
// from flip-flops) while still moving one item per cycle: when the downstream side stalls, the
// item that was in flight is parked in a second ("spill") register. Latency is one cycle.
// With Bypass set, the module is a plain wire. This is the register slice ("cut") the NoC
// places on its AXI channels; the two-entry structure is this design's choice.
module spill_reg #(
  parameter type T      = logic [31:0],
  parameter bit  Bypass = 1'b0
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic valid_i,
  output logic ready_o,
  input  T     data_i,
  output logic valid_o,
  input  logic ready_i,
  output T     data_o
);
  if (Bypass) begin : g_bypass
    assign valid_o = valid_i;
    assign ready_o = ready_i;
    assign data_o  = data_i;
  end else begin : g_spill
    T     a_data_q, b_data_q;
    logic a_full_q, b_full_q;
    logic a_fill, a_drain, b_fill, b_drain;

    assign a_fill  = valid_i && ready_o;
    assign a_drain = a_full_q && !b_full_q;
    assign b_fill  = a_drain && !ready_i;
    assign b_drain = b_full_q && ready_i;

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        a_full_q <= 1'b0;
        b_full_q <= 1'b0;
        a_data_q <= '0;
        b_data_q <= '0;
      end else begin
        if (a_fill) begin
          a_full_q <= 1'b1;
          a_data_q <= data_i;
        end else if (a_drain) begin
          a_full_q <= 1'b0;
        end
        if (b_fill) begin
          b_full_q <= 1'b1;
          b_data_q <= a_data_q;
        end else if (b_drain) begin
          b_full_q <= 1'b0;
        end
      end
    end

    assign ready_o = !a_full_q || !b_full_q;
    assign valid_o = a_full_q || b_full_q;
    assign data_o  = b_full_q ? b_data_q : a_data_q;
  end
endmodule
