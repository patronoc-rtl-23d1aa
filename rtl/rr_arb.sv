// rr_arb: round-robin stream arbiter with N requesters of payload type T.
//
// Picks the first valid requester at or after a rotating priority pointer and forwards its
// payload. Once the output is valid it is locked on that requester until the handshake, so
// that valid and payload stay stable as AXI requires. After each handshake the pointer moves
// to the requester after the one served, which gives every requester a fair share. Used for
// the AW/AR arbitration in the mux and the B/R arbitration in the demux. The round-robin
// policy is this design's choice: the paper does not name an arbitration scheme.
module rr_arb #(
  parameter int unsigned N = 4,
  parameter type         T = logic [7:0],
  localparam int unsigned IdxW = (N > 1) ? $clog2(N) : 1
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic [N-1:0]    valid_i,
  output logic [N-1:0]    ready_o,
  input  T                data_i [N],
  output logic            valid_o,
  input  logic            ready_i,
  output T                data_o,
  output logic [IdxW-1:0] idx_o
);
  logic [IdxW-1:0] ptr_q, lock_idx_q, pick;
  logic            lock_q, found;

  always_comb begin
    pick  = ptr_q;
    found = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      automatic logic [IdxW:0] c = ({1'b0, ptr_q} + (IdxW+1)'(k)) % (IdxW+1)'(N);
      if (!found && valid_i[c[IdxW-1:0]]) begin
        found = 1'b1;
        pick  = c[IdxW-1:0];
      end
    end
    if (lock_q) pick = lock_idx_q;
  end

  assign idx_o   = pick;
  assign valid_o = lock_q ? 1'b1 : found;
  assign data_o  = data_i[pick];

  always_comb begin
    ready_o       = '0;
    ready_o[pick] = ready_i && valid_o;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ptr_q      <= '0;
      lock_q     <= 1'b0;
      lock_idx_q <= '0;
    end else begin
      if (valid_o && ready_i) begin
        lock_q <= 1'b0;
        ptr_q  <= (int'(pick) == N - 1) ? '0 : pick + 1'b1;
      end else if (valid_o) begin
        lock_q     <= 1'b1;
        lock_idx_q <= pick;
      end
    end
  end

  // The locked requester must keep its request up (AXI: valid may not drop before ready).
  always_ff @(posedge clk_i) begin
    if (rst_ni && (lock_q)) assert (valid_i[lock_idx_q])
      else $error("rr_arb: locked requester dropped valid");
  end
endmodule
