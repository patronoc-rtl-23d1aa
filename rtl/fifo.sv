// fifo: synchronous first-in first-out buffer of Depth entries of type T.
//
// Push and pop may happen in the same cycle, also when full (the pop frees the slot). The head
// entry is available combinationally on data_o whenever empty_o is low. Used by the demux and
// the mux to remember in which order write bursts were routed, so that the W beats follow
// their AW. A helper of this design, not a block the paper names.
module fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned Depth = 8
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic push_i,
  input  T     data_i,
  input  logic pop_i,
  output T     data_o,
  output logic full_o,
  output logic empty_o
);
  localparam int unsigned PtrW = (Depth > 1) ? $clog2(Depth) : 1;
  localparam int unsigned CntW = $clog2(Depth + 1);
  typedef logic [PtrW-1:0] ptr_t;

  T                       mem_q [Depth];
  ptr_t                   rd_q, wr_q;
  logic [CntW-1:0]        cnt_q;
  logic                   do_push, do_pop;

  assign empty_o = (cnt_q == 0);
  assign full_o  = (cnt_q == CntW'(Depth));
  assign do_pop  = pop_i && !empty_o;
  assign do_push = push_i && (!full_o || do_pop);
  assign data_o  = mem_q[rd_q];

  function automatic ptr_t incr(ptr_t p);
    return (p == ptr_t'(Depth - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
      for (int i = 0; i < Depth; i++) mem_q[i] <= '0;
    end else begin
      if (do_push) begin
        mem_q[wr_q] <= data_i;
        wr_q        <= incr(wr_q);
      end
      if (do_pop) rd_q <= incr(rd_q);
      cnt_q <= cnt_q + CntW'(do_push) - CntW'(do_pop);
    end
  end

  always_ff @(posedge clk_i) begin
    if (rst_ni) assert (!(pop_i && empty_o))
      else $error("fifo: pop while empty");
  end
endmodule
