// axi_mem_model: behavioural AXI4 slave memory used as an endpoint in the testbenches.
//
// Not synthesizable. Accepts AW/AR into queues, takes W beats in AW order, stores the data
// (INCR bursts of full-width beats, byte strobes honoured) in a sparse array indexed by word
// address, answers writes with one B and reads with len+1 R beats, in request order. Ready
// and valid are withheld at random with probability StallPct percent so that backpressure
// reaches the network. Words never written read as zero. Counts the transactions it served,
// the stall cycles it caused, and the requests whose address lies outside
// [RegionBase, RegionBase + RegionSize) (misrouted).
module axi_mem_model #(
  parameter int unsigned    StallPct   = 20,
  parameter axi_pkg::addr_t RegionBase = '0,
  parameter axi_pkg::addr_t RegionSize = '1
) (
  input  logic           clk_i,
  input  logic           rst_ni,
  input  axi_pkg::req_t  req_i,
  output axi_pkg::resp_t resp_o
);
  import axi_pkg::*;

  localparam int unsigned BytesPerBeat = DataWidth / 8;

  data_t    mem [addr_t];
  ax_chan_t aw_q [$];
  ax_chan_t ar_q [$];
  id_t      b_q  [$];
  int unsigned w_beat = 0, r_beat = 0;
  int unsigned n_writes = 0, n_reads = 0, n_stalls = 0, n_misrouted = 0;
  logic stall_aw, stall_w, stall_ar, stall_b, stall_r;
  // Registered copies of the queue state, updated with nonblocking assignments at the end of
  // every clock edge. The response outputs depend only on these, so the model's outputs change
  // after the edge like those of real flip-flops and never within it.
  int unsigned aw_n = 0, ar_n = 0, b_n = 0;
  id_t         b_head  = '0;
  ax_chan_t    ar_head = '0;
  data_t       r_data  = '0;

  function automatic addr_t word_of(addr_t a, int unsigned beat);
    return (a / BytesPerBeat) + addr_t'(beat);
  endfunction

  function automatic bit in_region(addr_t a);
    return a >= RegionBase && (a - RegionBase) < RegionSize;
  endfunction

  always_comb begin
    resp_o          = '0;
    resp_o.aw_ready = !stall_aw;
    resp_o.ar_ready = !stall_ar;
    resp_o.w_ready  = !stall_w && aw_n > 0;
    resp_o.b_valid  = !stall_b && b_n > 0;
    resp_o.b.id     = b_head;
    resp_o.b.resp   = RESP_OKAY;
    resp_o.r_valid  = !stall_r && ar_n > 0;
    resp_o.r.id     = ar_head.id;
    resp_o.r.last   = (r_beat == int'(ar_head.len));
    resp_o.r.data   = r_data;
    resp_o.r.resp   = RESP_OKAY;
  end

  always @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      aw_q.delete(); ar_q.delete(); b_q.delete();
      w_beat <= 0; r_beat <= 0;
      aw_n <= 0; ar_n <= 0; b_n <= 0;
      {stall_aw, stall_w, stall_ar, stall_b, stall_r} <= '0;
    end else begin
      automatic int unsigned rb = r_beat;
      if (req_i.aw_valid && resp_o.aw_ready) begin
        aw_q.push_back(req_i.aw);
        n_writes <= n_writes + 1;
        if (!in_region(req_i.aw.addr)) n_misrouted <= n_misrouted + 1;
      end
      if (req_i.w_valid && resp_o.w_ready) begin
        automatic addr_t wa = word_of(aw_q[0].addr, w_beat);
        automatic data_t old = mem.exists(wa) ? mem[wa] : '0;
        for (int b = 0; b < BytesPerBeat; b++)
          if (req_i.w.strb[b]) old[b*8 +: 8] = req_i.w.data[b*8 +: 8];
        mem[wa] = old;
        if (req_i.w.last) begin
          b_q.push_back(aw_q[0].id);
          void'(aw_q.pop_front());
          w_beat <= 0;
        end else begin
          w_beat <= w_beat + 1;
        end
      end
      if (resp_o.b_valid && req_i.b_ready) void'(b_q.pop_front());
      if (req_i.ar_valid && resp_o.ar_ready) begin
        ar_q.push_back(req_i.ar);
        n_reads <= n_reads + 1;
        if (!in_region(req_i.ar.addr)) n_misrouted <= n_misrouted + 1;
      end
      if (resp_o.r_valid && req_i.r_ready) begin
        if (resp_o.r.last) begin
          void'(ar_q.pop_front());
          rb = 0;
        end else begin
          rb = rb + 1;
        end
      end
      stall_aw <= ($urandom_range(99) < StallPct);
      stall_w  <= ($urandom_range(99) < StallPct);
      stall_ar <= ($urandom_range(99) < StallPct);
      // A response once offered stays offered until taken (AXI valid rule).
      stall_b  <= ($urandom_range(99) < StallPct) && !(resp_o.b_valid && !req_i.b_ready);
      stall_r  <= ($urandom_range(99) < StallPct) && !(resp_o.r_valid && !req_i.r_ready);
      if ((req_i.w_valid && !resp_o.w_ready) || (resp_o.r_valid == 1'b0 && ar_q.size() > 0))
        n_stalls <= n_stalls + 1;
      r_beat <= rb;
      aw_n   <= aw_q.size();
      ar_n   <= ar_q.size();
      b_n    <= b_q.size();
      if (b_q.size() > 0) b_head <= b_q[0];
      if (ar_q.size() > 0) begin
        ar_head <= ar_q[0];
        r_data  <= mem.exists(word_of(ar_q[0].addr, rb)) ? mem[word_of(ar_q[0].addr, rb)] : '0;
      end
    end
  end
endmodule
