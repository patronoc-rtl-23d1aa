// axi_traffic_master: behavioural DMA-like AXI4 master used as an endpoint in the testbenches.
//
// Not synthesizable. Generates NumTxns bursts at start-up: random length 1..MaxLen beats of
// full data width, random ID, random destination node among those set in TargetMask, or, with
// probability ErrPct percent, an address outside every node's region. Master MasterIdx uses its
// own 64 KiB slice of each node's region, and every burst stays inside one 2 KiB block, so no
// burst crosses a 4 KiB boundary. It first writes all bursts (up to MaxOut outstanding) with
// data derived from the address, waits for all B responses, then reads all bursts back and
// compares every R beat with the expected data, response code and last flag. It counts the
// mechanisms it exercised: bursts, peak number of outstanding transactions, error responses,
// and ID reuse towards a different destination while the ID is still outstanding (which the
// network must stall to keep AXI ordering), and bursts whose destination is in another row and
// another column (YX routing turns on the way).
module axi_traffic_master #(
  parameter int unsigned    MasterIdx  = 0,
  parameter int unsigned    NumNodes   = 16,
  parameter int unsigned    NumX       = 4,
  parameter int unsigned    NumTxns    = 16,
  parameter int unsigned    MaxOut     = 8,
  parameter int unsigned    MaxLen     = 8,
  parameter int unsigned    ErrPct     = 10,
  parameter logic [63:0]    TargetMask = '1,
  parameter axi_pkg::addr_t RegionSize = 32'h0100_0000,
  parameter axi_pkg::addr_t ErrBase    = 32'hF000_0000,
  parameter int unsigned    Seed       = 1
) (
  input  logic           clk_i,
  input  logic           rst_ni,
  output axi_pkg::req_t  req_o,
  input  axi_pkg::resp_t resp_i,
  output logic           done_o,
  output int unsigned    errors_o,
  output int unsigned    checks_o,
  output int unsigned    n_bursts_o,
  output int unsigned    n_decerr_o,
  output int unsigned    max_out_o,
  output int unsigned    n_id_reuse_o,
  output int unsigned    n_turns_o
);
  import axi_pkg::*;

  localparam int unsigned BytesPerBeat = DataWidth / 8;
  localparam int unsigned NoIds        = 2 ** IdWidth;

  int          t_tgt [NumTxns];   // -1: unmapped address
  id_t         t_id  [NumTxns];
  len_t        t_len [NumTxns];
  addr_t       t_addr[NumTxns];

  int unsigned phase, aw_ptr, w_beat, b_cnt, ar_ptr, r_cnt, outstanding;
  int unsigned r_beat [NoIds];
  int          id_q   [NoIds][$];
  int          w_q    [$];

  function automatic data_t pattern(addr_t a);
    return {(DataWidth / 32){a ^ 32'hA5A5_0000}};
  endfunction

  function automatic ax_chan_t mk_ax(int unsigned t);
    ax_chan_t ax = '0;
    ax.id    = t_id[t];
    ax.addr  = t_addr[t];
    ax.len   = t_len[t];
    ax.size  = size_t'($clog2(BytesPerBeat));
    ax.burst = BURST_INCR;
    return ax;
  endfunction

  function automatic bit id_busy_elsewhere(int unsigned t);
    foreach (id_q[t_id[t]][k]) if (t_tgt[id_q[t_id[t]][k]] != t_tgt[t]) return 1'b1;
    return 1'b0;
  endfunction

  initial begin
    n_turns_o = 0;
    void'($urandom(Seed * 7919 + MasterIdx));
    for (int unsigned t = 0; t < NumTxns; t++) begin
      int tgt;
      do tgt = $urandom_range(NumNodes - 1); while (!TargetMask[tgt]);
      if ($urandom_range(99) < ErrPct) tgt = -1;
      t_tgt[t] = tgt;
      t_id[t]  = id_t'($urandom_range(NoIds - 1));
      t_len[t] = len_t'($urandom_range(MaxLen - 1));
      if (tgt >= 0 && (tgt % NumX) != (MasterIdx % NumX) && (tgt / NumX) != (MasterIdx / NumX))
        n_turns_o++;
      t_addr[t] = ((tgt < 0) ? ErrBase : addr_t'(tgt) * RegionSize)
                + addr_t'(MasterIdx) * 32'h1_0000 + addr_t'(t) * 32'h800;
    end
  end

  assign done_o = (phase == 3);

  final if (phase != 3)
    $display("master %0d stuck: phase %0d aw %0d b %0d ar %0d r %0d outstanding %0d", MasterIdx,
             phase, aw_ptr, b_cnt, ar_ptr, r_cnt, outstanding);

  always @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      req_o <= '0;
      phase = 0; aw_ptr = 0; w_beat = 0; b_cnt = 0; ar_ptr = 0; r_cnt = 0; outstanding = 0;
      foreach (r_beat[i]) r_beat[i] = 0;
      errors_o <= 0; checks_o <= 0; n_bursts_o <= 0; n_decerr_o <= 0; max_out_o <= 0;
      n_id_reuse_o <= 0;
    end else begin
      automatic logic aw_v = req_o.aw_valid, w_v = req_o.w_valid, ar_v = req_o.ar_valid;
      // ------------------------------------------------ write address
      if (aw_v && resp_i.aw_ready) begin
        aw_v = 1'b0;
        w_q.push_back(aw_ptr);
        id_q[t_id[aw_ptr]].push_back(aw_ptr);
        outstanding++;
        if (t_len[aw_ptr] != 0) n_bursts_o <= n_bursts_o + 1;
        aw_ptr++;
      end
      if (phase == 0 && !aw_v && aw_ptr < NumTxns && outstanding < MaxOut) begin
        aw_v = 1'b1;
        req_o.aw <= mk_ax(aw_ptr);
        if (id_busy_elsewhere(aw_ptr)) n_id_reuse_o <= n_id_reuse_o + 1;
      end
      // ------------------------------------------------ write data
      if (w_v && resp_i.w_ready) begin
        if (w_beat == int'(t_len[w_q[0]])) begin
          void'(w_q.pop_front());
          w_beat = 0;
        end else w_beat++;
      end
      w_v = (w_q.size() > 0);
      if (w_v) begin
        req_o.w.data <= pattern(t_addr[w_q[0]] + addr_t'(w_beat * BytesPerBeat));
        req_o.w.strb <= '1;
        req_o.w.last <= (w_beat == int'(t_len[w_q[0]]));
      end
      // ------------------------------------------------ write response
      if (req_o.b_ready && resp_i.b_valid) begin
        if (id_q[resp_i.b.id].size() == 0) begin
          errors_o <= errors_o + 1;
          $display("master %0d: unexpected B id %0d", MasterIdx, resp_i.b.id);
        end else begin
          automatic int t = id_q[resp_i.b.id].pop_front();
          automatic resp_e exp = (t_tgt[t] < 0) ? RESP_DECERR : RESP_OKAY;
          checks_o <= checks_o + 1;
          if (resp_i.b.resp != exp) begin
            errors_o <= errors_o + 1;
            $display("master %0d: B resp %0d for txn %0d, expected %0d", MasterIdx,
                     resp_i.b.resp, t, exp);
          end
          if (exp == RESP_DECERR) n_decerr_o <= n_decerr_o + 1;
          outstanding--;
          b_cnt++;
        end
      end
      // ------------------------------------------------ read address
      if (ar_v && resp_i.ar_ready) begin
        ar_v = 1'b0;
        id_q[t_id[ar_ptr]].push_back(ar_ptr);
        outstanding++;
        ar_ptr++;
      end
      if (phase == 2 && !ar_v && ar_ptr < NumTxns && outstanding < MaxOut) begin
        ar_v = 1'b1;
        req_o.ar <= mk_ax(ar_ptr);
        if (id_busy_elsewhere(ar_ptr)) n_id_reuse_o <= n_id_reuse_o + 1;
      end
      // ------------------------------------------------ read data
      if (req_o.r_ready && resp_i.r_valid) begin
        automatic id_t rid = resp_i.r.id;
        if (id_q[rid].size() == 0) begin
          errors_o <= errors_o + 1;
          $display("master %0d: unexpected R id %0d", MasterIdx, rid);
        end else begin
          automatic int    t    = id_q[rid][0];
          automatic bit    err  = (t_tgt[t] < 0);
          automatic bit    last = (r_beat[rid] == int'(t_len[t]));
          automatic addr_t a    = t_addr[t] + addr_t'(r_beat[rid] * BytesPerBeat);
          checks_o <= checks_o + 1;
          if (resp_i.r.last != last || resp_i.r.resp != (err ? RESP_DECERR : RESP_OKAY) ||
              (!err && resp_i.r.data != pattern(a))) begin
            errors_o <= errors_o + 1;
            $display("master %0d: R mismatch txn %0d beat %0d (last %0b resp %0d)", MasterIdx,
                     t, r_beat[rid], resp_i.r.last, resp_i.r.resp);
          end
          if (last) begin
            void'(id_q[rid].pop_front());
            r_beat[rid] = 0;
            outstanding--;
            r_cnt++;
            if (err) n_decerr_o <= n_decerr_o + 1;
          end else r_beat[rid]++;
        end
      end
      if (outstanding > max_out_o) max_out_o <= outstanding;
      // ------------------------------------------------ phases
      if (phase == 0 && aw_ptr == NumTxns && !aw_v) phase = 1;
      if (phase == 1 && b_cnt == NumTxns) phase = 2;
      if (phase == 2 && r_cnt == NumTxns) phase = 3;
      req_o.aw_valid <= aw_v;
      req_o.w_valid  <= w_v;
      req_o.ar_valid <= ar_v;
      req_o.b_ready  <= ($urandom_range(99) < 85);
      req_o.r_ready  <= ($urandom_range(99) < 85);
    end
  end
endmodule
