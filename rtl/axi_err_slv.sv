// axi_err_slv: AXI4 slave that answers every transaction with a decode error ("Error Slave").
//
// The crossbar sends here every request whose address matches no routing rule (or whose
// route is not connected), so that a bad address produces an AXI error response instead of
// hanging the master. Writes: the AW is accepted, all W beats up to last are accepted and
// dropped, then one B with resp DECERR and the AW's ID is returned. Reads: the AR is accepted
// and len+1 R beats with resp DECERR, data RespData and last on the final beat are returned.
// Write and read sides are independent; each handles one transaction at a time. The paper
// only names the block; this behaviour and the one-at-a-time structure are this design's.
module axi_err_slv #(
  parameter axi_pkg::data_t RespData = axi_pkg::data_t'({(axi_pkg::DataWidth + 31) / 32 {32'hBADC_AB1E}})
) (
  input  logic           clk_i,
  input  logic           rst_ni,
  input  axi_pkg::req_t  slv_req_i,
  output axi_pkg::resp_t slv_resp_o
);
  import axi_pkg::*;

  typedef enum logic [1:0] { W_IDLE, W_DATA, W_RESP } w_state_e;
  typedef enum logic       { R_IDLE, R_DATA }         r_state_e;

  w_state_e w_state_q;
  r_state_e r_state_q;
  id_t      w_id_q, r_id_q;
  len_t     r_len_q, r_cnt_q;

  always_comb begin
    slv_resp_o          = '0;
    slv_resp_o.aw_ready = (w_state_q == W_IDLE);
    slv_resp_o.w_ready  = (w_state_q == W_DATA);
    slv_resp_o.b_valid  = (w_state_q == W_RESP);
    slv_resp_o.b.id     = w_id_q;
    slv_resp_o.b.resp   = RESP_DECERR;
    slv_resp_o.ar_ready = (r_state_q == R_IDLE);
    slv_resp_o.r_valid  = (r_state_q == R_DATA);
    slv_resp_o.r.id     = r_id_q;
    slv_resp_o.r.data   = RespData;
    slv_resp_o.r.resp   = RESP_DECERR;
    slv_resp_o.r.last   = (r_cnt_q == r_len_q);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      w_state_q <= W_IDLE;
      r_state_q <= R_IDLE;
      w_id_q    <= '0;
      r_id_q    <= '0;
      r_len_q   <= '0;
      r_cnt_q   <= '0;
    end else begin
      unique case (w_state_q)
        W_IDLE: if (slv_req_i.aw_valid) begin
          w_id_q    <= slv_req_i.aw.id;
          w_state_q <= W_DATA;
        end
        W_DATA: if (slv_req_i.w_valid && slv_req_i.w.last) w_state_q <= W_RESP;
        W_RESP: if (slv_req_i.b_ready) w_state_q <= W_IDLE;
        default: w_state_q <= W_IDLE;
      endcase
      unique case (r_state_q)
        R_IDLE: if (slv_req_i.ar_valid) begin
          r_id_q    <= slv_req_i.ar.id;
          r_len_q   <= slv_req_i.ar.len;
          r_cnt_q   <= '0;
          r_state_q <= R_DATA;
        end
        R_DATA: if (slv_req_i.r_ready) begin
          if (r_cnt_q == r_len_q) r_state_q <= R_IDLE;
          else                    r_cnt_q   <= r_cnt_q + 1'b1;
        end
        default: r_state_q <= R_IDLE;
      endcase
    end
  end
endmodule
