// Error slave: terminates every transaction with a protocol-compliant error
// response (Resp, DECERR by default). A write is accepted, its W burst is
// absorbed up to the last beat, then one B beat with the write's ID is sent.
// A read is accepted and answered with len+1 R beats carrying zero data, the
// read's ID and RLAST on the final beat. One transaction per direction is
// handled at a time; that is this implementation's choice (the paper only
// names the block and its purpose).
`include "axi_typedef.svh"
module axi_err_slv #(
  parameter axi_pkg::resp_t Resp = axi_pkg::RESP_DECERR,
  parameter type req_t = axi_cfg_pkg::d64_i6_req_t,
  parameter type rsp_t = axi_cfg_pkg::d64_i6_rsp_t,
  parameter type ax_t  = axi_cfg_pkg::d64_i6_ax_t
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  req_t slv_req_i,
  output rsp_t slv_rsp_o
);
  typedef enum logic [1:0] { W_IDLE, W_DATA, W_RESP } w_state_e;
  w_state_e    w_state_q;
  ax_t         aw_q, ar_q;
  logic        r_busy_q;
  axi_pkg::len_t r_cnt_q;

  always_comb begin
    slv_rsp_o          = '0;
    slv_rsp_o.aw_ready = (w_state_q == W_IDLE);
    slv_rsp_o.w_ready  = (w_state_q == W_DATA);
    slv_rsp_o.b_valid  = (w_state_q == W_RESP);
    slv_rsp_o.b.id     = aw_q.id;
    slv_rsp_o.b.resp   = Resp;
    slv_rsp_o.ar_ready = !r_busy_q;
    slv_rsp_o.r_valid  = r_busy_q;
    slv_rsp_o.r.id     = ar_q.id;
    slv_rsp_o.r.resp   = Resp;
    slv_rsp_o.r.last   = (r_cnt_q == ar_q.len);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      w_state_q <= W_IDLE;
      r_busy_q  <= 1'b0;
      r_cnt_q   <= '0;
      aw_q      <= '0;
      ar_q      <= '0;
    end else begin
      unique case (w_state_q)
        W_IDLE: if (slv_req_i.aw_valid) begin
          aw_q      <= slv_req_i.aw;
          w_state_q <= W_DATA;
        end
        W_DATA: if (slv_req_i.w_valid && slv_req_i.w.last) w_state_q <= W_RESP;
        W_RESP: if (slv_req_i.b_ready) w_state_q <= W_IDLE;
        default: w_state_q <= W_IDLE;
      endcase
      if (!r_busy_q) begin
        if (slv_req_i.ar_valid) begin
          ar_q     <= slv_req_i.ar;
          r_busy_q <= 1'b1;
          r_cnt_q  <= '0;
        end
      end else if (slv_req_i.r_ready) begin
        if (r_cnt_q == ar_q.len) r_busy_q <= 1'b0;
        r_cnt_q <= r_cnt_q + 1'b1;
      end
    end
  end
endmodule
