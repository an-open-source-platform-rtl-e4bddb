// Behavioural AXI memory slave for testbenches. Stores bytes in a sparse
// array; a byte never written reads as init_byte(address). Accepts any number
// of outstanding transactions, answers B and R in command order, and inserts
// random stalls on every channel (ReadyPct: chance per cycle, in percent, that
// a channel is ready/valid). Supports FIXED, INCR and WRAP bursts and narrow
// beats; read beats carry the memory bytes of all lanes of the beat's word.
module tb_axi_mem #(
  parameter type         req_t    = logic,
  parameter type         rsp_t    = logic,
  parameter type         ax_t     = logic,
  parameter int unsigned DW       = 64,
  parameter int unsigned ReadyPct = 70
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  req_t req_i,
  output rsp_t rsp_o
);
  localparam int unsigned NB = DW / 8;
  byte unsigned mem [longint unsigned];
  ax_t aw_q[$], ar_q[$];
  logic [63:0] w_addr; int w_beat;
  logic [63:0] r_addr; int r_beat;
  logic [63:0] b_q[$];   // {resp, id}
  int unsigned num_w, num_r;

  function automatic byte unsigned init_byte(longint unsigned a);
    return byte'(a[7:0] ^ a[15:8] ^ (a[23:16] * 8'd7) ^ 8'h5a);
  endfunction
  function automatic byte unsigned rd(longint unsigned a);
    return mem.exists(a) ? mem[a] : init_byte(a);
  endfunction
  function automatic bit coin();
    return ($urandom_range(99) < ReadyPct);
  endfunction

  always @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rsp_o  <= '0;
      w_beat = 0;
      r_beat = 0;
      num_w  = 0;
      num_r  = 0;
    end else begin
      if (req_i.aw_valid && rsp_o.aw_ready) aw_q.push_back(req_i.aw);
      if (req_i.ar_valid && rsp_o.ar_ready) ar_q.push_back(req_i.ar);
      if (req_i.w_valid && rsp_o.w_ready) begin
        if (w_beat == 0) w_addr = aw_q[0].addr;
        for (int i = 0; i < NB; i++)
          if (req_i.w.strb[i]) mem[(w_addr / NB) * NB + i] = req_i.w.data[8*i +: 8];
        w_addr = axi_pkg::next_addr(w_addr, aw_q[0].addr, aw_q[0].len, aw_q[0].size, aw_q[0].burst);
        w_beat++;
        if (req_i.w.last) begin
          b_q.push_back(64'(aw_q[0].id));
          void'(aw_q.pop_front());
          w_beat = 0;
          num_w++;
        end
      end
      if (rsp_o.b_valid && req_i.b_ready) rsp_o.b_valid <= 1'b0;
      if (rsp_o.r_valid && req_i.r_ready) rsp_o.r_valid <= 1'b0;
      if ((!rsp_o.b_valid || req_i.b_ready) && b_q.size() > 0 && coin()) begin
        rsp_o.b_valid <= 1'b1;
        rsp_o.b.id    <= b_q[0][$bits(rsp_o.b.id)-1:0];
        rsp_o.b.resp  <= axi_pkg::RESP_OKAY;
        void'(b_q.pop_front());
      end
      if ((!rsp_o.r_valid || req_i.r_ready) && ar_q.size() > 0 && coin()) begin
        if (r_beat == 0) r_addr = ar_q[0].addr;
        rsp_o.r_valid <= 1'b1;
        rsp_o.r.id    <= ar_q[0].id;
        rsp_o.r.resp  <= axi_pkg::RESP_OKAY;
        for (int i = 0; i < NB; i++) rsp_o.r.data[8*i +: 8] <= rd((r_addr / NB) * NB + i);
        rsp_o.r.last  <= (r_beat == int'(ar_q[0].len));
        r_addr = axi_pkg::next_addr(r_addr, ar_q[0].addr, ar_q[0].len, ar_q[0].size, ar_q[0].burst);
        if (r_beat == int'(ar_q[0].len)) begin
          r_beat = 0;
          void'(ar_q.pop_front());
          num_r++;
        end else r_beat++;
      end
      rsp_o.aw_ready <= coin();
      rsp_o.ar_ready <= coin();
      rsp_o.w_ready  <= (aw_q.size() > 0 || (req_i.aw_valid && rsp_o.aw_ready)) && coin();
    end
  end
endmodule
