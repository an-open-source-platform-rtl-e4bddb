// Data width downsizer: connects a wide slave port (SlvDataWidth) to a narrow
// master port (MstDataWidth < SlvDataWidth), keeping IDs and addresses.
//
// How: a command whose beats are no wider than the narrow bus passes through
// unchanged; its narrow W beats are taken from the right lanes of the wide
// beats and its R beats are replicated across the wide lanes. A command with
// wider beats is split: an INCR burst becomes INCR bursts of narrow full-width
// beats of at most 256 beats each (the AXI burst limit); a FIXED or WRAP burst
// becomes one narrow INCR burst per wide beat. Each wide W beat is handed out
// as the narrow beats covering its bytes, each narrow R beat is written into
// a wide buffer at its lanes, and the wide R beat leaves with the narrow beat
// that completes it. The B responses of all narrow bursts are merged (worst
// response) into one B. Counting narrow beats from the byte address makes
// unaligned first beats work.
//
// Interface: AXI slave port (wide) and master port (narrow), same ID and
// address widths. Timing: one read and one write transaction in flight at a
// time; the narrow commands of one transaction are issued back to back; the
// R and W paths add no register stage.
//
// From the paper: downsizing splits wide beats into several narrow beats and
// bursts into several bursts when the 256-beat limit would be exceeded.
// Choices here: one outstanding transaction per direction.
`include "axi_typedef.svh"
module axi_dw_downsizer #(
  parameter int unsigned SlvDataWidth = 512,
  parameter int unsigned MstDataWidth = 64,
  parameter type slv_req_t = axi_cfg_pkg::d512_i6_req_t,
  parameter type slv_rsp_t = axi_cfg_pkg::d512_i6_rsp_t,
  parameter type mst_req_t = axi_cfg_pkg::d64_i6_req_t,
  parameter type mst_rsp_t = axi_cfg_pkg::d64_i6_rsp_t,
  parameter type ax_t      = axi_cfg_pkg::d512_i6_ax_t
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  slv_req_t slv_req_i,
  output slv_rsp_t slv_rsp_o,
  output mst_req_t mst_req_o,
  input  mst_rsp_t mst_rsp_i
);
  localparam int unsigned SlvNB = SlvDataWidth / 8;
  localparam int unsigned MstNB = MstDataWidth / 8;
  localparam int unsigned Ratio = SlvNB / MstNB;
  localparam int unsigned SelW  = Ratio > 1 ? $clog2(Ratio) : 1;
  localparam logic [2:0]  MstSize = 3'($clog2(MstNB));

  typedef logic [63:0] addr_t;

  function automatic addr_t align(addr_t a, int unsigned nbytes);
    return (a / nbytes) * nbytes;
  endfunction
  // Narrow beats from byte address a to the end of the wide beat around a.
  function automatic addr_t beats_in_wide(addr_t a, axi_pkg::size_t size);
    return (align(a, 1 << size) + (addr_t'(1) << size) - align(a, MstNB)) / MstNB;
  endfunction
  // Narrow beats of a whole INCR burst.
  function automatic addr_t beats_incr(ax_t c);
    return (align(addr_t'(c.addr), 1 << c.size) + ((addr_t'(c.len) + 1) << c.size)
            - align(addr_t'(c.addr), MstNB)) / MstNB;
  endfunction
  function automatic logic [SelW-1:0] lane(addr_t a);
    return SelW'((a % SlvNB) / MstNB);
  endfunction
  function automatic logic end_of_wide(addr_t a, axi_pkg::size_t size);
    return ((align(a, MstNB) + MstNB) % (addr_t'(1) << size)) == 0;
  endfunction

  // ------------------------------------------------------ command splitting
  // One instance of the same state per direction: c_* for AR (index 0) and
  // AW (index 1).
  logic  [1:0] act_q, conv_q, cmd_done_q;
  ax_t   [1:0] orig_q;
  addr_t [1:0] c_addr_q, c_left_q;   // next sub-burst address; narrow beats or wide beats left
  ax_t   [1:0] c_out;
  addr_t [1:0] c_beats;
  logic  [1:0] c_valid, c_ready, accept;
  ax_t   [1:0] slv_cmd;
  logic  [1:0] slv_cmd_valid;

  assign slv_cmd[0] = slv_req_i.ar;
  assign slv_cmd[1] = slv_req_i.aw;
  assign slv_cmd_valid[0] = slv_req_i.ar_valid;
  assign slv_cmd_valid[1] = slv_req_i.aw_valid;
  assign c_ready[0] = mst_rsp_i.ar_ready;
  assign c_ready[1] = mst_rsp_i.aw_ready;

  for (genvar d = 0; d < 2; d++) begin : gen_cmd
    assign accept[d] = !act_q[d] && slv_cmd_valid[d];
    always_comb begin
      c_out[d]   = orig_q[d];
      c_beats[d] = '0;
      if (conv_q[d]) begin
        c_out[d].addr  = c_addr_q[d];
        c_out[d].size  = MstSize;
        c_out[d].burst = axi_pkg::BURST_INCR;
        if (orig_q[d].burst == axi_pkg::BURST_INCR)
          c_beats[d] = (c_left_q[d] > 256) ? addr_t'(256) : c_left_q[d];
        else
          c_beats[d] = beats_in_wide(c_addr_q[d], orig_q[d].size);
        c_out[d].len = 8'(c_beats[d] - 1);
      end
    end
    assign c_valid[d] = act_q[d] && !cmd_done_q[d];
  end

  assign mst_req_o.ar       = c_out[0];
  assign mst_req_o.ar_valid = c_valid[0];
  assign mst_req_o.aw       = c_out[1];
  assign mst_req_o.aw_valid = c_valid[1];
  assign slv_rsp_o.ar_ready = !act_q[0];
  assign slv_rsp_o.aw_ready = !act_q[1];

  // -------------------------------------------------------------- read data
  addr_t r_naddr_q, r_waddr_q;
  logic [7:0] r_wcnt_q;
  logic [SlvDataWidth-1:0] rbuf_q, rbuf_d;
  axi_pkg::resp_t r_resp_q;
  logic r_eow;
  assign r_eow = !conv_q[0] || end_of_wide(r_naddr_q, orig_q[0].size);
  always_comb begin
    rbuf_d = rbuf_q;
    rbuf_d[lane(r_naddr_q) * MstDataWidth +: MstDataWidth] = mst_rsp_i.r.data;
    slv_rsp_o.r    = '0;
    slv_rsp_o.r.id = mst_rsp_i.r.id;
    if (conv_q[0]) begin
      slv_rsp_o.r.data = rbuf_d;
      slv_rsp_o.r.resp = axi_pkg::resp_max(r_resp_q, mst_rsp_i.r.resp);
    end else begin
      slv_rsp_o.r.data = {Ratio{mst_rsp_i.r.data}};
      slv_rsp_o.r.resp = mst_rsp_i.r.resp;
    end
    slv_rsp_o.r.last = (r_wcnt_q == orig_q[0].len);
  end
  assign slv_rsp_o.r_valid = act_q[0] && mst_rsp_i.r_valid && r_eow;
  assign mst_req_o.r_ready = act_q[0] && (r_eow ? slv_req_i.r_ready : 1'b1);

  // ------------------------------------------------------------- write data
  addr_t w_naddr_q, w_waddr_q, w_left_q;
  logic [7:0] w_sub_q, w_wcnt_q;
  logic w_eow, w_nlast;
  assign w_eow = !conv_q[1] || end_of_wide(w_naddr_q, orig_q[1].size);
  always_comb begin
    if (!conv_q[1])                                 w_nlast = slv_req_i.w.last;
    else if (orig_q[1].burst == axi_pkg::BURST_INCR) w_nlast = (w_left_q == 1) || (w_sub_q == 8'd255);
    else                                            w_nlast = w_eow;
    mst_req_o.w      = '0;
    mst_req_o.w.data = slv_req_i.w.data[lane(w_naddr_q) * MstDataWidth +: MstDataWidth];
    mst_req_o.w.strb = slv_req_i.w.strb[lane(w_naddr_q) * MstNB +: MstNB];
    mst_req_o.w.last = w_nlast;
  end
  logic w_open, w_done_q;
  assign w_open = act_q[1] && !w_done_q;
  assign mst_req_o.w_valid = w_open && slv_req_i.w_valid;
  assign slv_rsp_o.w_ready = w_open && mst_rsp_i.w_ready && w_eow;

  // ---------------------------------------------------------------- B merge
  addr_t b_need_q, b_cnt_q;
  axi_pkg::resp_t b_resp_q;
  logic b_final;
  assign b_final = (b_cnt_q + 1 == b_need_q);
  always_comb begin
    slv_rsp_o.b      = '0;
    slv_rsp_o.b.id   = mst_rsp_i.b.id;
    slv_rsp_o.b.resp = axi_pkg::resp_max(b_resp_q, mst_rsp_i.b.resp);
  end
  assign slv_rsp_o.b_valid = act_q[1] && mst_rsp_i.b_valid && b_final;
  assign mst_req_o.b_ready = act_q[1] && (b_final ? slv_req_i.b_ready : 1'b1);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      act_q <= '0; conv_q <= '0; cmd_done_q <= '0; orig_q <= '0;
      c_addr_q <= '0; c_left_q <= '0;
      r_naddr_q <= '0; r_waddr_q <= '0; r_wcnt_q <= '0; rbuf_q <= '0; r_resp_q <= '0;
      w_naddr_q <= '0; w_waddr_q <= '0; w_left_q <= '0; w_sub_q <= '0; w_wcnt_q <= '0;
      w_done_q <= 1'b0;
      b_need_q <= '0; b_cnt_q <= '0; b_resp_q <= '0;
    end else begin
      for (int d = 0; d < 2; d++) begin
        if (accept[d]) begin
          act_q[d]      <= 1'b1;
          orig_q[d]     <= slv_cmd[d];
          conv_q[d]     <= slv_cmd[d].size > MstSize;
          cmd_done_q[d] <= 1'b0;
          c_addr_q[d]   <= addr_t'(slv_cmd[d].addr);
          c_left_q[d]   <= (slv_cmd[d].burst == axi_pkg::BURST_INCR) ? beats_incr(slv_cmd[d])
                                                                    : addr_t'(slv_cmd[d].len) + 1;
        end else if (c_valid[d] && c_ready[d]) begin
          if (!conv_q[d]) begin
            cmd_done_q[d] <= 1'b1;
          end else if (orig_q[d].burst == axi_pkg::BURST_INCR) begin
            c_addr_q[d] <= align(c_addr_q[d], MstNB) + c_beats[d] * MstNB;
            c_left_q[d] <= c_left_q[d] - c_beats[d];
            if (c_left_q[d] == c_beats[d]) cmd_done_q[d] <= 1'b1;
          end else begin
            c_addr_q[d] <= axi_pkg::next_addr(c_addr_q[d], addr_t'(orig_q[d].addr), orig_q[d].len,
                                              orig_q[d].size, orig_q[d].burst);
            c_left_q[d] <= c_left_q[d] - 1;
            if (c_left_q[d] == 1) cmd_done_q[d] <= 1'b1;
          end
        end
      end
      // read data
      if (accept[0]) begin
        r_naddr_q <= addr_t'(slv_req_i.ar.addr);
        r_waddr_q <= addr_t'(slv_req_i.ar.addr);
        r_wcnt_q  <= '0;
        rbuf_q    <= '0;
        r_resp_q  <= axi_pkg::RESP_OKAY;
      end else if (mst_rsp_i.r_valid && mst_req_o.r_ready) begin
        if (r_eow) begin
          r_wcnt_q  <= r_wcnt_q + 1'b1;
          r_waddr_q <= axi_pkg::next_addr(r_waddr_q, addr_t'(orig_q[0].addr), orig_q[0].len,
                                          orig_q[0].size, orig_q[0].burst);
          r_naddr_q <= axi_pkg::next_addr(r_waddr_q, addr_t'(orig_q[0].addr), orig_q[0].len,
                                          orig_q[0].size, orig_q[0].burst);
          rbuf_q    <= '0;
          r_resp_q  <= axi_pkg::RESP_OKAY;
          if (slv_rsp_o.r.last) act_q[0] <= 1'b0;
        end else begin
          r_naddr_q <= align(r_naddr_q, MstNB) + MstNB;
          rbuf_q    <= rbuf_d;
          r_resp_q  <= slv_rsp_o.r.resp;
        end
      end
      // write data
      if (accept[1]) begin
        w_naddr_q <= addr_t'(slv_req_i.aw.addr);
        w_waddr_q <= addr_t'(slv_req_i.aw.addr);
        w_wcnt_q  <= '0;
        w_sub_q   <= '0;
        w_left_q  <= (slv_req_i.aw.burst == axi_pkg::BURST_INCR) ? beats_incr(slv_req_i.aw) : '0;
        w_done_q  <= 1'b0;
        b_cnt_q   <= '0;
        b_resp_q  <= axi_pkg::RESP_OKAY;
        if (slv_req_i.aw.size <= MstSize)                  b_need_q <= 1;
        else if (slv_req_i.aw.burst == axi_pkg::BURST_INCR) b_need_q <= (beats_incr(slv_req_i.aw) + 255) / 256;
        else                                               b_need_q <= addr_t'(slv_req_i.aw.len) + 1;
      end else begin
        if (mst_req_o.w_valid && mst_rsp_i.w_ready) begin
          w_left_q <= w_left_q - 1;
          w_sub_q  <= w_nlast ? '0 : w_sub_q + 1'b1;
          if (w_eow) begin
            w_wcnt_q  <= w_wcnt_q + 1'b1;
            w_waddr_q <= axi_pkg::next_addr(w_waddr_q, addr_t'(orig_q[1].addr), orig_q[1].len,
                                            orig_q[1].size, orig_q[1].burst);
            w_naddr_q <= axi_pkg::next_addr(w_waddr_q, addr_t'(orig_q[1].addr), orig_q[1].len,
                                            orig_q[1].size, orig_q[1].burst);
            if (w_wcnt_q == orig_q[1].len) w_done_q <= 1'b1;
          end else begin
            w_naddr_q <= align(w_naddr_q, MstNB) + MstNB;
          end
        end
        if (mst_rsp_i.b_valid && mst_req_o.b_ready) begin
          b_cnt_q  <= b_cnt_q + 1;
          b_resp_q <= slv_rsp_o.b.resp;
          if (b_final) act_q[1] <= 1'b0;
        end
      end
    end
  end
endmodule
