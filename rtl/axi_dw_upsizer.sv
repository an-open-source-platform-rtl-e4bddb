// Data width upsizer: connects a narrow slave port (SlvDataWidth) to a wide
// master port (MstDataWidth > SlvDataWidth), keeping IDs and addresses.
//
// How: an INCR burst is rewritten into a wide INCR burst that covers the
// same bytes with full-width beats (fewer beats: the same amount of data
// travels in fewer cycles on the wide side); a single-beat burst keeps its
// size; FIXED and WRAP bursts pass through beat for beat (their narrow size
// is legal on the wide bus). Read: each wide R beat is held while the narrow
// beats inside it are handed out, its lanes selected by the narrow beat
// address; the wide beat is consumed with the last narrow beat in it. Write:
// narrow W beats are packed into a wide buffer (data and strobes by lane);
// the wide beat leaves together with the narrow beat that completes it (no
// extra cycle), and the B response is passed back unchanged.
//
// Interface: AXI slave port (narrow) and master port (wide), same ID and
// address widths. Timing: one read and one write transaction in flight at a
// time (MaxReads = 1, the paper's evaluated configuration "MaxTxns 1"); the
// R path is combinational from the wide port to the narrow port, W is packed
// without added latency on the completing beat.
//
// From the paper: upsizing packs narrow beats into wide beats, one wide beat
// per cycle once packed. Choices here: one outstanding transaction per
// direction, FIXED/WRAP passed through unconverted.
`include "axi_typedef.svh"
module axi_dw_upsizer #(
  parameter int unsigned SlvDataWidth = 64,
  parameter int unsigned MstDataWidth = 512,
  parameter type slv_req_t = axi_cfg_pkg::d64_i6_req_t,
  parameter type slv_rsp_t = axi_cfg_pkg::d64_i6_rsp_t,
  parameter type mst_req_t = axi_cfg_pkg::d512_i6_req_t,
  parameter type mst_rsp_t = axi_cfg_pkg::d512_i6_rsp_t,
  parameter type ax_t      = axi_cfg_pkg::d64_i6_ax_t
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
  localparam int unsigned Ratio = MstNB / SlvNB;
  localparam int unsigned SelW  = Ratio > 1 ? $clog2(Ratio) : 1;
  localparam logic [2:0]  MstSize = 3'($clog2(MstNB));

  // A burst is packed if it is INCR with more than one beat; widen() rewrites
  // a narrow command into the wide command.
  function automatic logic is_conv(ax_t a);
    return (a.burst == axi_pkg::BURST_INCR) && (a.len != '0);
  endfunction
  function automatic ax_t widen(ax_t a);
    ax_t w;
    logic [63:0] first, last_b;
    w = a;
    if (is_conv(a)) begin
      first  = 64'(a.addr);
      last_b = ((64'(a.addr) >> a.size) << a.size) + ((64'(a.len) + 1) << a.size) - 1;
      w.size = MstSize;
      w.len  = 8'((last_b / MstNB) - (first / MstNB));
    end
    return w;
  endfunction

  function automatic logic [SelW-1:0] lane(logic [63:0] a);
    return SelW'((a % MstNB) / SlvNB);
  endfunction

  // ------------------------------------------------------------------ read
  logic        r_act_q, r_conv_q, r_conv_d;
  ax_t         ar_q;
  logic [63:0] r_addr_q, r_addr_nxt;
  logic [7:0]  r_cnt_q;
  logic        ar_sent_q, r_end_of_wide, r_last;

  assign r_conv_d = is_conv(slv_req_i.ar);
  assign r_addr_nxt = axi_pkg::next_addr(r_addr_q, 64'(ar_q.addr), ar_q.len, ar_q.size, ar_q.burst);
  assign r_last = (r_cnt_q == ar_q.len);
  assign r_end_of_wide = r_last || !r_conv_q || ((r_addr_nxt / MstNB) != (r_addr_q / MstNB));

  // The wide AR is registered (ar_q holds the original, the wide one is
  // recomputed from it).
  ax_t  ar_out;
  assign ar_out = widen(ar_q);
  assign mst_req_o.ar       = ar_out;
  assign mst_req_o.ar_valid = r_act_q && !ar_sent_q;
  assign slv_rsp_o.ar_ready = !r_act_q;

  always_comb begin
    slv_rsp_o.r      = '0;
    slv_rsp_o.r.id   = mst_rsp_i.r.id;
    slv_rsp_o.r.data = mst_rsp_i.r.data[lane(r_addr_q) * SlvDataWidth +: SlvDataWidth];
    slv_rsp_o.r.resp = mst_rsp_i.r.resp;
    slv_rsp_o.r.last = r_last;
  end
  assign slv_rsp_o.r_valid = r_act_q && mst_rsp_i.r_valid;
  assign mst_req_o.r_ready = r_act_q && slv_req_i.r_ready && r_end_of_wide;

  // ----------------------------------------------------------------- write
  logic        w_act_q, w_conv_q, w_conv_d, aw_sent_q, b_wait_q;
  ax_t         aw_q, aw_out;
  logic [63:0] w_addr_q, w_addr_nxt;
  logic [7:0]  w_cnt_q;
  logic [MstDataWidth-1:0] wbuf_q;
  logic [MstNB-1:0]        wstrb_q;
  logic        w_flush;

  assign w_conv_d = is_conv(slv_req_i.aw);
  assign aw_out   = widen(aw_q);
  assign w_addr_nxt = axi_pkg::next_addr(w_addr_q, 64'(aw_q.addr), aw_q.len, aw_q.size, aw_q.burst);
  assign w_flush = slv_req_i.w.last || !w_conv_q || ((w_addr_nxt / MstNB) != (w_addr_q / MstNB));

  assign mst_req_o.aw       = aw_out;
  assign mst_req_o.aw_valid = w_act_q && !aw_sent_q;
  assign slv_rsp_o.aw_ready = !w_act_q;

  always_comb begin
    mst_req_o.w      = '0;
    mst_req_o.w.data = wbuf_q;
    mst_req_o.w.strb = wstrb_q;
    for (int unsigned b = 0; b < SlvNB; b++) begin
      if (slv_req_i.w.strb[b]) begin
        mst_req_o.w.data[(int'(lane(w_addr_q)) * SlvNB + b) * 8 +: 8] = slv_req_i.w.data[8*b +: 8];
        mst_req_o.w.strb[int'(lane(w_addr_q)) * SlvNB + b]            = 1'b1;
      end
    end
    mst_req_o.w.last = slv_req_i.w.last;
  end
  logic w_in_burst;
  assign w_in_burst = w_act_q && !b_wait_q;
  assign mst_req_o.w_valid = w_in_burst && slv_req_i.w_valid && w_flush;
  assign slv_rsp_o.w_ready = w_in_burst && (w_flush ? mst_rsp_i.w_ready : 1'b1);

  assign slv_rsp_o.b       = mst_rsp_i.b;
  assign slv_rsp_o.b_valid = b_wait_q && mst_rsp_i.b_valid;
  assign mst_req_o.b_ready = b_wait_q && slv_req_i.b_ready;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      r_act_q <= 1'b0; r_conv_q <= 1'b0; ar_q <= '0; r_addr_q <= '0; r_cnt_q <= '0;
      ar_sent_q <= 1'b0;
      w_act_q <= 1'b0; w_conv_q <= 1'b0; aw_q <= '0; w_addr_q <= '0; w_cnt_q <= '0;
      aw_sent_q <= 1'b0; b_wait_q <= 1'b0; wbuf_q <= '0; wstrb_q <= '0;
    end else begin
      // read
      if (!r_act_q && slv_req_i.ar_valid) begin
        r_act_q   <= 1'b1;
        r_conv_q  <= r_conv_d;
        ar_q      <= slv_req_i.ar;
        r_addr_q  <= 64'(slv_req_i.ar.addr);
        r_cnt_q   <= '0;
        ar_sent_q <= 1'b0;
      end else begin
        if (mst_req_o.ar_valid && mst_rsp_i.ar_ready) ar_sent_q <= 1'b1;
        if (slv_rsp_o.r_valid && slv_req_i.r_ready) begin
          r_cnt_q  <= r_cnt_q + 1'b1;
          r_addr_q <= r_addr_nxt;
          if (r_last) r_act_q <= 1'b0;
        end
      end
      // write
      if (!w_act_q && slv_req_i.aw_valid) begin
        w_act_q   <= 1'b1;
        w_conv_q  <= w_conv_d;
        aw_q      <= slv_req_i.aw;
        w_addr_q  <= 64'(slv_req_i.aw.addr);
        w_cnt_q   <= '0;
        aw_sent_q <= 1'b0;
        b_wait_q  <= 1'b0;
      end else begin
        if (mst_req_o.aw_valid && mst_rsp_i.aw_ready) aw_sent_q <= 1'b1;
        if (w_in_burst && slv_req_i.w_valid && slv_rsp_o.w_ready) begin
          w_cnt_q  <= w_cnt_q + 1'b1;
          w_addr_q <= w_addr_nxt;
          if (w_flush) begin
            wbuf_q  <= '0;
            wstrb_q <= '0;
          end else begin
            wbuf_q  <= mst_req_o.w.data;
            wstrb_q <= mst_req_o.w.strb;
          end
          if (slv_req_i.w.last) b_wait_q <= 1'b1;
        end
        if (slv_rsp_o.b_valid && slv_req_i.b_ready) begin
          w_act_q  <= 1'b0;
          b_wait_q <= 1'b0;
        end
      end
    end
  end
endmodule
