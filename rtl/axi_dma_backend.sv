// DMA engine backend: executes one linear transfer (source address,
// destination address, byte count) at a time as AXI bursts on a single master
// port with one ID, for any byte alignment of source, destination and length.
//
// How: two burst generators split the source and the destination range
// independently into INCR bursts of full-width beats that end at a boundary
// of min(4 KiB, 256 beats) (the AXI rules); the read generator issues ARs, the
// write generator issues AWs and queues each burst's beat count for the W
// channel. At most MaxOutstanding read bursts and MaxOutstanding write bursts
// are in flight. Because all bursts of one side are consecutive and aligned
// at their boundaries, the R beats form one continuous stream of source
// words and the W beats one continuous stream of destination words. R beats
// enter a buffer of BufferDepth beats; the data realigner builds W beat j
// from two consecutive source words (the previous and the current one)
// rotated by (dst - src) mod bytes-per-beat, with byte strobes masking the
// head and tail of the transfer. If the destination offset is smaller than
// the source offset, the first source word is only preloaded. done_o pulses
// when the last B response of the transfer has arrived.
//
// Interface: transfer request (valid/ready, dma_transfer_t), done pulse, AXI
// master port. Timing: one R beat in and one W beat out per cycle once the
// pipeline is filled; the next transfer is accepted after done_o.
//
// From the paper: a backend that takes one-dimensional transfers, splits them
// into legal bursts, decouples reads and writes with a small buffer (3 beats)
// and realigns data in-stream so arbitrary alignments run at full bandwidth;
// one ID with up to 8 outstanding transactions in Manticore. Choices here:
// one transfer at a time, the 2-word rotation realigner, separate
// outstanding limits for reads and writes.
`include "axi_typedef.svh"
module axi_dma_backend #(
  parameter int unsigned DataWidth      = 512,
  parameter int unsigned IdWidth        = 6,
  parameter int unsigned MaxOutstanding = 8,
  parameter int unsigned BufferDepth    = 3,
  parameter type req_t = axi_cfg_pkg::d512_i6_req_t,
  parameter type rsp_t = axi_cfg_pkg::d512_i6_rsp_t
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  axi_cfg_pkg::dma_transfer_t xfer_i,
  input  logic                       xfer_valid_i,
  output logic                       xfer_ready_o,
  output logic                       done_o,
  output req_t                       mst_req_o,
  input  rsp_t                       mst_rsp_i
);
  localparam int unsigned NB      = DataWidth / 8;
  localparam int unsigned OffW    = $clog2(NB);
  localparam int unsigned Bound   = (256 * NB < 4096) ? 256 * NB : 4096;
  localparam int unsigned OutW    = $clog2(MaxOutstanding + 1);
  localparam logic [2:0]  Size    = 3'(OffW);
  typedef logic [63:0] addr_t;
  typedef logic [31:0] cnt_t;

  function automatic cnt_t chunk(addr_t a, cnt_t left);
    cnt_t room;
    room = cnt_t'(Bound - (a % Bound));
    return (left < room) ? left : room;
  endfunction
  function automatic logic [7:0] beats_m1(addr_t a, cnt_t n);
    return 8'(((a % NB) + n - 1) / NB);
  endfunction

  logic busy_q;
  addr_t rd_addr_q, wr_addr_q;
  cnt_t  rd_left_q, wr_left_q, total_q;
  logic [OffW-1:0] slo_q, dlo_q, rot_q;
  logic  skip_q;
  cnt_t  nr_q, nw_q, rj_q, wj_q;
  logic [OutW-1:0] rd_out_q, wr_out_q;

  assign xfer_ready_o = !busy_q;

  // ------------------------------------------------------- burst generators
  cnt_t rd_n, wr_n;
  assign rd_n = chunk(rd_addr_q, rd_left_q);
  assign wr_n = chunk(wr_addr_q, wr_left_q);

  logic ar_fire, aw_fire, wlen_ready, wlen_valid, wlen_pop;
  logic [7:0] wlen_head;
  always_comb begin
    mst_req_o.ar       = '0;
    mst_req_o.ar.addr  = rd_addr_q;
    mst_req_o.ar.len   = beats_m1(rd_addr_q, rd_n);
    mst_req_o.ar.size  = Size;
    mst_req_o.ar.burst = axi_pkg::BURST_INCR;
    mst_req_o.aw       = '0;
    mst_req_o.aw.addr  = wr_addr_q;
    mst_req_o.aw.len   = beats_m1(wr_addr_q, wr_n);
    mst_req_o.aw.size  = Size;
    mst_req_o.aw.burst = axi_pkg::BURST_INCR;
  end
  assign mst_req_o.ar_valid = busy_q && (rd_left_q != 0) && (rd_out_q != OutW'(MaxOutstanding));
  assign mst_req_o.aw_valid = busy_q && (wr_left_q != 0) && (wr_out_q != OutW'(MaxOutstanding)) && wlen_ready;
  assign ar_fire = mst_req_o.ar_valid && mst_rsp_i.ar_ready;
  assign aw_fire = mst_req_o.aw_valid && mst_rsp_i.aw_ready;

  stream_fifo #(.T(logic [7:0]), .Depth(MaxOutstanding)) i_wlen (
    .clk_i, .rst_ni,
    .data_i (mst_req_o.aw.len), .valid_i (aw_fire), .ready_o (wlen_ready),
    .data_o (wlen_head), .valid_o (wlen_valid), .ready_i (wlen_pop), .usage_o ()
  );

  // ------------------------------------------------------------ R buffer
  logic [DataWidth-1:0] cur, prev_q;
  logic cur_valid, cur_pop;
  stream_fifo #(.T(logic [DataWidth-1:0]), .Depth(BufferDepth)) i_rbuf (
    .clk_i, .rst_ni,
    .data_i (mst_rsp_i.r.data), .valid_i (mst_rsp_i.r_valid), .ready_o (mst_req_o.r_ready),
    .data_o (cur), .valid_o (cur_valid), .ready_i (cur_pop), .usage_o ()
  );

  // ------------------------------------------------------------ realigner
  logic preload, need_cur, w_fire;
  logic [7:0] w_bcnt_q;
  logic [2*DataWidth-1:0] pair;
  assign preload  = busy_q && skip_q && (rj_q == 0) && cur_valid;
  assign need_cur = (rj_q < nr_q);
  assign pair     = {cur, prev_q} >> ((NB - int'(rot_q)) * 8);
  always_comb begin
    int unsigned lo, hi;
    mst_req_o.w      = '0;
    mst_req_o.w.data = pair[DataWidth-1:0];
    lo = (wj_q == 0) ? int'(dlo_q) : 0;
    hi = (wj_q == nw_q - 1) ? int'((dlo_q + total_q - 1) % NB) : NB - 1;
    for (int unsigned l = 0; l < NB; l++) mst_req_o.w.strb[l] = (l >= lo) && (l <= hi);
    mst_req_o.w.last = (w_bcnt_q == wlen_head);
  end
  assign mst_req_o.w_valid = busy_q && !(skip_q && rj_q == 0) && (wj_q < nw_q) && wlen_valid &&
                             (need_cur ? cur_valid : 1'b1);
  assign w_fire   = mst_req_o.w_valid && mst_rsp_i.w_ready;
  assign wlen_pop = w_fire && mst_req_o.w.last;
  assign cur_pop  = preload || (w_fire && need_cur);

  assign mst_req_o.b_ready = 1'b1;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= 1'b0; done_o <= 1'b0;
      rd_addr_q <= '0; wr_addr_q <= '0; rd_left_q <= '0; wr_left_q <= '0; total_q <= '0;
      slo_q <= '0; dlo_q <= '0; rot_q <= '0; skip_q <= 1'b0;
      nr_q <= '0; nw_q <= '0; rj_q <= '0; wj_q <= '0;
      rd_out_q <= '0; wr_out_q <= '0; prev_q <= '0; w_bcnt_q <= '0;
    end else begin
      done_o <= 1'b0;
      if (!busy_q) begin
        if (xfer_valid_i) begin
          if (xfer_i.num_bytes == 0) begin
            done_o <= 1'b1;
          end else begin
            busy_q    <= 1'b1;
            rd_addr_q <= xfer_i.src_addr;
            wr_addr_q <= xfer_i.dst_addr;
            rd_left_q <= xfer_i.num_bytes;
            wr_left_q <= xfer_i.num_bytes;
            total_q   <= xfer_i.num_bytes;
            slo_q     <= OffW'(xfer_i.src_addr);
            dlo_q     <= OffW'(xfer_i.dst_addr);
            rot_q     <= OffW'(xfer_i.dst_addr) - OffW'(xfer_i.src_addr);
            skip_q    <= OffW'(xfer_i.dst_addr) < OffW'(xfer_i.src_addr);
            nr_q      <= cnt_t'((xfer_i.src_addr % NB + xfer_i.num_bytes - 1) / NB + 1);
            nw_q      <= cnt_t'((xfer_i.dst_addr % NB + xfer_i.num_bytes - 1) / NB + 1);
            rj_q      <= '0;
            wj_q      <= '0;
            w_bcnt_q  <= '0;
            prev_q    <= '0;
          end
        end
      end else begin
        if (ar_fire) begin
          rd_addr_q <= rd_addr_q + rd_n;
          rd_left_q <= rd_left_q - rd_n;
        end
        if (aw_fire) begin
          wr_addr_q <= wr_addr_q + wr_n;
          wr_left_q <= wr_left_q - wr_n;
        end
        if (ar_fire && !(mst_rsp_i.r_valid && mst_req_o.r_ready && mst_rsp_i.r.last))
          rd_out_q <= rd_out_q + 1'b1;
        else if (!ar_fire && mst_rsp_i.r_valid && mst_req_o.r_ready && mst_rsp_i.r.last)
          rd_out_q <= rd_out_q - 1'b1;
        if (aw_fire && !mst_rsp_i.b_valid)      wr_out_q <= wr_out_q + 1'b1;
        else if (!aw_fire && mst_rsp_i.b_valid) wr_out_q <= wr_out_q - 1'b1;
        if (cur_pop) begin
          prev_q <= cur;
          rj_q   <= rj_q + 1;
        end
        if (w_fire) begin
          wj_q     <= wj_q + 1;
          w_bcnt_q <= mst_req_o.w.last ? '0 : w_bcnt_q + 1'b1;
        end
        if (wj_q == nw_q && wr_left_q == 0 && wr_out_q == 0 && rd_out_q == 0) begin
          busy_q <= 1'b0;
          done_o <= 1'b1;
        end
      end
    end
  end
endmodule
