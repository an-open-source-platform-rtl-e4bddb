// End-to-end testbench of the quadrant network top, at its default
// parameters (four tiles, 512-bit wide network, 64-bit narrow network,
// 128 KiB of L1 per tile).
//
// Traffic, all at once:
//  * Each tile's DMA engine runs a chain of three transfers with random
//    sizes (up to 6000 bytes) and byte offsets: external memory (behind the
//    wide uplink) -> own L1 -> next tile's L1 -> back to external memory. The
//    final bytes in external memory must equal the original source bytes.
//  * Each core (narrow port) writes and reads back random bursts in the L1 of
//    the next tile (narrow crosspoint, upsizer, L1 multiplexer, duplex
//    controller, SRAM banks).
//  * The narrow uplink master writes and reads back peripheral memory with IDs
//    0..15 (narrow crosspoint, ID serializer, clock domain crossing; the
//    peripheral memory runs on a separate, slower clock).
//  * The wide uplink master alternates between tile 0's L1 and peripheral
//    memory (wide crossbar, ID remapper, downsizer bridge into the narrow
//    network).
// Scoreboards in the random masters check every byte, RLAST, per-ID order
// and response IDs. Counted mechanisms (each must happen at least once):
// DMA realignment, DMA burst splitting at 4 KiB, several remapped IDs in
// flight on the wide uplink, ID serialization onto the 2-bit peripheral IDs,
// peripheral transactions across the clock domain crossing, wide-to-narrow
// downsizing of bridge traffic, and narrow core bursts upsized into the L1.
`include "axi_typedef.svh"
module tb_axi_noc_quadrant;
  import axi_cfg_pkg::*;
  localparam int NT = 4;
  logic clk = 0, pclk = 0, rst_n = 0;
  always #5 clk = ~clk;
  always #13 pclk = ~pclk;

  dma_transfer_t [NT-1:0] xfer;
  logic [NT-1:0] xfer_valid, xfer_ready, dma_done;
  d64_i6_req_t [NT-1:0] core_req;
  d64_i6_rsp_t [NT-1:0] core_rsp;
  d512_i6_req_t wout_req, win_req;
  d512_i6_rsp_t wout_rsp, win_rsp;
  d64_i6_req_t nin_req;
  d64_i6_rsp_t nin_rsp;
  d64_i2_req_t per_req;
  d64_i2_rsp_t per_rsp;

  int unsigned checks, failures;
  int unsigned ev_realign, ev_split, ev_remap, ev_serial, ev_cdc, ev_down, ev_up;
  int unsigned dma_xfers_ext_read, wout_ar;
  bit [63:0] out_ids_live;

  axi_noc_quadrant dut (
    .clk_i (clk), .rst_ni (rst_n), .periph_clk_i (pclk), .periph_rst_ni (rst_n),
    .dma_xfer_i (xfer), .dma_xfer_valid_i (xfer_valid), .dma_xfer_ready_o (xfer_ready),
    .dma_done_o (dma_done),
    .core_req_i (core_req), .core_rsp_o (core_rsp),
    .wide_out_req_o (wout_req), .wide_out_rsp_i (wout_rsp),
    .wide_in_req_i (win_req), .wide_in_rsp_o (win_rsp),
    .narrow_in_req_i (nin_req), .narrow_in_rsp_o (nin_rsp),
    .periph_req_o (per_req), .periph_rsp_i (per_rsp)
  );

  // External memory behind the wide uplink, peripheral memory on pclk.
  tb_axi_mem #(.req_t(d512_i6_req_t), .rsp_t(d512_i6_rsp_t), .ax_t(d512_i6_ax_t), .DW(512), .ReadyPct(80))
    i_ext (.clk_i(clk), .rst_ni(rst_n), .req_i(wout_req), .rsp_o(wout_rsp));
  tb_axi_mem #(.req_t(d64_i2_req_t), .rsp_t(d64_i2_rsp_t), .ax_t(d64_i2_ax_t), .DW(64), .ReadyPct(80))
    i_per (.clk_i(pclk), .rst_ni(rst_n), .req_i(per_req), .rsp_o(per_rsp));

  // Random masters: cores, narrow uplink, wide uplink.
  logic [NT+1:0] mdone;
  int unsigned mchk [NT+2], mfail [NT+2];
  for (genvar i = 0; i < NT; i++) begin : gen_core
    tb_axi_rand_master #(
      .req_t(d64_i6_req_t), .rsp_t(d64_i6_rsp_t), .ax_t(d64_i6_ax_t), .w_t(d64_i6_w_t), .DW(64),
      .Base(64'h1000_0000 + 64'h2_0000 * ((i + 1) % NT)), .NumTxn(8), .MaxLen(7), .MaxId(3)
    ) i_m (.clk_i(clk), .rst_ni(rst_n), .req_o(core_req[i]), .rsp_i(core_rsp[i]),
           .done_o(mdone[i]), .checks_o(mchk[i]), .failures_o(mfail[i]));
  end
  tb_axi_rand_master #(
    .req_t(d64_i6_req_t), .rsp_t(d64_i6_rsp_t), .ax_t(d64_i6_ax_t), .w_t(d64_i6_w_t), .DW(64),
    .Base(64'h2001_0000), .NumTxn(12), .MaxLen(7), .MaxId(15)
  ) i_nin (.clk_i(clk), .rst_ni(rst_n), .req_o(nin_req), .rsp_i(nin_rsp),
           .done_o(mdone[NT]), .checks_o(mchk[NT]), .failures_o(mfail[NT]));
  tb_axi_rand_master #(
    .req_t(d512_i6_req_t), .rsp_t(d512_i6_rsp_t), .ax_t(d512_i6_ax_t), .w_t(d512_i6_w_t), .DW(512),
    .Base(64'h1001_C000), .NumTxn(8), .MaxLen(3), .MaxId(3),
    .NumWindows(2), .WinStride(64'h2000_0000 - 64'h1001_C000)
  ) i_win (.clk_i(clk), .rst_ni(rst_n), .req_o(win_req), .rsp_i(win_rsp),
           .done_o(mdone[NT+1]), .checks_o(mchk[NT+1]), .failures_o(mfail[NT+1]));

  function automatic void check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s at %0t", msg, $time);
    end
  endfunction

  // Monitors of the mechanisms.
  always @(posedge clk) if (rst_n) begin
    if (wout_req.ar_valid && wout_rsp.ar_ready) begin
      wout_ar++;
      out_ids_live[wout_req.ar.id] = 1'b1;
      if ($countones(out_ids_live) > 1) ev_remap++;
    end
    if (wout_rsp.r_valid && wout_req.r_ready && wout_rsp.r.last) out_ids_live[wout_rsp.r.id] = 1'b0;
    if (nin_req.aw_valid && nin_rsp.aw_ready && nin_req.aw.id > 3) ev_serial++;
    for (int i = 0; i < NT; i++)
      if (core_req[i].w_valid && core_rsp[i].w_ready && core_req[i].w.last) ev_up++;
  end
  always @(posedge pclk) if (rst_n) begin
    if (per_req.aw_valid && per_rsp.aw_ready) begin
      ev_cdc++;
      check(per_req.aw.addr[31:28] == 4'h2, "peripheral address");
      if (per_req.aw.addr < 64'h2001_0000 && per_req.aw.size == 3 && per_req.aw.len > 0) ev_down++;
    end
  end

  // DMA chains, one per tile.
  int unsigned dma_fin;
  for (genvar i = 0; i < NT; i++) begin : gen_dma
    initial begin
      longint unsigned a, l1, l1n, b;
      int unsigned n;
      xfer_valid[i] = 0;
      xfer[i] = '0;
      wait (rst_n);
      for (int rep = 0; rep < 2; rep++) begin
        n   = (rep == 0) ? $urandom_range(6000, 4200) : $urandom_range(2000, 1);
        a   = 64'h8000_0000 + 64'h1_0000 * i + 64'h4000 * rep + $urandom_range(4000);
        l1  = 64'h1000_0000 + 64'h2_0000 * i + 64'h1_0000 + $urandom_range(63);
        l1n = 64'h1000_0000 + 64'h2_0000 * ((i + 1) % NT) + 64'h1_8000 + $urandom_range(63);
        b   = 64'h9000_0000 + 64'h1_0000 * i + 64'h4000 * rep + $urandom_range(2000);
        run_xfer(i, a, l1, n);
        run_xfer(i, l1, l1n, n);
        run_xfer(i, l1n, b, n);
        begin
          bit ok;
          ok = 1;
          for (int unsigned t = 0; t < n; t++) if (i_ext.rd(b + t) != i_ext.init_byte(a + t)) ok = 0;
          check(ok, $sformatf("DMA chain of tile %0d (%0d bytes)", i, n));
          if (ok && ((a % 64) != (l1 % 64) || (l1 % 64) != (l1n % 64))) ev_realign++;
          if (ok && n > 4096) ev_split++;
        end
      end
      dma_fin++;
    end
  end

  task automatic run_xfer(int i, longint unsigned src, longint unsigned dst, int unsigned n);
    @(negedge clk);
    xfer[i].src_addr = src; xfer[i].dst_addr = dst; xfer[i].num_bytes = n;
    xfer_valid[i] = 1;
    do @(posedge clk); while (!xfer_ready[i]);
    @(negedge clk);
    xfer_valid[i] = 0;
    while (!dma_done[i]) @(negedge clk);
  endtask

  initial begin
    checks = 0; failures = 0; dma_fin = 0; out_ids_live = '0; wout_ar = 0;
    ev_realign = 0; ev_split = 0; ev_remap = 0; ev_serial = 0; ev_cdc = 0; ev_down = 0; ev_up = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    wait (&mdone && dma_fin == NT);
    repeat (10) @(posedge clk);
    for (int i = 0; i < NT + 2; i++) begin
      checks += mchk[i];
      failures += mfail[i];
    end
    $display("DMA realignments: %0d", ev_realign);
    $display("DMA transfers split at 4 KiB: %0d", ev_split);
    $display("wide uplink ARs with several remapped IDs live: %0d", ev_remap);
    $display("narrow uplink writes with IDs above 3 (serialized): %0d", ev_serial);
    $display("peripheral writes across the CDC: %0d", ev_cdc);
    $display("bridge writes downsized to 64 bit: %0d", ev_down);
    $display("core write bursts upsized into L1: %0d", ev_up);
    if (ev_realign == 0) failures++;
    if (ev_split == 0) failures++;
    if (ev_remap == 0) failures++;
    if (ev_serial == 0) failures++;
    if (ev_cdc == 0) failures++;
    if (ev_down == 0) failures++;
    if (ev_up == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
