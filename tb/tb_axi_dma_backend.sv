// Testbench of the DMA engine backend (512-bit, MaxOutstanding 8): 60 random
// one-dimensional transfers of 1 to 9000 bytes with random source and
// destination byte offsets, from a region that is never written into a
// second region, through a behavioural memory with random stalls. After each
// done pulse every destination byte must equal its source byte and the bytes
// just before and after the destination range must be unchanged (strobes).
// Protocol monitors: no burst crosses a 4 KiB boundary, at most 8 read and 8
// write bursts are in flight, every burst uses the single ID 0, and a
// transfer of N bytes ends with done only once. Counted mechanisms:
// transfers needing realignment (source and destination offsets differ) and
// transfers split into several bursts.
`include "axi_typedef.svh"
module tb_axi_dma_backend;
  import axi_cfg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  d512_i6_req_t req;
  d512_i6_rsp_t rsp;
  dma_transfer_t xfer;
  logic xfer_valid, xfer_ready, done;
  int unsigned checks, failures, realigned, split, rd_out, wr_out, ar_cnt;
  byte unsigned shadow [longint unsigned];

  axi_dma_backend #(.DataWidth(512), .IdWidth(6), .MaxOutstanding(8), .BufferDepth(3)) dut (
    .clk_i(clk), .rst_ni(rst_n), .xfer_i(xfer), .xfer_valid_i(xfer_valid), .xfer_ready_o(xfer_ready),
    .done_o(done), .mst_req_o(req), .mst_rsp_i(rsp));
  tb_axi_mem #(.req_t(d512_i6_req_t), .rsp_t(d512_i6_rsp_t), .ax_t(d512_i6_ax_t), .DW(512), .ReadyPct(75))
    i_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp));

  function automatic void check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s at %0t", msg, $time);
    end
  endfunction
  function automatic byte unsigned dst_old(longint unsigned a);
    return shadow.exists(a) ? shadow[a] : i_mem.init_byte(a);
  endfunction

  // Protocol monitors.
  always @(posedge clk) if (rst_n) begin
    if (req.ar_valid && rsp.ar_ready) begin
      check((req.ar.addr % 4096) + (64'(req.ar.len) + 1) * 64 - (req.ar.addr % 64) <= 4096, "AR crosses 4 KiB");
      check(req.ar.id == 0 && req.ar.burst == axi_pkg::BURST_INCR, "AR ID/burst");
      rd_out++; ar_cnt++;
    end
    if (req.aw_valid && rsp.aw_ready) begin
      check((req.aw.addr % 4096) + (64'(req.aw.len) + 1) * 64 - (req.aw.addr % 64) <= 4096, "AW crosses 4 KiB");
      check(req.aw.id == 0, "AW ID");
      wr_out++;
    end
    if (rsp.r_valid && req.r_ready && rsp.r.last) rd_out--;
    if (rsp.b_valid && req.b_ready) wr_out--;
    if (rd_out > 8 || wr_out > 8) check(0, "more than 8 bursts outstanding");
  end

  initial begin
    longint unsigned src, dst;
    int unsigned n;
    checks = 0; failures = 0; realigned = 0; split = 0; rd_out = 0; wr_out = 0;
    xfer_valid = 0; xfer = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 60; k++) begin
      src = 64'h1000_0000 + $urandom_range(16'hffff);
      dst = 64'h2000_0000 + $urandom_range(16'hffff);
      n   = (k % 4 == 0) ? $urandom_range(9000, 4097) : $urandom_range(600, 1);
      if (k == 1) dst = (dst & ~64'h3f) | (src & 64'h3f);  // aligned case
      @(negedge clk);
      xfer.src_addr = src; xfer.dst_addr = dst; xfer.num_bytes = n;
      xfer_valid = 1;
      do @(posedge clk); while (!xfer_ready);
      @(negedge clk);
      xfer_valid = 0;
      ar_cnt = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      check(!done, "done lasts one cycle");
      begin
        bit ok;
        ok = 1;
        for (int unsigned t = 0; t < n; t++) begin
          if (i_mem.rd(dst + t) != i_mem.init_byte(src + t)) ok = 0;
          shadow[dst + t] = i_mem.init_byte(src + t);
        end
        check(ok, $sformatf("transfer %0d data (%0d bytes, src %h dst %h)", k, n, src, dst));
        check(i_mem.rd(dst - 1) == dst_old(dst - 1) && i_mem.rd(dst + n) == dst_old(dst + n),
              $sformatf("transfer %0d wrote outside its range", k));
        if (ok && (src % 64) != (dst % 64)) realigned++;
        if (ok && ar_cnt > 1) split++;
      end
    end
    repeat (5) @(posedge clk);
    $display("realigned transfers: %0d, split transfers: %0d", realigned, split);
    if (realigned == 0) failures++;
    if (split == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (300000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
