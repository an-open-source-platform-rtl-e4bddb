// Testbench of the data width downsizer: a random 512-bit master (full-size
// and narrow INCR bursts up to 16 beats, random IDs) writes and reads back
// through the downsizer into a 64-bit behavioural memory. Checks every byte,
// RLAST, per-ID order and B IDs. Counted mechanism: narrow-side commands
// issued for a wide command whose beats are wider than the narrow bus
// (bursts split into narrow beats).
`include "axi_typedef.svh"
module tb_axi_dw_downsizer;
  import axi_cfg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  d512_i6_req_t sreq;
  d512_i6_rsp_t srsp;
  d64_i6_req_t mreq;
  d64_i6_rsp_t mrsp;
  logic done;
  int unsigned chk, fail, checks, failures, events;

  tb_axi_rand_master #(
    .req_t(d512_i6_req_t), .rsp_t(d512_i6_rsp_t), .ax_t(d512_i6_ax_t), .w_t(d512_i6_w_t),
    .DW(512), .Base(64'h1000_0000), .NumTxn(60), .MaxLen(15), .MaxId(3), .Narrow(1)
  ) i_m (.clk_i(clk), .rst_ni(rst_n), .req_o(sreq), .rsp_i(srsp),
         .done_o(done), .checks_o(chk), .failures_o(fail));

  axi_dw_downsizer #(.SlvDataWidth(512), .MstDataWidth(64)) dut (
    .clk_i(clk), .rst_ni(rst_n), .slv_req_i(sreq), .slv_rsp_o(srsp), .mst_req_o(mreq), .mst_rsp_i(mrsp));

  tb_axi_mem #(.req_t(d64_i6_req_t), .rsp_t(d64_i6_rsp_t), .ax_t(d64_i6_ax_t), .DW(64), .ReadyPct(70))
    i_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(mreq), .rsp_o(mrsp));
  always @(posedge clk) if (rst_n) begin
    if (mreq.aw_valid && mrsp.aw_ready && mreq.aw.len > 0 && mreq.aw.size == 3) events++;
    if (mreq.ar_valid && mrsp.ar_ready && mreq.ar.len > 0 && mreq.ar.size == 3) events++;
  end

  initial begin
    checks = 0; failures = 0; events = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done);
    repeat (5) @(posedge clk);
    checks += chk + 1;
    failures += fail;
    $display("split commands: %0d", events);
    if (events == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + chk, failures + fail + 1);
    $finish;
  end
endmodule
