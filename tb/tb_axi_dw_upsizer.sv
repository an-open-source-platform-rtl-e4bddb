// Testbench of the data width upsizer: a random 64-bit master (narrow and
// full-size INCR bursts, random IDs) writes and reads back through the
// upsizer into a 512-bit behavioural memory. Checks every byte, RLAST, per-ID
// order and B IDs. Counted mechanism: wide W beats that carry more than one
// narrow beat (packing happened); the wide side must also never see more
// beats than the narrow side.
`include "axi_typedef.svh"
module tb_axi_dw_upsizer;
  import axi_cfg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  d64_i6_req_t sreq;
  d64_i6_rsp_t srsp;
  d512_i6_req_t mreq;
  d512_i6_rsp_t mrsp;
  logic done;
  int unsigned chk, fail, checks, failures, events;
  int unsigned nbeats, wbeats;

  tb_axi_rand_master #(
    .req_t(d64_i6_req_t), .rsp_t(d64_i6_rsp_t), .ax_t(d64_i6_ax_t), .w_t(d64_i6_w_t),
    .DW(64), .Base(64'h1000_0000), .NumTxn(60), .MaxLen(15), .MaxId(3), .Narrow(1)
  ) i_m (.clk_i(clk), .rst_ni(rst_n), .req_o(sreq), .rsp_i(srsp),
         .done_o(done), .checks_o(chk), .failures_o(fail));

  axi_dw_upsizer #(.SlvDataWidth(64), .MstDataWidth(512)) dut (
    .clk_i(clk), .rst_ni(rst_n), .slv_req_i(sreq), .slv_rsp_o(srsp), .mst_req_o(mreq), .mst_rsp_i(mrsp));

  tb_axi_mem #(.req_t(d512_i6_req_t), .rsp_t(d512_i6_rsp_t), .ax_t(d512_i6_ax_t), .DW(512), .ReadyPct(70))
    i_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(mreq), .rsp_o(mrsp));
  always @(posedge clk) if (rst_n) begin
    if (mreq.w_valid && mrsp.w_ready) begin
      int groups;
      groups = 0;
      for (int g = 0; g < 8; g++) if (mreq.w.strb[8*g +: 8] != 0) groups++;
      if (groups > 1) events++;
      wbeats++;
    end
    if (sreq.w_valid && srsp.w_ready) nbeats++;
  end
  final if (wbeats > nbeats) $display("FAIL: more wide than narrow beats");

  initial begin
    checks = 0; failures = 0; events = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done);
    repeat (5) @(posedge clk);
    checks += chk + 1;
    failures += fail;
    $display("wide W beats packing several narrow beats: %0d", events);
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
