// Testbench of the clock domain crossing: random traffic from a 100 MHz
// domain through the CDC into a memory clocked at about 71 MHz. Checks data,
// order and IDs across the crossing; counts beats that crossed.
`include "axi_typedef.svh"
module tb_axi_cdc;
  import axi_cfg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clk_m = 0;
  always #7 clk_m = ~clk_m;

  d64_i6_req_t sreq;
  d64_i6_rsp_t srsp;
  d64_i6_req_t mreq;
  d64_i6_rsp_t mrsp;
  logic done;
  int unsigned chk, fail, checks, failures, events;

  tb_axi_rand_master #(
    .req_t(d64_i6_req_t), .rsp_t(d64_i6_rsp_t), .ax_t(d64_i6_ax_t), .w_t(d64_i6_w_t),
    .DW(64), .Base(64'h1000_0000), .NumTxn(60), .MaxLen(7), .MaxId(3), .Narrow(1)
  ) i_m (.clk_i(clk), .rst_ni(rst_n), .req_o(sreq), .rsp_i(srsp),
         .done_o(done), .checks_o(chk), .failures_o(fail));

  axi_cdc dut (.src_clk_i(clk), .src_rst_ni(rst_n), .src_req_i(sreq), .src_rsp_o(srsp),
               .dst_clk_i(clk_m), .dst_rst_ni(rst_n), .dst_req_o(mreq), .dst_rsp_i(mrsp));

  tb_axi_mem #(.req_t(d64_i6_req_t), .rsp_t(d64_i6_rsp_t), .ax_t(d64_i6_ax_t), .DW(64), .ReadyPct(70))
    i_mem (.clk_i(clk_m), .rst_ni(rst_n), .req_i(mreq), .rsp_o(mrsp));
  always @(posedge clk_m) if (rst_n && mreq.w_valid && mrsp.w_ready) events++;
  initial begin
    checks = 0; failures = 0; events = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done);
    repeat (5) @(posedge clk);
    checks += chk + 1;
    failures += fail;
    $display("W beats delivered in the destination domain: %0d", events);
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
