// Testbench of the pipeline cut: random traffic through one cut into a
// memory. Checks data and order, and that the cut is registered: an AW beat
// accepted while the master side shows no AW must appear there one cycle
// later, never in the same cycle.
`include "axi_typedef.svh"
module tb_axi_cut;
  import axi_cfg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

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

  axi_cut dut (.clk_i(clk), .rst_ni(rst_n), .slv_req_i(sreq), .slv_rsp_o(srsp), .mst_req_o(mreq), .mst_rsp_i(mrsp));

  tb_axi_mem #(.req_t(d64_i6_req_t), .rsp_t(d64_i6_rsp_t), .ax_t(d64_i6_ax_t), .DW(64), .ReadyPct(70))
    i_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(mreq), .rsp_o(mrsp));
  always @(posedge clk) if (rst_n && sreq.aw_valid && srsp.aw_ready && !mreq.aw_valid) begin
    events++;
    @(negedge clk);
    checks++;
    if (!mreq.aw_valid) begin failures++; $display("FAIL: cut did not present AW after one cycle"); end
  end
  initial begin
    checks = 0; failures = 0; events = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done);
    repeat (5) @(posedge clk);
    checks += chk + 1;
    failures += fail;
    $display("registered AW beats observed: %0d", events);
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
