// Testbench of the error slave: a random master sends bursts of 1 to 16
// beats with random IDs; every write must be answered by one B with DECERR
// and the command's ID after all its W beats, every read by exactly len+1 R
// beats with DECERR, the command's ID and RLAST on the last beat (checked by
// the master's scoreboard). Counted mechanism: DECERR beats returned.
`include "axi_typedef.svh"
module tb_axi_err_slv;
  import axi_cfg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  d64_i6_req_t req;
  d64_i6_rsp_t rsp;
  logic done;
  int unsigned chk, fail, checks, failures, events;

  tb_axi_rand_master #(
    .req_t(d64_i6_req_t), .rsp_t(d64_i6_rsp_t), .ax_t(d64_i6_ax_t), .w_t(d64_i6_w_t),
    .DW(64), .Base(64'h4000_0000), .NumTxn(40), .MaxLen(15), .MaxId(7), .ExpResp(axi_pkg::RESP_DECERR)
  ) i_m (.clk_i(clk), .rst_ni(rst_n), .req_o(req), .rsp_i(rsp),
         .done_o(done), .checks_o(chk), .failures_o(fail));

  axi_err_slv #(.Resp(axi_pkg::RESP_DECERR)) dut (.clk_i(clk), .rst_ni(rst_n), .slv_req_i(req), .slv_rsp_o(rsp));

  always @(posedge clk) if (rst_n) begin
    if (rsp.r_valid && req.r_ready && rsp.r.resp == axi_pkg::RESP_DECERR) events++;
    if (rsp.b_valid && req.b_ready && rsp.b.resp == axi_pkg::RESP_DECERR) events++;
  end

  initial begin
    checks = 0; failures = 0; events = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done);
    repeat (5) @(posedge clk);
    checks += chk + 1;
    failures += fail;
    $display("DECERR responses: %0d", events);
    if (events < 80) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + chk, failures + fail + 1);
    $finish;
  end
endmodule
