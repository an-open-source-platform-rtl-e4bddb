// Testbench of the network demultiplexer: a random master whose 4 KiB
// regions alternate between two master ports (select = address bit 12, the
// region index LSB) writes and reads back through a 1-to-2 demux into two
// behavioural memories. Checks data, per-ID order across ports (O2), that
// each memory only sees its own addresses, and that the same-ID rule made
// commands wait at least once.
`include "axi_typedef.svh"
module tb_axi_demux;
  import axi_cfg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  d64_i6_req_t sreq;
  d64_i6_rsp_t srsp;
  d64_i6_req_t [1:0] mreq;
  d64_i6_rsp_t [1:0] mrsp;
  logic done;
  int unsigned chk, fail, checks, failures, id_stalls;

  tb_axi_rand_master #(
    .req_t(d64_i6_req_t), .rsp_t(d64_i6_rsp_t), .ax_t(d64_i6_ax_t), .w_t(d64_i6_w_t),
    .DW(64), .Base(64'h1000_0000), .NumTxn(80), .MaxLen(3), .MaxId(1), .ValidPct(90)
  ) i_m (.clk_i(clk), .rst_ni(rst_n), .req_o(sreq), .rsp_i(srsp),
         .done_o(done), .checks_o(chk), .failures_o(fail));

  axi_demux #(.IdWidth(6), .NoMstPorts(2), .MaxTrans(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .slv_req_i(sreq),
    .slv_aw_select_i(sreq.aw.addr[12]), .slv_ar_select_i(sreq.ar.addr[12]),
    .slv_rsp_o(srsp), .mst_reqs_o(mreq), .mst_rsps_i(mrsp));

  for (genvar i = 0; i < 2; i++) begin : gen_mem
    tb_axi_mem #(.req_t(d64_i6_req_t), .rsp_t(d64_i6_rsp_t), .ax_t(d64_i6_ax_t), .DW(64), .ReadyPct(40 + 40 * i))
      i_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(mreq[i]), .rsp_o(mrsp[i]));
    always @(posedge clk) if (rst_n) begin
      if (mreq[i].aw_valid && mrsp[i].aw_ready) begin
        checks++;
        if (mreq[i].aw.addr[12] != 1'(i)) begin failures++; $display("FAIL AW to wrong port"); end
      end
      if (mreq[i].ar_valid && mrsp[i].ar_ready) begin
        checks++;
        if (mreq[i].ar.addr[12] != 1'(i)) begin failures++; $display("FAIL AR to wrong port"); end
      end
    end
  end
  // A command blocked by the same-ID rule: valid upstream, target port ready, not accepted.
  always @(posedge clk) if (rst_n && sreq.ar_valid && !srsp.ar_ready && mrsp[sreq.ar.addr[12]].ar_ready) id_stalls++;

  initial begin
    checks = 0; failures = 0; id_stalls = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done);
    repeat (5) @(posedge clk);
    checks += chk + 1;
    failures += fail;
    $display("same-ID stalls: %0d", id_stalls);
    if (id_stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks + chk, failures + fail + 1);
    $finish;
  end
endmodule
