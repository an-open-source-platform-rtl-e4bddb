// Testbench of the crossbar: 4x4, pipelined, with every slave port sending
// traffic to all four memories (transaction k goes to master port k % 4) and
// one slave port also to an unmapped window that must end at the error slave
// with DECERR. Checks data, per-ID order, DECERR responses, and that every
// master-side ID carries the slave-port index in its MSBs.
`include "axi_typedef.svh"
module tb_axi_xbar;
  import axi_cfg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int S = 4, M = 4;

  d64_i6_req_t [S-1:0] sreq;
  d64_i6_rsp_t [S-1:0] srsp;
  d64_i8_req_t [M-1:0] mreq;
  d64_i8_rsp_t [M-1:0] mrsp;
  axi_pkg::xbar_rule_t [M-1:0] map;
  logic [S-1:0] done;
  int unsigned chk [S], fail [S];
  int unsigned checks, failures;

  for (genvar i = 0; i < S; i++) begin : gen_m
    tb_axi_rand_master #(
      .req_t(d64_i6_req_t), .rsp_t(d64_i6_rsp_t), .ax_t(d64_i6_ax_t), .w_t(d64_i6_w_t),
      .DW(64), .Base(64'h0100_0000 * i), .NumTxn(40), .MaxLen(7), .MaxId(3),
      .NumWindows(i == 3 ? 5 : 4), .WinStride(64'h1000_0000), .ErrWindow(i == 3 ? 4 : -1)
    ) i_m (.clk_i(clk), .rst_ni(rst_n), .req_o(sreq[i]), .rsp_i(srsp[i]),
           .done_o(done[i]), .checks_o(chk[i]), .failures_o(fail[i]));
  end
  for (genvar m = 0; m < M; m++) begin : gen_map
    assign map[m] = '{idx: 32'(m), start_addr: 64'h1000_0000 * m, end_addr: 64'h1000_0000 * (m + 1)};
  end

  axi_xbar #(.NoSlvPorts(S), .NoMstPorts(M), .SlvIdWidth(6), .NoAddrRules(M), .PipelineCuts(1'b1)) dut (
    .clk_i(clk), .rst_ni(rst_n), .slv_reqs_i(sreq), .slv_rsps_o(srsp),
    .mst_reqs_o(mreq), .mst_rsps_i(mrsp), .addr_map_i(map), .default_mst_port_i('0));

  for (genvar m = 0; m < M; m++) begin : gen_mem
    tb_axi_mem #(.req_t(d64_i8_req_t), .rsp_t(d64_i8_rsp_t), .ax_t(d64_i8_ax_t), .DW(64))
      i_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(mreq[m]), .rsp_o(mrsp[m]));
    always @(posedge clk) if (rst_n && mreq[m].aw_valid && mrsp[m].aw_ready) begin
      checks++;
      if (mreq[m].aw.id[7:6] != mreq[m].aw.addr[25:24] || mreq[m].aw.addr[29:28] != 2'(m)) begin
        failures++; $display("FAIL master %0d got AW id %h addr %h", m, mreq[m].aw.id, mreq[m].aw.addr);
      end
    end
  end

  initial begin
    checks = 0; failures = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (&done);
    repeat (5) @(posedge clk);
    for (int i = 0; i < S; i++) begin checks += chk[i]; failures += fail[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (300000) @(posedge clk);
    for (int i = 0; i < S; i++) begin checks += chk[i]; failures += fail[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
