// Testbench of the network multiplexer: two random masters with overlapping
// ID ranges write and read back through a 2-to-1 mux into a behavioural
// memory. Data integrity, response routing by ID MSB, per-ID order and the
// W-after-AW ordering are checked; the memory sees master-side IDs that must
// carry the port index in their MSB.
`include "axi_typedef.svh"
module tb_axi_mux;
  import axi_cfg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  d64_i6_req_t [1:0] sreq;
  d64_i6_rsp_t [1:0] srsp;
  d64_i7_req_t mreq;
  d64_i7_rsp_t mrsp;
  logic [1:0] done;
  int unsigned chk [2], fail [2];
  int unsigned checks, failures, id_msb_seen [2];

  for (genvar i = 0; i < 2; i++) begin : gen_m
    tb_axi_rand_master #(
      .req_t(d64_i6_req_t), .rsp_t(d64_i6_rsp_t), .ax_t(d64_i6_ax_t), .w_t(d64_i6_w_t),
      .DW(64), .Base(64'h1000_0000 * (i + 1)), .NumTxn(40), .MaxLen(7), .MaxId(3)
    ) i_m (.clk_i(clk), .rst_ni(rst_n), .req_o(sreq[i]), .rsp_i(srsp[i]),
           .done_o(done[i]), .checks_o(chk[i]), .failures_o(fail[i]));
  end

  axi_mux #(.SlvIdWidth(6), .NoSlvPorts(2), .MaxWTrans(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .slv_reqs_i(sreq), .slv_rsps_o(srsp),
    .mst_req_o(mreq), .mst_rsp_i(mrsp));

  tb_axi_mem #(.req_t(d64_i7_req_t), .rsp_t(d64_i7_rsp_t), .ax_t(d64_i7_ax_t), .DW(64))
    i_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(mreq), .rsp_o(mrsp));

  // The ID MSB seen by the memory must name the port the address came from.
  always @(posedge clk) if (rst_n && mreq.aw_valid && mrsp.aw_ready) begin
    checks++;
    if (mreq.aw.id[6] != (mreq.aw.addr[31:28] == 4'h2)) begin
      failures++;
      $display("FAIL: AW ID MSB %0d for address %h", mreq.aw.id[6], mreq.aw.addr);
    end
    id_msb_seen[mreq.aw.id[6]]++;
  end

  initial begin
    checks = 0; failures = 0; id_msb_seen[0] = 0; id_msb_seen[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (&done);
    repeat (5) @(posedge clk);
    checks += chk[0] + chk[1] + 1;
    failures += fail[0] + fail[1];
    if (id_msb_seen[0] == 0 || id_msb_seen[1] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + chk[0] + chk[1], failures + fail[0] + fail[1] + 1);
    $finish;
  end
endmodule
