// Testbench of the duplex memory controller: two random masters, joined by a
// multiplexer, write and read back disjoint regions through the controller
// into two word-interleaved SRAM banks that grant at random (90%). Checks:
// data, RLAST, per-ID order, B IDs. Counted mechanism: a read and a write
// served in the same cycle by different banks (duplex operation).
`include "axi_typedef.svh"
module tb_axi_to_mem_banked;
  import axi_cfg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  d64_i6_req_t [1:0] sreq;
  d64_i6_rsp_t [1:0] srsp;
  d64_i7_req_t creq;
  d64_i7_rsp_t crsp;
  logic [1:0] done;
  int unsigned chk [2], fail [2];
  int unsigned checks, failures, events;

  // Two masters on disjoint regions, so one reads while the other writes.
  for (genvar i = 0; i < 2; i++) begin : gen_m
    tb_axi_rand_master #(
      .req_t(d64_i6_req_t), .rsp_t(d64_i6_rsp_t), .ax_t(d64_i6_ax_t), .w_t(d64_i6_w_t),
      .DW(64), .Base(64'h1000_0000 + 64'h2_0000 * i), .NumTxn(24), .MaxLen(7), .MaxId(3)
    ) i_m (.clk_i(clk), .rst_ni(rst_n), .req_o(sreq[i]), .rsp_i(srsp[i]),
           .done_o(done[i]), .checks_o(chk[i]), .failures_o(fail[i]));
  end

  axi_mux #(.SlvIdWidth(6), .NoSlvPorts(2), .MaxWTrans(4)) i_mux (
    .clk_i(clk), .rst_ni(rst_n), .slv_reqs_i(sreq), .slv_rsps_o(srsp),
    .mst_req_o(creq), .mst_rsp_i(crsp));

  logic [1:0]        m_req, m_gnt, m_we;
  logic [1:0][13:0]  m_addr;
  logic [1:0][63:0]  m_wdata, m_rdata;
  logic [1:0][7:0]   m_be;

  axi_to_mem_banked #(.AddrWidth(64), .DataWidth(64), .IdWidth(7), .NumBanks(2), .BufDepth(1),
    .BankAddrWidth(14),
    .req_t(d64_i7_req_t), .rsp_t(d64_i7_rsp_t), .ax_t(d64_i7_ax_t), .b_t(d64_i7_b_t), .r_t(d64_i7_r_t)
  ) dut (.clk_i(clk), .rst_ni(rst_n), .slv_req_i(creq), .slv_rsp_o(crsp),
    .mem_req_o(m_req), .mem_gnt_i(m_gnt), .mem_addr_o(m_addr), .mem_we_o(m_we),
    .mem_wdata_o(m_wdata), .mem_be_o(m_be), .mem_rdata_i(m_rdata));

  for (genvar b = 0; b < 2; b++) begin : gen_bank
    sram #(.NumWords(16384), .DataWidth(64)) i_sram (.clk_i(clk), .req_i(m_req[b] && m_gnt[b]),
      .we_i(m_we[b]), .addr_i(m_addr[b]), .wdata_i(m_wdata[b]), .be_i(m_be[b]), .rdata_o(m_rdata[b]));
  end
  always @(negedge clk) m_gnt = {{($urandom_range(99) < 90), ($urandom_range(99) < 90)}};

  // Mechanism: a read and a write served in the same cycle by different banks.
  always @(posedge clk)
    if (rst_n && (&(m_req & m_gnt)) && (m_we[0] != m_we[1])) events++;

  initial begin
    checks = 0; failures = 0; events = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (&done);
    repeat (5) @(posedge clk);
    checks += chk[0] + chk[1] + 1;
    failures += fail[0] + fail[1];
    $display("concurrent read+write cycles: %0d", events);
    if (events == 0) failures++;
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
