// Testbench of the simplex memory controller: two random masters, joined by
// a multiplexer, write and read back disjoint regions of a single-port SRAM
// through the controller. The memory grants at random (80%) and answers one
// cycle after a grant. Checks: every byte read equals what was written, RLAST,
// per-ID order, B IDs. Counted mechanism: the arbiter interleaves read and
// write beats on the single memory port.
`include "axi_typedef.svh"
module tb_axi_to_mem;
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

  logic        m_req, m_gnt, m_we, m_rvalid, busy;
  logic [63:0] m_addr, m_wdata, m_rdata;
  logic [7:0]  m_be;
  logic        last_we, last_valid;

  axi_to_mem #(.AddrWidth(64), .DataWidth(64), .IdWidth(7), .BufDepth(1),
    .req_t(d64_i7_req_t), .rsp_t(d64_i7_rsp_t), .ax_t(d64_i7_ax_t), .b_t(d64_i7_b_t), .r_t(d64_i7_r_t)
  ) dut (.clk_i(clk), .rst_ni(rst_n), .busy_o(busy), .slv_req_i(creq), .slv_rsp_o(crsp),
    .mem_req_o(m_req), .mem_gnt_i(m_gnt), .mem_addr_o(m_addr), .mem_we_o(m_we),
    .mem_wdata_o(m_wdata), .mem_be_o(m_be), .mem_rvalid_i(m_rvalid), .mem_rdata_i(m_rdata));

  // Memory with random grants and one cycle of read latency.
  always @(negedge clk) m_gnt = ($urandom_range(99) < 80);
  sram #(.NumWords(32768), .DataWidth(64)) i_sram (.clk_i(clk), .req_i(m_req && m_gnt),
    .we_i(m_we), .addr_i(m_addr[17:3]), .wdata_i(m_wdata), .be_i(m_be), .rdata_o(m_rdata));
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) m_rvalid <= 1'b0; else m_rvalid <= m_req && m_gnt;

  // Mechanism: the arbiter interleaves read and write beats (a read issued
  // right after a write or the reverse).
  always @(posedge clk) begin
    if (rst_n && m_req && m_gnt) begin
      if (last_valid && last_we != m_we) events++;
      last_we = m_we; last_valid = 1;
    end else last_valid = 0;
  end

  initial begin
    checks = 0; failures = 0; events = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (&done);
    repeat (5) @(posedge clk);
    checks += chk[0] + chk[1] + 1;
    failures += fail[0] + fail[1];
    $display("read/write interleavings: %0d", events);
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
