// Duplex memory controller: serves reads and writes at the same time by
// splitting the AXI port (writes to port 1, reads to port 0; a demultiplexer
// with constant selects, which is plain wiring) into two simplex memory
// controllers, whose memory ports go through
// a memory interconnect to NumBanks word-interleaved single-port banks.
// Reads and writes that hit different banks proceed in the same cycle; on a
// bank conflict the interconnect arbitrates round robin.
//
// Interface: AXI slave port; per bank a req/gnt request port with word
// address inside the bank, write enable, data and byte enables, and read data
// returned the cycle after the grant (single-cycle SRAM).
//
// From the paper (Fig. 12): demux with write select 1 and read select 0, two
// simplex controllers, logarithmic interconnect, banked memory. Choices here:
// NumBanks defaults to 2 (the evaluated configuration; the figure draws 4),
// the interconnect is a flat per-bank round-robin arbiter.
`include "axi_typedef.svh"
module axi_to_mem_banked #(
  parameter int unsigned AddrWidth = 64,
  parameter int unsigned DataWidth = 64,
  parameter int unsigned IdWidth   = 6,
  parameter int unsigned NumBanks  = 2,
  parameter int unsigned BufDepth  = 1,
  parameter int unsigned BankAddrWidth = 10,
  parameter type req_t = axi_cfg_pkg::d64_i6_req_t,
  parameter type rsp_t = axi_cfg_pkg::d64_i6_rsp_t,
  parameter type ax_t  = axi_cfg_pkg::d64_i6_ax_t,
  parameter type b_t   = axi_cfg_pkg::d64_i6_b_t,
  parameter type r_t   = axi_cfg_pkg::d64_i6_r_t,
  localparam int unsigned NB = DataWidth / 8
) (
  input  logic                                   clk_i,
  input  logic                                   rst_ni,
  input  req_t                                   slv_req_i,
  output rsp_t                                   slv_rsp_o,
  output logic [NumBanks-1:0]                    mem_req_o,
  input  logic [NumBanks-1:0]                    mem_gnt_i,
  output logic [NumBanks-1:0][BankAddrWidth-1:0] mem_addr_o,
  output logic [NumBanks-1:0]                    mem_we_o,
  output logic [NumBanks-1:0][DataWidth-1:0]     mem_wdata_o,
  output logic [NumBanks-1:0][NB-1:0]            mem_be_o,
  input  logic [NumBanks-1:0][DataWidth-1:0]     mem_rdata_i
);
  // The demultiplexer of the paper with constant selects: the write channels
  // (AW, W, B) go to controller 1, the read channels (AR, R) to controller 0.
  // With fixed selects no ordering table is needed, so it reduces to wiring.
  req_t [1:0] sub_req;
  rsp_t [1:0] sub_rsp;
  always_comb begin
    sub_req[0]          = '0;
    sub_req[0].ar       = slv_req_i.ar;
    sub_req[0].ar_valid = slv_req_i.ar_valid;
    sub_req[0].r_ready  = slv_req_i.r_ready;
    sub_req[1]          = '0;
    sub_req[1].aw       = slv_req_i.aw;
    sub_req[1].aw_valid = slv_req_i.aw_valid;
    sub_req[1].w        = slv_req_i.w;
    sub_req[1].w_valid  = slv_req_i.w_valid;
    sub_req[1].b_ready  = slv_req_i.b_ready;
    slv_rsp_o           = '0;
    slv_rsp_o.ar_ready  = sub_rsp[0].ar_ready;
    slv_rsp_o.r         = sub_rsp[0].r;
    slv_rsp_o.r_valid   = sub_rsp[0].r_valid;
    slv_rsp_o.aw_ready  = sub_rsp[1].aw_ready;
    slv_rsp_o.w_ready   = sub_rsp[1].w_ready;
    slv_rsp_o.b         = sub_rsp[1].b;
    slv_rsp_o.b_valid   = sub_rsp[1].b_valid;
  end

  logic [1:0]                      c_req, c_gnt, c_we, c_rvalid;
  logic [1:0][AddrWidth-1:0]       c_addr;
  logic [1:0][DataWidth-1:0]       c_wdata, c_rdata;
  logic [1:0][NB-1:0]              c_be;

  for (genvar i = 0; i < 2; i++) begin : gen_ctrl
    axi_to_mem #(
      .AddrWidth (AddrWidth), .DataWidth (DataWidth), .IdWidth (IdWidth),
      .BufDepth (BufDepth),
      .req_t (req_t), .rsp_t (rsp_t), .ax_t (ax_t), .b_t (b_t), .r_t (r_t)
    ) i_ctrl (
      .clk_i, .rst_ni, .busy_o (),
      .slv_req_i (sub_req[i]), .slv_rsp_o (sub_rsp[i]),
      .mem_req_o (c_req[i]), .mem_gnt_i (c_gnt[i]), .mem_addr_o (c_addr[i]),
      .mem_we_o (c_we[i]), .mem_wdata_o (c_wdata[i]), .mem_be_o (c_be[i]),
      .mem_rvalid_i (c_rvalid[i]), .mem_rdata_i (c_rdata[i])
    );
  end

  mem_interconnect #(
    .NumIn (2), .NumBanks (NumBanks), .AddrWidth (AddrWidth),
    .DataWidth (DataWidth), .BankAddrWidth (BankAddrWidth)
  ) i_icn (
    .clk_i, .rst_ni,
    .in_req_i (c_req), .in_gnt_o (c_gnt), .in_addr_i (c_addr), .in_we_i (c_we),
    .in_wdata_i (c_wdata), .in_be_i (c_be), .in_rvalid_o (c_rvalid), .in_rdata_o (c_rdata),
    .bank_req_o (mem_req_o), .bank_gnt_i (mem_gnt_i), .bank_addr_o (mem_addr_o),
    .bank_we_o (mem_we_o), .bank_wdata_o (mem_wdata_o), .bank_be_o (mem_be_o),
    .bank_rdata_i (mem_rdata_i)
  );
endmodule
