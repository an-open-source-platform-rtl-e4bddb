// Single-port SRAM bank: one read or one write per cycle, byte enables on
// writes, read data registered (available the cycle after the request).
// Stands in for a technology SRAM macro; written as a plain array so that it
// simulates and synthesises to a memory. Contents are not reset.
module sram #(
  parameter int unsigned NumWords  = 1024,
  parameter int unsigned DataWidth = 64,
  localparam int unsigned AddrW = NumWords > 1 ? $clog2(NumWords) : 1
) (
  input  logic                   clk_i,
  input  logic                   req_i,
  input  logic                   we_i,
  input  logic [AddrW-1:0]       addr_i,
  input  logic [DataWidth-1:0]   wdata_i,
  input  logic [DataWidth/8-1:0] be_i,
  output logic [DataWidth-1:0]   rdata_o
);
  logic [DataWidth-1:0] mem_q [NumWords];
  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int unsigned b = 0; b < DataWidth / 8; b++)
          if (be_i[b]) mem_q[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
      end else begin
        rdata_o <= mem_q[addr_i];
      end
    end
  end
endmodule
