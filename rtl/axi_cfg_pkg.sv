// Default bundle flavours of the platform. Each module's type parameters
// default to one of these so that it elaborates on its own; users pass their
// own flavours defined with `AXI_TYPEDEF_W. Naming: a<address>_d<data>_i<ID>.
// 64-bit address and data and 6-bit slave-port IDs are the platform's
// evaluation defaults.
`include "axi_typedef.svh"
package axi_cfg_pkg;
  `AXI_TYPEDEF_W(d64_i6,  64, 6, 64)
  `AXI_TYPEDEF_W(d64_i7,  64, 7, 64)
  `AXI_TYPEDEF_W(d64_i8,  64, 8, 64)
  `AXI_TYPEDEF_W(d64_i4,  64, 4, 64)
  `AXI_TYPEDEF_W(d64_i2,  64, 2, 64)
  `AXI_TYPEDEF_W(d128_i6, 64, 6, 128)
  `AXI_TYPEDEF_W(d32_i6,  64, 6, 32)
  // Flavours of the quadrant example: 512-bit DMA network, 64-bit core network.
  `AXI_TYPEDEF_W(d512_i6,  64, 6, 512)
  `AXI_TYPEDEF_W(d512_i9,  64, 9, 512)
  `AXI_TYPEDEF_W(d512_i10, 64, 10, 512)
  `AXI_TYPEDEF_W(d64_i9,   64, 9, 64)

  // A 1D transfer for the DMA backend: copy num_bytes from src to dst.
  typedef struct packed {
    logic [63:0] src_addr;
    logic [63:0] dst_addr;
    logic [31:0] num_bytes;
  } dma_transfer_t;
endpackage
