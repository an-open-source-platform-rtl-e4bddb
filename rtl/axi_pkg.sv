// Shared AXI definitions of the on-chip communication platform: field types,
// burst and response encodings (AXI5 values), helpers to compute beat
// addresses, and the address-map rule used by the crossbar's decoders.
// Field set: the platform carries ID, address, length, size, burst and QoS on
// commands; lock, cache, prot, region, user and atomics are left out.
package axi_pkg;
  typedef logic [7:0] len_t;
  typedef logic [2:0] size_t;
  typedef logic [1:0] burst_t;
  typedef logic [1:0] resp_t;
  typedef logic [3:0] qos_t;

  localparam burst_t BURST_FIXED = 2'b00;
  localparam burst_t BURST_INCR  = 2'b01;
  localparam burst_t BURST_WRAP  = 2'b10;

  localparam resp_t RESP_OKAY   = 2'b00;
  localparam resp_t RESP_EXOKAY = 2'b01;
  localparam resp_t RESP_SLVERR = 2'b10;
  localparam resp_t RESP_DECERR = 2'b11;

  // Maximum number of beats in one burst and the boundary no burst may cross.
  localparam int unsigned MaxBurstBeats = 256;
  localparam int unsigned BoundaryBytes = 4096;

  // Address of the next beat after a beat at `addr`, for a burst that started
  // at `start` with `len`, `size` and `burst` (FIXED, INCR or WRAP).
  function automatic logic [63:0] next_addr(logic [63:0] addr, logic [63:0] start,
                                            len_t len, size_t size, burst_t burst);
    logic [63:0] nbytes, aligned, wrap_sz, wrap_base;
    nbytes  = 64'd1 << size;
    aligned = (addr >> size) << size;
    unique case (burst)
      BURST_FIXED: return addr;
      BURST_WRAP: begin
        wrap_sz   = nbytes * (64'(len) + 64'd1);
        wrap_base = (start / wrap_sz) * wrap_sz;
        if (aligned + nbytes >= wrap_base + wrap_sz) return wrap_base;
        return aligned + nbytes;
      end
      default: return aligned + nbytes;
    endcase
  endfunction

  // The worse of two responses (DECERR > SLVERR > EXOKAY > OKAY).
  function automatic resp_t resp_max(resp_t a, resp_t b);
    return (a > b) ? a : b;
  endfunction

  // One address-map rule of a crossbar: [start_addr, end_addr) maps to idx.
  typedef struct packed {
    logic [31:0] idx;
    logic [63:0] start_addr;
    logic [63:0] end_addr;
  } xbar_rule_t;
endpackage
