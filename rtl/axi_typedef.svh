// Type-definition macros for the AXI bundles used throughout the platform.
// One macro call defines the command (AW and AR share one struct), write data,
// write response and read response channel structs plus the request and
// response bundle structs of one port flavour (address, ID, data widths).
`ifndef AXI_TYPEDEF_SVH
`define AXI_TYPEDEF_SVH

`define AXI_TYPEDEF_ALL(__name, __addr_t, __id_t, __data_t, __strb_t) \
  typedef struct packed {                                               \
    __id_t             id;                                              \
    __addr_t           addr;                                            \
    axi_pkg::len_t     len;                                             \
    axi_pkg::size_t    size;                                            \
    axi_pkg::burst_t   burst;                                           \
    axi_pkg::qos_t     qos;                                             \
  } __name``_ax_t;                                                      \
  typedef struct packed {                                               \
    __data_t           data;                                            \
    __strb_t           strb;                                            \
    logic              last;                                            \
  } __name``_w_t;                                                       \
  typedef struct packed {                                               \
    __id_t             id;                                              \
    axi_pkg::resp_t    resp;                                            \
  } __name``_b_t;                                                       \
  typedef struct packed {                                               \
    __id_t             id;                                              \
    __data_t           data;                                            \
    axi_pkg::resp_t    resp;                                            \
    logic              last;                                            \
  } __name``_r_t;                                                       \
  typedef struct packed {                                               \
    __name``_ax_t      aw;                                              \
    logic              aw_valid;                                        \
    __name``_w_t       w;                                               \
    logic              w_valid;                                         \
    logic              b_ready;                                         \
    __name``_ax_t      ar;                                              \
    logic              ar_valid;                                        \
    logic              r_ready;                                         \
  } __name``_req_t;                                                     \
  typedef struct packed {                                               \
    logic              aw_ready;                                        \
    logic              w_ready;                                         \
    __name``_b_t       b;                                               \
    logic              b_valid;                                         \
    logic              ar_ready;                                        \
    __name``_r_t       r;                                               \
    logic              r_valid;                                         \
  } __name``_rsp_t;

// Shorthand: all types of one flavour from plain widths.
`define AXI_TYPEDEF_W(__name, __aw, __iw, __dw)                          \
  `AXI_TYPEDEF_ALL(__name, logic [(__aw)-1:0], logic [(__iw)-1:0],       \
                   logic [(__dw)-1:0], logic [(__dw)/8-1:0])

// Assertion of the stability rule (F1) on one valid/ready channel.
`define AXI_ASSERT_STABLE(__clk, __rst_n, __valid, __ready, __payload, __msg) \
  assert property (@(posedge __clk) disable iff (!__rst_n)                 \
    (__valid && !__ready) |=> (__valid && $stable(__payload))) else        \
    $error(__msg);

`endif
