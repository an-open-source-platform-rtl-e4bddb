// ID serializer: reduces the ID width when the input ID space is densely used
// (more unique input IDs than 2**MstIdWidth output IDs). Input ID x is
// assigned output ID f(x) = x mod 2**MstIdWidth, so transactions whose IDs
// share f(x) become ordered (serialized) while staying outstanding
// concurrently. Per direction and output ID a FIFO of MaxTxnsPerId entries
// records the original IDs in command order; a B beat or the last R beat with
// output ID j pops FIFO j and gets its original ID back (valid because the
// downstream returns responses with equal IDs in order, O2). A command waits
// while its FIFO is full. W beats pass through.
//
// The paper builds this from a counter-less network demux (select = f(ID)),
// one ID FIFO per output ID with the ID truncated to zero, and a network mux
// that prepends the FIFO index. With a single slave port that composition is
// equivalent to what is written here directly: the output ID is the FIFO
// index, the FIFOs reflect the IDs. f = ID modulo N is the paper's example.
`include "axi_typedef.svh"
module axi_id_serialize #(
  parameter int unsigned SlvIdWidth   = 6,
  parameter int unsigned MstIdWidth   = 2,
  parameter int unsigned MaxTxnsPerId = 8,
  parameter type slv_req_t = axi_cfg_pkg::d64_i6_req_t,
  parameter type slv_rsp_t = axi_cfg_pkg::d64_i6_rsp_t,
  parameter type mst_req_t = axi_cfg_pkg::d64_i2_req_t,
  parameter type mst_rsp_t = axi_cfg_pkg::d64_i2_rsp_t
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  slv_req_t slv_req_i,
  output slv_rsp_t slv_rsp_o,
  output mst_req_t mst_req_o,
  input  mst_rsp_t mst_rsp_i
);
  localparam int unsigned NumIds = 2 ** MstIdWidth;
  typedef logic [SlvIdWidth-1:0] id_t;

  logic [MstIdWidth-1:0] aw_j, ar_j, b_j, r_j;
  logic [NumIds-1:0] w_push_rdy, r_push_rdy;
  id_t  [NumIds-1:0] w_head, r_head;
  logic aw_hs, ar_hs, b_hs, r_hs;

  assign aw_j = slv_req_i.aw.id[MstIdWidth-1:0];
  assign ar_j = slv_req_i.ar.id[MstIdWidth-1:0];
  assign b_j  = mst_rsp_i.b.id;
  assign r_j  = mst_rsp_i.r.id;

  for (genvar j = 0; j < NumIds; j++) begin : gen_fifo
    stream_fifo #(.T (id_t), .Depth (MaxTxnsPerId)) i_w_ids (
      .clk_i, .rst_ni,
      .data_i (slv_req_i.aw.id), .valid_i (aw_hs && aw_j == MstIdWidth'(j)), .ready_o (w_push_rdy[j]),
      .data_o (w_head[j]), .valid_o (), .ready_i (b_hs && b_j == MstIdWidth'(j)), .usage_o ()
    );
    stream_fifo #(.T (id_t), .Depth (MaxTxnsPerId)) i_r_ids (
      .clk_i, .rst_ni,
      .data_i (slv_req_i.ar.id), .valid_i (ar_hs && ar_j == MstIdWidth'(j)), .ready_o (r_push_rdy[j]),
      .data_o (r_head[j]), .valid_o (), .ready_i (r_hs && r_j == MstIdWidth'(j)), .usage_o ()
    );
  end

  always_comb begin
    mst_req_o          = '0;
    mst_req_o.aw.id    = aw_j;
    mst_req_o.aw.addr  = slv_req_i.aw.addr;
    mst_req_o.aw.len   = slv_req_i.aw.len;
    mst_req_o.aw.size  = slv_req_i.aw.size;
    mst_req_o.aw.burst = slv_req_i.aw.burst;
    mst_req_o.aw.qos   = slv_req_i.aw.qos;
    mst_req_o.aw_valid = slv_req_i.aw_valid && w_push_rdy[aw_j];
    mst_req_o.w        = slv_req_i.w;
    mst_req_o.w_valid  = slv_req_i.w_valid;
    mst_req_o.b_ready  = slv_req_i.b_ready;
    mst_req_o.ar.id    = ar_j;
    mst_req_o.ar.addr  = slv_req_i.ar.addr;
    mst_req_o.ar.len   = slv_req_i.ar.len;
    mst_req_o.ar.size  = slv_req_i.ar.size;
    mst_req_o.ar.burst = slv_req_i.ar.burst;
    mst_req_o.ar.qos   = slv_req_i.ar.qos;
    mst_req_o.ar_valid = slv_req_i.ar_valid && r_push_rdy[ar_j];
    mst_req_o.r_ready  = slv_req_i.r_ready;

    slv_rsp_o          = '0;
    slv_rsp_o.aw_ready = w_push_rdy[aw_j] && mst_rsp_i.aw_ready;
    slv_rsp_o.w_ready  = mst_rsp_i.w_ready;
    slv_rsp_o.b.id     = w_head[b_j];
    slv_rsp_o.b.resp   = mst_rsp_i.b.resp;
    slv_rsp_o.b_valid  = mst_rsp_i.b_valid;
    slv_rsp_o.ar_ready = r_push_rdy[ar_j] && mst_rsp_i.ar_ready;
    slv_rsp_o.r.id     = r_head[r_j];
    slv_rsp_o.r.data   = mst_rsp_i.r.data;
    slv_rsp_o.r.resp   = mst_rsp_i.r.resp;
    slv_rsp_o.r.last   = mst_rsp_i.r.last;
    slv_rsp_o.r_valid  = mst_rsp_i.r_valid;
  end

  assign aw_hs = mst_req_o.aw_valid && mst_rsp_i.aw_ready;
  assign ar_hs = mst_req_o.ar_valid && mst_rsp_i.ar_ready;
  assign b_hs  = mst_rsp_i.b_valid && slv_req_i.b_ready;
  assign r_hs  = mst_rsp_i.r_valid && slv_req_i.r_ready && mst_rsp_i.r.last;
endmodule
