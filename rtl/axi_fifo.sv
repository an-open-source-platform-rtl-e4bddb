// Input queue of an AXI bundle: one FIFO of Depth entries on each of the five
// channels (Depth 0 turns it into wires). Used as the optional, configurable
// depth queue on every crosspoint slave port to absorb backpressure; the head
// of each FIFO appears one cycle after it was pushed.
`include "axi_typedef.svh"
module axi_fifo #(
  parameter int unsigned Depth = 2,
  parameter type req_t = axi_cfg_pkg::d64_i6_req_t,
  parameter type rsp_t = axi_cfg_pkg::d64_i6_rsp_t,
  parameter type ax_t  = axi_cfg_pkg::d64_i6_ax_t,
  parameter type w_t   = axi_cfg_pkg::d64_i6_w_t,
  parameter type b_t   = axi_cfg_pkg::d64_i6_b_t,
  parameter type r_t   = axi_cfg_pkg::d64_i6_r_t
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  req_t slv_req_i,
  output rsp_t slv_rsp_o,
  output req_t mst_req_o,
  input  rsp_t mst_rsp_i
);
  stream_fifo #(.T(ax_t), .Depth(Depth)) i_aw (.clk_i, .rst_ni,
    .data_i (slv_req_i.aw), .valid_i (slv_req_i.aw_valid), .ready_o (slv_rsp_o.aw_ready),
    .data_o (mst_req_o.aw), .valid_o (mst_req_o.aw_valid), .ready_i (mst_rsp_i.aw_ready), .usage_o ());
  stream_fifo #(.T(w_t), .Depth(Depth)) i_w (.clk_i, .rst_ni,
    .data_i (slv_req_i.w), .valid_i (slv_req_i.w_valid), .ready_o (slv_rsp_o.w_ready),
    .data_o (mst_req_o.w), .valid_o (mst_req_o.w_valid), .ready_i (mst_rsp_i.w_ready), .usage_o ());
  stream_fifo #(.T(b_t), .Depth(Depth)) i_b (.clk_i, .rst_ni,
    .data_i (mst_rsp_i.b), .valid_i (mst_rsp_i.b_valid), .ready_o (mst_req_o.b_ready),
    .data_o (slv_rsp_o.b), .valid_o (slv_rsp_o.b_valid), .ready_i (slv_req_i.b_ready), .usage_o ());
  stream_fifo #(.T(ax_t), .Depth(Depth)) i_ar (.clk_i, .rst_ni,
    .data_i (slv_req_i.ar), .valid_i (slv_req_i.ar_valid), .ready_o (slv_rsp_o.ar_ready),
    .data_o (mst_req_o.ar), .valid_o (mst_req_o.ar_valid), .ready_i (mst_rsp_i.ar_ready), .usage_o ());
  stream_fifo #(.T(r_t), .Depth(Depth)) i_r (.clk_i, .rst_ni,
    .data_i (mst_rsp_i.r), .valid_i (mst_rsp_i.r_valid), .ready_o (mst_req_o.r_ready),
    .data_o (slv_rsp_o.r), .valid_o (slv_rsp_o.r_valid), .ready_i (slv_req_i.r_ready), .usage_o ());
endmodule
