// Clock domain crossing for an AXI bundle. The slave port (src_*) is
// synchronous to src_clk_i, the master port (dst_*) to dst_clk_i. Each of the
// five channels goes through its own cdc_fifo_gray: AW, W and AR from the
// source to the destination domain, B and R back. Every FIFO has a
// Gray-coded write counter in its push domain and a Gray-coded read counter
// in its pop domain, each synchronised into the other domain by two
// flip-flops. Depth 2**LogDepth per channel (this design's default: 8).
// Latency is about three cycles of the receiving clock per channel.
`include "axi_typedef.svh"
module axi_cdc #(
  parameter int unsigned LogDepth = 3,
  parameter type req_t = axi_cfg_pkg::d64_i6_req_t,
  parameter type rsp_t = axi_cfg_pkg::d64_i6_rsp_t,
  parameter type ax_t  = axi_cfg_pkg::d64_i6_ax_t,
  parameter type w_t   = axi_cfg_pkg::d64_i6_w_t,
  parameter type b_t   = axi_cfg_pkg::d64_i6_b_t,
  parameter type r_t   = axi_cfg_pkg::d64_i6_r_t
) (
  input  logic src_clk_i,
  input  logic src_rst_ni,
  input  req_t src_req_i,
  output rsp_t src_rsp_o,
  input  logic dst_clk_i,
  input  logic dst_rst_ni,
  output req_t dst_req_o,
  input  rsp_t dst_rsp_i
);
  cdc_fifo_gray #(.T (ax_t), .LogDepth (LogDepth)) i_aw (
    .src_clk_i, .src_rst_ni, .src_data_i (src_req_i.aw), .src_valid_i (src_req_i.aw_valid), .src_ready_o (src_rsp_o.aw_ready),
    .dst_clk_i, .dst_rst_ni, .dst_data_o (dst_req_o.aw), .dst_valid_o (dst_req_o.aw_valid), .dst_ready_i (dst_rsp_i.aw_ready));
  cdc_fifo_gray #(.T (w_t), .LogDepth (LogDepth)) i_w (
    .src_clk_i, .src_rst_ni, .src_data_i (src_req_i.w), .src_valid_i (src_req_i.w_valid), .src_ready_o (src_rsp_o.w_ready),
    .dst_clk_i, .dst_rst_ni, .dst_data_o (dst_req_o.w), .dst_valid_o (dst_req_o.w_valid), .dst_ready_i (dst_rsp_i.w_ready));
  cdc_fifo_gray #(.T (ax_t), .LogDepth (LogDepth)) i_ar (
    .src_clk_i, .src_rst_ni, .src_data_i (src_req_i.ar), .src_valid_i (src_req_i.ar_valid), .src_ready_o (src_rsp_o.ar_ready),
    .dst_clk_i, .dst_rst_ni, .dst_data_o (dst_req_o.ar), .dst_valid_o (dst_req_o.ar_valid), .dst_ready_i (dst_rsp_i.ar_ready));
  cdc_fifo_gray #(.T (b_t), .LogDepth (LogDepth)) i_b (
    .src_clk_i (dst_clk_i), .src_rst_ni (dst_rst_ni), .src_data_i (dst_rsp_i.b), .src_valid_i (dst_rsp_i.b_valid), .src_ready_o (dst_req_o.b_ready),
    .dst_clk_i (src_clk_i), .dst_rst_ni (src_rst_ni), .dst_data_o (src_rsp_o.b), .dst_valid_o (src_rsp_o.b_valid), .dst_ready_i (src_req_i.b_ready));
  cdc_fifo_gray #(.T (r_t), .LogDepth (LogDepth)) i_r (
    .src_clk_i (dst_clk_i), .src_rst_ni (dst_rst_ni), .src_data_i (dst_rsp_i.r), .src_valid_i (dst_rsp_i.r_valid), .src_ready_o (dst_req_o.r_ready),
    .dst_clk_i (src_clk_i), .dst_rst_ni (src_rst_ni), .dst_data_o (src_rsp_o.r), .dst_valid_o (src_rsp_o.r_valid), .dst_ready_i (src_req_i.r_ready));
endmodule
