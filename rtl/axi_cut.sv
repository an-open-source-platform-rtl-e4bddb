// Pipeline cut of an AXI bundle: one spill register on each of the five
// channels, so no combinational path (payload, valid or ready) crosses it.
// Adds one cycle of latency per channel at full throughput. Used optionally
// on every internal bundle of the crossbar and around network junctions.
`include "axi_typedef.svh"
module axi_cut #(
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
  spill_reg #(.T(ax_t)) i_aw (.clk_i, .rst_ni,
    .data_i (slv_req_i.aw), .valid_i (slv_req_i.aw_valid), .ready_o (slv_rsp_o.aw_ready),
    .data_o (mst_req_o.aw), .valid_o (mst_req_o.aw_valid), .ready_i (mst_rsp_i.aw_ready));
  spill_reg #(.T(w_t)) i_w (.clk_i, .rst_ni,
    .data_i (slv_req_i.w), .valid_i (slv_req_i.w_valid), .ready_o (slv_rsp_o.w_ready),
    .data_o (mst_req_o.w), .valid_o (mst_req_o.w_valid), .ready_i (mst_rsp_i.w_ready));
  spill_reg #(.T(b_t)) i_b (.clk_i, .rst_ni,
    .data_i (mst_rsp_i.b), .valid_i (mst_rsp_i.b_valid), .ready_o (mst_req_o.b_ready),
    .data_o (slv_rsp_o.b), .valid_o (slv_rsp_o.b_valid), .ready_i (slv_req_i.b_ready));
  spill_reg #(.T(ax_t)) i_ar (.clk_i, .rst_ni,
    .data_i (slv_req_i.ar), .valid_i (slv_req_i.ar_valid), .ready_o (slv_rsp_o.ar_ready),
    .data_o (mst_req_o.ar), .valid_o (mst_req_o.ar_valid), .ready_i (mst_rsp_i.ar_ready));
  spill_reg #(.T(r_t)) i_r (.clk_i, .rst_ni,
    .data_i (mst_rsp_i.r), .valid_i (mst_rsp_i.r_valid), .ready_o (mst_req_o.r_ready),
    .data_o (slv_rsp_o.r), .valid_o (slv_rsp_o.r_valid), .ready_i (slv_req_i.r_ready));
endmodule
