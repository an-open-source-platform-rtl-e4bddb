// Crosspoint: a network node whose slave and master ports are isomorphous
// (same ID width IdWidth), so crosspoints compose into arbitrary regular
// topologies. It consists of an optional input queue (axi_fifo of
// InputQueueDepth entries per channel; 0 = none) on each slave port, a
// crossbar whose connections can be omitted with Connectivity (to avoid
// routing loops and unused links), and an ID remapper on every master port
// that shrinks the crossbar's widened IDs (IdWidth + clog2(NoSlvPorts)) back
// to IdWidth with up to MaxUniqIds unique IDs and MaxTxnsPerId transactions
// per ID. All flow control and arbitration is inside the crossbar.
// Structure as in the paper; parameter defaults are this design's choices.
`include "axi_typedef.svh"
module axi_xp #(
  parameter int unsigned NoSlvPorts      = 4,
  parameter int unsigned NoMstPorts      = 4,
  parameter int unsigned IdWidth         = 6,
  parameter int unsigned MaxUniqIds      = 16,
  parameter int unsigned MaxTxnsPerId    = 8,
  parameter int unsigned InputQueueDepth = 2,
  parameter int unsigned NoAddrRules     = 4,
  parameter bit [NoSlvPorts-1:0] EnDefaultMstPort = '0,
  parameter bit [NoSlvPorts-1:0][NoMstPorts-1:0] Connectivity = '1,
  parameter bit PipelineCuts = 1'b1,
  parameter type req_t     = axi_cfg_pkg::d64_i6_req_t,
  parameter type rsp_t     = axi_cfg_pkg::d64_i6_rsp_t,
  parameter type ax_t      = axi_cfg_pkg::d64_i6_ax_t,
  parameter type w_t       = axi_cfg_pkg::d64_i6_w_t,
  parameter type b_t       = axi_cfg_pkg::d64_i6_b_t,
  parameter type r_t       = axi_cfg_pkg::d64_i6_r_t,
  parameter type int_req_t = axi_cfg_pkg::d64_i8_req_t,
  parameter type int_rsp_t = axi_cfg_pkg::d64_i8_rsp_t,
  parameter type int_ax_t  = axi_cfg_pkg::d64_i8_ax_t,
  localparam int unsigned MstSelW = NoMstPorts > 1 ? $clog2(NoMstPorts) : 1
) (
  input  logic                                  clk_i,
  input  logic                                  rst_ni,
  input  req_t [NoSlvPorts-1:0]                 slv_reqs_i,
  output rsp_t [NoSlvPorts-1:0]                 slv_rsps_o,
  output req_t [NoMstPorts-1:0]                 mst_reqs_o,
  input  rsp_t [NoMstPorts-1:0]                 mst_rsps_i,
  input  axi_pkg::xbar_rule_t [NoAddrRules-1:0] addr_map_i,
  input  logic [NoSlvPorts-1:0][MstSelW-1:0]    default_mst_port_i
);
  localparam int unsigned IntIdWidth = IdWidth + (NoSlvPorts > 1 ? $clog2(NoSlvPorts) : 0);
  req_t     [NoSlvPorts-1:0] q_reqs;
  rsp_t     [NoSlvPorts-1:0] q_rsps;
  int_req_t [NoMstPorts-1:0] x_reqs;
  int_rsp_t [NoMstPorts-1:0] x_rsps;

  for (genvar s = 0; s < NoSlvPorts; s++) begin : gen_queue
    axi_fifo #(.Depth (InputQueueDepth), .req_t (req_t), .rsp_t (rsp_t), .ax_t (ax_t),
               .w_t (w_t), .b_t (b_t), .r_t (r_t)) i_queue (
      .clk_i, .rst_ni, .slv_req_i (slv_reqs_i[s]), .slv_rsp_o (slv_rsps_o[s]),
      .mst_req_o (q_reqs[s]), .mst_rsp_i (q_rsps[s]));
  end

  axi_xbar #(
    .NoSlvPorts (NoSlvPorts), .NoMstPorts (NoMstPorts), .SlvIdWidth (IdWidth),
    .MaxMstTrans (MaxTxnsPerId), .MaxWTrans (MaxTxnsPerId), .NoAddrRules (NoAddrRules),
    .EnDefaultMstPort (EnDefaultMstPort), .Connectivity (Connectivity), .PipelineCuts (PipelineCuts),
    .slv_req_t (req_t), .slv_rsp_t (rsp_t), .slv_ax_t (ax_t), .w_t (w_t), .slv_b_t (b_t), .slv_r_t (r_t),
    .mst_req_t (int_req_t), .mst_rsp_t (int_rsp_t), .mst_ax_t (int_ax_t)
  ) i_xbar (
    .clk_i, .rst_ni, .slv_reqs_i (q_reqs), .slv_rsps_o (q_rsps),
    .mst_reqs_o (x_reqs), .mst_rsps_i (x_rsps), .addr_map_i, .default_mst_port_i
  );

  for (genvar m = 0; m < NoMstPorts; m++) begin : gen_remap
    axi_id_remap #(
      .SlvIdWidth (IntIdWidth), .MaxUniqIds (MaxUniqIds), .MaxTxnsPerId (MaxTxnsPerId),
      .MstIdWidth (IdWidth), .slv_req_t (int_req_t), .slv_rsp_t (int_rsp_t),
      .mst_req_t (req_t), .mst_rsp_t (rsp_t)
    ) i_remap (
      .clk_i, .rst_ni, .slv_req_i (x_reqs[m]), .slv_rsp_o (x_rsps[m]),
      .mst_req_o (mst_reqs_o[m]), .mst_rsp_i (mst_rsps_i[m]));
  end
endmodule
