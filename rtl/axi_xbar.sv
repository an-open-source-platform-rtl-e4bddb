// Crossbar: connects NoSlvPorts slave ports to NoMstPorts master ports.
//
// Every slave port has two address decoders (one for AW, one for AR) that
// map the address through the rule table addr_map_i ([start, end) -> master
// port index; the first matching rule wins) and drive the select inputs of a
// network demultiplexer with NoMstPorts+1 outputs. Output NoMstPorts is an
// error slave that answers with DECERR; it receives transactions whose
// address matches no rule, unless EnDefaultMstPort is set for that slave port,
// in which case they go to default_mst_port_i. Connectivity[s][m] = 0 omits
// the connection from slave port s to master port m (its traffic goes to the
// error slave); this is how the crosspoint builds partially connected
// crossbars. With PipelineCuts = 1 an axi_cut sits on every internal
// bundle (demux -> mux), which is deadlock-free because the demux issues
// writes in lockstep with their data. Every master port has a network
// multiplexer with NoSlvPorts inputs, so master-port IDs are
// SlvIdWidth + clog2(NoSlvPorts) bits wide.
//
// Structure and the default-port/error-slave choice follow the paper's
// crossbar; the rule format and "first rule wins" are this design's choices.
`include "axi_typedef.svh"
module axi_xbar #(
  parameter int unsigned NoSlvPorts  = 4,
  parameter int unsigned NoMstPorts  = 4,
  parameter int unsigned SlvIdWidth  = 6,
  parameter int unsigned MaxMstTrans = 8,
  parameter int unsigned MaxWTrans   = 8,
  parameter int unsigned NoAddrRules = 4,
  parameter bit [NoSlvPorts-1:0] EnDefaultMstPort = '0,
  parameter bit [NoSlvPorts-1:0][NoMstPorts-1:0] Connectivity = '1,
  parameter bit PipelineCuts = 1'b0,
  parameter type slv_req_t = axi_cfg_pkg::d64_i6_req_t,
  parameter type slv_rsp_t = axi_cfg_pkg::d64_i6_rsp_t,
  parameter type slv_ax_t  = axi_cfg_pkg::d64_i6_ax_t,
  parameter type w_t       = axi_cfg_pkg::d64_i6_w_t,
  parameter type slv_b_t   = axi_cfg_pkg::d64_i6_b_t,
  parameter type slv_r_t   = axi_cfg_pkg::d64_i6_r_t,
  parameter type mst_req_t = axi_cfg_pkg::d64_i8_req_t,
  parameter type mst_rsp_t = axi_cfg_pkg::d64_i8_rsp_t,
  parameter type mst_ax_t  = axi_cfg_pkg::d64_i8_ax_t,
  localparam int unsigned MstSelW = NoMstPorts > 1 ? $clog2(NoMstPorts) : 1,
  localparam int unsigned DmxSelW = $clog2(NoMstPorts + 1)
) (
  input  logic                                    clk_i,
  input  logic                                    rst_ni,
  input  slv_req_t [NoSlvPorts-1:0]               slv_reqs_i,
  output slv_rsp_t [NoSlvPorts-1:0]               slv_rsps_o,
  output mst_req_t [NoMstPorts-1:0]               mst_reqs_o,
  input  mst_rsp_t [NoMstPorts-1:0]               mst_rsps_i,
  input  axi_pkg::xbar_rule_t [NoAddrRules-1:0]   addr_map_i,
  input  logic [NoSlvPorts-1:0][MstSelW-1:0]      default_mst_port_i
);
  // Internal bundles: [slave port][master port], before and after the cuts.
  slv_req_t [NoSlvPorts-1:0][NoMstPorts:0] dmx_reqs;
  slv_rsp_t [NoSlvPorts-1:0][NoMstPorts:0] dmx_rsps;
  slv_req_t [NoMstPorts-1:0][NoSlvPorts-1:0] mux_reqs;
  slv_rsp_t [NoMstPorts-1:0][NoSlvPorts-1:0] mux_rsps;

  function automatic logic [DmxSelW-1:0] decode(
      logic [63:0] addr, axi_pkg::xbar_rule_t [NoAddrRules-1:0] map,
      bit en_def, logic [MstSelW-1:0] def, bit [NoMstPorts-1:0] conn);
    logic [DmxSelW-1:0] sel;
    logic               hit;
    hit = 1'b0;
    sel = DmxSelW'(NoMstPorts);
    for (int unsigned r = 0; r < NoAddrRules; r++) begin
      if (!hit && addr >= map[r].start_addr && addr < map[r].end_addr &&
          map[r].idx < NoMstPorts) begin
        hit = 1'b1;
        sel = DmxSelW'(map[r].idx);
      end
    end
    if (!hit && en_def) sel = DmxSelW'(def);
    if (sel < DmxSelW'(NoMstPorts) && !conn[sel]) sel = DmxSelW'(NoMstPorts);
    return sel;
  endfunction

  for (genvar s = 0; s < NoSlvPorts; s++) begin : gen_slv
    logic [DmxSelW-1:0] aw_sel, ar_sel;
    assign aw_sel = decode(64'(slv_reqs_i[s].aw.addr), addr_map_i, EnDefaultMstPort[s],
                           default_mst_port_i[s], Connectivity[s]);
    assign ar_sel = decode(64'(slv_reqs_i[s].ar.addr), addr_map_i, EnDefaultMstPort[s],
                           default_mst_port_i[s], Connectivity[s]);

    axi_demux #(
      .IdWidth (SlvIdWidth), .NoMstPorts (NoMstPorts + 1), .MaxTrans (MaxMstTrans),
      .req_t (slv_req_t), .rsp_t (slv_rsp_t), .b_t (slv_b_t), .r_t (slv_r_t)
    ) i_demux (
      .clk_i, .rst_ni,
      .slv_req_i       (slv_reqs_i[s]),
      .slv_aw_select_i (aw_sel),
      .slv_ar_select_i (ar_sel),
      .slv_rsp_o       (slv_rsps_o[s]),
      .mst_reqs_o      (dmx_reqs[s]),
      .mst_rsps_i      (dmx_rsps[s])
    );

    axi_err_slv #(.Resp (axi_pkg::RESP_DECERR), .req_t (slv_req_t), .rsp_t (slv_rsp_t), .ax_t (slv_ax_t))
      i_err_slv (.clk_i, .rst_ni, .slv_req_i (dmx_reqs[s][NoMstPorts]), .slv_rsp_o (dmx_rsps[s][NoMstPorts]));

    for (genvar m = 0; m < NoMstPorts; m++) begin : gen_conn
      if (!Connectivity[s][m]) begin : gen_none
        assign mux_reqs[m][s] = '0;
        assign dmx_rsps[s][m] = '0;
      end else if (PipelineCuts) begin : gen_cut
        axi_cut #(.req_t (slv_req_t), .rsp_t (slv_rsp_t), .ax_t (slv_ax_t), .w_t (w_t),
                  .b_t (slv_b_t), .r_t (slv_r_t)) i_cut (
          .clk_i, .rst_ni,
          .slv_req_i (dmx_reqs[s][m]), .slv_rsp_o (dmx_rsps[s][m]),
          .mst_req_o (mux_reqs[m][s]), .mst_rsp_i (mux_rsps[m][s]));
      end else begin : gen_wire
        assign mux_reqs[m][s] = dmx_reqs[s][m];
        assign dmx_rsps[s][m] = mux_rsps[m][s];
      end
    end
  end

  for (genvar m = 0; m < NoMstPorts; m++) begin : gen_mst
    axi_mux #(
      .SlvIdWidth (SlvIdWidth), .NoSlvPorts (NoSlvPorts), .MaxWTrans (MaxWTrans),
      .slv_req_t (slv_req_t), .slv_rsp_t (slv_rsp_t), .mst_req_t (mst_req_t),
      .mst_rsp_t (mst_rsp_t), .mst_ax_t (mst_ax_t), .slv_b_t (slv_b_t), .slv_r_t (slv_r_t)
    ) i_mux (
      .clk_i, .rst_ni,
      .slv_reqs_i (mux_reqs[m]), .slv_rsps_o (mux_rsps[m]),
      .mst_req_o  (mst_reqs_o[m]), .mst_rsp_i (mst_rsps_i[m])
    );
  end
endmodule
