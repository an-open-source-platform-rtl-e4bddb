// Network multiplexer: joins NoSlvPorts slave ports into one master port.
//
// Commands: the slave port index is prepended to the ID of each AW/AR beat
// (master ID = {port index, slave ID}), then one round-robin arbiter per
// command channel selects a valid beat; a selection is held until its
// handshake (F1). Write data: the index of every granted AW is pushed into a
// FIFO of MaxWTrans entries, whose head selects the slave port whose W beats
// are forwarded (W beats carry no ID and are ordered, O3); the last beat pops
// it. An AW is only granted while the FIFO has room. Responses: B and R beats
// are routed back by the ID MSBs and the ID is truncated to the slave width.
// Transactions with equal IDs from different slave ports thus stay
// independent downstream.
//
// The structure (ID prepend, RR arbiters, W FIFO, channel demux by ID MSB)
// follows the paper's multiplexer. FIFO depth and the exact arbiter are this
// implementation's choices. With a single slave port the module is a wire.
// Combinational paths: command and response channels are combinational
// through the module; the W FIFO adds no latency to AW.
`include "axi_typedef.svh"
module axi_mux #(
  parameter int unsigned SlvIdWidth = 6,
  parameter int unsigned NoSlvPorts = 2,
  parameter int unsigned MaxWTrans  = 8,
  parameter type slv_req_t = axi_cfg_pkg::d64_i6_req_t,
  parameter type slv_rsp_t = axi_cfg_pkg::d64_i6_rsp_t,
  parameter type mst_req_t = axi_cfg_pkg::d64_i7_req_t,
  parameter type mst_rsp_t = axi_cfg_pkg::d64_i7_rsp_t,
  parameter type mst_ax_t  = axi_cfg_pkg::d64_i7_ax_t,
  parameter type slv_b_t   = axi_cfg_pkg::d64_i6_b_t,
  parameter type slv_r_t   = axi_cfg_pkg::d64_i6_r_t,
  localparam int unsigned IdxW = NoSlvPorts > 1 ? $clog2(NoSlvPorts) : 1
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  input  slv_req_t [NoSlvPorts-1:0] slv_reqs_i,
  output slv_rsp_t [NoSlvPorts-1:0] slv_rsps_o,
  output mst_req_t                  mst_req_o,
  input  mst_rsp_t                  mst_rsp_i
);
  if (NoSlvPorts == 1) begin : gen_single
    // One slave port: nothing to arbitrate, the bundle passes through.
    assign mst_req_o     = mst_req_t'(slv_reqs_i[0]);
    assign slv_rsps_o[0] = slv_rsp_t'(mst_rsp_i);
  end else begin : gen_mux
    mst_ax_t [NoSlvPorts-1:0] aw_ext, ar_ext;
    logic    [NoSlvPorts-1:0] aw_valids, aw_readies, ar_valids, ar_readies;
    logic    aw_arb_valid, aw_arb_ready, w_fifo_ready, w_fifo_valid;
    logic    [IdxW-1:0] aw_idx, w_idx;
    mst_ax_t aw_arb, ar_arb;

    // ID prepend on both command channels.
    always_comb begin
      for (int unsigned i = 0; i < NoSlvPorts; i++) begin
        aw_ext[i]       = '0;
        aw_ext[i].id    = {IdxW'(i), slv_reqs_i[i].aw.id};
        aw_ext[i].addr  = slv_reqs_i[i].aw.addr;
        aw_ext[i].len   = slv_reqs_i[i].aw.len;
        aw_ext[i].size  = slv_reqs_i[i].aw.size;
        aw_ext[i].burst = slv_reqs_i[i].aw.burst;
        aw_ext[i].qos   = slv_reqs_i[i].aw.qos;
        ar_ext[i]       = '0;
        ar_ext[i].id    = {IdxW'(i), slv_reqs_i[i].ar.id};
        ar_ext[i].addr  = slv_reqs_i[i].ar.addr;
        ar_ext[i].len   = slv_reqs_i[i].ar.len;
        ar_ext[i].size  = slv_reqs_i[i].ar.size;
        ar_ext[i].burst = slv_reqs_i[i].ar.burst;
        ar_ext[i].qos   = slv_reqs_i[i].ar.qos;
        aw_valids[i]    = slv_reqs_i[i].aw_valid;
        ar_valids[i]    = slv_reqs_i[i].ar_valid;
      end
    end

    rr_arb #(.N(NoSlvPorts), .T(mst_ax_t)) i_aw_arb (
      .clk_i, .rst_ni,
      .valid_i (aw_valids),  .ready_o (aw_readies), .data_i (aw_ext),
      .valid_o (aw_arb_valid), .ready_i (aw_arb_ready), .data_o (aw_arb), .idx_o (aw_idx)
    );
    rr_arb #(.N(NoSlvPorts), .T(mst_ax_t)) i_ar_arb (
      .clk_i, .rst_ni,
      .valid_i (ar_valids),  .ready_o (ar_readies), .data_i (ar_ext),
      .valid_o (mst_req_o.ar_valid), .ready_i (mst_rsp_i.ar_ready), .data_o (ar_arb), .idx_o ()
    );

    // An AW is only forwarded while the W FIFO can take its port index.
    assign mst_req_o.aw_valid = aw_arb_valid && w_fifo_ready;
    assign aw_arb_ready       = mst_rsp_i.aw_ready && w_fifo_ready;
    assign mst_req_o.aw       = aw_arb;
    assign mst_req_o.ar       = ar_arb;

    stream_fifo #(.T(logic [IdxW-1:0]), .Depth(MaxWTrans)) i_w_fifo (
      .clk_i, .rst_ni,
      .data_i  (aw_idx),
      .valid_i (mst_req_o.aw_valid && mst_rsp_i.aw_ready),
      .ready_o (w_fifo_ready),
      .data_o  (w_idx),
      .valid_o (w_fifo_valid),
      .ready_i (mst_req_o.w_valid && mst_rsp_i.w_ready && mst_req_o.w.last),
      .usage_o ()
    );

    // W channel mux, B/R channel demux by ID MSBs.
    logic [IdxW-1:0] b_idx, r_idx;
    assign b_idx = mst_rsp_i.b.id[SlvIdWidth +: IdxW];
    assign r_idx = mst_rsp_i.r.id[SlvIdWidth +: IdxW];
    assign mst_req_o.w       = slv_reqs_i[w_idx].w;
    assign mst_req_o.w_valid = w_fifo_valid && slv_reqs_i[w_idx].w_valid;
    assign mst_req_o.b_ready = slv_reqs_i[b_idx].b_ready;
    assign mst_req_o.r_ready = slv_reqs_i[r_idx].r_ready;

    slv_b_t b;
    slv_r_t r;
    always_comb begin
      b.id   = mst_rsp_i.b.id[SlvIdWidth-1:0];
      b.resp = mst_rsp_i.b.resp;
      r.id   = mst_rsp_i.r.id[SlvIdWidth-1:0];
      r.data = mst_rsp_i.r.data;
      r.resp = mst_rsp_i.r.resp;
      r.last = mst_rsp_i.r.last;
      for (int unsigned i = 0; i < NoSlvPorts; i++) begin
        slv_rsps_o[i]          = '0;
        slv_rsps_o[i].aw_ready = aw_readies[i] && w_fifo_ready;
        slv_rsps_o[i].ar_ready = ar_readies[i];
        slv_rsps_o[i].w_ready  = w_fifo_valid && (w_idx == IdxW'(i)) && mst_rsp_i.w_ready;
        slv_rsps_o[i].b        = b;
        slv_rsps_o[i].b_valid  = mst_rsp_i.b_valid && (b_idx == IdxW'(i));
        slv_rsps_o[i].r        = r;
        slv_rsps_o[i].r_valid  = mst_rsp_i.r_valid && (r_idx == IdxW'(i));
      end
    end

    `AXI_ASSERT_STABLE(clk_i, rst_ni, mst_req_o.aw_valid, mst_rsp_i.aw_ready, mst_req_o.aw, "mux: AW unstable")
    `AXI_ASSERT_STABLE(clk_i, rst_ni, mst_req_o.ar_valid, mst_rsp_i.ar_ready, mst_req_o.ar, "mux: AR unstable")
  end
endmodule
