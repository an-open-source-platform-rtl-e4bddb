// ID remapper: compresses a sparsely used slave-port ID space (SlvIdWidth
// bits, at most MaxUniqIds distinct IDs outstanding per direction) into a
// densely used master-port ID space of MstIdWidth >= clog2(MaxUniqIds) bits,
// keeping every input ID independent (valid when U <= 2**O).
//
// One axi_id_remap_table per direction, indexed by the output ID; each entry
// holds the input ID and a counter of its outstanding transactions (at most
// MaxTxnsPerId). A command looks its ID up in all entries in parallel: a
// match must be reused (O1), else the first free entry is taken; the command
// waits while neither exists. The command handshake stores/increments the
// entry, the B or last R handshake decrements it, and responses get their
// input ID back by indexing the table with their output ID. A small hold
// register (the "FSM" of the figure) keeps the chosen output ID stable while
// a command waits for ready, because a response may free a lower entry in the
// meantime (F1). W beats pass through untouched.
//
// The table organisation follows the paper; the hold register and the
// stall-when-full policy are this implementation's.
`include "axi_typedef.svh"
module axi_id_remap #(
  parameter int unsigned SlvIdWidth   = 6,
  parameter int unsigned MaxUniqIds   = 16,
  parameter int unsigned MaxTxnsPerId = 8,
  parameter int unsigned MstIdWidth   = 4,
  parameter type slv_req_t = axi_cfg_pkg::d64_i6_req_t,
  parameter type slv_rsp_t = axi_cfg_pkg::d64_i6_rsp_t,
  parameter type mst_req_t = axi_cfg_pkg::d64_i4_req_t,
  parameter type mst_rsp_t = axi_cfg_pkg::d64_i4_rsp_t,
  localparam int unsigned IdxW = MaxUniqIds > 1 ? $clog2(MaxUniqIds) : 1
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  slv_req_t slv_req_i,
  output slv_rsp_t slv_rsp_o,
  output mst_req_t mst_req_o,
  input  mst_rsp_t mst_rsp_i
);
  logic aw_ok, ar_ok, aw_hold_q, ar_hold_q;
  logic [IdxW-1:0] aw_lidx, ar_lidx, aw_idx, ar_idx, aw_hidx_q, ar_hidx_q;
  logic [SlvIdWidth-1:0] b_id, r_id;
  logic aw_hs, ar_hs, b_hs, r_hs;

  axi_id_remap_table #(.InIdWidth (SlvIdWidth), .MaxUniqIds (MaxUniqIds), .MaxTxnsPerId (MaxTxnsPerId))
  i_w_table (
    .clk_i, .rst_ni,
    .lookup_id_i (slv_req_i.aw.id), .lookup_ok_o (aw_ok), .lookup_idx_o (aw_lidx),
    .push_i (aw_hs), .push_idx_i (aw_idx),
    .pop_i (b_hs), .pop_idx_i (IdxW'(mst_rsp_i.b.id)), .pop_id_o (b_id)
  );
  axi_id_remap_table #(.InIdWidth (SlvIdWidth), .MaxUniqIds (MaxUniqIds), .MaxTxnsPerId (MaxTxnsPerId))
  i_r_table (
    .clk_i, .rst_ni,
    .lookup_id_i (slv_req_i.ar.id), .lookup_ok_o (ar_ok), .lookup_idx_o (ar_lidx),
    .push_i (ar_hs), .push_idx_i (ar_idx),
    .pop_i (r_hs), .pop_idx_i (IdxW'(mst_rsp_i.r.id)), .pop_id_o (r_id)
  );

  assign aw_idx = aw_hold_q ? aw_hidx_q : aw_lidx;
  assign ar_idx = ar_hold_q ? ar_hidx_q : ar_lidx;

  always_comb begin
    mst_req_o          = '0;
    mst_req_o.aw.id    = MstIdWidth'(aw_idx);
    mst_req_o.aw.addr  = slv_req_i.aw.addr;
    mst_req_o.aw.len   = slv_req_i.aw.len;
    mst_req_o.aw.size  = slv_req_i.aw.size;
    mst_req_o.aw.burst = slv_req_i.aw.burst;
    mst_req_o.aw.qos   = slv_req_i.aw.qos;
    mst_req_o.aw_valid = slv_req_i.aw_valid && (aw_hold_q || aw_ok);
    mst_req_o.w        = slv_req_i.w;
    mst_req_o.w_valid  = slv_req_i.w_valid;
    mst_req_o.b_ready  = slv_req_i.b_ready;
    mst_req_o.ar.id    = MstIdWidth'(ar_idx);
    mst_req_o.ar.addr  = slv_req_i.ar.addr;
    mst_req_o.ar.len   = slv_req_i.ar.len;
    mst_req_o.ar.size  = slv_req_i.ar.size;
    mst_req_o.ar.burst = slv_req_i.ar.burst;
    mst_req_o.ar.qos   = slv_req_i.ar.qos;
    mst_req_o.ar_valid = slv_req_i.ar_valid && (ar_hold_q || ar_ok);
    mst_req_o.r_ready  = slv_req_i.r_ready;

    slv_rsp_o          = '0;
    slv_rsp_o.aw_ready = (aw_hold_q || aw_ok) && mst_rsp_i.aw_ready;
    slv_rsp_o.w_ready  = mst_rsp_i.w_ready;
    slv_rsp_o.b.id     = b_id;
    slv_rsp_o.b.resp   = mst_rsp_i.b.resp;
    slv_rsp_o.b_valid  = mst_rsp_i.b_valid;
    slv_rsp_o.ar_ready = (ar_hold_q || ar_ok) && mst_rsp_i.ar_ready;
    slv_rsp_o.r.id     = r_id;
    slv_rsp_o.r.data   = mst_rsp_i.r.data;
    slv_rsp_o.r.resp   = mst_rsp_i.r.resp;
    slv_rsp_o.r.last   = mst_rsp_i.r.last;
    slv_rsp_o.r_valid  = mst_rsp_i.r_valid;
  end

  assign aw_hs = mst_req_o.aw_valid && mst_rsp_i.aw_ready;
  assign ar_hs = mst_req_o.ar_valid && mst_rsp_i.ar_ready;
  assign b_hs  = mst_rsp_i.b_valid && slv_req_i.b_ready;
  assign r_hs  = mst_rsp_i.r_valid && slv_req_i.r_ready && mst_rsp_i.r.last;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      aw_hold_q <= 1'b0; ar_hold_q <= 1'b0; aw_hidx_q <= '0; ar_hidx_q <= '0;
    end else begin
      aw_hold_q <= mst_req_o.aw_valid && !mst_rsp_i.aw_ready;
      ar_hold_q <= mst_req_o.ar_valid && !mst_rsp_i.ar_ready;
      aw_hidx_q <= aw_idx;
      ar_hidx_q <= ar_idx;
    end
  end

  `AXI_ASSERT_STABLE(clk_i, rst_ni, mst_req_o.aw_valid, mst_rsp_i.aw_ready, mst_req_o.aw, "remap: AW unstable")
  `AXI_ASSERT_STABLE(clk_i, rst_ni, mst_req_o.ar_valid, mst_rsp_i.ar_ready, mst_req_o.ar, "remap: AR unstable")
endmodule
