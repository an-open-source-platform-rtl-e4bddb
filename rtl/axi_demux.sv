// Network demultiplexer: routes one slave port to one of NoMstPorts master
// ports, chosen per transaction by the select inputs (one for writes, one for
// reads) that travel with the command beat.
//
// Ordering (O1/O2): all outstanding transactions with the same ID and
// direction must target the same master port. For this, the demux keeps, per
// direction and per possible ID (2**IdWidth entries), the master port index
// and a counter of outstanding transactions. A command is forwarded only if
// its counter is zero or its index equals the select; its handshake
// increments the counter (up to MaxTrans), the B beat or the last R beat with
// that ID decrements it. Otherwise the command waits.
//
// Write data (O3): the AW handshake loads a register with the target port;
// the W burst follows it there, and the next AW waits until the last W beat
// of the burst has passed (lockstep), which also keeps pipelined crossbars
// free of deadlock. This costs one idle cycle between consecutive write
// bursts. B and R beats of all master ports are joined by round-robin
// arbiters; R beats may interleave between bursts (they carry distinct IDs).
//
// The table structure, the lockstep W register and the RR response arbiters
// are the paper's; counter width and the one-cycle gap are this
// implementation's choices.
`include "axi_typedef.svh"
module axi_demux #(
  parameter int unsigned IdWidth    = 6,
  parameter int unsigned NoMstPorts = 2,
  parameter int unsigned MaxTrans   = 8,
  parameter type req_t = axi_cfg_pkg::d64_i6_req_t,
  parameter type rsp_t = axi_cfg_pkg::d64_i6_rsp_t,
  parameter type b_t   = axi_cfg_pkg::d64_i6_b_t,
  parameter type r_t   = axi_cfg_pkg::d64_i6_r_t,
  localparam int unsigned SelW = NoMstPorts > 1 ? $clog2(NoMstPorts) : 1
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  req_t                  slv_req_i,
  input  logic [SelW-1:0]       slv_aw_select_i,
  input  logic [SelW-1:0]       slv_ar_select_i,
  output rsp_t                  slv_rsp_o,
  output req_t [NoMstPorts-1:0] mst_reqs_o,
  input  rsp_t [NoMstPorts-1:0] mst_rsps_i
);
  localparam int unsigned NumIds = 2 ** IdWidth;
  localparam int unsigned CntW   = $clog2(MaxTrans + 1);

  logic [SelW-1:0] w_idx_q [NumIds];
  logic [CntW-1:0] w_cnt_q [NumIds];
  logic [SelW-1:0] r_idx_q [NumIds];
  logic [CntW-1:0] r_cnt_q [NumIds];
  logic            w_open_q;
  logic [SelW-1:0] w_sel_q;

  logic aw_ok, ar_ok, aw_hs, ar_hs, w_hs, b_hs, r_hs;
  logic [IdWidth-1:0] aw_id, ar_id;
  assign aw_id = slv_req_i.aw.id;
  assign ar_id = slv_req_i.ar.id;

  assign aw_ok = !w_open_q && (w_cnt_q[aw_id] != CntW'(MaxTrans)) &&
                 ((w_cnt_q[aw_id] == '0) || (w_idx_q[aw_id] == slv_aw_select_i));
  assign ar_ok = (r_cnt_q[ar_id] != CntW'(MaxTrans)) &&
                 ((r_cnt_q[ar_id] == '0) || (r_idx_q[ar_id] == slv_ar_select_i));

  // Response arbitration.
  b_t [NoMstPorts-1:0] bs;
  r_t [NoMstPorts-1:0] rs;
  logic [NoMstPorts-1:0] b_valids, b_readies, r_valids, r_readies;
  b_t b_arb;
  r_t r_arb;
  always_comb begin
    for (int unsigned i = 0; i < NoMstPorts; i++) begin
      bs[i]       = mst_rsps_i[i].b;
      rs[i]       = mst_rsps_i[i].r;
      b_valids[i] = mst_rsps_i[i].b_valid;
      r_valids[i] = mst_rsps_i[i].r_valid;
    end
  end
  rr_arb #(.N(NoMstPorts), .T(b_t)) i_b_arb (
    .clk_i, .rst_ni, .valid_i (b_valids), .ready_o (b_readies), .data_i (bs),
    .valid_o (slv_rsp_o.b_valid), .ready_i (slv_req_i.b_ready), .data_o (b_arb), .idx_o ()
  );
  rr_arb #(.N(NoMstPorts), .T(r_t)) i_r_arb (
    .clk_i, .rst_ni, .valid_i (r_valids), .ready_o (r_readies), .data_i (rs),
    .valid_o (slv_rsp_o.r_valid), .ready_i (slv_req_i.r_ready), .data_o (r_arb), .idx_o ()
  );
  assign slv_rsp_o.b = b_arb;
  assign slv_rsp_o.r = r_arb;

  // Forward channels.
  always_comb begin
    for (int unsigned i = 0; i < NoMstPorts; i++) begin
      mst_reqs_o[i]          = slv_req_i;
      mst_reqs_o[i].aw_valid = slv_req_i.aw_valid && aw_ok && (slv_aw_select_i == SelW'(i));
      mst_reqs_o[i].ar_valid = slv_req_i.ar_valid && ar_ok && (slv_ar_select_i == SelW'(i));
      mst_reqs_o[i].w_valid  = slv_req_i.w_valid && w_open_q && (w_sel_q == SelW'(i));
      mst_reqs_o[i].b_ready  = b_readies[i];
      mst_reqs_o[i].r_ready  = r_readies[i];
    end
  end
  assign slv_rsp_o.aw_ready = aw_ok && mst_rsps_i[slv_aw_select_i].aw_ready;
  assign slv_rsp_o.ar_ready = ar_ok && mst_rsps_i[slv_ar_select_i].ar_ready;
  assign slv_rsp_o.w_ready  = w_open_q && mst_rsps_i[w_sel_q].w_ready;

  assign aw_hs = slv_req_i.aw_valid && slv_rsp_o.aw_ready;
  assign ar_hs = slv_req_i.ar_valid && slv_rsp_o.ar_ready;
  assign w_hs  = slv_req_i.w_valid && slv_rsp_o.w_ready;
  assign b_hs  = slv_rsp_o.b_valid && slv_req_i.b_ready;
  assign r_hs  = slv_rsp_o.r_valid && slv_req_i.r_ready && slv_rsp_o.r.last;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      w_open_q <= 1'b0;
      w_sel_q  <= '0;
      for (int unsigned i = 0; i < NumIds; i++) begin
        w_cnt_q[i] <= '0;
        r_cnt_q[i] <= '0;
        w_idx_q[i] <= '0;
        r_idx_q[i] <= '0;
      end
    end else begin
      if (aw_hs) begin
        w_open_q <= 1'b1;
        w_sel_q  <= slv_aw_select_i;
        w_idx_q[aw_id] <= slv_aw_select_i;
      end else if (w_hs && slv_req_i.w.last) begin
        w_open_q <= 1'b0;
      end
      if (ar_hs) r_idx_q[ar_id] <= slv_ar_select_i;
      // Counter updates; an increment and a decrement of one ID cancel.
      for (int unsigned i = 0; i < NumIds; i++) begin
        if ((aw_hs && aw_id == IdWidth'(i)) && !(b_hs && slv_rsp_o.b.id == IdWidth'(i)))
          w_cnt_q[i] <= w_cnt_q[i] + 1'b1;
        else if (!(aw_hs && aw_id == IdWidth'(i)) && (b_hs && slv_rsp_o.b.id == IdWidth'(i)))
          w_cnt_q[i] <= w_cnt_q[i] - 1'b1;
        if ((ar_hs && ar_id == IdWidth'(i)) && !(r_hs && slv_rsp_o.r.id == IdWidth'(i)))
          r_cnt_q[i] <= r_cnt_q[i] + 1'b1;
        else if (!(ar_hs && ar_id == IdWidth'(i)) && (r_hs && slv_rsp_o.r.id == IdWidth'(i)))
          r_cnt_q[i] <= r_cnt_q[i] - 1'b1;
      end
    end
  end

  `AXI_ASSERT_STABLE(clk_i, rst_ni, slv_req_i.aw_valid, slv_rsp_o.aw_ready, slv_req_i.aw, "demux: upstream AW unstable")
  `AXI_ASSERT_STABLE(clk_i, rst_ni, slv_req_i.ar_valid, slv_rsp_o.ar_ready, slv_req_i.ar, "demux: upstream AR unstable")
endmodule
