// Simplex memory controller: converts an AXI slave port into a single
// memory request port (req/gnt handshake, responses with fixed order via
// rvalid) that reads or writes one word per cycle.
//
// How: a write request generator walks the address of the current AW burst
// and emits one memory write per W beat; a read request generator walks the
// current AR burst and emits one memory read per beat. An arbiter (round
// robin, or write-first when WritePriority is set) picks one request per
// cycle. The request is forked to the memory and to a meta FIFO that holds
// {write, id, last}. A request is only issued when the response buffers have
// room for it, counting requests still in flight, so memory responses never
// need back-pressure. When a response arrives, the meta FIFO head joins it:
// read data becomes an R beat, the response to a write's last beat becomes a
// B beat. Both go through response FIFOs of BufDepth+2 entries towards the
// port (the two extra entries cover the request in flight and the beat
// being handed over, so single-cycle memories reach one beat per cycle).
//
// Timing: one beat per cycle in steady state for a memory with one-cycle
// latency; AW/AR are accepted one cycle before their first beat is issued.
// One burst per direction is walked at a time. Memories must answer every
// granted request (writes too) with mem_rvalid_i, in order.
//
// From the paper (Fig. 11): request generators, arbiter, stream fork with
// meta information, buffers, stream join, response generators, one-beat-per
// -cycle throughput. Choices here: credit-based flow control, the
// WritePriority switch, write acknowledgement on mem_rvalid_i.
`include "axi_typedef.svh"
module axi_to_mem #(
  parameter int unsigned AddrWidth = 64,
  parameter int unsigned DataWidth = 64,
  parameter int unsigned IdWidth   = 6,
  parameter int unsigned BufDepth  = 1,
  parameter bit          WritePriority = 1'b0,
  parameter type req_t = axi_cfg_pkg::d64_i6_req_t,
  parameter type rsp_t = axi_cfg_pkg::d64_i6_rsp_t,
  parameter type ax_t  = axi_cfg_pkg::d64_i6_ax_t,
  parameter type b_t   = axi_cfg_pkg::d64_i6_b_t,
  parameter type r_t   = axi_cfg_pkg::d64_i6_r_t,
  localparam int unsigned NB = DataWidth / 8
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  output logic                 busy_o,
  input  req_t                 slv_req_i,
  output rsp_t                 slv_rsp_o,
  output logic                 mem_req_o,
  input  logic                 mem_gnt_i,
  output logic [AddrWidth-1:0] mem_addr_o,
  output logic                 mem_we_o,
  output logic [DataWidth-1:0] mem_wdata_o,
  output logic [NB-1:0]        mem_be_o,
  input  logic                 mem_rvalid_i,
  input  logic [DataWidth-1:0] mem_rdata_i
);
  localparam int unsigned Depth = BufDepth + 2;
  localparam int unsigned CntW  = $clog2(Depth + 1) + 1;
  typedef struct packed {
    logic               we;
    logic [IdWidth-1:0] id;
    logic               last;
  } meta_t;

  // ---- write request generator
  logic aw_act_q;
  ax_t  aw_q;
  logic [63:0] w_addr_q;
  logic [7:0]  w_cnt_q;
  logic wr_valid, wr_ready;
  assign wr_valid = aw_act_q && slv_req_i.w_valid;

  // ---- read request generator
  logic ar_act_q;
  ax_t  ar_q;
  logic [63:0] r_addr_q;
  logic [7:0]  r_cnt_q;
  logic rd_valid, rd_ready;
  assign rd_valid = ar_act_q;

  // ---- arbiter
  logic pick_w, prio_w_q, sel_valid;
  always_comb begin
    if (wr_valid && rd_valid) pick_w = WritePriority ? 1'b1 : prio_w_q;
    else                      pick_w = wr_valid;
  end
  assign sel_valid = wr_valid || rd_valid;

  // ---- credit check and fork
  logic [CntW-1:0] inflight_q;
  logic [$clog2(Depth+1)-1:0] b_usage, r_usage;
  logic can_issue, issue, meta_ready;
  assign can_issue = (CntW'(inflight_q) + CntW'(r_usage) < CntW'(Depth)) &&
                     (CntW'(inflight_q) + CntW'(b_usage) < CntW'(Depth)) && meta_ready;
  assign mem_req_o   = sel_valid && can_issue;
  assign issue       = mem_req_o && mem_gnt_i;
  assign mem_we_o    = pick_w;
  assign mem_addr_o  = AddrWidth'(pick_w ? w_addr_q : r_addr_q);
  assign mem_wdata_o = slv_req_i.w.data;
  assign mem_be_o    = pick_w ? slv_req_i.w.strb : '0;
  assign wr_ready    = issue && pick_w;
  assign rd_ready    = issue && !pick_w;

  meta_t meta_in, meta_out;
  logic  meta_valid;
  assign meta_in.we   = pick_w;
  assign meta_in.id   = pick_w ? IdWidth'(aw_q.id) : IdWidth'(ar_q.id);
  assign meta_in.last = pick_w ? slv_req_i.w.last : (r_cnt_q == ar_q.len);

  stream_fifo #(.T(meta_t), .Depth(Depth)) i_meta (
    .clk_i, .rst_ni,
    .data_i (meta_in), .valid_i (issue), .ready_o (meta_ready),
    .data_o (meta_out), .valid_o (meta_valid), .ready_i (mem_rvalid_i),
    .usage_o ()
  );

  // ---- response generators
  b_t b_in;
  r_t r_in;
  always_comb begin
    b_in      = '0;
    b_in.id   = meta_out.id;
    b_in.resp = axi_pkg::RESP_OKAY;
    r_in      = '0;
    r_in.id   = meta_out.id;
    r_in.data = mem_rdata_i;
    r_in.resp = axi_pkg::RESP_OKAY;
    r_in.last = meta_out.last;
  end
  stream_fifo #(.T(b_t), .Depth(Depth)) i_b_buf (
    .clk_i, .rst_ni,
    .data_i (b_in), .valid_i (mem_rvalid_i && meta_out.we && meta_out.last), .ready_o (),
    .data_o (slv_rsp_o.b), .valid_o (slv_rsp_o.b_valid), .ready_i (slv_req_i.b_ready),
    .usage_o (b_usage)
  );
  stream_fifo #(.T(r_t), .Depth(Depth)) i_r_buf (
    .clk_i, .rst_ni,
    .data_i (r_in), .valid_i (mem_rvalid_i && !meta_out.we), .ready_o (),
    .data_o (slv_rsp_o.r), .valid_o (slv_rsp_o.r_valid), .ready_i (slv_req_i.r_ready),
    .usage_o (r_usage)
  );

  assign slv_rsp_o.aw_ready = !aw_act_q;
  assign slv_rsp_o.ar_ready = !ar_act_q;
  assign slv_rsp_o.w_ready  = wr_ready;
  assign busy_o = aw_act_q || ar_act_q || (inflight_q != '0) ||
                  slv_rsp_o.b_valid || slv_rsp_o.r_valid;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      aw_act_q   <= 1'b0;
      ar_act_q   <= 1'b0;
      aw_q       <= '0;
      ar_q       <= '0;
      w_addr_q   <= '0;
      r_addr_q   <= '0;
      w_cnt_q    <= '0;
      r_cnt_q    <= '0;
      prio_w_q   <= 1'b0;
      inflight_q <= '0;
    end else begin
      if (slv_req_i.aw_valid && !aw_act_q) begin
        aw_act_q <= 1'b1;
        aw_q     <= slv_req_i.aw;
        w_addr_q <= 64'(slv_req_i.aw.addr);
        w_cnt_q  <= '0;
      end else if (wr_ready) begin
        w_cnt_q  <= w_cnt_q + 1'b1;
        w_addr_q <= axi_pkg::next_addr(w_addr_q, 64'(aw_q.addr), aw_q.len, aw_q.size, aw_q.burst);
        if (slv_req_i.w.last) aw_act_q <= 1'b0;
      end
      if (slv_req_i.ar_valid && !ar_act_q) begin
        ar_act_q <= 1'b1;
        ar_q     <= slv_req_i.ar;
        r_addr_q <= 64'(slv_req_i.ar.addr);
        r_cnt_q  <= '0;
      end else if (rd_ready) begin
        r_cnt_q  <= r_cnt_q + 1'b1;
        r_addr_q <= axi_pkg::next_addr(r_addr_q, 64'(ar_q.addr), ar_q.len, ar_q.size, ar_q.burst);
        if (r_cnt_q == ar_q.len) ar_act_q <= 1'b0;
      end
      if (issue && wr_valid && rd_valid) prio_w_q <= !pick_w;
      if (issue && !mem_rvalid_i)      inflight_q <= inflight_q + 1'b1;
      else if (!issue && mem_rvalid_i) inflight_q <= inflight_q - 1'b1;
    end
  end
endmodule
