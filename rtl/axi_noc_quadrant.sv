// Quadrant network top: an example on-chip network built from the platform's
// modules in the style of the paper's Manticore case study, with a wide
// (512-bit) network for DMA bulk transfers and a narrow (64-bit) network for
// core accesses, joined at each tile's L1 memory.
//
// Structure:
//  * NumTiles tiles. Each tile has a DMA engine backend (wide master, one ID,
//    up to 8 outstanding bursts), an L1 scratchpad (duplex memory controller
//    with two word-interleaved SRAM banks, L1BankWords words of 512 bit each)
//    and a 2-to-1 multiplexer in front of the L1 that joins the wide network
//    port with the narrow network port (upsized 64 -> 512 bit).
//  * Wide crossbar (512 bit, 6-bit slave IDs, pipeline cuts on): slave ports
//    = the tiles' DMA engines and the wide uplink input; master ports = the
//    tiles' L1s, the wide uplink output (default port; ID remapper 9 -> 6 bit)
//    and a bridge into the narrow network (ID remapper, data downsizer
//    512 -> 64 bit) for the peripheral range.
//  * Narrow crosspoint (64 bit, 6-bit IDs, input queues, pipeline cuts):
//    slave ports = the cores, the narrow uplink input and the bridge; master
//    ports = the tiles' L1s and the peripheral output (default port), which
//    goes through an ID serializer (6 -> 2 bit) and a clock domain crossing
//    into the peripheral clock domain.
//
// Address map: tile i L1 at L1Base + i * L1Stride (L1Stride bytes);
// peripherals at PeriphBase .. PeriphBase + PeriphSize; everything else goes
// to the uplinks (wide requests to the wide uplink, narrow requests to the
// peripheral port). The wide uplink input may not loop back to the wide
// uplink output (crossbar connectivity).
//
// Interface: per tile a DMA transfer request port (valid/ready, source,
// destination, byte count) with a done pulse, and a narrow AXI slave port
// for the tile's core; wide AXI uplink master and slave ports; a narrow AXI
// uplink slave port; a narrow AXI peripheral master port on periph_clk_i.
//
// From the paper: the module set, the two network widths (512-bit DMA and
// 64-bit core network), single-ID DMA engines with 8 outstanding
// transactions, ID remapping at network boundaries, ID serialization before
// simple peripherals, clock domain crossing, duplex banked L1 controllers.
// Choices here: the number of tiles, the address map, the sizes of L1 and
// the exact topology (the paper's Manticore network figures give no numbers
// that could be followed).
`include "axi_typedef.svh"
module axi_noc_quadrant
  import axi_cfg_pkg::*;
#(
  parameter int unsigned NumTiles    = 4,
  parameter int unsigned L1BankWords = 1024,
  parameter logic [63:0] L1Base      = 64'h1000_0000,
  parameter logic [63:0] L1Stride    = 64'h0002_0000,
  parameter logic [63:0] PeriphBase  = 64'h2000_0000,
  parameter logic [63:0] PeriphSize  = 64'h1000_0000,
  parameter int unsigned DmaMaxOutstanding = 8
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic                          periph_clk_i,
  input  logic                          periph_rst_ni,
  // DMA transfer requests, one port per tile
  input  dma_transfer_t [NumTiles-1:0]  dma_xfer_i,
  input  logic [NumTiles-1:0]           dma_xfer_valid_i,
  output logic [NumTiles-1:0]           dma_xfer_ready_o,
  output logic [NumTiles-1:0]           dma_done_o,
  // Core ports (narrow network)
  input  d64_i6_req_t [NumTiles-1:0]    core_req_i,
  output d64_i6_rsp_t [NumTiles-1:0]    core_rsp_o,
  // Wide uplink
  output d512_i6_req_t                  wide_out_req_o,
  input  d512_i6_rsp_t                  wide_out_rsp_i,
  input  d512_i6_req_t                  wide_in_req_i,
  output d512_i6_rsp_t                  wide_in_rsp_o,
  // Narrow uplink input
  input  d64_i6_req_t                   narrow_in_req_i,
  output d64_i6_rsp_t                   narrow_in_rsp_o,
  // Peripheral port (periph_clk_i domain)
  output d64_i2_req_t                   periph_req_o,
  input  d64_i2_rsp_t                   periph_rsp_i
);
  localparam int unsigned WSlv = NumTiles + 1;      // DMAs, wide uplink in
  localparam int unsigned WMst = NumTiles + 2;      // L1s, wide uplink out, bridge
  localparam int unsigned NSlv = NumTiles + 2;      // cores, narrow uplink in, bridge
  localparam int unsigned NMst = NumTiles + 1;      // L1s, periph out
  localparam int unsigned WSelW = $clog2(WMst);
  localparam int unsigned NSelW = $clog2(NMst);
  localparam int unsigned BankAW = $clog2(L1BankWords);

  // ------------------------------------------------------------ wide network
  d512_i6_req_t [WSlv-1:0] w_slv_req;
  d512_i6_rsp_t [WSlv-1:0] w_slv_rsp;
  d512_i9_req_t [WMst-1:0] w_mst_req;
  d512_i9_rsp_t [WMst-1:0] w_mst_rsp;
  axi_pkg::xbar_rule_t [NumTiles:0] w_map;
  logic [WSlv-1:0][WSelW-1:0] w_default;

  localparam bit [WSlv-1:0][WMst-1:0] WConn = wide_conn();
  function automatic bit [WSlv-1:0][WMst-1:0] wide_conn();
    bit [WSlv-1:0][WMst-1:0] c;
    c = '1;
    c[NumTiles][NumTiles] = 1'b0;  // no uplink loop-back
    return c;
  endfunction

  for (genvar i = 0; i < NumTiles; i++) begin : gen_w_map
    assign w_map[i] = '{idx: 32'(i), start_addr: L1Base + L1Stride * i,
                        end_addr: L1Base + L1Stride * (i + 1)};
  end
  assign w_map[NumTiles] = '{idx: 32'(NumTiles + 1), start_addr: PeriphBase,
                             end_addr: PeriphBase + PeriphSize};
  for (genvar i = 0; i < WSlv; i++) begin : gen_w_def
    assign w_default[i] = WSelW'(NumTiles);
  end
  assign w_slv_req[NumTiles] = wide_in_req_i;
  assign wide_in_rsp_o       = w_slv_rsp[NumTiles];

  axi_xbar #(
    .NoSlvPorts (WSlv), .NoMstPorts (WMst), .SlvIdWidth (6),
    .MaxMstTrans (8), .MaxWTrans (8), .NoAddrRules (NumTiles + 1),
    .EnDefaultMstPort ('1), .Connectivity (WConn), .PipelineCuts (1'b1),
    .slv_req_t (d512_i6_req_t), .slv_rsp_t (d512_i6_rsp_t), .slv_ax_t (d512_i6_ax_t),
    .w_t (d512_i6_w_t), .slv_b_t (d512_i6_b_t), .slv_r_t (d512_i6_r_t),
    .mst_req_t (d512_i9_req_t), .mst_rsp_t (d512_i9_rsp_t), .mst_ax_t (d512_i9_ax_t)
  ) i_wide_xbar (
    .clk_i, .rst_ni,
    .slv_reqs_i (w_slv_req), .slv_rsps_o (w_slv_rsp),
    .mst_reqs_o (w_mst_req), .mst_rsps_i (w_mst_rsp),
    .addr_map_i (w_map), .default_mst_port_i (w_default)
  );

  // Wide uplink out: remap the 9-bit crossbar IDs back to 6 bit.
  axi_id_remap #(
    .SlvIdWidth (9), .MaxUniqIds (16), .MaxTxnsPerId (8), .MstIdWidth (6),
    .slv_req_t (d512_i9_req_t), .slv_rsp_t (d512_i9_rsp_t),
    .mst_req_t (d512_i6_req_t), .mst_rsp_t (d512_i6_rsp_t)
  ) i_wide_out_remap (
    .clk_i, .rst_ni,
    .slv_req_i (w_mst_req[NumTiles]), .slv_rsp_o (w_mst_rsp[NumTiles]),
    .mst_req_o (wide_out_req_o), .mst_rsp_i (wide_out_rsp_i)
  );

  // Bridge wide -> narrow: remap IDs, then downsize 512 -> 64 bit.
  d512_i6_req_t bridge_w_req;
  d512_i6_rsp_t bridge_w_rsp;
  d64_i6_req_t [NSlv-1:0] n_slv_req;
  d64_i6_rsp_t [NSlv-1:0] n_slv_rsp;
  axi_id_remap #(
    .SlvIdWidth (9), .MaxUniqIds (16), .MaxTxnsPerId (8), .MstIdWidth (6),
    .slv_req_t (d512_i9_req_t), .slv_rsp_t (d512_i9_rsp_t),
    .mst_req_t (d512_i6_req_t), .mst_rsp_t (d512_i6_rsp_t)
  ) i_bridge_remap (
    .clk_i, .rst_ni,
    .slv_req_i (w_mst_req[NumTiles+1]), .slv_rsp_o (w_mst_rsp[NumTiles+1]),
    .mst_req_o (bridge_w_req), .mst_rsp_i (bridge_w_rsp)
  );
  axi_dw_downsizer #(
    .SlvDataWidth (512), .MstDataWidth (64),
    .slv_req_t (d512_i6_req_t), .slv_rsp_t (d512_i6_rsp_t),
    .mst_req_t (d64_i6_req_t), .mst_rsp_t (d64_i6_rsp_t), .ax_t (d512_i6_ax_t)
  ) i_bridge_dwc (
    .clk_i, .rst_ni,
    .slv_req_i (bridge_w_req), .slv_rsp_o (bridge_w_rsp),
    .mst_req_o (n_slv_req[NumTiles+1]), .mst_rsp_i (n_slv_rsp[NumTiles+1])
  );

  // ---------------------------------------------------------- narrow network
  d64_i6_req_t [NMst-1:0] n_mst_req;
  d64_i6_rsp_t [NMst-1:0] n_mst_rsp;
  axi_pkg::xbar_rule_t [NumTiles-1:0] n_map;
  logic [NSlv-1:0][NSelW-1:0] n_default;
  for (genvar i = 0; i < NumTiles; i++) begin : gen_n_map
    assign n_map[i] = '{idx: 32'(i), start_addr: L1Base + L1Stride * i,
                        end_addr: L1Base + L1Stride * (i + 1)};
    assign n_slv_req[i] = core_req_i[i];
    assign core_rsp_o[i] = n_slv_rsp[i];
  end
  for (genvar i = 0; i < NSlv; i++) begin : gen_n_def
    assign n_default[i] = NSelW'(NumTiles);
  end
  assign n_slv_req[NumTiles] = narrow_in_req_i;
  assign narrow_in_rsp_o     = n_slv_rsp[NumTiles];

  axi_xp #(
    .NoSlvPorts (NSlv), .NoMstPorts (NMst), .IdWidth (6),
    .MaxUniqIds (16), .MaxTxnsPerId (8), .InputQueueDepth (2),
    .NoAddrRules (NumTiles), .EnDefaultMstPort ('1), .Connectivity ('1), .PipelineCuts (1'b1),
    .req_t (d64_i6_req_t), .rsp_t (d64_i6_rsp_t), .ax_t (d64_i6_ax_t), .w_t (d64_i6_w_t),
    .b_t (d64_i6_b_t), .r_t (d64_i6_r_t),
    .int_req_t (d64_i9_req_t), .int_rsp_t (d64_i9_rsp_t), .int_ax_t (d64_i9_ax_t)
  ) i_narrow_xp (
    .clk_i, .rst_ni,
    .slv_reqs_i (n_slv_req), .slv_rsps_o (n_slv_rsp),
    .mst_reqs_o (n_mst_req), .mst_rsps_i (n_mst_rsp),
    .addr_map_i (n_map), .default_mst_port_i (n_default)
  );

  // Peripheral path: serialize IDs to 2 bit, then cross into periph_clk_i.
  d64_i2_req_t periph_fast_req;
  d64_i2_rsp_t periph_fast_rsp;
  axi_id_serialize #(
    .SlvIdWidth (6), .MstIdWidth (2), .MaxTxnsPerId (8),
    .slv_req_t (d64_i6_req_t), .slv_rsp_t (d64_i6_rsp_t),
    .mst_req_t (d64_i2_req_t), .mst_rsp_t (d64_i2_rsp_t)
  ) i_periph_ser (
    .clk_i, .rst_ni,
    .slv_req_i (n_mst_req[NumTiles]), .slv_rsp_o (n_mst_rsp[NumTiles]),
    .mst_req_o (periph_fast_req), .mst_rsp_i (periph_fast_rsp)
  );
  axi_cdc #(
    .LogDepth (3),
    .req_t (d64_i2_req_t), .rsp_t (d64_i2_rsp_t), .ax_t (d64_i2_ax_t),
    .w_t (d64_i2_w_t), .b_t (d64_i2_b_t), .r_t (d64_i2_r_t)
  ) i_periph_cdc (
    .src_clk_i (clk_i), .src_rst_ni (rst_ni),
    .src_req_i (periph_fast_req), .src_rsp_o (periph_fast_rsp),
    .dst_clk_i (periph_clk_i), .dst_rst_ni (periph_rst_ni),
    .dst_req_o (periph_req_o), .dst_rsp_i (periph_rsp_i)
  );

  // -------------------------------------------------------------------- tiles
  for (genvar t = 0; t < NumTiles; t++) begin : gen_tile
    // DMA engine backend, master on the wide network.
    axi_dma_backend #(
      .DataWidth (512), .IdWidth (6), .MaxOutstanding (DmaMaxOutstanding),
      .req_t (d512_i6_req_t), .rsp_t (d512_i6_rsp_t)
    ) i_dma (
      .clk_i, .rst_ni,
      .xfer_i (dma_xfer_i[t]), .xfer_valid_i (dma_xfer_valid_i[t]), .xfer_ready_o (dma_xfer_ready_o[t]),
      .done_o (dma_done_o[t]),
      .mst_req_o (w_slv_req[t]), .mst_rsp_i (w_slv_rsp[t])
    );

    // Narrow port upsized to 512 bit, IDs widened to the crossbar's 9 bit.
    d512_i6_req_t up_req;
    d512_i6_rsp_t up_rsp;
    d512_i9_req_t [1:0] l1_in_req;
    d512_i9_rsp_t [1:0] l1_in_rsp;
    d512_i10_req_t l1_req;
    d512_i10_rsp_t l1_rsp;
    axi_dw_upsizer #(
      .SlvDataWidth (64), .MstDataWidth (512),
      .slv_req_t (d64_i6_req_t), .slv_rsp_t (d64_i6_rsp_t),
      .mst_req_t (d512_i6_req_t), .mst_rsp_t (d512_i6_rsp_t), .ax_t (d64_i6_ax_t)
    ) i_up (
      .clk_i, .rst_ni,
      .slv_req_i (n_mst_req[t]), .slv_rsp_o (n_mst_rsp[t]),
      .mst_req_o (up_req), .mst_rsp_i (up_rsp)
    );
    always_comb begin
      l1_in_req[0] = w_mst_req[t];
      w_mst_rsp[t] = l1_in_rsp[0];
      l1_in_req[1]          = '0;
      l1_in_req[1].aw       = '{id: 9'(up_req.aw.id), addr: up_req.aw.addr, len: up_req.aw.len,
                                size: up_req.aw.size, burst: up_req.aw.burst, qos: up_req.aw.qos};
      l1_in_req[1].aw_valid = up_req.aw_valid;
      l1_in_req[1].w        = up_req.w;
      l1_in_req[1].w_valid  = up_req.w_valid;
      l1_in_req[1].b_ready  = up_req.b_ready;
      l1_in_req[1].ar       = '{id: 9'(up_req.ar.id), addr: up_req.ar.addr, len: up_req.ar.len,
                                size: up_req.ar.size, burst: up_req.ar.burst, qos: up_req.ar.qos};
      l1_in_req[1].ar_valid = up_req.ar_valid;
      l1_in_req[1].r_ready  = up_req.r_ready;
      up_rsp          = '0;
      up_rsp.aw_ready = l1_in_rsp[1].aw_ready;
      up_rsp.w_ready  = l1_in_rsp[1].w_ready;
      up_rsp.b        = '{id: 6'(l1_in_rsp[1].b.id), resp: l1_in_rsp[1].b.resp};
      up_rsp.b_valid  = l1_in_rsp[1].b_valid;
      up_rsp.ar_ready = l1_in_rsp[1].ar_ready;
      up_rsp.r        = '{id: 6'(l1_in_rsp[1].r.id), data: l1_in_rsp[1].r.data,
                          resp: l1_in_rsp[1].r.resp, last: l1_in_rsp[1].r.last};
      up_rsp.r_valid  = l1_in_rsp[1].r_valid;
    end

    axi_mux #(
      .SlvIdWidth (9), .NoSlvPorts (2), .MaxWTrans (8),
      .slv_req_t (d512_i9_req_t), .slv_rsp_t (d512_i9_rsp_t),
      .mst_req_t (d512_i10_req_t), .mst_rsp_t (d512_i10_rsp_t), .mst_ax_t (d512_i10_ax_t),
      .slv_b_t (d512_i9_b_t), .slv_r_t (d512_i9_r_t)
    ) i_l1_mux (
      .clk_i, .rst_ni,
      .slv_reqs_i (l1_in_req), .slv_rsps_o (l1_in_rsp),
      .mst_req_o (l1_req), .mst_rsp_i (l1_rsp)
    );

    // L1: duplex controller and two SRAM banks.
    logic [1:0]              m_req, m_we;
    logic [1:0][BankAW-1:0]  m_addr;
    logic [1:0][511:0]       m_wdata, m_rdata;
    logic [1:0][63:0]        m_be;
    axi_to_mem_banked #(
      .AddrWidth (64), .DataWidth (512), .IdWidth (10), .NumBanks (2), .BufDepth (1),
      .BankAddrWidth (BankAW),
      .req_t (d512_i10_req_t), .rsp_t (d512_i10_rsp_t), .ax_t (d512_i10_ax_t),
      .b_t (d512_i10_b_t), .r_t (d512_i10_r_t)
    ) i_l1_ctrl (
      .clk_i, .rst_ni,
      .slv_req_i (l1_req), .slv_rsp_o (l1_rsp),
      .mem_req_o (m_req), .mem_gnt_i (2'b11), .mem_addr_o (m_addr), .mem_we_o (m_we),
      .mem_wdata_o (m_wdata), .mem_be_o (m_be), .mem_rdata_i (m_rdata)
    );
    for (genvar b = 0; b < 2; b++) begin : gen_bank
      sram #(.NumWords (L1BankWords), .DataWidth (512)) i_bank (
        .clk_i, .req_i (m_req[b]), .we_i (m_we[b]), .addr_i (m_addr[b]),
        .wdata_i (m_wdata[b]), .be_i (m_be[b]), .rdata_o (m_rdata[b])
      );
    end
  end
endmodule
