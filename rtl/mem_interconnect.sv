// Memory interconnect between NumIn requesters and NumBanks word-interleaved
// banks (bank = word address mod NumBanks, word = byte address / (DataWidth/8)).
// Each bank has a round-robin arbiter over the requesters addressing it and
// grants one request per cycle when the bank grants; the bank's read data
// returns to the winner one cycle later together with in_rvalid_o (also for
// writes, as an acknowledgement). Requests use req/gnt (stream) handshaking,
// responses have no handshake. The paper calls this a logarithmic
// interconnect (arbitration trees); a flat per-bank arbiter with the same
// function is used here.
module mem_interconnect #(
  parameter int unsigned NumIn     = 2,
  parameter int unsigned NumBanks  = 2,
  parameter int unsigned AddrWidth = 64,
  parameter int unsigned DataWidth = 64,
  parameter int unsigned BankAddrWidth = 10,
  localparam int unsigned NB    = DataWidth / 8,
  localparam int unsigned BankW = NumBanks > 1 ? $clog2(NumBanks) : 1,
  localparam int unsigned InW   = NumIn > 1 ? $clog2(NumIn) : 1
) (
  input  logic                                   clk_i,
  input  logic                                   rst_ni,
  input  logic [NumIn-1:0]                       in_req_i,
  output logic [NumIn-1:0]                       in_gnt_o,
  input  logic [NumIn-1:0][AddrWidth-1:0]        in_addr_i,
  input  logic [NumIn-1:0]                       in_we_i,
  input  logic [NumIn-1:0][DataWidth-1:0]        in_wdata_i,
  input  logic [NumIn-1:0][NB-1:0]               in_be_i,
  output logic [NumIn-1:0]                       in_rvalid_o,
  output logic [NumIn-1:0][DataWidth-1:0]        in_rdata_o,
  output logic [NumBanks-1:0]                    bank_req_o,
  input  logic [NumBanks-1:0]                    bank_gnt_i,
  output logic [NumBanks-1:0][BankAddrWidth-1:0] bank_addr_o,
  output logic [NumBanks-1:0]                    bank_we_o,
  output logic [NumBanks-1:0][DataWidth-1:0]     bank_wdata_o,
  output logic [NumBanks-1:0][NB-1:0]            bank_be_o,
  input  logic [NumBanks-1:0][DataWidth-1:0]     bank_rdata_i
);
  localparam int unsigned OffW = $clog2(NB);
  logic [NumIn-1:0][BankW-1:0] tgt;
  logic [NumBanks-1:0][InW-1:0] ptr_q, win;
  logic [NumBanks-1:0] any;
  logic [NumBanks-1:0] rsp_valid_q;
  logic [NumBanks-1:0][InW-1:0] rsp_idx_q;

  for (genvar i = 0; i < NumIn; i++) begin : gen_tgt
    if (NumBanks > 1) begin : gen_banked
      assign tgt[i] = in_addr_i[i][OffW +: BankW];
    end else begin : gen_single
      assign tgt[i] = '0;
    end
  end

  // Per-bank round-robin selection.
  always_comb begin
    for (int unsigned b = 0; b < NumBanks; b++) begin
      any[b] = 1'b0;
      win[b] = '0;
      for (int unsigned k = 0; k < NumIn; k++) begin
        if (!any[b] && in_req_i[(int'(ptr_q[b]) + k) % NumIn] &&
            tgt[(int'(ptr_q[b]) + k) % NumIn] == BankW'(b)) begin
          any[b] = 1'b1;
          win[b] = InW'((int'(ptr_q[b]) + k) % NumIn);
        end
      end
      bank_req_o[b]   = any[b];
      bank_addr_o[b]  = BankAddrWidth'(in_addr_i[win[b]] >> (OffW + (NumBanks > 1 ? BankW : 0)));
      bank_we_o[b]    = in_we_i[win[b]];
      bank_wdata_o[b] = in_wdata_i[win[b]];
      bank_be_o[b]    = in_be_i[win[b]];
    end
    in_gnt_o = '0;
    for (int unsigned b = 0; b < NumBanks; b++)
      if (any[b] && bank_gnt_i[b]) in_gnt_o[win[b]] = 1'b1;
    in_rvalid_o = '0;
    in_rdata_o  = '0;
    for (int unsigned b = 0; b < NumBanks; b++) begin
      if (rsp_valid_q[b]) begin
        in_rvalid_o[rsp_idx_q[b]] = 1'b1;
        in_rdata_o[rsp_idx_q[b]]  = bank_rdata_i[b];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ptr_q       <= '0;
      rsp_valid_q <= '0;
      rsp_idx_q   <= '0;
    end else begin
      for (int unsigned b = 0; b < NumBanks; b++) begin
        rsp_valid_q[b] <= any[b] && bank_gnt_i[b];
        rsp_idx_q[b]   <= win[b];
        if (any[b] && bank_gnt_i[b])
          ptr_q[b] <= (win[b] == InW'(NumIn - 1)) ? '0 : win[b] + 1'b1;
      end
    end
  end
endmodule
