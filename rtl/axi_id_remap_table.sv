// One direction's table of the ID remapper. Entry i (= output ID i) holds an
// input ID and a counter of that ID's outstanding transactions; an entry is
// free when its counter is zero. Lookup: an entry already holding the input ID
// must be used (O1) and is usable while its counter is below MaxTxnsPerId;
// otherwise the lowest free entry is taken. push_i (command handshake)
// stores the ID and increments; pop_i (last response handshake) decrements
// the entry named by pop_idx_i, whose input ID is returned on pop_id_o.
module axi_id_remap_table #(
  parameter int unsigned InIdWidth    = 6,
  parameter int unsigned MaxUniqIds   = 16,
  parameter int unsigned MaxTxnsPerId = 8,
  localparam int unsigned IdxW = MaxUniqIds > 1 ? $clog2(MaxUniqIds) : 1
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [InIdWidth-1:0] lookup_id_i,
  output logic                 lookup_ok_o,
  output logic [IdxW-1:0]      lookup_idx_o,
  input  logic                 push_i,
  input  logic [IdxW-1:0]      push_idx_i,
  input  logic                 pop_i,
  input  logic [IdxW-1:0]      pop_idx_i,
  output logic [InIdWidth-1:0] pop_id_o
);
  localparam int unsigned CntW = $clog2(MaxTxnsPerId + 1);
  logic [InIdWidth-1:0] id_q  [MaxUniqIds];
  logic [CntW-1:0]      cnt_q [MaxUniqIds];
  logic match, free;
  logic [IdxW-1:0] match_idx, free_idx;

  always_comb begin
    match = 1'b0; free = 1'b0; match_idx = '0; free_idx = '0;
    for (int unsigned i = 0; i < MaxUniqIds; i++) begin
      if (!match && cnt_q[i] != '0 && id_q[i] == lookup_id_i) begin
        match = 1'b1; match_idx = IdxW'(i);
      end
      if (!free && cnt_q[i] == '0) begin
        free = 1'b1; free_idx = IdxW'(i);
      end
    end
  end
  assign lookup_idx_o = match ? match_idx : free_idx;
  assign lookup_ok_o  = match ? (cnt_q[match_idx] != CntW'(MaxTxnsPerId)) : free;
  assign pop_id_o     = id_q[pop_idx_i];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int unsigned i = 0; i < MaxUniqIds; i++) begin
        cnt_q[i] <= '0;
        id_q[i]  <= '0;
      end
    end else begin
      for (int unsigned i = 0; i < MaxUniqIds; i++) begin
        if (push_i && push_idx_i == IdxW'(i)) id_q[i] <= lookup_id_i;
        if ((push_i && push_idx_i == IdxW'(i)) && !(pop_i && pop_idx_i == IdxW'(i)))
          cnt_q[i] <= cnt_q[i] + 1'b1;
        else if (!(push_i && push_idx_i == IdxW'(i)) && (pop_i && pop_idx_i == IdxW'(i)))
          cnt_q[i] <= cnt_q[i] - 1'b1;
      end
    end
  end
endmodule
