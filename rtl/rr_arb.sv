// Round-robin arbiter for N valid/ready streams of packed type T.
// The priority pointer moves past the winner after each handshake. Once a
// grant is offered downstream and not yet taken, the selection is held until
// the handshake, so the output obeys the stability rule (F1) whenever the
// inputs do.
module rr_arb #(
  parameter int unsigned N = 4,
  parameter type         T = logic [7:0],
  localparam int unsigned IdxW = N > 1 ? $clog2(N) : 1
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic [N-1:0]    valid_i,
  output logic [N-1:0]    ready_o,
  input  T     [N-1:0]    data_i,
  output logic            valid_o,
  input  logic            ready_i,
  output T                data_o,
  output logic [IdxW-1:0] idx_o
);
  logic [IdxW-1:0] ptr_q, hold_idx_q, sel;
  logic            hold_q, found;

  always_comb begin
    sel   = hold_idx_q;
    found = 1'b0;
    if (!hold_q) begin
      for (int unsigned k = 0; k < N; k++) begin
        if (!found && valid_i[(int'(ptr_q) + k) % N]) begin
          found = 1'b1;
          sel   = IdxW'((int'(ptr_q) + k) % N);
        end
      end
    end
  end

  assign idx_o   = sel;
  assign valid_o = hold_q ? valid_i[hold_idx_q] : found;
  assign data_o  = data_i[sel];
  always_comb begin
    ready_o      = '0;
    ready_o[sel] = ready_i && valid_o;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ptr_q      <= '0;
      hold_q     <= 1'b0;
      hold_idx_q <= '0;
    end else begin
      hold_q     <= valid_o && !ready_i;
      hold_idx_q <= sel;
      if (valid_o && ready_i) ptr_q <= (sel == IdxW'(N - 1)) ? '0 : sel + 1'b1;
    end
  end
endmodule
