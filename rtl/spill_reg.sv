// Two-entry spill register: a full pipeline cut of one valid/ready channel.
// Both the payload/valid path and the ready path are registered, so no
// combinational path crosses it; it still sustains one beat per cycle.
module spill_reg #(
  parameter type T = logic [7:0]
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  T     data_i,
  input  logic valid_i,
  output logic ready_o,
  output T     data_o,
  output logic valid_o,
  input  logic ready_i
);
  T     a_q, b_q;
  logic a_full_q, b_full_q;

  // Entry a drives the output; entry b absorbs a beat when the output stalls.
  assign valid_o = a_full_q;
  assign data_o  = a_q;
  assign ready_o = !b_full_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      a_full_q <= 1'b0;
      b_full_q <= 1'b0;
    end else begin
      if (a_full_q && ready_i) begin
        // a drains; refill from b first, else from input.
        if (b_full_q) begin
          b_full_q <= 1'b0;
        end else begin
          a_full_q <= valid_i;
        end
      end else if (!a_full_q) begin
        a_full_q <= valid_i;
      end else if (valid_i && !b_full_q) begin
        b_full_q <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i) begin
    if (a_full_q && ready_i) begin
      a_q <= b_full_q ? b_q : data_i;
    end else if (!a_full_q) begin
      a_q <= data_i;
    end else if (valid_i && !b_full_q) begin
      b_q <= data_i;
    end
  end
endmodule
