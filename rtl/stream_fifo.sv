// Synchronous valid/ready FIFO of Depth entries of any packed type T.
// The head is read combinationally from the storage array (no fall-through:
// a pushed element is visible one cycle later). Depth 0 makes it a wire.
// usage_o counts stored elements.
module stream_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned Depth = 4,
  localparam int unsigned CntW = $clog2(Depth + 1) > 0 ? $clog2(Depth + 1) : 1
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  T                data_i,
  input  logic            valid_i,
  output logic            ready_o,
  output T                data_o,
  output logic            valid_o,
  input  logic            ready_i,
  output logic [CntW-1:0] usage_o
);
  if (Depth == 0) begin : gen_pass
    assign data_o  = data_i;
    assign valid_o = valid_i;
    assign ready_o = ready_i;
    assign usage_o = '0;
  end else begin : gen_fifo
    localparam int unsigned PtrW = Depth > 1 ? $clog2(Depth) : 1;
    T                mem_q [Depth];
    logic [PtrW-1:0] rd_q, wr_q;
    logic [CntW-1:0] cnt_q;
    logic            push, pop;

    assign ready_o = (cnt_q != CntW'(Depth));
    assign valid_o = (cnt_q != '0);
    assign data_o  = mem_q[rd_q];
    assign usage_o = cnt_q;
    assign push    = valid_i && ready_o;
    assign pop     = valid_o && ready_i;

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        rd_q  <= '0;
        wr_q  <= '0;
        cnt_q <= '0;
      end else begin
        if (push) wr_q <= (wr_q == PtrW'(Depth - 1)) ? '0 : wr_q + 1'b1;
        if (pop)  rd_q <= (rd_q == PtrW'(Depth - 1)) ? '0 : rd_q + 1'b1;
        if (push && !pop) cnt_q <= cnt_q + 1'b1;
        else if (pop && !push) cnt_q <= cnt_q - 1'b1;
      end
    end

    always_ff @(posedge clk_i) begin
      if (push) mem_q[wr_q] <= data_i;
    end
  end
endmodule
