// Asynchronous FIFO for one valid/ready channel between two clock domains.
// The write pointer is Gray-coded in the source domain and synchronised into
// the destination domain through two flip-flops, and the read pointer
// likewise in the other direction; only Gray-coded pointers cross, so at most
// one bit changes per crossing. The storage array is written in the source
// domain and read in the destination domain. Depth is 2**LogDepth.
module cdc_fifo_gray #(
  parameter type         T        = logic [7:0],
  parameter int unsigned LogDepth = 3
) (
  input  logic src_clk_i,
  input  logic src_rst_ni,
  input  T     src_data_i,
  input  logic src_valid_i,
  output logic src_ready_o,
  input  logic dst_clk_i,
  input  logic dst_rst_ni,
  output T     dst_data_o,
  output logic dst_valid_o,
  input  logic dst_ready_i
);
  localparam int unsigned PtrW = LogDepth + 1;
  T mem_q [2**LogDepth];

  logic [PtrW-1:0] wbin_q, wgray_q, rbin_q, rgray_q;
  logic [PtrW-1:0] rgray_s1_q, rgray_s2_q, wgray_s1_q, wgray_s2_q;

  function automatic logic [PtrW-1:0] bin2gray(logic [PtrW-1:0] b);
    return b ^ (b >> 1);
  endfunction

  // Source domain: full when the pointers differ only in the two MSBs.
  assign src_ready_o = (wgray_q != {~rgray_s2_q[PtrW-1:PtrW-2], rgray_s2_q[PtrW-3:0]});
  always_ff @(posedge src_clk_i or negedge src_rst_ni) begin
    if (!src_rst_ni) begin
      wbin_q     <= '0;
      wgray_q    <= '0;
      rgray_s1_q <= '0;
      rgray_s2_q <= '0;
    end else begin
      rgray_s1_q <= rgray_q;
      rgray_s2_q <= rgray_s1_q;
      if (src_valid_i && src_ready_o) begin
        wbin_q  <= wbin_q + 1'b1;
        wgray_q <= bin2gray(wbin_q + 1'b1);
      end
    end
  end
  always_ff @(posedge src_clk_i) begin
    if (src_valid_i && src_ready_o) mem_q[wbin_q[LogDepth-1:0]] <= src_data_i;
  end

  // Destination domain: empty when the synchronised write pointer equals ours.
  assign dst_valid_o = (rgray_q != wgray_s2_q);
  assign dst_data_o  = mem_q[rbin_q[LogDepth-1:0]];
  always_ff @(posedge dst_clk_i or negedge dst_rst_ni) begin
    if (!dst_rst_ni) begin
      rbin_q     <= '0;
      rgray_q    <= '0;
      wgray_s1_q <= '0;
      wgray_s2_q <= '0;
    end else begin
      wgray_s1_q <= wgray_q;
      wgray_s2_q <= wgray_s1_q;
      if (dst_valid_o && dst_ready_i) begin
        rbin_q  <= rbin_q + 1'b1;
        rgray_q <= bin2gray(rbin_q + 1'b1);
      end
    end
  end
endmodule
