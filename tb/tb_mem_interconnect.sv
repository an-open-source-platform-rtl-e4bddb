// Testbench of the memory interconnect: three random requesters access four
// word-interleaved SRAM banks (64 words each) that grant at random. A
// reference memory is updated at every grant (grants to one bank happen one
// per cycle, so grant order is memory order); every read response, which must
// arrive one cycle after its grant at the right requester, is compared
// against the reference value taken at grant time. Requests must stay stable
// until granted. Counted mechanism: bank conflicts (two or more requesters on
// one bank in the same cycle) resolved by arbitration.
module tb_mem_interconnect;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int N = 3, B = 4;
  logic [N-1:0]        req, gnt, we, rvalid;
  logic [N-1:0][63:0]  addr, wdata, rdata;
  logic [N-1:0][7:0]   be;
  logic [B-1:0]        breq, bgnt, bwe;
  logic [B-1:0][5:0]   baddr;
  logic [B-1:0][63:0]  bwdata, brdata;
  logic [B-1:0][7:0]   bbe;
  logic [63:0]         ref_mem [256];
  logic [63:0]         exp [N];
  bit                  pend [N], expect_rsp [N];
  int unsigned checks, failures, events, done_cnt;

  mem_interconnect #(.NumIn(N), .NumBanks(B), .AddrWidth(64), .DataWidth(64), .BankAddrWidth(6)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .in_req_i(req), .in_gnt_o(gnt), .in_addr_i(addr), .in_we_i(we), .in_wdata_i(wdata),
    .in_be_i(be), .in_rvalid_o(rvalid), .in_rdata_o(rdata),
    .bank_req_o(breq), .bank_gnt_i(bgnt), .bank_addr_o(baddr), .bank_we_o(bwe),
    .bank_wdata_o(bwdata), .bank_be_o(bbe), .bank_rdata_i(brdata));
  for (genvar b = 0; b < B; b++) begin : gen_bank
    sram #(.NumWords(64), .DataWidth(64)) i_sram (.clk_i(clk), .req_i(breq[b] && bgnt[b]),
      .we_i(bwe[b]), .addr_i(baddr[b]), .wdata_i(bwdata[b]), .be_i(bbe[b]), .rdata_o(brdata[b]));
  end

  // Reference update, response expectation and conflict counting at each edge.
  always @(posedge clk) if (rst_n) begin
    for (int b = 0; b < B; b++) begin
      int c;
      c = 0;
      for (int i = 0; i < N; i++) if (req[i] && addr[i][4:3] == 2'(b)) c++;
      if (c > 1) events++;
    end
    for (int i = 0; i < N; i++) begin
      if (expect_rsp[i]) begin
        checks++;
        if (!rvalid[i]) begin failures++; $display("FAIL: missing response at %0d", i); end
        else if (pend[i] && rdata[i] !== exp[i]) begin
          failures++; $display("FAIL: requester %0d read %h expected %h", i, rdata[i], exp[i]);
        end
      end else if (rvalid[i]) begin
        failures++; $display("FAIL: spurious response at %0d", i);
      end
      expect_rsp[i] = 0; pend[i] = 0;
    end
    for (int i = 0; i < N; i++) if (req[i] && gnt[i]) begin
      expect_rsp[i] = 1;
      if (we[i]) begin
        for (int k = 0; k < 8; k++) if (be[i][k]) ref_mem[addr[i][10:3]][8*k +: 8] = wdata[i][8*k +: 8];
      end else begin
        exp[i] = ref_mem[addr[i][10:3]]; pend[i] = 1;
      end
    end
  end

  for (genvar i = 0; i < N; i++) begin : gen_req
    initial begin
      req[i] = 0;
      wait (rst_n);
      // First pass writes every word this requester owns, so reads are defined.
      for (int n = 0; n < 1500; n++) begin
        @(negedge clk);
        if (!req[i] || gnt_seen(i)) begin
          req[i] = ($urandom_range(99) < 70);
          addr[i] = {53'h0, 8'($urandom), 3'b0};
          we[i] = (n < 200) ? 1'b1 : 1'($urandom_range(1));
          be[i] = (n < 200) ? 8'hff : 8'($urandom);
          wdata[i] = {$urandom, $urandom};
        end
      end
      @(negedge clk);
      while (req[i] && !gnt_seen(i)) @(negedge clk);
      req[i] = 0;
      done_cnt++;
    end
  end
  // A request is granted at the clock edge if gnt was high just before it.
  bit gnt_q [N];
  always @(posedge clk) for (int i = 0; i < N; i++) gnt_q[i] = req[i] && gnt[i];
  function automatic bit gnt_seen(int i);
    return gnt_q[i];
  endfunction
  always @(negedge clk) for (int b = 0; b < B; b++) bgnt[b] = ($urandom_range(99) < 75);

  initial begin
    checks = 0; failures = 0; events = 0; done_cnt = 0;
    for (int i = 0; i < 256; i++) ref_mem[i] = '0;
    for (int i = 0; i < N; i++) begin pend[i] = 0; expect_rsp[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done_cnt == N);
    repeat (4) @(posedge clk);
    $display("bank conflicts: %0d", events);
    if (events == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
