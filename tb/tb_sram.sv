// Testbench of the SRAM bank: random reads and byte-masked writes against a
// reference array; every read result (one cycle after the request) must
// equal the reference. Counted mechanism: partial writes (not all byte
// enables set) followed by a read of the same word.
module tb_sram;
  logic clk = 0;
  always #5 clk = ~clk;
  logic        req, we;
  logic [5:0]  addr;
  logic [63:0] wdata, rdata, ref_mem [64], exp;
  logic [7:0]  be;
  logic        pend;
  bit          partial [64];
  int unsigned checks, failures, events;

  sram #(.NumWords(64), .DataWidth(64)) dut (.clk_i(clk), .req_i(req), .we_i(we),
    .addr_i(addr), .wdata_i(wdata), .be_i(be), .rdata_o(rdata));

  initial begin
    checks = 0; failures = 0; events = 0; pend = 0; req = 0;
    // Initialise all words.
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      req = 1; we = 1; addr = 6'(i); be = '1; wdata = {$urandom, $urandom};
      ref_mem[i] = wdata; partial[i] = 0;
    end
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      if (pend) begin
        checks++;
        if (rdata !== exp) begin
          failures++;
          $display("FAIL: read %h expected %h", rdata, exp);
        end
      end
      pend = 0;
      req = ($urandom_range(99) < 80);
      we = $urandom_range(1);
      addr = 6'($urandom_range(63));
      wdata = {$urandom, $urandom};
      be = 8'($urandom);
      if (req && we) begin
        for (int b = 0; b < 8; b++) if (be[b]) ref_mem[addr][8*b +: 8] = wdata[8*b +: 8];
        partial[addr] = (be != 8'hff);
      end else if (req) begin
        exp = ref_mem[addr];
        pend = 1;
        if (partial[addr]) events++;
        partial[addr] = 0;
      end
    end
    @(negedge clk);
    req = 0;
    $display("partial writes read back: %0d", events);
    if (events == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
