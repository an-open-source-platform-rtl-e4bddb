// Random AXI traffic master for testbenches, with its own scoreboard.
// Phase 1 writes NumTxn bursts of random data, each into its own 4 KiB
// region at Base + k*4096 (random offset, length up to MaxLen+1 beats, random
// size if Narrow, random ID in [0, MaxId]), several outstanding at a time;
// every B must carry the ID of an outstanding write. Phase 2 reads all regions
// back with random IDs and compares every byte against what was written,
// checks RLAST and checks that responses with one ID return in command order
// (O2). Transaction k goes to window k % NumWindows (WinStride apart);
// transactions in window ErrWindow must get DECERR. ExpResp is the response every beat must carry; with a non-OKAY
// ExpResp only responses and beat counts are checked. done_o rises at the end.
module tb_axi_rand_master #(
  parameter type         req_t   = logic,
  parameter type         rsp_t   = logic,
  parameter type         ax_t    = logic,
  parameter type         w_t     = logic,
  parameter int unsigned DW      = 64,
  parameter longint unsigned Base = 64'h0,
  parameter int unsigned NumTxn  = 16,
  parameter int unsigned MaxLen  = 7,
  parameter bit          Narrow  = 1'b1,
  parameter int unsigned MaxId   = 3,
  parameter int unsigned ValidPct = 70,
  parameter logic [1:0]  ExpResp = 2'b00,
  parameter int unsigned NumWindows = 1,
  parameter longint unsigned WinStride = 64'h0,
  parameter int          ErrWindow = -1
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  output req_t        req_o,
  input  rsp_t        rsp_i,
  output logic        done_o,
  output int unsigned checks_o,
  output int unsigned failures_o
);
  localparam int unsigned NB = DW / 8;
  localparam int unsigned MaxSize = $clog2(NB);

  typedef struct {
    logic [63:0] addr;
    int unsigned len;
    int unsigned size;
    int unsigned id;
    logic [1:0]  resp;
  } txn_t;
  txn_t txns[NumTxn];
  byte unsigned shadow [longint unsigned];

  ax_t  aw, ar;
  w_t   w;
  logic aw_valid, w_valid, ar_valid, b_ready, r_ready;
  int unsigned checks, failures;
  int unsigned b_pending [int unsigned];
  int unsigned r_order [int unsigned][$];
  int unsigned r_beat [NumTxn];
  int unsigned writes_done, reads_done;
  bit phase_rd;
  int unsigned err_b;

  always_comb begin
    req_o          = '0;
    req_o.aw       = aw;
    req_o.aw_valid = aw_valid;
    req_o.w        = w;
    req_o.w_valid  = w_valid;
    req_o.b_ready  = b_ready;
    req_o.ar       = ar;
    req_o.ar_valid = ar_valid;
    req_o.r_ready  = r_ready;
  end
  assign checks_o   = checks;
  assign failures_o = failures;

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("[%m] FAIL %s at %0t", what, $time);
    end
  endfunction

  function automatic logic [63:0] beat_addr(int unsigned k, int unsigned beat);
    logic [63:0] a;
    a = txns[k].addr;
    for (int unsigned i = 0; i < beat; i++) a = ((a >> txns[k].size) + 1) << txns[k].size;
    return a;
  endfunction

  initial begin
    aw_valid = 0; w_valid = 0; ar_valid = 0; b_ready = 0; r_ready = 0;
    aw = '0; ar = '0; w = '0;
    checks = 0; failures = 0; done_o = 0; writes_done = 0; reads_done = 0; err_b = 0; phase_rd = 0;
    for (int unsigned k = 0; k < NumTxn; k++) begin
      int unsigned size, len, off, bytes;
      size = Narrow ? $urandom_range(MaxSize) : MaxSize;
      len  = $urandom_range(MaxLen);
      bytes = (len + 1) << size;
      if (bytes > 4096) begin len = (4096 >> size) - 1; bytes = 4096; end
      off  = ($urandom_range(4096 - bytes) >> size) << size;
      txns[k].addr = Base + 64'(k % NumWindows) * WinStride + 64'(k / NumWindows) * 4096 + 64'(off);
      txns[k].resp = (int'(k % NumWindows) == ErrWindow) ? axi_pkg::RESP_DECERR : ExpResp;
      txns[k].len  = len;
      txns[k].size = size;
      txns[k].id   = $urandom_range(MaxId);
      r_beat[k]    = 0;
    end
    wait (rst_ni);
    @(negedge clk_i);
    fork
      // AW issue
      for (int unsigned k = 0; k < NumTxn; k++) begin
        while ($urandom_range(99) >= ValidPct) @(negedge clk_i);
        aw.id = txns[k].id; aw.addr = txns[k].addr; aw.len = txns[k].len;
        aw.size = txns[k].size; aw.burst = axi_pkg::BURST_INCR; aw.qos = '0;
        aw_valid = 1;
        if (b_pending.exists(txns[k].id)) b_pending[txns[k].id]++;
        else b_pending[txns[k].id] = 1;
        do @(posedge clk_i); while (!rsp_i.aw_ready);
        @(negedge clk_i);
        aw_valid = 0;
      end
      // W issue
      for (int unsigned k = 0; k < NumTxn; k++) begin
        for (int unsigned beat = 0; beat <= txns[k].len; beat++) begin
          logic [63:0] a;
          while ($urandom_range(99) >= ValidPct) @(negedge clk_i);
          a = beat_addr(k, beat);
          for (int unsigned i = 0; i < NB; i++) begin
            w.data[8*i +: 8] = 8'($urandom);
            w.strb[i] = ((a / NB) * NB + i >= a) && ((a / NB) * NB + i < a + (1 << txns[k].size));
            if (w.strb[i]) shadow[(a / NB) * NB + i] = w.data[8*i +: 8];
          end
          w.last = (beat == txns[k].len);
          w_valid = 1;
          do @(posedge clk_i); while (!rsp_i.w_ready);
          @(negedge clk_i);
          w_valid = 0;
        end
      end
      // B collect
      while (writes_done < NumTxn) begin
        b_ready = ($urandom_range(99) < ValidPct);
        @(posedge clk_i);
        if (b_ready && rsp_i.b_valid) begin
          int unsigned id;
          id = int'(rsp_i.b.id);
          check(b_pending.exists(id) && b_pending[id] > 0, $sformatf("B with unexpected ID %0d", id));
          if (b_pending.exists(id) && b_pending[id] > 0) b_pending[id]--;
          check(rsp_i.b.resp == ExpResp || (ErrWindow >= 0 && rsp_i.b.resp == axi_pkg::RESP_DECERR), "B response");
          if (rsp_i.b.resp == axi_pkg::RESP_DECERR) err_b++;
          writes_done++;
        end
        @(negedge clk_i);
      end
    join
    b_ready = 0;
    begin
      int unsigned n_err;
      n_err = 0;
      for (int unsigned k = 0; k < NumTxn; k++) if (txns[k].resp == axi_pkg::RESP_DECERR && ExpResp != axi_pkg::RESP_DECERR) n_err++;
      if (ErrWindow >= 0) check(err_b == n_err, "number of DECERR write responses");
    end
    // Read phase with fresh random IDs.
    for (int unsigned k = 0; k < NumTxn; k++) txns[k].id = $urandom_range(MaxId);
    fork
      for (int unsigned k = 0; k < NumTxn; k++) begin
        while ($urandom_range(99) >= ValidPct) @(negedge clk_i);
        ar.id = txns[k].id; ar.addr = txns[k].addr; ar.len = txns[k].len;
        ar.size = txns[k].size; ar.burst = axi_pkg::BURST_INCR; ar.qos = '0;
        ar_valid = 1;
        r_order[txns[k].id].push_back(k);
        do @(posedge clk_i); while (!rsp_i.ar_ready);
        @(negedge clk_i);
        ar_valid = 0;
      end
      while (reads_done < NumTxn) begin
        r_ready = ($urandom_range(99) < ValidPct);
        @(posedge clk_i);
        if (r_ready && rsp_i.r_valid) begin
          int unsigned id, k;
          logic [63:0] a;
          id = int'(rsp_i.r.id);
          if (!r_order.exists(id) || r_order[id].size() == 0) begin
            check(0, $sformatf("R with unexpected ID %0d", id));
          end else begin
            k = r_order[id][0];
            a = beat_addr(k, r_beat[k]);
            check(rsp_i.r.resp == txns[k].resp, "R response");
            if (txns[k].resp == axi_pkg::RESP_OKAY) begin
              bit ok;
              ok = 1;
              for (int unsigned i = 0; i < NB; i++) begin
                longint unsigned ba;
                ba = (a / NB) * NB + i;
                if (ba >= a && ba < a + (1 << txns[k].size))
                  if (rsp_i.r.data[8*i +: 8] != shadow[ba]) ok = 0;
              end
              check(ok, $sformatf("R data txn %0d beat %0d addr %h", k, r_beat[k], a));
            end
            check(rsp_i.r.last == (r_beat[k] == txns[k].len), "RLAST");
            if (r_beat[k] == txns[k].len) begin
              void'(r_order[id].pop_front());
              reads_done++;
            end else r_beat[k]++;
          end
        end
        @(negedge clk_i);
      end
    join
    r_ready = 0;
    done_o = 1;
  end
endmodule
