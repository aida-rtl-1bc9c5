// tb_aida_full: one complete fully connected layer on AIDA at its default
// sizes (4096 rows, 16-bit weights and activations, 32-bit outputs).
// A random sparse weight matrix of 120 outputs by 4096 inputs with matrix
// rows of 1 to 96 nonzeros (about 4000 nonzeros in all, filling the array)
// is loaded in ACSR form; a random activation vector with about half of its
// elements zero is streamed, and the layer runs with RELU. Every output is
// read back and compared with an integer dot product wrapped to 32 bits,
// and the layer's cycle count is compared with the stage formulas.
module tb_aida_full;
  localparam int unsigned ROWS = 4096, M = 16, N = 16, K = 32, CIW = 14, RIW = 14, OIW = 12;
  localparam int unsigned LONG_STEP = 16;
  localparam int unsigned WIDTH = 4 + CIW + RIW + M + K + OIW + K;
  localparam int unsigned AW = 12;
  localparam int unsigned NR = 120, NC = 4096, MAXLEN = 96;
  `include "aida_layout.svh"
  `AIDA_LAYOUT

  logic clk = 0, rst_n = 0;
  logic ld_en = 0; logic [AW-1:0] ld_addr = '0; logic [WIDTH-1:0] ld_data = '0;
  logic start = 0, act_en = 1, busy, done, level_overflow;
  logic b_valid = 0, b_ready, b_last = 0; logic [CIW-1:0] b_index = '0; logic [N-1:0] b_value = '0;
  logic rd_req = 0, rd_valid, rd_hit; logic [OIW-1:0] rd_index = '0; logic [K-1:0] rd_value;

  aida_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int sext(input longint v, input int unsigned bits);
    longint m = longint'(1) << bits;
    longint r = v % m;
    if (r < 0) r += m;
    if (r >= m / 2) r -= m;
    return int'(r);
  endfunction

  int rcol [NR][$];
  int rval [NR][$];
  int bv [NC];

  initial begin
    int a, maxlen, passes, cyc, bc, expc, nnzb, sent;
    int idx [$];
    a = 0; maxlen = 0;
    // matrix rows with strictly increasing random columns
    for (int r = 0; r < NR; r++) begin
      int len, c;
      len = (r % 7 == 0) ? 1 : (r % 11 == 3) ? MAXLEN : $urandom_range(2, 50);
      if (a + len > ROWS) len = ROWS - a;
      c = $urandom_range(0, 15);
      for (int e = 0; e < len; e++) begin
        rcol[r].push_back(c);
        rval[r].push_back(sext($urandom_range(1, 65535), M));
        c += $urandom_range(1, 40);
        if (c >= NC) c = NC - 1 - (len - e);
      end
      a += len;
      if (len > maxlen) maxlen = len;
    end
    passes = 1;
    while ((1 << passes) < maxlen) passes++;
    repeat (2) @(negedge clk);
    rst_n = 1;
    a = 0;
    for (int r = 0; r < NR; r++) begin
      for (int e = 0; e < rcol[r].size(); e++) begin
        logic [WIDTH-1:0] d;
        d = '0;
        d[FLAG_BASE]      = (e == 0);
        d[FLAG_BASE + 1]  = (e == rcol[r].size() - 1);
        d[CI_BASE +: CIW] = CIW'(rcol[r][e]);
        d[RI_BASE +: RIW] = RIW'(e);
        d[W_BASE +: M]    = M'(rval[r][e]);
        d[OI_BASE +: OIW] = OIW'(r);
        @(negedge clk); ld_en = 1; ld_addr = AW'(a); ld_data = d;
        a++;
      end
    end
    $display("nonzero weights: %0d of %0d rows, longest matrix row %0d", a, ROWS, maxlen);
    for (; a < ROWS; a++) begin
      @(negedge clk); ld_en = 1; ld_addr = AW'(a); ld_data = '0;
    end
    @(negedge clk); ld_en = 0;
    for (int c = 0; c < NC; c++) begin
      bv[c] = ($urandom_range(0, 1) == 0) ? 0 : sext($urandom, N);
      if (bv[c] != 0) idx.push_back(c);
    end
    nnzb = idx.size();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1; bc = 0; sent = 0;
    while (!done) begin
      if (b_ready) bc++;
      if (b_ready && b_valid) sent++;
      @(negedge clk);
      cyc++;
      b_valid = b_ready && sent < nnzb;
      if (b_valid) begin
        b_index = CIW'(idx[sent]); b_value = N'(bv[idx[sent]]); b_last = (sent == nnzb - 1);
      end
    end
    b_valid = 0;
    expc = 2 + bc + 1;
    for (int j = 0; j < int'(N); j++) expc += ((j == N - 1) ? 3 : 2) + (K - j) * 10;
    for (int l = 0; l < passes; l++) begin
      int d, mv;
      d = 1 << l; mv = d / LONG_STEP + d % LONG_STEP;
      expc += 2 + K * (2 + mv) + (2 + mv) + K * 5 + 3;
    end
    expc += 2 + 1;
    $display("layer: %0d activations streamed, %0d cycles, %0d reduction passes", nnzb, cyc, passes);
    check("layer cycles", cyc, expc);
    check("level overflow", level_overflow, 0);
    @(negedge clk);
    for (int r = 0; r < NR; r++) begin
      longint acc;
      int e;
      acc = 0;
      for (int k = 0; k < rcol[r].size(); k++) acc += longint'(rval[r][k]) * longint'(bv[rcol[r][k]]);
      e = sext(acc, K);
      if (e < 0) e = 0;
      @(negedge clk); rd_req = 1; rd_index = OIW'(r);
      @(negedge clk); rd_req = 0;
      @(negedge clk);
      @(negedge clk);
      check("rd_valid 3 cycles after the request", rd_valid, 1);
      check("hit", rd_hit, rcol[r].size() > 0);
      check($sformatf("out %0d", r), rd_hit ? sext(longint'(rd_value), K) : 0, e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
