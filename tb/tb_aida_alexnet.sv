// tb_aida_alexnet: AIDA at its default sizes on tiles of the compressed
// fully connected layers of AlexNet. A whole layer needs far more rows than
// the 4096 of the default array, so each run takes as many complete output
// rows as fit: FC6 (9216 inputs, 9% of weights kept, 829 per output row, 4
// outputs), FC7 (4096 inputs, 9%, 368 per row, 11 outputs) and FC8 (4096
// inputs, 25%, 1024 per row, 4 outputs). Weight values and positions are
// random at those densities; activations are non-negative (outputs of a
// previous RELU) with half of them zero. Every output is checked against an
// integer dot product with RELU, and each layer's cycle count against the
// stage formulas. Long matrix rows make the reduction run up to ten levels
// with up to 32 long tag moves per bit.
module tb_aida_alexnet;
  localparam int unsigned ROWS = 4096, M = 16, N = 16, K = 32, CIW = 14, RIW = 14, OIW = 12;
  localparam int unsigned LONG_STEP = 16;
  localparam int unsigned WIDTH = 4 + CIW + RIW + M + K + OIW + K;
  localparam int unsigned AW = 12;
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

  int rcol [$][$];
  int rval [$][$];
  int bv [$];

  // one tile of a layer: NR_T outputs of an NC_T-input layer at weight
  // density DENS_PCT percent and activation density 50 percent
  task automatic run_tile(input string name, input int NC_T, input int DENS_PCT);
    int a, maxlen, passes, cyc, bc, expc, nnzb, sent, nr_t, per_row;
    int idx [$];
    per_row = NC_T * DENS_PCT / 100;
    nr_t = ROWS / per_row;
    rcol.delete(); rval.delete(); bv.delete();
    a = 0; maxlen = 0;
    for (int r = 0; r < nr_t; r++) begin
      int q [$];
      int v [$];
      // choose per_row distinct columns, in increasing order
      for (int c = 0; c < NC_T; c++)
        if ($urandom_range(0, NC_T - 1 - c) < per_row - q.size()) begin
          q.push_back(c);
          v.push_back(sext($urandom_range(1, 65535), M));
        end
      rcol.push_back(q);
      rval.push_back(v);
      if (q.size() > maxlen) maxlen = q.size();
    end
    passes = 1;
    while ((1 << passes) < maxlen) passes++;
    for (int r = 0; r < nr_t; r++) begin
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
    for (int r = a; r < ROWS; r++) begin
      @(negedge clk); ld_en = 1; ld_addr = AW'(r); ld_data = '0;
    end
    @(negedge clk); ld_en = 0;
    for (int c = 0; c < NC_T; c++) begin
      bv.push_back(($urandom_range(0, 1) == 0) ? 0 : int'($urandom_range(1, 32767)));
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
    $display("%s tile: %0d outputs x %0d inputs, %0d nonzero weights, %0d activations, %0d cycles",
             name, nr_t, NC_T, a, nnzb, cyc);
    check("layer cycles", cyc, expc);
    check("level overflow", level_overflow, 0);
    @(negedge clk);
    for (int r = 0; r < nr_t; r++) begin
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
      check("rd_valid", rd_valid, 1);
      check($sformatf("%s out %0d", name, r), sext(longint'(rd_value), K), e);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_tile("AlexNet FC6", 9216, 9);
    run_tile("AlexNet FC7", 4096, 9);
    run_tile("AlexNet FC8", 4096, 25);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
