// tb_aida_top: end-to-end test of the AIDA accelerator at reduced sizes.
//
// Builds random sparse weight matrices in ACSR form (including matrix rows
// with a single element, with no element, and with more than LONG_STEP
// elements so that long tag moves happen), loads them through the row port,
// streams the nonzero elements of a random sparse activation vector with
// random gaps, runs the layer and reads every output back. Each output is
// compared with a dot product computed here in plain integer arithmetic,
// wrapped to K bits, with RELU applied when enabled. The layer's cycle count
// is checked against the stage formulas of the controller. Runs layers with
// RELU on and off, and counts how often each mechanism happened: short and
// long moves, repeated reduction passes, RELU clearing a negative sum, a read
// of an index with no weights, a gap in the activation stream and a negative
// activation (sign-bit subtraction). A mechanism that never happened is a
// failure.
module tb_aida_top;
  localparam int unsigned ROWS = 160, M = 8, N = 8, K = 22, CIW = 6, RIW = 6, OIW = 4;
  localparam int unsigned LONG_STEP = 16;
  localparam int unsigned WIDTH = 4 + CIW + RIW + M + K + OIW + K;
  localparam int unsigned AW = $clog2(ROWS);
  localparam int unsigned NR = 1 << OIW;   // matrix rows (outputs)
  localparam int unsigned NC = 1 << CIW;   // matrix columns (inputs)
  `include "aida_layout.svh"
  `AIDA_LAYOUT

  logic clk = 0, rst_n = 0;
  logic ld_en = 0; logic [AW-1:0] ld_addr = '0; logic [WIDTH-1:0] ld_data = '0;
  logic start = 0, act_en = 0, busy, done, level_overflow;
  logic b_valid = 0, b_ready, b_last = 0; logic [CIW-1:0] b_index = '0; logic [N-1:0] b_value = '0;
  logic rd_req = 0, rd_valid, rd_hit; logic [OIW-1:0] rd_index = '0; logic [K-1:0] rd_value;

  aida_top #(.ROWS(ROWS), .M(M), .N(N), .K(K), .CIW(CIW), .RIW(RIW), .OIW(OIW),
             .LONG_STEP(LONG_STEP)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_short = 0, n_long = 0, n_repeat = 0, n_relu = 0, n_miss = 0, n_gap = 0, n_neg = 0;
  int n_single = 0;

  // mechanism counters from the controller's CAM control lines
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.mv_en && !dut.u_ctrl.mv_long) n_short++;
    if (dut.u_ctrl.mv_en &&  dut.u_ctrl.mv_long) n_long++;
    if (b_ready && !b_valid) n_gap++;
  end

  int w [NR][NC];
  int bvec [NC];
  int rowlen [NR];

  function automatic int sext(input longint v, input int unsigned bits);
    longint m = longint'(1) << bits;
    longint r = v % m;
    if (r < 0) r += m;
    if (r >= m / 2) r -= m;
    return int'(r);
  endfunction

  function automatic int moves(input int unsigned lvl);
    int unsigned d = 1 << lvl;
    return d / LONG_STEP + d % LONG_STEP;
  endfunction

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // build a random matrix, load it, return the number of reduction passes
  task automatic build_and_load(output int passes);
    int r_used = 0;
    int maxlen = 0;
    for (int r = 0; r < NR; r++) begin
      for (int c = 0; c < NC; c++) w[r][c] = 0;
      case (r % 5)
        0: rowlen[r] = 1;
        1: rowlen[r] = 0;
        2: rowlen[r] = (r_used + 40 <= ROWS && r < 8) ? 17 + $urandom_range(0, 12) : $urandom_range(2, 6);
        default: rowlen[r] = $urandom_range(2, 9);
      endcase
      if (r_used + rowlen[r] > ROWS) rowlen[r] = 0;
      if (rowlen[r] > NC) rowlen[r] = NC;
      begin
        int placed = 0;
        while (placed < rowlen[r]) begin
          int c = $urandom_range(0, NC - 1);
          if (w[r][c] == 0) begin
            w[r][c] = sext($urandom_range(1, (1 << M) - 1), M);
            if (w[r][c] != 0) placed++;
          end
        end
      end
      if (rowlen[r] == 1) n_single++;
      if (rowlen[r] > maxlen) maxlen = rowlen[r];
      r_used += rowlen[r];
    end
    // load rows: matrix rows in order, columns in increasing order
    begin
      int a = 0;
      for (int r = 0; r < NR; r++) begin
        int pos = 0;
        for (int c = 0; c < NC; c++) if (w[r][c] != 0) begin
          logic [WIDTH-1:0] d = '0;
          d[FLAG_BASE]     = (pos == 0);
          d[FLAG_BASE + 1] = (pos == rowlen[r] - 1);
          d[CI_BASE +: CIW] = CIW'(c);
          d[RI_BASE +: RIW] = RIW'(pos);
          d[W_BASE +: M]    = M'(w[r][c]);
          d[OI_BASE +: OIW] = OIW'(r);
          d[B_BASE +: K]    = K'($urandom);  // garbage: must be cleared by the layer
          d[C_BASE +: K]    = K'($urandom);
          @(negedge clk); ld_en = 1; ld_addr = AW'(a); ld_data = d;
          a++; pos++;
        end
      end
      for (; a < ROWS; a++) begin
        @(negedge clk); ld_en = 1; ld_addr = AW'(a); ld_data = '0;
      end
      @(negedge clk); ld_en = 0;
    end
    passes = 1;
    while ((1 << passes) < maxlen) passes++;
  endtask

  task automatic run_layer(input logic relu);
    int passes, cyc, bc, expc, nnzb, sent;
    int idx [$];
    build_and_load(passes);
    for (int c = 0; c < NC; c++) begin
      bvec[c] = ($urandom_range(0, 2) == 0) ? 0 : sext($urandom, N);
      if (c == 0) bvec[c] = -(1 << (N - 1));
      if (bvec[c] != 0) idx.push_back(c);
      if (bvec[c] < 0) n_neg++;
    end
    idx.shuffle();
    nnzb = idx.size();
    // start
    @(negedge clk); start = 1; act_en = relu;
    @(negedge clk); start = 0;
    cyc = 1; bc = 0; sent = 0;
    while (!done) begin
      if (b_ready) bc++;
      if (b_ready && b_valid) sent++;
      // drive next stream element for the coming cycle
      @(negedge clk);
      cyc++;
      if (sent < nnzb && $urandom_range(0, 3) != 0) begin
        b_valid = 1; b_index = CIW'(idx[sent]); b_value = N'(bvec[idx[sent]]);
        b_last = (sent == nnzb - 1);
      end else begin
        b_valid = 0; b_last = 0;
      end
      if (!b_ready) b_valid = 0;
    end
    b_valid = 0;
    // expected cycles: clear, stream, drain, multiply, reduce, relu, done
    expc = 2 + bc + 1;
    for (int j = 0; j < int'(N); j++) expc += ((j == N - 1) ? 3 : 2) + (K - j) * 10;
    for (int l = 0; l < passes; l++) expc += 2 + K * (2 + moves(l)) + (2 + moves(l)) + K * 5 + 3;
    if (relu) expc += 2;
    expc += 1;
    check("layer cycles", cyc, expc);
    check("level overflow", level_overflow, 0);
    if (passes > 1) n_repeat++;
    // read back
    for (int r = 0; r < NR; r++) begin
      longint acc = 0;
      int exp_v;
      for (int c = 0; c < NC; c++) acc += longint'(w[r][c]) * longint'(bvec[c]);
      exp_v = sext(acc, K);
      if (relu && exp_v < 0) begin exp_v = 0; if (rowlen[r] > 0) n_relu++; end
      @(negedge clk); rd_req = 1; rd_index = OIW'(r);
      @(negedge clk); rd_req = 0;
      while (!rd_valid) @(negedge clk);
      check("read hit", rd_hit, rowlen[r] > 0);
      if (!rd_hit) n_miss++;
      check($sformatf("output %0d", r), rd_hit ? longint'(sext(longint'(rd_value), K)) : 0, exp_v);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_layer(1);
    run_layer(0);
    run_layer(1);
    check("short moves happened", n_short > 0, 1);
    check("long moves happened", n_long > 0, 1);
    check("repeated reduction passes happened", n_repeat > 0, 1);
    check("RELU cleared a negative output", n_relu > 0, 1);
    check("read of an empty output index", n_miss > 0, 1);
    check("gap in activation stream", n_gap > 0, 1);
    check("negative activation", n_neg > 0, 1);
    check("single-element matrix row", n_single > 0, 1);
    $display("mechanisms: short=%0d long=%0d repeat=%0d relu=%0d miss=%0d gap=%0d neg=%0d single=%0d",
             n_short, n_long, n_repeat, n_relu, n_miss, n_gap, n_neg, n_single);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
