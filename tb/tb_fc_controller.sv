// tb_fc_controller: self-checking test of the AP controller on its own.
// The CAM array and TAG register are replaced by a plain behavioural model
// kept in this file (row array, masked compare, tagged masked write, tag
// shifts, OR of tags), so the controller's microprogram is checked
// independently of the array RTL. A random sparse matrix in ACSR form is
// loaded into the model, the nonzero activations are streamed, and every
// output read through the controller is compared with an integer dot
// product (K-bit wrap, RELU). The layer's cycle count is checked against the
// stage formulas, and the run also checks the assertion that compares and
// moves never share a cycle. LONG_STEP is lowered to 4 so that long moves
// happen with short matrix rows.
module tb_fc_controller;
  localparam int unsigned ROWS = 64, M = 6, N = 6, K = 16, CIW = 5, RIW = 5, OIW = 3;
  localparam int unsigned LONG_STEP = 4;
  localparam int unsigned WIDTH = 4 + CIW + RIW + M + K + OIW + K;
  localparam int unsigned NR = 1 << OIW, NC = 1 << CIW;
  `include "aida_layout.svh"
  `AIDA_LAYOUT

  logic clk = 0, rst_n = 0;
  logic start = 0, act_en = 1, busy, done, level_overflow;
  logic b_valid = 0, b_ready, b_last = 0; logic [CIW-1:0] b_index = '0; logic [N-1:0] b_value = '0;
  logic rd_req = 0, rd_valid, rd_hit; logic [OIW-1:0] rd_index = '0; logic [K-1:0] rd_value;
  logic cmp_en_d, wr_en_d, mv_en_d, mv_up_d, mv_long_d, if_match;
  logic [WIDTH-1:0] cmp_key_d, cmp_mask_d, wr_key_d, wr_mask_d, cam_rd;
  logic cmp_en = 0, wr_en = 0, mv_en = 0, mv_up = 0, mv_long = 0;
  logic [WIDTH-1:0] cmp_key, cmp_mask, wr_key, wr_mask;

  fc_controller #(.M(M), .N(N), .K(K), .CIW(CIW), .RIW(RIW), .OIW(OIW), .LONG_STEP(LONG_STEP))
    dut (.*, .cmp_en(cmp_en_d), .cmp_key(cmp_key_d), .cmp_mask(cmp_mask_d), .wr_en(wr_en_d),
         .wr_key(wr_key_d), .wr_mask(wr_mask_d), .mv_en(mv_en_d), .mv_up(mv_up_d),
         .mv_long(mv_long_d));
  always #5 clk = ~clk;

  // one-cycle operation register in front of the model, as the key registers
  always @(posedge clk) begin
    cmp_en <= rst_n && cmp_en_d; cmp_key <= cmp_key_d; cmp_mask <= cmp_mask_d;
    wr_en <= rst_n && wr_en_d; wr_key <= wr_key_d; wr_mask <= wr_mask_d;
    mv_en <= rst_n && mv_en_d; mv_up <= mv_up_d; mv_long <= mv_long_d;
  end
  // behavioural CAM + TAG model
  logic [WIDTH-1:0] mem [ROWS];
  logic [ROWS-1:0] tagv;
  always_comb begin
    cam_rd = '1;
    for (int r = 0; r < ROWS; r++) if (tagv[r]) cam_rd &= mem[r];
    if_match = |tagv;
  end
  always @(posedge clk) begin
    logic [ROWS-1:0] nt;
    int s;
    nt = tagv;
    if (!rst_n) nt = '0;
    else if (cmp_en) begin
      for (int r = 0; r < ROWS; r++) nt[r] = ((mem[r] ^ cmp_key) & cmp_mask) == '0;
    end else if (mv_en) begin
      s = mv_long ? LONG_STEP : 1;
      for (int r = 0; r < ROWS; r++) begin
        int src;
        src = mv_up ? r + s : r - s;
        nt[r] = (src >= 0 && src < ROWS) ? tagv[src] : 1'b0;
      end
    end
    if (rst_n && wr_en)
      for (int r = 0; r < ROWS; r++) if (tagv[r]) mem[r] = (mem[r] & ~wr_mask) | (wr_key & wr_mask);
    tagv <= nt;
  end

  int checks = 0, failures = 0, n_long = 0;
  always @(posedge clk) if (mv_en && mv_long) n_long++;
  // operations stay in order through the register: a move never comes with a compare
  a_no_cmp_move: assert property (@(posedge clk) !(cmp_en && mv_en));

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int sext(input longint v, input int unsigned bits);
    longint m = longint'(1) << bits;
    longint r = v % m;
    if (r < 0) r += m;
    if (r >= m / 2) r -= m;
    return int'(r);
  endfunction

  int w [NR][NC];
  int bv [NC];
  int len [NR];

  initial begin
    int a, maxlen, passes, cyc, bc, expc, nnzb, sent;
    int idx [$];
    a = 0; maxlen = 0;
    for (int r = 0; r < NR; r++) begin
      len[r] = (r == 2) ? 11 : (r == 5) ? 1 : $urandom_range(0, 7);
      for (int c = 0; c < NC; c++) w[r][c] = 0;
      for (int c = 0; c < NC && c < len[r]; c++) w[r][(c * 3 + r) % NC] = sext($urandom_range(1, 63), M) | 1;
      if (len[r] > maxlen) maxlen = len[r];
    end
    for (int r = 0; r < NR; r++) begin
      int pos;
      pos = 0;
      for (int c = 0; c < NC; c++) if (w[r][c] != 0) begin
        mem[a] = '0;
        mem[a][FLAG_BASE] = (pos == 0);
        mem[a][FLAG_BASE + 1] = (pos == len[r] - 1);
        mem[a][CI_BASE +: CIW] = CIW'(c);
        mem[a][RI_BASE +: RIW] = RIW'(pos);
        mem[a][W_BASE +: M] = M'(w[r][c]);
        mem[a][OI_BASE +: OIW] = OIW'(r);
        a++; pos++;
      end
    end
    for (; a < ROWS; a++) mem[a] = '0;
    passes = 1;
    while ((1 << passes) < maxlen) passes++;
    for (int c = 0; c < NC; c++) begin
      bv[c] = ($urandom_range(0, 2) == 0) ? 0 : sext($urandom, N);
      if (bv[c] != 0) idx.push_back(c);
    end
    nnzb = idx.size();
    repeat (2) @(negedge clk);
    rst_n = 1;
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
    check("layer cycles", cyc, expc);
    @(negedge clk);
    check("busy low after done", busy, 0);
    for (int r = 0; r < NR; r++) begin
      longint acc;
      int e;
      acc = 0;
      for (int c = 0; c < NC; c++) acc += longint'(w[r][c]) * longint'(bv[c]);
      e = sext(acc, K);
      if (e < 0) e = 0;
      @(negedge clk); rd_req = 1; rd_index = OIW'(r);
      @(negedge clk); rd_req = 0;
      check("no rd_valid after 1 cycle", rd_valid, 0);
      @(negedge clk);
      check("no rd_valid after 2 cycles", rd_valid, 0);
      @(negedge clk);
      check("rd_valid after 3 cycles", rd_valid, 1);
      check("hit", rd_hit, len[r] > 0);
      check($sformatf("out %0d", r), rd_hit ? sext(longint'(rd_value), K) : 0, e);
    end
    check("long moves used", n_long > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
