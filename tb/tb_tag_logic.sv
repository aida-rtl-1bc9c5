// tb_tag_logic: self-checking test of the TAG register.
// Applies reset, then random sequences of compares (load from the match
// lines) and moves up or down by one row or by LONG_STEP rows, and compares
// every TAG bit and the if_match line with a bit-by-bit model kept here.
// Also checks that a compare wins over a move issued in the same cycle.
module tb_tag_logic;
  localparam int unsigned ROWS = 40, LONG_STEP = 16;

  logic clk = 0, rst_n = 0;
  logic cmp_en = 0, mv_en = 0, mv_up = 0, mv_long = 0;
  logic [ROWS-1:0] match = '0, tag;
  logic if_match;

  tag_logic #(.ROWS(ROWS), .LONG_STEP(LONG_STEP)) dut (.*);
  always #5 clk = ~clk;

  logic [ROWS-1:0] model;
  int checks = 0, failures = 0;
  int n_up = 0, n_down = 0, n_long = 0;

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    model = '0;
    check("reset", tag, 0);
    check("reset if_match", if_match, 0);
    for (int t = 0; t < 600; t++) begin
      int step;
      logic [ROWS-1:0] nxt;
      @(negedge clk);
      cmp_en  = ($urandom_range(0, 3) == 0);
      mv_en   = ($urandom_range(0, 3) != 0);
      mv_up   = $urandom_range(0, 1);
      mv_long = $urandom_range(0, 1);
      match   = ($urandom_range(0, 4) == 0) ? '0 : {ROWS'($urandom) & ROWS'($urandom)};
      step    = mv_long ? LONG_STEP : 1;
      nxt     = model;
      if (cmp_en) nxt = match;
      else if (mv_en) begin
        for (int r = 0; r < ROWS; r++) begin
          int src;
          src = mv_up ? r + step : r - step;
          nxt[r] = (src >= 0 && src < ROWS) ? model[src] : 1'b0;
        end
        if (mv_up) n_up++; else n_down++;
        if (mv_long) n_long++;
      end
      model = nxt;
      @(posedge clk); #1;
      check("tag", tag, model);
      check("if_match", if_match, |model);
    end
    $display("moves: up=%0d down=%0d long=%0d", n_up, n_down, n_long);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
