// tb_key_registers: self-checking test of the COMPARE KEY / WRITE KEY / MASK
// registers. Drives random operations and checks that each appears on the
// outputs exactly one cycle later, that keys and masks change only with an
// operation that uses them, and that reset clears the enables.
module tb_key_registers;
  localparam int unsigned WIDTH = 24;
  logic clk = 0, rst_n = 0;
  logic cmp_en_d = 0, wr_en_d = 0, mv_en_d = 0, mv_up_d = 0, mv_long_d = 0;
  logic [WIDTH-1:0] cmp_key_d = '0, cmp_mask_d = '0, wr_key_d = '0, wr_mask_d = '0;
  logic cmp_en, wr_en, mv_en, mv_up, mv_long;
  logic [WIDTH-1:0] cmp_key, cmp_mask, wr_key, wr_mask;

  key_registers #(.WIDTH(WIDTH)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    logic [WIDTH-1:0] ck, cm, wk, wm;
    logic ce, we, me, mu, ml;
    @(negedge clk); cmp_en_d = 1; wr_en_d = 1; mv_en_d = 1;
    @(negedge clk);
    check("reset cmp_en", cmp_en, 0);
    check("reset wr_en", wr_en, 0);
    check("reset mv_en", mv_en, 0);
    rst_n = 1;
    ck = '0; cm = '0; wk = '0; wm = '0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      cmp_en_d = $urandom_range(0, 1); wr_en_d = $urandom_range(0, 1); mv_en_d = $urandom_range(0, 1);
      mv_up_d = $urandom_range(0, 1); mv_long_d = $urandom_range(0, 1);
      cmp_key_d = WIDTH'($urandom); cmp_mask_d = WIDTH'($urandom);
      wr_key_d = WIDTH'($urandom); wr_mask_d = WIDTH'($urandom);
      ce = cmp_en_d; we = wr_en_d; me = mv_en_d; mu = mv_up_d; ml = mv_long_d;
      if (cmp_en_d) begin ck = cmp_key_d; cm = cmp_mask_d; end
      if (wr_en_d) begin wk = wr_key_d; wm = wr_mask_d; end
      @(negedge clk);
      check("cmp_en", cmp_en, ce); check("wr_en", wr_en, we); check("mv_en", mv_en, me);
      check("mv_up", mv_up, mu); check("mv_long", mv_long, ml);
      check("cmp_key", cmp_key, ck); check("cmp_mask", cmp_mask, cm);
      check("wr_key", wr_key, wk); check("wr_mask", wr_mask, wm);
      // new inputs this cycle with enables low must not disturb the keys
      cmp_en_d = 0; wr_en_d = 0; mv_en_d = 0;
      cmp_key_d = WIDTH'($urandom); wr_key_d = WIDTH'($urandom);
    end
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
