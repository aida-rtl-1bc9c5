// tb_cam_array: self-checking test of the CAM array.
// Keeps a plain array model of the stored rows and applies random row loads,
// masked compares, masked writes of randomly tagged rows (with and without a
// compare in the same cycle) and tagged reads. Checks every match line, the
// read word (AND of the tagged rows, all ones when none) and, at the end,
// every stored row. Includes the all-columns-masked compare, which must
// match every row.
module tb_cam_array;
  localparam int unsigned ROWS = 32, WIDTH = 20, AW = 5;

  logic clk = 0;
  logic [WIDTH-1:0] cmp_key = '0, cmp_mask = '0, wr_key = '0, wr_mask = '0, ld_data = '0;
  logic [ROWS-1:0] match, tag = '0;
  logic wr_en = 0, ld_en = 0;
  logic [AW-1:0] ld_addr = '0;
  logic [WIDTH-1:0] rd_data;

  cam_array #(.ROWS(ROWS), .WIDTH(WIDTH)) dut (.*);
  always #5 clk = ~clk;

  logic [WIDTH-1:0] model [ROWS];
  int checks = 0, failures = 0;

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic check_comb();
    logic [WIDTH-1:0] rd = '1;
    for (int r = 0; r < ROWS; r++) begin
      logic m;
      m = 1;
      for (int b = 0; b < WIDTH; b++) if (cmp_mask[b] && model[r][b] != cmp_key[b]) m = 0;
      check($sformatf("match[%0d]", r), match[r], m);
      if (tag[r]) rd = rd & model[r];
    end
    check("rd_data", rd_data, rd);
  endtask

  initial begin
    // load all rows
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); ld_en = 1; ld_addr = AW'(r); ld_data = WIDTH'($urandom); model[r] = ld_data;
    end
    @(negedge clk); ld_en = 0;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      ld_en = 0; wr_en = 0;
      cmp_key  = WIDTH'($urandom);
      cmp_mask = (t % 17 == 0) ? '0 : WIDTH'($urandom) & WIDTH'($urandom) & WIDTH'($urandom);
      tag      = ($urandom_range(0, 3) == 0) ? '0 : ROWS'($urandom) & ROWS'($urandom);
      #1 check_comb();
      case ($urandom_range(0, 2))
        0: begin
          wr_en = 1; wr_key = WIDTH'($urandom); wr_mask = WIDTH'($urandom);
          for (int r = 0; r < ROWS; r++)
            if (tag[r]) model[r] = (model[r] & ~wr_mask) | (wr_key & wr_mask);
        end
        1: begin
          ld_en = 1; ld_addr = AW'($urandom_range(0, ROWS - 1)); ld_data = WIDTH'($urandom);
          model[ld_addr] = ld_data;
        end
        default: ;
      endcase
    end
    @(negedge clk); wr_en = 0; ld_en = 0;
    // final contents through single-row reads
    for (int r = 0; r < ROWS; r++) begin
      tag = ROWS'(1) << r;
      #1 check($sformatf("row %0d", r), rd_data, model[r]);
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
