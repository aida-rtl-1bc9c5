// key_registers: the special registers appended to AIDA's CAM array: COMPARE
// KEY, WRITE KEY and MASK, plus the operation bits that go with them.
//
// Every cycle the AP controller presents the next CAM operation; on the clock
// edge these registers capture it, and during the following cycle they drive
// the array's compare bit-lines (compare key under the compare mask), write
// bit-lines (write key under the write mask) and the TAG move controls. A
// compare and a write can be held at once (simultaneous compare and write).
// An operation therefore reaches the array one cycle after the controller
// issues it; all operations take the same path, so their order is kept.
// Synchronous reset clears the enables, so nothing is compared, written or
// moved out of reset.
// The three registers are the paper's. Splitting MASK into a compare mask
// and a write mask (the paper masks compare columns by holding both compare
// bit-lines at 0 and uses MASK for writes and reads) is this design's choice,
// so that one cycle can carry a compare and a write on different columns.
module key_registers #(
  parameter int unsigned WIDTH = 124
) (
  input  logic             clk,
  input  logic             rst_n,
  // operation from the controller
  input  logic             cmp_en_d,
  input  logic [WIDTH-1:0] cmp_key_d,
  input  logic [WIDTH-1:0] cmp_mask_d,
  input  logic             wr_en_d,
  input  logic [WIDTH-1:0] wr_key_d,
  input  logic [WIDTH-1:0] wr_mask_d,
  input  logic             mv_en_d,
  input  logic             mv_up_d,
  input  logic             mv_long_d,
  // registered operation to the array and the TAG logic
  output logic             cmp_en,
  output logic [WIDTH-1:0] cmp_key,
  output logic [WIDTH-1:0] cmp_mask,
  output logic             wr_en,
  output logic [WIDTH-1:0] wr_key,
  output logic [WIDTH-1:0] wr_mask,
  output logic             mv_en,
  output logic             mv_up,
  output logic             mv_long
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cmp_en   <= 1'b0;
      wr_en    <= 1'b0;
      mv_en    <= 1'b0;
      mv_up    <= 1'b1;
      mv_long  <= 1'b0;
      cmp_key  <= '0;
      cmp_mask <= '0;
      wr_key   <= '0;
      wr_mask  <= '0;
    end else begin
      cmp_en   <= cmp_en_d;
      wr_en    <= wr_en_d;
      mv_en    <= mv_en_d;
      mv_up    <= mv_up_d;
      mv_long  <= mv_long_d;
      // keys and masks load only with an operation that uses them
      if (cmp_en_d) begin
        cmp_key  <= cmp_key_d;
        cmp_mask <= cmp_mask_d;
      end
      if (wr_en_d) begin
        wr_key  <= wr_key_d;
        wr_mask <= wr_mask_d;
      end
    end
  end

endmodule
