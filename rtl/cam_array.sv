// cam_array: the associative memory of AIDA, ROWS word-rows by WIDTH
// bit-columns. Each row is one processing unit (PU).
//
// Compare: every row is matched against cmp_key in the bit-columns selected by
// cmp_mask (a 0 in the mask stands for the cell's compare bit-lines both held
// at 0, so the column never discharges the match line). match[r] is 1 when all
// selected bits of row r equal the key; it is combinational, and the TAG logic
// samples it at the clock edge. With cmp_mask all 0 every row matches.
// Write: on a clock edge with wr_en, every row whose write line (tag[r]) is 1
// takes wr_key in the columns selected by wr_mask and keeps its other bits.
// A compare and a write may be issued in the same cycle: the write uses the
// tags of the previous compare, the compare sees the array before the write.
// Read: rd_data is the wired-AND of all rows whose tag is 1 (precharged write
// bit-lines pulled low by any selected cell holding 0); all ones when no row
// is tagged. It is combinational.
// Load: a row-addressed write port (ld_en, ld_addr, ld_data) through which a
// host places the ACSR data; it takes effect at the clock edge and has
// priority over an associative write to the same row.
// The array is held by bit-columns, as the paper organises it, so every
// operation is a word-wide operation on whole columns.
// The masked compare, tagged masked write and read by precharged bit-lines
// follow the paper's 10T NOR cell; the row-addressed load port and the
// separate compare and write masks are this design's choices. The array has
// no reset, like the SRAM cells it models.
module cam_array #(
  parameter int unsigned ROWS  = 4096,
  parameter int unsigned WIDTH = 124,
  localparam int unsigned AW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic             clk,
  // compare
  input  logic [WIDTH-1:0] cmp_key,
  input  logic [WIDTH-1:0] cmp_mask,
  output logic [ROWS-1:0]  match,
  // associative write of tagged rows
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_key,
  input  logic [WIDTH-1:0] wr_mask,
  input  logic [ROWS-1:0]  tag,
  // read of tagged rows
  output logic [WIDTH-1:0] rd_data,
  // row-addressed load
  input  logic             ld_en,
  input  logic [AW-1:0]    ld_addr,
  input  logic [WIDTH-1:0] ld_data
);

  // storage by bit-column: bitcol[b][r] is bit b of row r
  logic [ROWS-1:0] bitcol [WIDTH];

  // match lines: a row stays matched unless an unmasked column differs
  always_comb begin
    match = '1;
    for (int unsigned b = 0; b < WIDTH; b++) begin
      if (cmp_mask[b]) match &= cmp_key[b] ? bitcol[b] : ~bitcol[b];
    end
  end

  // read: each bit-line stays high unless a tagged row holds 0
  always_comb begin
    for (int unsigned b = 0; b < WIDTH; b++) begin
      rd_data[b] = &(bitcol[b] | ~tag);
    end
  end

  always_ff @(posedge clk) begin
    for (int unsigned b = 0; b < WIDTH; b++) begin
      logic [ROWS-1:0] v;
      v = bitcol[b];
      if (wr_en && wr_mask[b]) v = wr_key[b] ? (v | tag) : (v & ~tag);
      if (ld_en) v[ld_addr] = ld_data[b];
      bitcol[b] <= v;
    end
  end

endmodule
