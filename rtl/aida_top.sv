// aida_top: AIDA, an associative in-memory accelerator for fully connected
// DNN layers. One CAM row per nonzero weight holds the weight, its column
// index, its ACSR row flag, its position within its matrix row, the broadcast
// activation (B field) and the product / partial sum (C field). All arithmetic
// happens inside the array, by compare-and-write passes over truth tables,
// in all rows at once.
//
// Blocks: key_registers (COMPARE KEY, WRITE KEY and MASK, which hold each
// operation for the cycle it executes in), cam_array (the CAM with its
// bit-columns and row load port),
// tag_logic (one TAG flip-flop per row with short and long moves and the
// if_match line) and fc_controller (the AP controller with the FC-layer
// microprogram). The controller drives the compare and write bit-lines and
// the move controls; the TAG register drives the write lines.
// Use: (1) load every row through ld_* (rows not holding a weight must be
// loaded with all zeros); (2) pulse start with act_en chosen (1 = RELU);
// (3) stream the nonzero input activations on b_* (valid/ready, b_last on the
// final one; at least one element); (4) wait for done; (5) read each output
// with rd_req/rd_index: rd_valid comes 3 cycles later with rd_value and
// rd_hit (0 means no weight row had that output index, so the output is 0).
// level_overflow reports that the reduction hit the RI field's depth limit.
// The composition follows the paper's architecture figure; the ports toward
// the host are this design's choice, as the paper does not describe them.
module aida_top #(
  parameter int unsigned ROWS      = 4096,
  parameter int unsigned M         = 16,
  parameter int unsigned N         = 16,
  parameter int unsigned K         = 32,
  parameter int unsigned CIW       = 14,
  parameter int unsigned RIW       = 14,
  parameter int unsigned OIW       = 12,
  parameter int unsigned LONG_STEP = 16,
  localparam int unsigned WIDTH    = 4 + CIW + RIW + M + K + OIW + K,
  localparam int unsigned AW       = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // host load of the ACSR rows
  input  logic             ld_en,
  input  logic [AW-1:0]    ld_addr,
  input  logic [WIDTH-1:0] ld_data,
  // layer control
  input  logic             start,
  input  logic             act_en,
  output logic             busy,
  output logic             done,
  output logic             level_overflow,
  // input activation stream
  input  logic             b_valid,
  output logic             b_ready,
  input  logic [CIW-1:0]   b_index,
  input  logic [N-1:0]     b_value,
  input  logic             b_last,
  // output activation read
  input  logic             rd_req,
  input  logic [OIW-1:0]   rd_index,
  output logic             rd_valid,
  output logic             rd_hit,
  output logic [K-1:0]     rd_value
);

  // operation as issued by the controller (_d) and as held in the key registers
  logic             cmp_en_d, wr_en_d, mv_en_d, mv_up_d, mv_long_d;
  logic [WIDTH-1:0] cmp_key_d, cmp_mask_d, wr_key_d, wr_mask_d;
  logic             cmp_en, wr_en, mv_en, mv_up, mv_long, if_match;
  logic [WIDTH-1:0] cmp_key, cmp_mask, wr_key, wr_mask, cam_rd;
  logic [ROWS-1:0]  match, tag;

  fc_controller #(
    .M(M), .N(N), .K(K), .CIW(CIW), .RIW(RIW), .OIW(OIW), .LONG_STEP(LONG_STEP)
  ) u_ctrl (
    .clk, .rst_n,
    .start, .act_en, .busy, .done, .level_overflow,
    .b_valid, .b_ready, .b_index, .b_value, .b_last,
    .rd_req, .rd_index, .rd_valid, .rd_hit, .rd_value,
    .cmp_en(cmp_en_d), .cmp_key(cmp_key_d), .cmp_mask(cmp_mask_d),
    .wr_en(wr_en_d), .wr_key(wr_key_d), .wr_mask(wr_mask_d),
    .mv_en(mv_en_d), .mv_up(mv_up_d), .mv_long(mv_long_d),
    .if_match, .cam_rd
  );

  key_registers #(.WIDTH(WIDTH)) u_keys (
    .clk, .rst_n,
    .cmp_en_d, .cmp_key_d, .cmp_mask_d, .wr_en_d, .wr_key_d, .wr_mask_d,
    .mv_en_d, .mv_up_d, .mv_long_d,
    .cmp_en, .cmp_key, .cmp_mask, .wr_en, .wr_key, .wr_mask,
    .mv_en, .mv_up, .mv_long
  );

  cam_array #(.ROWS(ROWS), .WIDTH(WIDTH)) u_cam (
    .clk,
    .cmp_key, .cmp_mask, .match,
    .wr_en, .wr_key, .wr_mask, .tag,
    .rd_data(cam_rd),
    .ld_en, .ld_addr, .ld_data
  );

  tag_logic #(.ROWS(ROWS), .LONG_STEP(LONG_STEP)) u_tag (
    .clk, .rst_n,
    .cmp_en, .match,
    .mv_en, .mv_up, .mv_long,
    .tag, .if_match
  );

endmodule
