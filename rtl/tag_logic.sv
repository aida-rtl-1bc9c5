// tag_logic: the TAG register of AIDA, one flip-flop per CAM row.
//
// Each TAG FF j is loaded through a multiplexer from one of: its match line
// sense amplifier (a compare), FF j+1 or FF j+LONG_STEP (Move up, toward row
// 0), FF j-1 or FF j-LONG_STEP (Move down), or itself (hold). Positions
// beyond the array shift in 0. The TAG outputs drive the rows' write lines,
// and if_match is the OR of all TAG FFs (the paper's wired IF_MATCH line),
// valid in the cycle after the compare or move that set them.
// Interface: cmp_en loads match; otherwise mv_en moves by 1 (mv_long = 0) or
// LONG_STEP (mv_long = 1) up (mv_up = 1) or down. cmp_en has priority.
// The mux inputs and LONG_STEP = 16 are the paper's; the synchronous reset to
// all zero and the priority of compare over move are this design's choices.
module tag_logic #(
  parameter int unsigned ROWS      = 4096,
  parameter int unsigned LONG_STEP = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cmp_en,
  input  logic [ROWS-1:0] match,
  input  logic            mv_en,
  input  logic            mv_up,
  input  logic            mv_long,
  output logic [ROWS-1:0] tag,
  output logic            if_match
);

  logic [ROWS-1:0] tag_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tag_q <= '0;
    end else if (cmp_en) begin
      tag_q <= match;
    end else if (mv_en) begin
      unique case ({mv_up, mv_long})
        2'b10:   tag_q <= tag_q >> 1;
        2'b11:   tag_q <= tag_q >> LONG_STEP;
        2'b00:   tag_q <= tag_q << 1;
        default: tag_q <= tag_q << LONG_STEP;
      endcase
    end
  end

  assign tag      = tag_q;
  assign if_match = |tag_q;

endmodule
