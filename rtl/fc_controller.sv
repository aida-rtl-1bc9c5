// fc_controller: the AP controller of AIDA. It runs one fully connected layer,
// C = RELU(W x B), on the CAM array by issuing one CAM operation per cycle:
// a compare (key and mask on the compare bit-lines), a write of the tagged
// rows (key and mask on the write bit-lines), both at once, or a TAG move.
//
// The weight matrix sits in the CAM in associative CSR form, one nonzero per
// row: value W, column index CI, 2-bit row flag (01 first, 10 last, 11 only
// element of its matrix row), plus RI, the element's position inside its
// matrix row, and, in the first element, OI, the output index. The layer runs
// in these stages:
//  1. Clear: all rows match an empty compare; B, C and the temporary bits are
//     written to 0 (1 compare, 1 write).
//  2. Activation broadcast: for every nonzero input activation (index,value)
//     taken from the b_* stream, compare CI == index and, in the next cycle,
//     write value into B of the matching rows. Compare of one activation and
//     write of the one before overlap, so the stream runs at one per cycle.
//  3. Multiplication, bit-serial over the bits j of B and word-parallel over
//     all rows: for each j, for each output bit i+j below K, T = W[i] & B[j]
//     (4-entry truth table) then {carry, C[i+j]} = carry + C[i+j] + T
//     (4-entry truth table). W is sign-extended (bit M-1 reused above it);
//     the sign bit of B subtracts: T = ~W & B[j] and the carry starts at B[j].
//     C then holds the K-bit two's-complement product W*B modulo 2^K.
//  4. Soft reduction, a binary tree inside every matrix row, one level per
//     pass. At level L the senders are the rows whose RI has bit L set and
//     bits below L clear; each sender's C goes to the row 2^L above it. For
//     every bit of C: compare sender & C[bit] == 1, move the tags up by 2^L
//     (long steps of LONG_STEP, then single steps), write B[bit] = 1 (B was
//     cleared first). The last-element flag bit moves along the same way.
//     Then C = C + B in all rows (4-entry table per bit). A pass ends with
//     compare flag == 01 (a first element that has not yet received its
//     row's last element); if_match repeats the pass at level L+1.
//  5. RELU (when act_en): compare C[K-1] == 1, write C = 0.
// Results are read while idle: rd_req with rd_index compares first-element
// flag and OI; three cycles later rd_valid pulses with rd_value (C) and rd_hit
// (0 when no matrix row had that index, i.e. the output is 0).
// mv_up is always 1: the layer only ever moves data toward row 0, so the
// TAG logic's downward moves are left for other programs. Likewise only the
// key and mask bits that some operation uses are ever set.
// Timing: a truth table of E entries takes E+1 cycles; a move of one bit at
// level L takes 2 + 2^L/LONG_STEP + 2^L%LONG_STEP cycles; the level test takes
// 3 cycles. Operations leave through the key registers, which delay each one
// by a cycle: the controller waits for that before it reads if_match or
// cam_rd. The tests count cycles with these formulas.
// Follows the paper: the four stages, compare-then-write perfect induction
// with its AND and full-adder tables and step order, bit-serial word-parallel
// multiplication, tag moves with short and long steps, moving the last flag
// with the data, ending the reduction when no 01 flag is left, and RELU as
// compare-sign-then-write-zero. This design's own: the RI field that tells
// senders from receivers, clearing B before every level, sign handling,
// the stream and read handshakes.
module fc_controller
  import aida_pkg::*;
#(
  parameter int unsigned M         = 16,
  parameter int unsigned N         = 16,
  parameter int unsigned K         = 32,
  parameter int unsigned CIW       = 14,
  parameter int unsigned RIW       = 14,
  parameter int unsigned OIW       = 12,
  parameter int unsigned LONG_STEP = 16,
  localparam int unsigned WIDTH    = 4 + CIW + RIW + M + K + OIW + K
) (
  input  logic             clk,
  input  logic             rst_n,
  // layer control
  input  logic             start,
  input  logic             act_en,
  output logic             busy,
  output logic             done,
  output logic             level_overflow,
  // input activation stream (nonzero elements only)
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
  output logic [K-1:0]     rd_value,
  // CAM array and TAG logic
  output logic             cmp_en,
  output logic [WIDTH-1:0] cmp_key,
  output logic [WIDTH-1:0] cmp_mask,
  output logic             wr_en,
  output logic [WIDTH-1:0] wr_key,
  output logic [WIDTH-1:0] wr_mask,
  output logic             mv_en,
  output logic             mv_up,
  output logic             mv_long,
  input  logic             if_match,
  input  logic [WIDTH-1:0] cam_rd
);

  `include "aida_layout.svh"
  `AIDA_LAYOUT

  typedef enum logic [4:0] {
    S_IDLE, S_RD_CMP, S_RD_WAIT, S_RD_OUT, S_INIT, S_BCAST, S_BDRAIN,
    S_CINIT, S_AND, S_ADD, S_RCLR, S_RMOVE, S_RFLAG, S_RADD,
    S_RTEST, S_RWAIT, S_RDEC, S_ACT, S_DONE
  } state_t;

  typedef struct packed {
    logic [WIDTH-1:0] ckey;
    logic [WIDTH-1:0] cmask;
    logic [WIDTH-1:0] wkey;
    logic [WIDTH-1:0] wmask;
  } entry_t;

  localparam int unsigned JW = $clog2(N) + 1;
  localparam int unsigned BW = $clog2(K) + 1;
  localparam int unsigned LW = $clog2(RIW) + 1;
  localparam int unsigned SW = RIW + 2;

  function automatic logic [WIDTH-1:0] col(input int unsigned c);
    return {{(WIDTH-1){1'b0}}, 1'b1} << c;
  endfunction

  function automatic logic [WIDTH-1:0] field(input int unsigned base, input int unsigned len);
    logic [WIDTH-1:0] f;
    f = '0;
    for (int unsigned b = 0; b < WIDTH; b++) begin
      if (b >= base && b < base + len) f[b] = 1'b1;
    end
    return f;
  endfunction

  state_t           state;
  logic [SW-1:0]    st;
  logic [JW-1:0]    j;
  logic [BW-1:0]    i;
  logic [BW-1:0]    bitc;
  logic [LW-1:0]    lvl;
  logic             pend_v;
  logic [N-1:0]     pend_val;
  logic [OIW-1:0]   rd_idx_q;

  // moves of the current reduction level
  logic [RIW-1:0]   mv_dist;
  logic [SW-1:0]    n_long, n_move;
  always_comb begin
    mv_dist   = RIW'(1) << lvl;
    n_long = SW'(mv_dist / LONG_STEP);
    n_move = n_long + SW'(mv_dist % LONG_STEP);
  end

  // number of truth-table entries of the current perfect-induction state
  logic [2:0] n_ent;
  always_comb begin
    unique case (state)
      S_AND:                n_ent = 3'(AND_STEPS);
      S_ADD, S_RADD:        n_ent = 3'(ADD_STEPS);
      S_CINIT:              n_ent = (32'(j) == N - 1) ? 3'd2 : 3'd1;
      default:              n_ent = 3'd1;
    endcase
  end

  // one truth-table entry of the current state
  function automatic entry_t pi_entry(input state_t s, input int unsigned e,
                                      input int unsigned jj, input int unsigned ii,
                                      input int unsigned bb);
    entry_t    en;
    and_step_t a;
    add_step_t d;
    int unsigned widx, tgt, addc;
    logic inv;
    en   = '0;
    widx = (ii < M) ? ii : M - 1;
    inv  = (jj == N - 1);
    tgt  = (s == S_RADD) ? C_BASE + bb : C_BASE + ii + jj;
    addc = (s == S_RADD) ? B_BASE + bb : T_AND_COL;
    unique case (s)
      S_INIT: begin
        en.wmask = field(B_BASE, K) | field(C_BASE, K) | col(T_AND_COL) | col(T_CARRY_COL);
      end
      S_CINIT: begin
        en.wmask = col(T_CARRY_COL);
        if (inv) begin
          en.cmask = col(B_BASE + jj);
          en.ckey  = (e == 0) ? col(B_BASE + jj) : '0;
          en.wkey  = (e == 0) ? col(T_CARRY_COL) : '0;
        end
      end
      S_AND: begin
        a        = and_step(e);
        en.cmask = col(W_BASE + widx) | col(B_BASE + jj);
        en.ckey  = (a.w ? col(W_BASE + widx) : '0) | (a.b ? col(B_BASE + jj) : '0);
        en.wmask = col(T_AND_COL);
        en.wkey  = ((a.w ^ inv) & a.b) ? col(T_AND_COL) : '0;
      end
      S_ADD, S_RADD: begin
        d        = add_step(e);
        en.cmask = col(T_CARRY_COL) | col(tgt) | col(addc);
        en.ckey  = (d.in_carry ? col(T_CARRY_COL) : '0) | (d.in_c ? col(tgt) : '0) |
                   (d.in_t ? col(addc) : '0);
        en.wmask = col(T_CARRY_COL) | col(tgt);
        en.wkey  = (d.out_carry ? col(T_CARRY_COL) : '0) | (d.out_c ? col(tgt) : '0);
      end
      S_RCLR: begin
        en.wmask = field(B_BASE, K) | col(T_CARRY_COL);
      end
      S_ACT: begin
        en.cmask = col(C_BASE + K - 1);
        en.ckey  = col(C_BASE + K - 1);
        en.wmask = field(C_BASE, K);
      end
      default: en = '0;
    endcase
    return en;
  endfunction

  entry_t ent_cur, ent_prev;
  always_comb begin
    ent_cur  = pi_entry(state, 32'(st), 32'(j), 32'(i), 32'(bitc));
    ent_prev = pi_entry(state, 32'(st) - 1, 32'(j), 32'(i), 32'(bitc));
  end

  logic is_pi;
  assign is_pi = state inside {S_INIT, S_CINIT, S_AND, S_ADD, S_RCLR, S_RADD, S_ACT};

  // sender selection of the current level: RI[lvl] = 1, RI[lvl-1:0] = 0
  logic [WIDTH-1:0] snd_key, snd_mask;
  assign snd_key  = col(RI_BASE + 32'(lvl));
  assign snd_mask = field(RI_BASE, 32'(lvl) + 1);

  // CAM control for this cycle
  always_comb begin
    cmp_en   = 1'b0;
    cmp_key  = '0;
    cmp_mask = '0;
    wr_en    = 1'b0;
    wr_key   = '0;
    wr_mask  = '0;
    mv_en    = 1'b0;
    mv_up    = 1'b1;
    mv_long  = 1'b0;
    b_ready  = 1'b0;
    if (is_pi) begin
      cmp_en   = (st < SW'(n_ent));
      cmp_key  = ent_cur.ckey;
      cmp_mask = ent_cur.cmask;
      wr_en    = (st != '0);
      wr_key   = ent_prev.wkey;
      wr_mask  = ent_prev.wmask;
    end else begin
      unique case (state)
        S_RD_CMP: begin
          cmp_en   = 1'b1;
          cmp_mask = col(FLAG_BASE) | field(OI_BASE, OIW);
          cmp_key  = col(FLAG_BASE) | (WIDTH'(rd_idx_q) << OI_BASE);
        end
        S_BCAST: begin
          b_ready  = 1'b1;
          cmp_en   = b_valid;
          cmp_mask = field(CI_BASE, CIW);
          cmp_key  = WIDTH'(b_index) << CI_BASE;
          wr_en    = pend_v;
          wr_mask  = field(B_BASE, N);
          wr_key   = WIDTH'(pend_val) << B_BASE;
        end
        S_BDRAIN: begin
          wr_en    = pend_v;
          wr_mask  = field(B_BASE, N);
          wr_key   = WIDTH'(pend_val) << B_BASE;
        end
        S_RMOVE, S_RFLAG: begin
          if (st == '0) begin
            cmp_en   = 1'b1;
            cmp_mask = snd_mask | ((state == S_RMOVE) ? col(C_BASE + 32'(bitc)) : col(FLAG_BASE + 1));
            cmp_key  = snd_key  | ((state == S_RMOVE) ? col(C_BASE + 32'(bitc)) : col(FLAG_BASE + 1));
          end else if (st <= n_move) begin
            mv_en    = 1'b1;
            mv_long  = (st <= n_long);
          end else begin
            wr_en    = 1'b1;
            wr_mask  = (state == S_RMOVE) ? col(B_BASE + 32'(bitc)) : col(FLAG_BASE + 1);
            wr_key   = wr_mask;
          end
        end
        S_RTEST: begin
          cmp_en   = 1'b1;
          cmp_mask = col(FLAG_BASE) | col(FLAG_BASE + 1);
          cmp_key  = WIDTH'(FLAG_FIRST) << FLAG_BASE;
        end
        default: ;
      endcase
    end
  end

  assign busy     = !(state inside {S_IDLE, S_RD_CMP, S_RD_WAIT, S_RD_OUT});
  assign done     = (state == S_DONE);
  assign rd_valid = (state == S_RD_OUT);
  assign rd_hit   = if_match;
  assign rd_value = cam_rd[C_BASE +: K];

  logic pi_last;
  assign pi_last = is_pi && (st == SW'(n_ent));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      st             <= '0;
      j              <= '0;
      i              <= '0;
      bitc           <= '0;
      lvl            <= '0;
      pend_v         <= 1'b0;
      pend_val       <= '0;
      rd_idx_q       <= '0;
      level_overflow <= 1'b0;
    end else begin
      st <= st + 1'b1;
      unique case (state)
        S_IDLE: begin
          st <= '0;
          if (start) begin
            state          <= S_INIT;
            level_overflow <= 1'b0;
          end else if (rd_req) begin
            state    <= S_RD_CMP;
            rd_idx_q <= rd_index;
          end
        end
        S_RD_CMP:  state <= S_RD_WAIT;
        S_RD_WAIT: state <= S_RD_OUT;
        S_RD_OUT: state <= S_IDLE;
        S_INIT: if (pi_last) begin
          st     <= '0;
          pend_v <= 1'b0;
          state  <= S_BCAST;
        end
        S_BCAST: begin
          st       <= '0;
          pend_v   <= b_valid;
          pend_val <= b_value;
          if (b_valid && b_last) state <= S_BDRAIN;
        end
        S_BDRAIN: begin
          st     <= '0;
          pend_v <= 1'b0;
          j      <= '0;
          state  <= S_CINIT;
        end
        S_CINIT: if (pi_last) begin
          st    <= '0;
          i     <= '0;
          state <= S_AND;
        end
        S_AND: if (pi_last) begin
          st    <= '0;
          state <= S_ADD;
        end
        S_ADD: if (pi_last) begin
          st <= '0;
          if (32'(i) + 32'(j) == K - 1) begin
            if (32'(j) == N - 1) begin
              lvl   <= '0;
              state <= S_RCLR;
            end else begin
              j     <= j + 1'b1;
              state <= S_CINIT;
            end
          end else begin
            i     <= i + 1'b1;
            state <= S_AND;
          end
        end
        S_RCLR: if (pi_last) begin
          st    <= '0;
          bitc  <= '0;
          state <= S_RMOVE;
        end
        S_RMOVE: if (st == n_move + 1'b1) begin
          st <= '0;
          if (32'(bitc) == K - 1) state <= S_RFLAG;
          else                    bitc  <= bitc + 1'b1;
        end
        S_RFLAG: if (st == n_move + 1'b1) begin
          st    <= '0;
          bitc  <= '0;
          state <= S_RADD;
        end
        S_RADD: if (pi_last) begin
          st <= '0;
          if (32'(bitc) == K - 1) state <= S_RTEST;
          else                    bitc  <= bitc + 1'b1;
        end
        S_RTEST: begin
          st    <= '0;
          state <= S_RWAIT;
        end
        S_RWAIT: begin
          st    <= '0;
          state <= S_RDEC;
        end
        S_RDEC: begin
          st <= '0;
          if (if_match && 32'(lvl) < RIW - 1) begin
            lvl   <= lvl + 1'b1;
            state <= S_RCLR;
          end else begin
            level_overflow <= if_match;
            state          <= act_en ? S_ACT : S_DONE;
          end
        end
        S_ACT: if (pi_last) begin
          st    <= '0;
          state <= S_DONE;
        end
        S_DONE: begin
          st    <= '0;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a cycle either compares or moves the tags, never both
  a_cmp_xor_move: assert property (@(posedge clk) disable iff (!rst_n) !(cmp_en && mv_en));
  // stream handshake: b_ready only while broadcasting
  a_ready_state: assert property (@(posedge clk) disable iff (!rst_n) b_ready |-> state == S_BCAST);

endmodule
