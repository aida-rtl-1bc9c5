// aida_pkg: constants shared by the AIDA associative FC-layer accelerator.
//
// Holds the row-flag encoding of the associative CSR (ACSR) weight format and
// the perfect-induction truth tables the AP controller steps through: the
// bitwise AND of a weight bit and an activation bit, and the one-bit full
// addition. Each table entry is one compare (match the input bit-columns
// against the entry) followed by one parallel write of the entry's result
// into the output bit-columns of every matching row. Entries whose result
// equals their inputs ("no action") are left out of the full-adder table,
// and the order of the remaining four is chosen so that a row rewritten by
// one entry never matches a later entry of the same table. Both tables, and
// that step order, are the ones the paper prints; the packing into functions
// is this design's own.
package aida_pkg;

  // ACSR row flag, 2 bits per PU: bit 0 marks the first element of a weight
  // matrix row, bit 1 marks the last one.
  localparam logic [1:0] FLAG_MID    = 2'b00;
  localparam logic [1:0] FLAG_FIRST  = 2'b01;
  localparam logic [1:0] FLAG_LAST   = 2'b10;
  localparam logic [1:0] FLAG_SINGLE = 2'b11;

  // Number of table entries the controller issues per operation.
  localparam int unsigned AND_STEPS = 4;
  localparam int unsigned ADD_STEPS = 4;

  // Bitwise AND, step k (k = 0..3): inputs {W, B} equal k, output T = W & B.
  typedef struct packed {
    logic w;
    logic b;
    logic t;
  } and_step_t;

  function automatic and_step_t and_step(input int unsigned k);
    and_step_t s;
    s.w = k[1];
    s.b = k[0];
    s.t = k[1] & k[0];
    return s;
  endfunction

  // Full addition {carry, c} <= carry + c + t, the four entries that change
  // a row, in the order 1st..4th step: table entries 3, 1, 4, 6.
  typedef struct packed {
    logic in_carry;
    logic in_c;
    logic in_t;
    logic out_carry;
    logic out_c;
  } add_step_t;

  function automatic add_step_t add_step(input int unsigned k);
    case (k)
      0:       return '{in_carry: 1'b0, in_c: 1'b1, in_t: 1'b1, out_carry: 1'b1, out_c: 1'b0};
      1:       return '{in_carry: 1'b0, in_c: 1'b0, in_t: 1'b1, out_carry: 1'b0, out_c: 1'b1};
      2:       return '{in_carry: 1'b1, in_c: 1'b0, in_t: 1'b0, out_carry: 1'b0, out_c: 1'b1};
      default: return '{in_carry: 1'b1, in_c: 1'b1, in_t: 1'b0, out_carry: 1'b1, out_c: 1'b0};
    endcase
  endfunction

endpackage
