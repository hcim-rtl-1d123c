// hcim_pkg: shared constants, types and index functions of the hybrid
// analog-digital compute-in-memory (HCiM) macro.
//
// The comparator output p of every crossbar column is carried as a 2-bit code:
// 00 means 0, 01 means +1 and 11 means -1 (the code is the paper's). Bit 1 of
// the code is therefore the "subtract" select of the column peripheral.
//
// Layout of the digital CiM (DCiM) array used throughout this design:
//   * the array has COLS bit columns; rows 0..SF_ROWS-1 hold scale factors and
//     rows SF_ROWS..SF_ROWS+PS_ROWS-1 hold partial sums;
//   * a scale-factor row holds COLS/SF_BITS words, a partial-sum row holds
//     COLS/PS_BITS words, PS_BITS = 2*SF_BITS;
//   * scale-factor words alternate "odd" (even word index 2k, phase 0) and
//     "even" (index 2k+1, phase 1). The partial-sum word served by a phase-0
//     operation starts at the same bit column as its scale factor; for phase 1
//     the partial-sum row is shifted by SF_BITS columns and its last word wraps
//     round the array edge. This keeps every scale factor bit-aligned with the
//     low half of its partial sum.
//   * crossbar column c belongs to group g = c / (2*WPR) with in-group index
//     2k+h (k word, h phase); its scale factor for bit-stream j sits in row
//     j*GROUPS+g, word 2k+h, and its partial sum in PS row 2g+h, word k.
// The odd/even split is the paper's; the exact row numbering is this design's.
package hcim_pkg;

  localparam logic [1:0] P_ZERO = 2'b00;
  localparam logic [1:0] P_POS  = 2'b01;
  localparam logic [1:0] P_NEG  = 2'b11;

  typedef enum logic {
    MODE_BINARY  = 1'b0,
    MODE_TERNARY = 1'b1
  } psq_mode_t;

  // Position of bit column x inside the partial-sum word it belongs to during
  // phase h (0 = odd words, 1 = even words). Returns word index * PS_BITS + bit.
  function automatic int rel_col(int x, int h, int cols, int sf_bits);
    return (x - h * sf_bits + cols) % cols;
  endfunction

  // Crossbar column whose scale-factor operation owns bit column x when
  // group g and phase h are being processed.
  function automatic int owner_col(int x, int h, int g, int cols, int sf_bits,
                                   int ps_bits);
    int rel;
    int wpr;
    rel = rel_col(x, h, cols, sf_bits);
    wpr = cols / ps_bits;
    return g * 2 * wpr + 2 * (rel / ps_bits) + h;
  endfunction

  // One bit of the column peripheral compute stage (Fig. 3(d) of the paper,
  // Eq. 2 and 3). Inputs are latched bit-line values of the read cycle: NOR
  // and AND of partial-sum bit A and scale-factor bit B, and B itself as read
  // on WBL_sf (the OR/NAND polarities add nothing). sub selects borrow (A - B) instead of carry (A + B).
  // Returns {carry_or_borrow_out, sum_or_difference}.
  function automatic logic [1:0] cim_bit(logic l_nor, logic l_and,
                                         logic l_wbl, logic cin, logic sub);
    logic o1;     // XNOR(A,B), formed from AND and NOR
    logic sum;
    logic cout;
    logic bout;
    o1   = l_and | l_nor;
    sum  = cin ? o1 : ~o1;
    cout = o1 ? l_and : cin;
    bout = o1 ? cin : l_wbl;
    return {(sub ? bout : cout), sum};
  endfunction

endpackage
