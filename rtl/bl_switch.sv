// bl_switch: bit-line switch signal generator of the digital CiM array.
//
// For the row operation being read (group op_group, phase op_phase: 0 = odd
// words, 1 = even words) each bit column x belongs to one partial-sum word,
// and that word to one crossbar column c, whose comparator output p[c]
// decides the transmission gates of x:
//   p = 0  : TG1, TG2, TG3 off - the column stays precharged (sparsity);
//   p = +1 : TG2 (scale factor onto RBL/RBLB) and TG3 (partial sum) on;
//   p = -1 : as +1, and TG1 also puts the scale-factor bit on WBL_sf so the
//            compute stage can form the borrow.
// TG2 and TG1 are raised only on the low SF_BITS columns of a word, where the
// scale factor lies; on the upper columns only the partial sum is read. The
// gate rules per p value are the paper's; restricting TG1/TG2 to the scale
// factor's columns is this design's reading of the array layout. All outputs
// are combinational and zero when op_valid is low.
module bl_switch
  import hcim_pkg::*;
#(
  parameter int COLS    = 128,
  parameter int SF_BITS = 4,
  parameter int PS_BITS = 8,
  parameter int GROUPS  = PS_BITS / 2
) (
  input  logic                         op_valid,
  input  logic                         op_phase,
  input  logic [$clog2(GROUPS)-1:0]    op_group,
  input  logic [COLS-1:0][1:0]         p,
  output logic [COLS-1:0]              tg1,
  output logic [COLS-1:0]              tg2,
  output logic [COLS-1:0]              tg3
);

  always_comb begin
    for (int x = 0; x < COLS; x++) begin
      int          rel;
      int          c;
      logic [1:0]  pc;
      logic        in_sf;
      rel   = rel_col(x, int'(op_phase), COLS, SF_BITS);
      c     = owner_col(x, int'(op_phase), int'(op_group), COLS, SF_BITS, PS_BITS);
      pc    = p[c];
      in_sf = (rel % PS_BITS) < SF_BITS;
      tg3[x] = op_valid && (pc != P_ZERO);
      tg2[x] = op_valid && (pc != P_ZERO) && in_sf;
      tg1[x] = op_valid && (pc == P_NEG) && in_sf;
    end
  end

endmodule
