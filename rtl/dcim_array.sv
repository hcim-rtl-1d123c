// dcim_array: the 10T-SRAM digital compute-in-memory array that stores scale
// factors and partial sums and performs bitwise logic on its read bit lines.
//
// Rows 0..SF_ROWS-1 hold quantised scale factors, rows SF_ROWS.. hold partial
// sums (24 x 128 for the paper's configuration A: 16 scale-factor rows for
// 4 bit-streams x 128 columns x 4 bits, 8 partial-sum rows for 128 x 8 bits).
// In a compute read one scale-factor row and one partial-sum row are
// activated together. Each column's decoupled read ports share the bit-line
// pair: RBL is pulled low if either connected cell stores 1 (RBL = NOR(A,B))
// and RBLB is pulled low if either stores 0 (RBLB = AND(A,B)), where A is the
// partial-sum bit and B the scale-factor bit. The transmission gates of the
// bit-line switch connect the scale-factor side (tg2) and the partial-sum
// side (tg3) per column; a disconnected cell is modelled as a 0 operand,
// which is how the 4-bit scale factor is zero-extended under the upper half
// of an 8-bit partial sum (the paper does not describe that detail). tg1
// drives the scale-factor bit B itself onto WBL_sf, used for the borrow of a
// subtraction. A single-row read (only one side active) gives RBL = NOT(bit).
//
// Precharge and sensing are analog; here rbl/rblb/wbl_sf are the settled
// logic values of the read cycle, combinational in rwl, tg and the contents.
// Writes are synchronous: every row whose wwl is high takes wr_data on the
// columns where wr_mask is high (the write driver of the store cycle writes
// only columns with p != 0). The array has no reset, like an SRAM.
module dcim_array #(
  parameter int COLS    = 128,
  parameter int IN_BITS = 4,
  parameter int PS_BITS = 8,
  parameter int SF_ROWS = IN_BITS * PS_BITS / 2,
  parameter int PS_ROWS = PS_BITS,
  parameter int NROWS   = SF_ROWS + PS_ROWS
) (
  input  logic              clk,
  input  logic [NROWS-1:0]  rwl,
  input  logic [NROWS-1:0]  wwl,
  input  logic [COLS-1:0]   tg1,
  input  logic [COLS-1:0]   tg2,
  input  logic [COLS-1:0]   tg3,
  input  logic [COLS-1:0]   wr_data,
  input  logic [COLS-1:0]   wr_mask,
  output logic [COLS-1:0]   rbl,
  output logic [COLS-1:0]   rblb,
  output logic [COLS-1:0]   wbl_sf
);

  logic [COLS-1:0] mem [NROWS];

  // Bit-line evaluation of the read cycle.
  logic [COLS-1:0] sf_val;   // wired OR of activated scale-factor cells
  logic [COLS-1:0] ps_val;   // wired OR of activated partial-sum cells

  always_comb begin
    sf_val = '0;
    ps_val = '0;
    for (int r = 0; r < SF_ROWS; r++)
      if (rwl[r]) sf_val = sf_val | mem[r];
    for (int r = SF_ROWS; r < NROWS; r++)
      if (rwl[r]) ps_val = ps_val | mem[r];
    rbl    = ~((sf_val & tg2) | (ps_val & tg3));
    rblb   = (sf_val & tg2) & (ps_val & tg3);
    wbl_sf = sf_val & tg1;
  end

  always_ff @(posedge clk) begin
    for (int r = 0; r < NROWS; r++)
      if (wwl[r]) mem[r] <= (mem[r] & ~wr_mask) | (wr_data & wr_mask);
  end

endmodule
