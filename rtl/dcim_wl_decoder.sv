// dcim_wl_decoder: word-line decoder of the digital CiM array.
//
// Turns row addresses into word lines. A compute read raises two read word
// lines at once: RWL_j of scale-factor row sf_row and RWL_i of partial-sum row
// ps_row (placed after the SF_ROWS scale-factor rows). A write raises the
// write word line of array row wr_row. All outputs are combinational and
// one-hot per group (or zero when the enable is low). The paper names this
// block and the double word-line activation; plain binary decoding is this
// design's choice.
module dcim_wl_decoder #(
  parameter int IN_BITS = 4,
  parameter int PS_BITS = 8,
  parameter int SF_ROWS = IN_BITS * PS_BITS / 2,
  parameter int PS_ROWS = PS_BITS,
  parameter int NROWS   = SF_ROWS + PS_ROWS
) (
  input  logic [$clog2(SF_ROWS)-1:0] sf_row,
  input  logic                       sf_en,
  input  logic [$clog2(PS_ROWS)-1:0] ps_row,
  input  logic                       ps_en,
  input  logic [$clog2(NROWS)-1:0]   wr_row,
  input  logic                       wr_en,
  output logic [NROWS-1:0]           rwl,
  output logic [NROWS-1:0]           wwl
);

  always_comb begin
    rwl = '0;
    wwl = '0;
    if (sf_en) rwl[int'(sf_row)] = 1'b1;
    if (ps_en) rwl[SF_ROWS + int'(ps_row)] = 1'b1;
    if (wr_en) wwl[wr_row] = 1'b1;
  end

endmodule
