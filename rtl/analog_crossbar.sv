// analog_crossbar: behavioural model of the charge-based 8T-SRAM analog
// compute-in-memory crossbar (ROWS x COLS cells, one weight bit per cell).
//
// This is a behavioural model of an analog block, not a circuit description.
// In silicon each column accumulates charge from every row whose word line
// carries a 1 and whose cell stores a 1; the resulting column voltage is fed
// to comparators. Here the column "voltage" is represented by the exact
// integer count of such rows, col_val[c] = sum_r wl[r] & w[r][c]; device
// noise and non-linearity are not modelled.
//
// Interface: weights are written one row at a time (w_wr_en, w_wr_row,
// w_wr_data, synchronous to clk); they are pre-loaded before inference and
// stay stationary. wl is the current input bit of every row (one bit-stream
// step); col_val follows wl combinationally, i.e. the analog evaluation is
// taken to settle within one clock cycle. Bit-slice 1 and bit-stream 1
// follow the paper's evaluation; the integer-count abstraction is this
// model's own.
module analog_crossbar #(
  parameter int ROWS = 128,
  parameter int COLS = 128,
  parameter int CW   = $clog2(ROWS + 1)
) (
  input  logic                         clk,
  input  logic                         w_wr_en,
  input  logic [$clog2(ROWS)-1:0]      w_wr_row,
  input  logic [COLS-1:0]              w_wr_data,
  input  logic [ROWS-1:0]              wl,
  output logic [COLS-1:0][CW-1:0]      col_val
);

  logic [COLS-1:0] weight [ROWS];

  always_ff @(posedge clk) begin
    if (w_wr_en) weight[w_wr_row] <= w_wr_data;
  end

  for (genvar c = 0; c < COLS; c++) begin : g_col
    always_comb begin
      col_val[c] = '0;
      for (int r = 0; r < ROWS; r++) begin
        col_val[c] = col_val[c] + CW'(wl[r] & weight[r][c]);
      end
    end
  end

endmodule
