// column_peripherals: read latches, adder/subtractor chain and write driver
// of the digital CiM array - the Read / Compute / Store pipeline.
//
// Each operation adds (p = +1) or subtracts (p = -1) a scale-factor word to or
// from the partial-sum word it is aligned with, directly from the bit lines:
//   Read    (cycle t)   : at the end of the cycle every enabled column latches
//                         NOR(A,B) from RBL, AND(A,B) from RBLB and B from
//                         WBL_sf (A partial-sum bit, B scale-factor bit).
//   Compute (cycle t+1) : a 1-bit adder/subtractor per column, chained over the
//                         PS_BITS columns of a word, forms
//                           O1   = AND | NOR            (= XNOR(A,B))
//                           Sum  = Cin ? O1 : ~O1       (= A ^ B ^ Cin, Eq. 2)
//                           Cout = O1 ? AND : Cin
//                           Bout = O1 ? Cin : B         (Eq. 3)
//                         and p[1] (sub) selects Bout or Cout as the carry to
//                         the next column. The result is registered.
//   Store   (cycle t+2) : s_data/s_mask drive the write driver; only columns
//                         with p != 0 are written.
// A new operation can enter every cycle (3-cycle pipeline, Fig. 4 of the
// paper). Which columns form a word depends on the phase (0: words start at
// multiples of PS_BITS; 1: shifted by SF_BITS and wrapping round the array).
// The carry into a word's lowest column is 0 and the carry out of its top
// column is dropped, so partial sums wrap modulo 2^PS_BITS.
//
// Clock gating: a column's latches and result register load only when its
// enable (ce, from sparsity_ctrl) was high, written here as register enables.
// The gate-level structure of Fig. 3(d) is followed; the gate type producing
// O1 is not printed in the paper and is chosen so that the printed mux input
// labels agree with Eq. 3.
module column_peripherals
  import hcim_pkg::*;
#(
  parameter int COLS    = 128,
  parameter int SF_BITS = 4,
  parameter int PS_BITS = 8,
  parameter int WPR     = COLS / PS_BITS
) (
  input  logic              clk,
  input  logic              rst_n,
  // read stage
  input  logic              r_valid,
  input  logic              r_phase,
  input  logic [COLS-1:0]   rbl,
  input  logic [COLS-1:0]   rblb,
  input  logic [COLS-1:0]   wbl_sf,
  input  logic [COLS-1:0]   ce,
  input  logic [COLS-1:0]   sub,
  // store stage
  output logic              s_valid,
  output logic [COLS-1:0]   s_data,
  output logic [COLS-1:0]   s_mask
);

  // Read latches
  logic [COLS-1:0] l_nor, l_and, l_wbl, l_sub, l_ce;
  logic            l_valid, l_phase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l_nor   <= '0;
      l_and   <= '0;
      l_wbl   <= '0;
      l_sub   <= '0;
      l_ce    <= '0;
      l_valid <= 1'b0;
      l_phase <= 1'b0;
    end else begin
      l_valid <= r_valid;
      l_phase <= r_phase;
      l_ce    <= r_valid ? ce : '0;
      for (int x = 0; x < COLS; x++) begin
        if (r_valid && ce[x]) begin
          l_nor[x] <= rbl[x];
          l_and[x] <= rblb[x];
          l_wbl[x] <= wbl_sf[x];
          l_sub[x] <= sub[x];
        end
      end
    end
  end

  // Compute: carry/borrow chain per word. In the even phase words start
  // SF_BITS columns further on; the chain start is moved by viewing the
  // latched columns rotated by SF_BITS (a 2:1 mux per column in and out).
  logic [COLS-1:0] a_nor, a_and, a_wbl, a_sub, a_sum, c_sum;

  for (genvar i = 0; i < COLS; i++) begin : g_align
    localparam int IN_SRC  = (i + SF_BITS) % COLS;
    localparam int OUT_SRC = (i - SF_BITS + COLS) % COLS;
    assign a_nor[i] = l_phase ? l_nor[IN_SRC] : l_nor[i];
    assign a_and[i] = l_phase ? l_and[IN_SRC] : l_and[i];
    assign a_wbl[i] = l_phase ? l_wbl[IN_SRC] : l_wbl[i];
    assign a_sub[i] = l_phase ? l_sub[IN_SRC] : l_sub[i];
    assign c_sum[i] = l_phase ? a_sum[OUT_SRC] : a_sum[i];
  end

  for (genvar k = 0; k < WPR; k++) begin : g_word
    // cb[PS_BITS] is the word's final carry/borrow (CB_out); it is dropped,
    // so a partial sum wraps modulo 2^PS_BITS.
    logic [PS_BITS:0] cb;
    assign cb[0] = 1'b0;
    for (genvar b = 0; b < PS_BITS; b++) begin : g_bit
      localparam int X = k * PS_BITS + b;
      logic [1:0] r;
      assign r         = cim_bit(a_nor[X], a_and[X], a_wbl[X], cb[b], a_sub[X]);
      assign a_sum[X]  = r[0];
      assign cb[b + 1] = r[1];
    end
  end

  // Result register feeding the write driver of the store cycle
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_valid <= 1'b0;
      s_data  <= '0;
      s_mask  <= '0;
    end else begin
      s_valid <= l_valid;
      s_mask  <= l_ce;
      for (int x = 0; x < COLS; x++)
        if (l_ce[x]) s_data[x] <= c_sum[x];
    end
  end

endmodule
