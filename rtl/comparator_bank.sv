// comparator_bank: behavioural model of the per-column comparators that
// replace the ADCs (partial-sum quantisation to 1 or 1.5 bits).
//
// This is a behavioural model of analog comparators. Each column value
// col_val (an unsigned count from the crossbar model) is first centred,
// ps = col_val - vref, and then quantised:
//   binary  (one comparator):  p = +1 if ps >= 0,      else -1
//   ternary (two comparators): p = +1 if ps >= alpha,
//                              p = -1 if ps <= -alpha, else 0
// p is coded on two bits: 00 = 0, 01 = +1, 11 = -1. The thresholds and code
// follow the paper; alpha is one value per layer as the paper trains it. The
// vref input, which maps the unsigned count onto a signed partial sum, is
// this model's own. Output is combinational (one evaluation per cycle).
module comparator_bank
  import hcim_pkg::*;
#(
  parameter int COLS = 128,
  parameter int CW   = 8
) (
  input  psq_mode_t                mode,
  input  logic [CW-1:0]            vref,
  input  logic [CW-1:0]            alpha,
  input  logic [COLS-1:0][CW-1:0]  col_val,
  output logic [COLS-1:0][1:0]     p
);

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      logic signed [CW+1:0] ps;
      logic signed [CW+1:0] a;
      ps = $signed({2'b00, col_val[c]}) - $signed({2'b00, vref});
      a  = $signed({2'b00, alpha});
      if (mode == MODE_BINARY) begin
        p[c] = (ps >= 0) ? P_POS : P_NEG;
      end else begin
        if (ps >= a)       p[c] = P_POS;
        else if (ps <= -a) p[c] = P_NEG;
        else               p[c] = P_ZERO;
      end
    end
  end

endmodule
