// sparsity_ctrl: sparsity control of the digital CiM column peripherals.
//
// Gives each bit column of the array, for the row operation being read, the
// clock-gating enable ce (high only when the crossbar column that owns the
// bit column has p != 0) and the operation select sub (bit 1 of p: high for
// p = -1, i.e. subtract the scale factor). Columns whose p is 0 are neither
// computed nor stored, which is where ternary quantisation saves energy; the
// latency is unchanged because other columns in the same row operation
// still work. n_active counts the crossbar columns served by this operation
// that have p != 0 (an activity figure for power estimation). The mapping of
// bit columns to crossbar columns is shared with bl_switch. Combinational;
// outputs are zero when op_valid is low. Clock gating itself is realised as a
// register enable inside column_peripherals.
module sparsity_ctrl
  import hcim_pkg::*;
#(
  parameter int COLS    = 128,
  parameter int SF_BITS = 4,
  parameter int PS_BITS = 8,
  parameter int GROUPS  = PS_BITS / 2,
  parameter int WPR     = COLS / PS_BITS
) (
  input  logic                         op_valid,
  input  logic                         op_phase,
  input  logic [$clog2(GROUPS)-1:0]    op_group,
  input  logic [COLS-1:0][1:0]         p,
  output logic [COLS-1:0]              ce,
  output logic [COLS-1:0]              sub,
  output logic [$clog2(WPR+1)-1:0]     n_active
);

  always_comb begin
    for (int x = 0; x < COLS; x++) begin
      int         c;
      logic [1:0] pc;
      c      = owner_col(x, int'(op_phase), int'(op_group), COLS, SF_BITS, PS_BITS);
      pc     = p[c];
      ce[x]  = op_valid && (pc != P_ZERO);
      sub[x] = op_valid && pc[1];
    end
    n_active = '0;
    for (int k = 0; k < WPR; k++) begin
      // first bit column of word k in this phase
      n_active = n_active + ($clog2(WPR+1))'(ce[(k * PS_BITS + int'(op_phase) * SF_BITS) % COLS]);
    end
  end

endmodule
