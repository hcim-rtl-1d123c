// tb_sparsity_ctrl: for random p vectors (about half zeros, as ternary
// quantisation gives), every group and both phases, builds the expected
// clock-gating enable and subtract select crossbar column by crossbar column
// (words k = (c mod 32) / 2 at bit columns 8k + 4h, wrapping) and checks ce,
// sub and the count of active words; all outputs low when op_valid is low.
module tb_sparsity_ctrl;
  localparam int COLS = 128, SF = 4, PSB = 8, WPR = COLS / PSB;
  logic op_valid, op_phase;
  logic [1:0] op_group;
  logic [COLS-1:0][1:0] p;
  logic [COLS-1:0] ce, sub; logic [4:0] n_active;
  int checks = 0, failures = 0;

  sparsity_ctrl #(.COLS(COLS), .SF_BITS(SF), .PS_BITS(PSB)) dut (.*);

  initial begin
    for (int t = 0; t < 60; t++) begin
      for (int c = 0; c < COLS; c++)
        case ($urandom % 4)
          0, 1: p[c] = 2'b00;
          2: p[c] = 2'b01;
          default: p[c] = 2'b11;
        endcase
      op_valid = (t % 7) != 3;
      for (int g = 0; g < 4; g++)
        for (int h = 0; h < 2; h++) begin
          logic [COLS-1:0] e1, e2; int na;
          op_group = g[1:0]; op_phase = h[0];
          #1;
          e1 = '0; e2 = '0; na = 0;
          if (op_valid)
            for (int c = g * 2 * WPR; c < (g + 1) * 2 * WPR; c++)
              if (c % 2 == h)
                for (int b = 0; b < PSB; b++) begin
                  int x;
                  x = (((c - g * 2 * WPR) / 2) * PSB + h * SF + b) % COLS;
                  if (p[c] != 2'b00) e1[x] = 1'b1;
                if (p[c] == 2'b11) e2[x] = 1'b1;
                if (b == 0 && p[c] != 2'b00 && op_valid) na++;
                end
          checks++; if (ce !== e1) begin failures++; $display("ce g%0d h%0d", g, h); end
          checks++; if (sub !== e2) begin failures++; $display("sub g%0d h%0d", g, h); end
          checks++; if (int'(n_active) != na) begin failures++; $display("n_active %0d exp %0d", n_active, na); end
          #1;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
