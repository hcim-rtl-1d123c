// tb_bl_switch: for random p vectors, every group and both phases, builds the
// expected transmission-gate pattern crossbar column by crossbar column (the
// columns of phase h in group g own words k = (c mod 32) / 2 starting at bit
// column 8k + 4h, wrapping round the array) and compares it with TG1/TG2/TG3:
// TG3 on the whole word for p != 0, TG2 on its low 4 columns for p != 0, TG1
// on its low 4 columns for p = -1, and everything off when op_valid is low.
module tb_bl_switch;
  localparam int COLS = 128, SF = 4, PSB = 8, WPR = COLS / PSB;
  logic op_valid, op_phase;
  logic [1:0] op_group;
  logic [COLS-1:0][1:0] p;
  logic [COLS-1:0] tg1, tg2, tg3;
  int checks = 0, failures = 0;

  bl_switch #(.COLS(COLS), .SF_BITS(SF), .PS_BITS(PSB)) dut (.*);

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
          logic [COLS-1:0] e1, e2, e3;
          op_group = g[1:0]; op_phase = h[0];
          #1;
          e1 = '0; e2 = '0; e3 = '0;
          if (op_valid)
            for (int c = g * 2 * WPR; c < (g + 1) * 2 * WPR; c++)
              if (c % 2 == h)
                for (int b = 0; b < PSB; b++) begin
                  int x;
                  x = (((c - g * 2 * WPR) / 2) * PSB + h * SF + b) % COLS;
                  if (p[c] != 2'b00) e3[x] = 1'b1;
                if (p[c] != 2'b00 && b < SF) e2[x] = 1'b1;
                if (p[c] == 2'b11 && b < SF) e1[x] = 1'b1;
                end
          checks++; if (tg1 !== e1) begin failures++; $display("tg1 g%0d h%0d", g, h); end
          checks++; if (tg2 !== e2) begin failures++; $display("tg2 g%0d h%0d", g, h); end
          checks++; if (tg3 !== e3) begin failures++; $display("tg3 g%0d h%0d", g, h); end
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
