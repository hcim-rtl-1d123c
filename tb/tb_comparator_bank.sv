// tb_comparator_bank: checks binary and ternary quantisation of random column
// values against the threshold rules, including values exactly at vref and at
// vref +/- alpha, and the 2-bit code (00 = 0, 01 = +1, 11 = -1).
module tb_comparator_bank;
  import hcim_pkg::*;
  localparam int COLS = 128, CW = 8;
  psq_mode_t mode;
  logic [CW-1:0] vref, alpha;
  logic [COLS-1:0][CW-1:0] col_val;
  logic [COLS-1:0][1:0] p;
  int checks = 0, failures = 0;
  int n_pos = 0, n_neg = 0, n_zero = 0;

  comparator_bank #(.COLS(COLS), .CW(CW)) dut (.*);

  initial begin
    for (int t = 0; t < 200; t++) begin
      mode  = (t % 2) ? MODE_TERNARY : MODE_BINARY;
      vref  = CW'(20 + $urandom % 80);
      alpha = CW'($urandom % 12);
      for (int c = 0; c < COLS; c++) begin
        case (c % 8)
          0: col_val[c] = vref;
          1: col_val[c] = vref + alpha;
          2: col_val[c] = vref - alpha;
          3: col_val[c] = vref + alpha - 1;
          default: col_val[c] = CW'($urandom % 129);
        endcase
      end
      #1;
      for (int c = 0; c < COLS; c++) begin
        int ps;
        logic [1:0] e;
        ps = int'(col_val[c]) - int'(vref);
        if (mode == MODE_BINARY) e = (ps >= 0) ? 2'b01 : 2'b11;
        else if (ps >= int'(alpha)) e = 2'b01;
        else if (ps <= -int'(alpha)) e = 2'b11;
        else e = 2'b00;
        checks++;
        if (p[c] !== e) begin
          failures++;
          if (failures < 5) $display("t%0d c%0d val %0d vref %0d a %0d got %b exp %b", t, c, col_val[c], vref, alpha, p[c], e);
        end
        if (e == 2'b01) n_pos++; else if (e == 2'b11) n_neg++; else n_zero++;
      end
      #1;
    end
    checks++;
    if (n_pos == 0 || n_neg == 0 || n_zero == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
