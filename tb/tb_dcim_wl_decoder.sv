// tb_dcim_wl_decoder: exhaustively checks that a compute read raises exactly
// the scale-factor row and the partial-sum row asked for (partial-sum rows
// placed after the 16 scale-factor rows), and that writes raise exactly one
// write word line; with enables low nothing is raised.
module tb_dcim_wl_decoder;
  localparam int SF_ROWS = 16, PS_ROWS = 8, NROWS = 24;
  logic [3:0] sf_row; logic sf_en;
  logic [2:0] ps_row; logic ps_en;
  logic [4:0] wr_row; logic wr_en;
  logic [NROWS-1:0] rwl, wwl;
  int checks = 0, failures = 0;

  dcim_wl_decoder dut (.*);

  initial begin
    for (int s = 0; s < SF_ROWS; s++)
      for (int p = 0; p < PS_ROWS; p++)
        for (int e = 0; e < 4; e++) begin
          logic [NROWS-1:0] exp_r;
          sf_row = s[3:0]; ps_row = p[2:0]; sf_en = e[0]; ps_en = e[1];
          wr_row = 5'((s + p) % NROWS); wr_en = e[0] ^ e[1];
          #1;
          exp_r = '0;
          if (e[0]) exp_r = exp_r | (NROWS'(1) << s);
          if (e[1]) exp_r = exp_r | (NROWS'(1) << (SF_ROWS + p));
          checks++;
          if (rwl !== exp_r) begin failures++; $display("rwl %h exp %h", rwl, exp_r); end
          checks++;
          if (wwl !== (wr_en ? (NROWS'(1) << ((s + p) % NROWS)) : '0)) begin
            failures++; $display("wwl %h", wwl);
          end
        end
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
