// tb_analog_crossbar: checks the behavioural crossbar model. Random weight
// bits are written row by row and kept in a shadow copy; for many random
// word-line vectors every column value must equal the number of rows where
// both the word line and the stored weight are 1.
module tb_analog_crossbar;
  localparam int ROWS = 128, COLS = 128, CW = 8;
  logic clk = 0;
  logic w_wr_en = 0;
  logic [$clog2(ROWS)-1:0] w_wr_row = '0;
  logic [COLS-1:0] w_wr_data = '0;
  logic [ROWS-1:0] wl = '0;
  logic [COLS-1:0][CW-1:0] col_val;
  logic [COLS-1:0] shadow [ROWS];
  int checks = 0, failures = 0;

  analog_crossbar #(.ROWS(ROWS), .COLS(COLS), .CW(CW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      w_wr_en = 1; w_wr_row = r[6:0];
      for (int w = 0; w < COLS / 32; w++) w_wr_data[w*32 +: 32] = $urandom;
      shadow[r] = w_wr_data;
    end
    @(negedge clk); w_wr_en = 0;
    for (int t = 0; t < 40; t++) begin
      for (int w = 0; w < ROWS / 32; w++) wl[w*32 +: 32] = (t == 0) ? '1 : $urandom;
      #1;
      for (int c = 0; c < COLS; c++) begin
        int n;
        n = 0;
        for (int r = 0; r < ROWS; r++) n += (wl[r] && shadow[r][c]) ? 1 : 0;
        checks++;
        if (int'(col_val[c]) != n) begin
          failures++;
          if (failures < 5) $display("col %0d got %0d exp %0d", c, col_val[c], n);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
