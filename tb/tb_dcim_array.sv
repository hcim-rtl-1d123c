// tb_dcim_array: checks the DCiM array model. Random rows are written (full
// and masked writes) into a shadow copy; then
//   * single-row reads (one side connected) must give RBL = NOT(bit);
//   * compute reads of one scale-factor and one partial-sum row with random
//     transmission-gate patterns must give RBL = NOR(A,B), RBLB = AND(A,B) and
//     WBL_sf = B & tg1, a disconnected cell counting as 0;
//   * with no word line raised the bit lines stay precharged (RBL = 1).
module tb_dcim_array;
  localparam int COLS = 128, SF_ROWS = 16, PS_ROWS = 8, NROWS = 24;
  logic clk = 0;
  logic [NROWS-1:0] rwl = '0, wwl = '0;
  logic [COLS-1:0] tg1 = '0, tg2 = '0, tg3 = '0, wr_data = '0, wr_mask = '0;
  logic [COLS-1:0] rbl, rblb, wbl_sf;
  logic [COLS-1:0] shadow [NROWS];
  int checks = 0, failures = 0;

  dcim_array #(.COLS(COLS)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [COLS-1:0] rnd();
    logic [COLS-1:0] v;
    for (int w = 0; w < COLS / 32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic chk(input logic [COLS-1:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 6) $display("%s: got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    // full writes of every row
    for (int r = 0; r < NROWS; r++) begin
      @(negedge clk);
      wwl = '0; wwl[r] = 1'b1; wr_data = rnd(); wr_mask = '1;
      shadow[r] = wr_data;
    end
    // masked writes
    for (int t = 0; t < 30; t++) begin
      int r;
      r = $urandom % NROWS;
      @(negedge clk);
      wwl = '0; wwl[r] = 1'b1; wr_data = rnd(); wr_mask = rnd();
      shadow[r] = (shadow[r] & ~wr_mask) | (wr_data & wr_mask);
    end
    @(negedge clk);
    wwl = '0;
    // precharged when idle
    rwl = '0; tg2 = '1; tg3 = '1; #1;
    chk(rbl, '1, "idle rbl");
    // single-row reads
    for (int r = 0; r < NROWS; r++) begin
      rwl = '0; rwl[r] = 1'b1;
      tg1 = '0;
      tg2 = (r < SF_ROWS) ? '1 : '0;
      tg3 = (r < SF_ROWS) ? '0 : '1;
      #1;
      chk(rbl, ~shadow[r], "single read");
    end
    // compute reads
    for (int t = 0; t < 200; t++) begin
      int i, j;
      logic [COLS-1:0] a, b;
      j = $urandom % SF_ROWS;
      i = SF_ROWS + $urandom % PS_ROWS;
      rwl = '0; rwl[j] = 1'b1; rwl[i] = 1'b1;
      tg1 = rnd(); tg2 = rnd(); tg3 = rnd();
      #1;
      a = shadow[i] & tg3;
      b = shadow[j] & tg2;
      chk(rbl, ~(a | b), "rbl");
      chk(rblb, a & b, "rblb");
      chk(wbl_sf, shadow[j] & tg1, "wbl_sf");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
