// tb_hcim_macro: end-to-end test of the HCiM macro at its default size
// (128 x 128 crossbar, 4-bit inputs, 4-bit scale factors, 8-bit partial sums,
// 24 x 128 DCiM array). No parameter of the macro is overridden.
//
// The test loads random weights and scale factors through the host ports,
// runs several MVMs and compares every partial sum read back from the array
// with a reference computed here from the same data:
//   count(c,j) = #rows r with activation bit j and weight (r,c) both 1
//   p(c,j)     = quantise(count - vref) (binary, or ternary with alpha)
//   PS(c)     += p(c,j) * s(c,j)   (mod 256), j = 0..3
// using its own model of where the scale factors and partial sums sit in the
// array. MVMs: ternary with clear, binary accumulating on the previous
// result, and ternary accumulating on host-written partial sums. It counts
// each mechanism (add, subtract, skipped column, binary, ternary, clear,
// accumulate, odd and even phase, wrapped word) and fails if one never
// happens; it checks the 43-cycle (with clear) and 35-cycle (without)
// start-to-done time and that the activity output matches the number of
// non-zero p values.
module tb_hcim_macro;
  import hcim_pkg::*;
  localparam int ROWS = 128, COLS = 128, IN_BITS = 4, SF = 4, PSB = 8;
  localparam int G = PSB / 2, SF_ROWS = IN_BITS * G, PS_ROWS = 2 * G;
  localparam int WPR = COLS / PSB, GC = 2 * WPR, NR = SF_ROWS + PS_ROWS;
  localparam int T_CLEAR = PS_ROWS + 1 + IN_BITS * 2 * G + 2;   // start to done
  localparam int T_NOCLR = 1 + IN_BITS * 2 * G + 2;

  logic clk = 0, rst_n = 0;
  psq_mode_t mode = MODE_TERNARY;
  logic [7:0] alpha = 8'd3, vref = 8'd16;
  logic w_wr_en = 0; logic [$clog2(ROWS)-1:0] w_wr_row = '0; logic [COLS-1:0] w_wr_data = '0;
  logic act_load = 0; logic [ROWS-1:0][IN_BITS-1:0] act_in = '0;
  logic host_wr_en = 0; logic [$clog2(NR)-1:0] host_wr_row = '0; logic [COLS-1:0] host_wr_data = '0;
  logic host_rd_en = 0; logic [$clog2(NR)-1:0] host_rd_row = '0;
  logic [COLS-1:0] host_rd_data; logic host_rd_valid;
  logic start = 0, clear_ps = 0, busy, done;
  logic [$clog2(WPR+1)-1:0] active_words;

  hcim_macro dut (.*);
  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  int n_add = 0, n_sub = 0, n_skip = 0, n_bin = 0, n_ter = 0, n_clear = 0, n_acc = 0;
  int n_odd = 0, n_even = 0, n_wrap = 0, act_sum = 0;

  logic [COLS-1:0] wt [ROWS];
  logic [SF-1:0]   sfv [COLS][IN_BITS];
  logic [PSB-1:0]  ps_ref [COLS];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [COLS-1:0] rnd();
    logic [COLS-1:0] v;
    for (int w = 0; w < COLS / 32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  // reference placement of scale factors: row G*j + c/GC, word c%GC
  // (G = PS_BITS/2 row operations per phase, GC = COLS/G columns per group)
  task automatic write_sf();
    for (int j = 0; j < IN_BITS; j++)
      for (int g = 0; g < G; g++) begin
        logic [COLS-1:0] row;
        for (int w = 0; w < GC; w++) begin
          sfv[g*GC + w][j] = SF'($urandom);
          row[w*SF +: SF] = sfv[g*GC + w][j];
        end
        @(negedge clk);
        host_wr_en = 1; host_wr_row = ($clog2(NR))'(j * G + g); host_wr_data = row;
      end
    @(negedge clk);
    host_wr_en = 0;
  endtask

  // partial sum of column c: row SF_ROWS + 2(c/GC) + h, h = c%2, k = (c%GC)/2,
  // bits (8k + 4h + b) mod COLS
  task automatic write_ps_random();
    for (int r = 0; r < PS_ROWS; r++) begin
      logic [COLS-1:0] row;
      row = rnd();
      @(negedge clk);
      host_wr_en = 1; host_wr_row = ($clog2(NR))'(SF_ROWS + r); host_wr_data = row;
      for (int c = 0; c < COLS; c++)
        if (2 * (c / GC) + c % 2 == r)
          for (int b = 0; b < PSB; b++)
            ps_ref[c][b] = row[(PSB * ((c % GC) / 2) + SF * (c % 2) + b) % COLS];
    end
    @(negedge clk);
    host_wr_en = 0;
  endtask

  task automatic read_and_check(input string tag);
    for (int r = 0; r < PS_ROWS; r++) begin
      @(negedge clk);
      host_rd_en = 1; host_rd_row = ($clog2(NR))'(SF_ROWS + r);
      @(negedge clk);
      host_rd_en = 0;
      chk(host_rd_valid, "read valid");
      for (int c = 0; c < COLS; c++)
        if (2 * (c / GC) + c % 2 == r) begin
          logic [PSB-1:0] got;
          for (int b = 0; b < PSB; b++)
            got[b] = host_rd_data[(PSB * ((c % GC) / 2) + SF * (c % 2) + b) % COLS];
          checks++;
          if (got !== ps_ref[c]) begin
            failures++;
            if (failures < 10) $display("FAIL %s: column %0d PS %0d expected %0d", tag, c, $signed(got), $signed(ps_ref[c]));
          end
        end
    end
  endtask

  task automatic run_mvm(input psq_mode_t m, input bit clr, input string tag);
    int cyc;
    int nz;
    mode = m;
    for (int r = 0; r < ROWS; r++) act_in[r] = IN_BITS'($urandom);
    @(negedge clk);
    act_load = 1;
    @(negedge clk);
    act_load = 0;
    if (clr) begin
      for (int c = 0; c < COLS; c++) ps_ref[c] = '0;
      n_clear++;
    end else n_acc++;
    if (m == MODE_BINARY) n_bin++; else n_ter++;
    nz = 0;
    // reference
    for (int c = 0; c < COLS; c++)
      for (int j = 0; j < IN_BITS; j++) begin
        int cnt, ps;
        cnt = 0;
        for (int r = 0; r < ROWS; r++) if (act_in[r][j] && wt[r][c]) cnt++;
        ps = cnt - int'(vref);
        if (m == MODE_BINARY ? (ps >= 0) : (ps >= int'(alpha))) begin
          ps_ref[c] = ps_ref[c] + PSB'(sfv[c][j]); n_add++; nz++;
        end else if (m == MODE_BINARY || ps <= -int'(alpha)) begin
          ps_ref[c] = ps_ref[c] - PSB'(sfv[c][j]); n_sub++; nz++;
        end else begin
          n_skip++;
          continue;
        end
        if (c % 2 == 0) n_odd++; else n_even++;
        if (c % 2 == 1 && (c % GC) / 2 == WPR - 1) n_wrap++;
      end
    start = 1; clear_ps = clr;
    act_sum = 0;
    @(negedge clk);
    start = 0;
    cyc = 0;   // clock edges after the one that samples start
    while (!done && cyc < 200) begin
      act_sum += int'(active_words);
      @(negedge clk);
      cyc++;
    end
    chk(cyc == (clr ? T_CLEAR : T_NOCLR), $sformatf("%s: start-to-done %0d cycles", tag, cyc));
    chk(act_sum == nz, $sformatf("%s: activity %0d vs %0d non-zero p", tag, act_sum, nz));
    read_and_check(tag);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      // about 1 in 4 weight bits set, so column counts centre near vref
      wt[r] = rnd() & rnd();
      w_wr_en = 1; w_wr_row = ($clog2(ROWS))'(r); w_wr_data = wt[r];
    end
    @(negedge clk);
    w_wr_en = 0;
    write_sf();
    run_mvm(MODE_TERNARY, 1'b1, "ternary+clear");
    run_mvm(MODE_BINARY, 1'b0, "binary accumulate");
    write_ps_random();
    read_and_check("host written PS");
    run_mvm(MODE_TERNARY, 1'b0, "ternary on host PS");
    alpha = 8'd1;
    run_mvm(MODE_TERNARY, 1'b1, "ternary alpha=1");
    write_sf();
    run_mvm(MODE_BINARY, 1'b1, "binary+clear");
    $display("mechanisms: add=%0d sub=%0d skip=%0d binary=%0d ternary=%0d clear=%0d accumulate=%0d odd=%0d even=%0d wrapped=%0d",
             n_add, n_sub, n_skip, n_bin, n_ter, n_clear, n_acc, n_odd, n_even, n_wrap);
    chk(n_add > 0, "no addition happened");
    chk(n_sub > 0, "no subtraction happened");
    chk(n_skip > 0, "no skipped (p=0) column");
    chk(n_bin > 0 && n_ter > 0, "both modes");
    chk(n_clear > 0 && n_acc > 0, "clear and accumulate");
    chk(n_odd > 0 && n_even > 0, "both phases");
    chk(n_wrap > 0, "no wrapped word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
