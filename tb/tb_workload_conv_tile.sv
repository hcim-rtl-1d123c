// tb_workload_conv_tile: runs a tile of a ResNet-style 3x3 convolution layer
// (CIFAR-10 precision: 4-bit activations, 4-bit weights, 4-bit scale factors,
// 8-bit partial sums) through the HCiM macro at its default size.
//
// Mapping, as a weight-stationary analog CiM accelerator lays a layer out:
//   - the layer has 32 input and 32 output channels; its kernel unrolls to
//     3*3*32 = 288 rows, of which this macro holds the first 128 (the rest go
//     to other crossbars, which are not part of the macro);
//   - weights are bit-sliced one bit per cell: output channel o, weight bit b
//     sits in crossbar column 4*o + b, so 32 channels fill 128 columns;
//   - each output pixel is one MVM: its 3x3x32 input window (im2col order
//     ky, kx, channel), first 128 values, is bit-streamed over 4 steps.
// The feature map is a random 6x6x32 4-bit tensor, giving 4x4 = 16 output
// pixels. For each pixel the test clears the partial sums, runs one ternary
// MVM, reads all 128 column partial sums back, and combines them across weight
// bits outside the macro, as the surrounding system would:
//   y(o) = sum over b of 2^b * PS(4*o + b)
// It compares every column partial sum and every y(o) with a reference computed
// here. It also prints the mean exact integer convolution sum next to the
// mean quantised output, for information only. Weights are unsigned and the scale factors
// are fixed stand-ins for trained values, s(c, j) = min(15, 2^j + c % 3); the
// per-layer threshold alpha and the column offset vref are chosen so that
// about a third of the p values are 0. These values are this test's choices.
module tb_workload_conv_tile;
  import hcim_pkg::*;
  localparam int ROWS = 128, COLS = 128, IN_BITS = 4, SF = 4, PSB = 8, WB = 4;
  localparam int G = PSB / 2, SF_ROWS = IN_BITS * G, PS_ROWS = 2 * G;
  localparam int WPR = COLS / PSB, GC = 2 * WPR, NR = SF_ROWS + PS_ROWS;
  localparam int CH = 32, OCH = COLS / WB, H = 6, OH = H - 2;

  logic clk = 0, rst_n = 0;
  psq_mode_t mode = MODE_TERNARY;
  logic [7:0] alpha = 8'd3, vref = 8'd32;
  logic w_wr_en = 0; logic [$clog2(ROWS)-1:0] w_wr_row = '0; logic [COLS-1:0] w_wr_data = '0;
  logic act_load = 0; logic [ROWS-1:0][IN_BITS-1:0] act_in = '0;
  logic host_wr_en = 0; logic [$clog2(NR)-1:0] host_wr_row = '0; logic [COLS-1:0] host_wr_data = '0;
  logic host_rd_en = 0; logic [$clog2(NR)-1:0] host_rd_row = '0;
  logic [COLS-1:0] host_rd_data; logic host_rd_valid;
  logic start = 0, clear_ps = 0, busy, done;
  logic [$clog2(WPR+1)-1:0] active_words;

  hcim_macro dut (.*);
  always #1 clk = ~clk;

  int checks = 0, failures = 0, n_zero = 0, n_nz = 0;
  longint q_sum = 0, mag_sum = 0;

  logic [WB-1:0]      wq  [ROWS][OCH];      // 4-bit weights of the tile
  logic [IN_BITS-1:0] fm  [H][H][CH];       // input feature map
  logic [SF-1:0]      sfv [COLS][IN_BITS];
  logic [PSB-1:0]     ps_ref [COLS];
  logic [PSB-1:0]     ps_got [COLS];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic load_weights();
    for (int r = 0; r < ROWS; r++) begin
      logic [COLS-1:0] row;
      for (int o = 0; o < OCH; o++) begin
        wq[r][o] = WB'($urandom);
        for (int b = 0; b < WB; b++) row[WB * o + b] = wq[r][o][b];
      end
      @(negedge clk);
      w_wr_en = 1; w_wr_row = ($clog2(ROWS))'(r); w_wr_data = row;
    end
    @(negedge clk);
    w_wr_en = 0;
  endtask

  // scale factor s(c,j) in row G*j + c/GC, word c%GC
  task automatic load_sf();
    for (int c = 0; c < COLS; c++)
      for (int j = 0; j < IN_BITS; j++)
        sfv[c][j] = SF'(((1 << j) + c % 3) > 15 ? 15 : (1 << j) + c % 3);
    for (int j = 0; j < IN_BITS; j++)
      for (int g = 0; g < G; g++) begin
        logic [COLS-1:0] row;
        for (int w = 0; w < GC; w++) row[w*SF +: SF] = sfv[g*GC + w][j];
        @(negedge clk);
        host_wr_en = 1; host_wr_row = ($clog2(NR))'(j * G + g); host_wr_data = row;
      end
    @(negedge clk);
    host_wr_en = 0;
  endtask

  // partial sum of column c: row SF_ROWS + 2(c/GC) + c%2, bits (8k + 4h + b) mod COLS
  task automatic read_ps();
    for (int r = 0; r < PS_ROWS; r++) begin
      @(negedge clk);
      host_rd_en = 1; host_rd_row = ($clog2(NR))'(SF_ROWS + r);
      @(negedge clk);
      host_rd_en = 0;
      chk(host_rd_valid, "read valid");
      for (int c = 0; c < COLS; c++)
        if (2 * (c / GC) + c % 2 == r)
          for (int b = 0; b < PSB; b++)
            ps_got[c][b] = host_rd_data[(PSB * ((c % GC) / 2) + SF * (c % 2) + b) % COLS];
    end
  endtask

  task automatic run_pixel(input int oy, input int ox);
    int exact [OCH];
    // im2col window, first ROWS values
    for (int r = 0; r < ROWS; r++) begin
      int ky, kx, ch;
      ky = r / (3 * CH); kx = (r / CH) % 3; ch = r % CH;
      act_in[r] = fm[oy + ky][ox + kx][ch];
    end
    for (int o = 0; o < OCH; o++) begin
      exact[o] = 0;
      for (int r = 0; r < ROWS; r++) exact[o] += int'(act_in[r]) * int'(wq[r][o]);
    end
    // reference partial sums
    for (int c = 0; c < COLS; c++) begin
      ps_ref[c] = '0;
      for (int j = 0; j < IN_BITS; j++) begin
        int cnt, ps;
        cnt = 0;
        for (int r = 0; r < ROWS; r++) if (act_in[r][j] && wq[r][c / WB][c % WB]) cnt++;
        ps = cnt - int'(vref);
        if (ps >= int'(alpha)) begin
          ps_ref[c] = ps_ref[c] + PSB'(sfv[c][j]); n_nz++;
        end else if (ps <= -int'(alpha)) begin
          ps_ref[c] = ps_ref[c] - PSB'(sfv[c][j]); n_nz++;
        end else n_zero++;
      end
    end
    @(negedge clk);
    act_load = 1;
    @(negedge clk);
    act_load = 0; start = 1; clear_ps = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    read_ps();
    for (int c = 0; c < COLS; c++)
      chk(ps_got[c] === ps_ref[c], $sformatf("pixel (%0d,%0d) column %0d: PS %0d expected %0d",
                                             oy, ox, c, $signed(ps_got[c]), $signed(ps_ref[c])));
    for (int o = 0; o < OCH; o++) begin
      int y_got, y_ref;
      y_got = 0; y_ref = 0;
      for (int b = 0; b < WB; b++) begin
        y_got += int'($signed(ps_got[WB * o + b])) << b;
        y_ref += int'($signed(ps_ref[WB * o + b])) << b;
      end
      chk(y_got == y_ref, $sformatf("pixel (%0d,%0d) channel %0d: y %0d expected %0d", oy, ox, o, y_got, y_ref));
      // the exact convolution sum is only reported, for information
      mag_sum += longint'(exact[o]);
      q_sum += longint'(y_got);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < H; x++)
        for (int c = 0; c < CH; c++) fm[y][x][c] = IN_BITS'($urandom);
    load_weights();
    load_sf();
    for (int oy = 0; oy < OH; oy++)
      for (int ox = 0; ox < OH; ox++) run_pixel(oy, ox);
    $display("conv tile: %0d pixels x %0d channels, p=0 for %0d of %0d column bit-streams",
             OH * OH, OCH, n_zero, n_zero + n_nz);
    $display("mean exact conv sum %0d, mean quantised output %0d (different scales)",
             mag_sum / (OH * OH * OCH), q_sum / (OH * OH * OCH));
    chk(n_zero > 0 && n_nz > 0, "both zero and non-zero p occurred");
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
