// tb_dcim_ctrl: checks the controller's cycle schedule against a table built
// from the intended sequence: PS_ROWS clear writes (when requested), one
// p-load cycle, then for each of the 4 bit-streams 8 row operations - four
// odd-phase (groups 0..3) then four even-phase - with scale-factor row
// 4j+g and partial-sum row 2g+h, the next bit-stream's p loaded in the last
// operation, each operation's store write two cycles after its read, and done
// one cycle after the last store. It also checks the start-to-done cycle
// count (8 + 1 + 32 + 2 with clear, 1 + 32 + 2 without), host writes and
// reads when idle, and that host requests are ignored while busy.
module tb_dcim_ctrl;
  localparam int IN_BITS = 4, GROUPS = 4, SF_ROWS = 16, PS_ROWS = 8, NROWS = 24;
  logic clk = 0, rst_n = 0, start = 0, clear_ps = 0;
  logic host_wr_en = 0, host_rd_en = 0;
  logic [4:0] host_wr_row = '0, host_rd_row = '0;
  logic busy, done;
  logic [1:0] bs_sel;
  logic p_load, op_valid, op_phase;
  logic [1:0] op_group;
  logic [3:0] rd_sf_row;
  logic rd_sf_en;
  logic [2:0] rd_ps_row;
  logic rd_ps_en, host_rd, host_rd_sf, wr_en;
  logic [4:0] wr_row;
  logic [1:0] wr_src;
  int checks = 0, failures = 0;

  dcim_ctrl dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what, input int cyc);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("cycle %0d: %s", cyc, what);
    end
  endtask

  // expected per-cycle trace of one MVM
  typedef struct {
    bit op; int ph; int g; int sfr; int psr;
    bit pl; int bs;
    bit we; int wrow; int src;
  } exp_t;
  exp_t ex [64];
  int n_exp;

  task automatic build(input bit clr);
    int t;
    for (int i = 0; i < 64; i++) ex[i] = '{0, 0, 0, 0, 0, 0, 0, 0, 0, 0};
    t = 0;
    if (clr) for (int r = 0; r < PS_ROWS; r++) begin
      ex[t].we = 1; ex[t].wrow = SF_ROWS + r; ex[t].src = 1; t++;
    end
    ex[t].pl = 1; ex[t].bs = 0; t++;
    for (int j = 0; j < IN_BITS; j++)
      for (int o = 0; o < 2 * GROUPS; o++) begin
        ex[t].op = 1; ex[t].ph = o / GROUPS; ex[t].g = o % GROUPS;
        ex[t].sfr = j * GROUPS + ex[t].g; ex[t].psr = 2 * ex[t].g + ex[t].ph;
        if (o == 2 * GROUPS - 1 && j != IN_BITS - 1) begin ex[t].pl = 1; ex[t].bs = j + 1; end
        ex[t + 2].we = 1; ex[t + 2].wrow = SF_ROWS + ex[t].psr; ex[t + 2].src = 0;
        t++;
      end
    n_exp = t + 2;   // two drain cycles
  endtask

  task automatic run_mvm(input bit clr);
    build(clr);
    @(negedge clk);
    start = 1; clear_ps = clr;
    @(negedge clk);
    start = 0;
    host_wr_en = 1; host_rd_en = 1; host_wr_row = 5'd3; host_rd_row = 5'd20;   // must be ignored
    for (int t = 0; t < n_exp; t++) begin
      chk(busy, "busy", t);
      chk(!done, "early done", t);
      chk(op_valid == ex[t].op, "op_valid", t);
      if (ex[t].op) begin
        chk(op_phase == ex[t].ph[0] && int'(op_group) == ex[t].g, "phase/group", t);
        chk(int'(rd_sf_row) == ex[t].sfr && rd_sf_en, "sf row", t);
        chk(int'(rd_ps_row) == ex[t].psr && rd_ps_en, "ps row", t);
      end else begin
        chk(!rd_sf_en && !rd_ps_en, "no read", t);
      end
      chk(p_load == ex[t].pl, "p_load", t);
      if (ex[t].pl) chk(int'(bs_sel) == ex[t].bs, "bs_sel", t);
      chk(wr_en == ex[t].we, "wr_en", t);
      if (ex[t].we) chk(int'(wr_row) == ex[t].wrow && int'(wr_src) == ex[t].src, "wr row/src", t);
      chk(!host_rd, "host read while busy", t);
      @(negedge clk);
    end
    chk(done && !busy, "done after last store", n_exp);
    host_wr_en = 0; host_rd_en = 0;
    @(negedge clk);
    chk(!done, "done is a pulse", n_exp + 1);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!busy && !done, "idle after reset", 0);
    // host access while idle
    host_wr_en = 1; host_wr_row = 5'd5; #1;
    chk(wr_en && wr_row == 5'd5 && wr_src == 2'd2, "host write", 0);
    host_wr_en = 0; host_rd_en = 1; host_rd_row = 5'd7; #1;
    chk(host_rd && host_rd_sf && rd_sf_en && !rd_ps_en && rd_sf_row == 4'd7, "host sf read", 0);
    host_rd_row = 5'd21; #1;
    chk(host_rd && !host_rd_sf && rd_ps_en && !rd_sf_en && rd_ps_row == 3'd5, "host ps read", 0);
    host_rd_en = 0;
    run_mvm(1'b1);
    run_mvm(1'b0);
    run_mvm(1'b1);
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
