// tb_column_peripherals: self-checking test of the Read/Compute/Store
// pipeline. For every operation the test picks random 8-bit partial sums A,
// 4-bit scale factors B and a p per word, drives the bit lines as the array
// would (RBL = NOR, RBLB = AND, WBL_sf = B for subtraction, B = 0 above the
// scale factor's columns), and expects A + B, A - B (mod 256) or no write two
// cycles later. Operations are issued back to back, alternating phases, so
// the one-per-cycle throughput and the 2-cycle Read-to-Store latency are
// checked as well.
module tb_column_peripherals;
  import hcim_pkg::*;
  localparam int COLS = 128, SF = 4, PSB = 8, WPR = COLS / PSB, NOPS = 200;

  logic clk = 0, rst_n = 0;
  logic r_valid = 0, r_phase = 0;
  logic [COLS-1:0] rbl, rblb, wbl_sf, ce, sub;
  logic s_valid;
  logic [COLS-1:0] s_data, s_mask;
  int checks = 0, failures = 0;

  column_peripherals #(.COLS(COLS), .SF_BITS(SF), .PS_BITS(PSB)) dut (.*);

  always #5 clk = ~clk;

  // expected results, indexed by issue number
  logic [COLS-1:0] exp_data [NOPS];
  logic [COLS-1:0] exp_mask [NOPS];
  int issued = 0, retired = 0;

  task automatic make_op(input logic ph);
    logic [PSB-1:0] a, res;
    logic [SF-1:0]  b;
    logic [1:0]     p;
    int             x;
    for (int k = 0; k < WPR; k++) begin
      a = PSB'($urandom);
      b = SF'($urandom);
      case ($urandom % 3)
        0: p = P_ZERO;
        1: p = P_POS;
        default: p = P_NEG;
      endcase
      if (p == P_POS) res = a + PSB'(b);
      else            res = a - PSB'(b);
      for (int bit_i = 0; bit_i < PSB; bit_i++) begin
        logic av, bv;
        x  = (k * PSB + (ph ? SF : 0) + bit_i) % COLS;
        av = a[bit_i];
        bv = (bit_i < SF) ? b[bit_i] : 1'b0;
        rbl[x]    = ~(av | bv);
        rblb[x]   = av & bv;
        wbl_sf[x] = (p == P_NEG) ? bv : 1'b0;
        ce[x]     = (p != P_ZERO);
        sub[x]    = p[1];
        exp_mask[issued][x] = (p != P_ZERO);
        exp_data[issued][x] = res[bit_i];
      end
    end
  endtask

  // store-stage checker
  always @(posedge clk) begin
    if (rst_n && s_valid) begin
      checks++;
      if (s_mask !== exp_mask[retired]) begin
        failures++;
        $display("mask mismatch op %0d", retired);
      end
      checks++;
      if (((s_data ^ exp_data[retired]) & exp_mask[retired]) != '0) begin
        failures++;
        $display("data mismatch op %0d: got %h exp %h", retired, s_data, exp_data[retired]);
      end
      // latency: op n retires two cycles after issue
      checks++;
      if (issued - retired != 3 && issued != NOPS) begin
        failures++;
        $display("latency mismatch issued=%0d retired=%0d", issued, retired);
      end
      retired++;
    end
  end

  initial begin
    rbl = '1; rblb = '0; wbl_sf = '0; ce = '0; sub = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < NOPS; n++) begin
      r_phase = n[0] ^ n[3];
      make_op(r_phase);
      r_valid = 1;
      issued++;
      @(negedge clk);
    end
    r_valid = 0;
    ce = '0;
    repeat (4) @(negedge clk);
    checks++;
    if (retired != NOPS) begin
      failures++;
      $display("retired %0d of %0d", retired, NOPS);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
