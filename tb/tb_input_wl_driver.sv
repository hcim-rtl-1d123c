// tb_input_wl_driver: loads random 4-bit activations and checks that for each
// bit-stream index the word lines carry that bit of every activation, that
// the register holds its value without act_load and that reset clears it.
module tb_input_wl_driver;
  localparam int ROWS = 128, IN_BITS = 4;
  logic clk = 0, rst_n = 0, act_load = 0;
  logic [ROWS-1:0][IN_BITS-1:0] act_in = '0, ref_act;
  logic [1:0] bs_sel = '0;
  logic [ROWS-1:0] wl;
  int checks = 0, failures = 0;

  input_wl_driver #(.ROWS(ROWS), .IN_BITS(IN_BITS)) dut (.*);
  always #5 clk = ~clk;

  task automatic check_all(input logic [ROWS-1:0][IN_BITS-1:0] a);
    for (int j = 0; j < IN_BITS; j++) begin
      bs_sel = j[1:0];
      #1;
      for (int r = 0; r < ROWS; r++) begin
        checks++;
        if (wl[r] !== a[r][j]) begin
          failures++;
          if (failures < 5) $display("row %0d bit %0d got %b", r, j, wl[r]);
        end
      end
    end
  endtask

  initial begin
    @(negedge clk);           // reset has been applied at the first edge
    check_all('0);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      @(negedge clk);
      for (int w = 0; w < ROWS * IN_BITS / 32; w++) act_in[w*8 +: 8] = $urandom;
      act_load = 1; ref_act = act_in;
      @(negedge clk);
      act_load = 0;
      act_in = ~act_in;          // must not be taken without act_load
      @(negedge clk);
      check_all(ref_act);
    end
    rst_n = 0;
    #1 check_all('0);
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
