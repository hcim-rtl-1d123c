// input_wl_driver: word-line driver of the analog crossbar (the "word line
// decoder" that feeds input activations).
//
// Activations of IN_BITS bits are loaded for all ROWS rows at once (act_load,
// act_in) and then streamed one bit per step: wl[r] = act[r][bs_sel]. With
// a 1-bit DAC (bit-stream 1, as in the paper's evaluation) the word line of
// row r simply carries bit bs_sel of activation r. bs_sel 0 is the least
// significant bit. The weight of each bit position (2^j) is not applied here:
// it is folded into the stored scale factors, as the paper describes.
//
// Timing: act is registered on clk when act_load is high; wl is
// combinational in the register and bs_sel. Reset clears the register.
// Loading all activations in parallel is this design's choice.
module input_wl_driver #(
  parameter int ROWS    = 128,
  parameter int IN_BITS = 4
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             act_load,
  input  logic [ROWS-1:0][IN_BITS-1:0]     act_in,
  input  logic [$clog2(IN_BITS)-1:0]       bs_sel,
  output logic [ROWS-1:0]                  wl
);

  logic [ROWS-1:0][IN_BITS-1:0] act;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        act <= '0;
    else if (act_load) act <= act_in;
  end

  always_comb begin
    for (int r = 0; r < ROWS; r++) wl[r] = act[r][bs_sel];
  end

endmodule
