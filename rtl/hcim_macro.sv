// hcim_macro: ADC-less hybrid analog-digital compute-in-memory macro.
//
// An analog crossbar multiplies a bit-streamed input vector with stationary
// 1-bit weights; instead of an ADC per column, one (binary) or two (ternary)
// comparators quantise every column result to p in {-1, 0, +1}. The partial
// sum of a column is then PS = sum_j p_j * s_j over the input bit-streams j,
// where s_j is a small trained fixed-point scale factor (its 2^j bit weight
// folded in). These scale factors live in a digital compute-in-memory (DCiM)
// array next to the partial sums, and the add/subtract of s to/from PS is
// done on the array's own bit lines plus a 1-bit adder/subtractor per column.
// Columns with p = 0 are skipped (no bit-line activity, gated peripheral, no
// write).
//
// Data path per MVM (see dcim_ctrl for the cycle schedule):
//   input_wl_driver -> analog_crossbar -> comparator_bank -> p register
//   -> bl_switch / sparsity_ctrl -> dcim_array (Read) -> column_peripherals
//   (Compute, Store) -> dcim_array write port.
// One MVM with clear takes PS_ROWS + 1 + IN_BITS*PS_BITS + 2 cycles (8 + 1 +
// 32 + 2 = 43 at the defaults) from the start pulse until done.
//
// Host interface (all synchronous to clk, active while busy is low):
//   w_wr_*      write one crossbar weight row;
//   act_load    load the activation vector (IN_BITS bits per row);
//   host_wr_*   write one DCiM row (scale-factor preload; rows 0..SF_ROWS-1
//               are scale factors, SF_ROWS.. partial sums);
//   host_rd_*   read one DCiM row; host_rd_data is valid the next cycle
//               (host_rd_valid);
//   start, clear_ps start an MVM (clear_ps first zeroes the partial sums),
//               done pulses at the end;
//   active_words number of partial-sum words being updated by the row
//               operation now in its Read cycle (activity/power monitor).
// mode selects binary or ternary quantisation; alpha is the ternary threshold
// and vref the column value taken as zero. Parameter defaults are the
// paper's configuration A (128 x 128 crossbar, 4-bit inputs and scale
// factors, 8-bit partial sums, 24 x 128 DCiM array).
module hcim_macro
  import hcim_pkg::*;
#(
  parameter int ROWS    = 128,
  parameter int COLS    = 128,
  parameter int IN_BITS = 4,
  parameter int SF_BITS = 4,
  parameter int PS_BITS = 2 * SF_BITS,
  parameter int CW      = $clog2(ROWS + 1),
  parameter int GROUPS  = PS_BITS / 2,
  parameter int SF_ROWS = IN_BITS * GROUPS,
  parameter int PS_ROWS = 2 * GROUPS,
  parameter int NROWS   = SF_ROWS + PS_ROWS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  psq_mode_t                     mode,
  input  logic [CW-1:0]                 alpha,
  input  logic [CW-1:0]                 vref,
  input  logic                          w_wr_en,
  input  logic [$clog2(ROWS)-1:0]       w_wr_row,
  input  logic [COLS-1:0]               w_wr_data,
  input  logic                          act_load,
  input  logic [ROWS-1:0][IN_BITS-1:0]  act_in,
  input  logic                          host_wr_en,
  input  logic [$clog2(NROWS)-1:0]      host_wr_row,
  input  logic [COLS-1:0]               host_wr_data,
  input  logic                          host_rd_en,
  input  logic [$clog2(NROWS)-1:0]      host_rd_row,
  output logic [COLS-1:0]               host_rd_data,
  output logic                          host_rd_valid,
  input  logic                          start,
  input  logic                          clear_ps,
  output logic                          busy,
  output logic                          done,
  output logic [$clog2(COLS/PS_BITS+1)-1:0] active_words
);

  // ---------------- analog side ----------------
  logic [$clog2(IN_BITS)-1:0] bs_sel;
  logic [ROWS-1:0]            wl;
  logic [COLS-1:0][CW-1:0]    col_val;
  logic [COLS-1:0][1:0]       p_cmp;
  logic [COLS-1:0][1:0]       p_reg;
  logic                       p_load;

  input_wl_driver #(.ROWS(ROWS), .IN_BITS(IN_BITS)) u_wl (
    .clk, .rst_n, .act_load, .act_in, .bs_sel, .wl
  );

  analog_crossbar #(.ROWS(ROWS), .COLS(COLS), .CW(CW)) u_xbar (
    .clk, .w_wr_en, .w_wr_row, .w_wr_data, .wl, .col_val
  );

  comparator_bank #(.COLS(COLS), .CW(CW)) u_cmp (
    .mode, .vref, .alpha, .col_val, .p(p_cmp)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      p_reg <= '0;
    else if (p_load) p_reg <= p_cmp;
  end

  // ---------------- control ----------------
  logic                        op_valid, op_phase;
  logic [$clog2(GROUPS)-1:0]   op_group;
  logic [$clog2(SF_ROWS)-1:0]  rd_sf_row;
  logic [$clog2(PS_ROWS)-1:0]  rd_ps_row;
  logic                        rd_sf_en, rd_ps_en, host_rd, host_rd_sf;
  logic                        wr_en;
  logic [$clog2(NROWS)-1:0]    wr_row;
  logic [1:0]                  wr_src;

  dcim_ctrl #(.IN_BITS(IN_BITS), .PS_BITS(PS_BITS), .GROUPS(GROUPS),
              .SF_ROWS(SF_ROWS), .PS_ROWS(PS_ROWS), .NROWS(NROWS)) u_ctrl (
    .clk, .rst_n, .start, .clear_ps, .host_wr_en, .host_wr_row, .host_rd_en,
    .host_rd_row, .busy, .done, .bs_sel, .p_load, .op_valid, .op_phase,
    .op_group, .rd_sf_row, .rd_sf_en, .rd_ps_row, .rd_ps_en, .host_rd,
    .host_rd_sf, .wr_en, .wr_row, .wr_src
  );

  // ---------------- DCiM ----------------
  logic [COLS-1:0] bs_tg1, bs_tg2, bs_tg3, tg1, tg2, tg3;
  logic [COLS-1:0] ce, sub;
  logic [NROWS-1:0] rwl, wwl;
  logic [COLS-1:0]  rbl, rblb, wbl_sf;
  logic [COLS-1:0]  wr_data, wr_mask;
  logic             s_valid;
  logic [COLS-1:0]  s_data, s_mask;

  bl_switch #(.COLS(COLS), .SF_BITS(SF_BITS), .PS_BITS(PS_BITS), .GROUPS(GROUPS)) u_bls (
    .op_valid, .op_phase, .op_group, .p(p_reg), .tg1(bs_tg1), .tg2(bs_tg2), .tg3(bs_tg3)
  );

  sparsity_ctrl #(.COLS(COLS), .SF_BITS(SF_BITS), .PS_BITS(PS_BITS), .GROUPS(GROUPS)) u_sp (
    .op_valid, .op_phase, .op_group, .p(p_reg), .ce, .sub, .n_active(active_words)
  );

  // A host read connects every column of the addressed side.
  always_comb begin
    tg1 = bs_tg1;
    tg2 = bs_tg2;
    tg3 = bs_tg3;
    if (host_rd) begin
      tg1 = '0;
      tg2 = {COLS{host_rd_sf}};
      tg3 = {COLS{~host_rd_sf}};
    end
  end

  dcim_wl_decoder #(.IN_BITS(IN_BITS), .PS_BITS(PS_BITS), .SF_ROWS(SF_ROWS),
                    .PS_ROWS(PS_ROWS), .NROWS(NROWS)) u_dwl (
    .sf_row(rd_sf_row), .sf_en(rd_sf_en), .ps_row(rd_ps_row), .ps_en(rd_ps_en),
    .wr_row, .wr_en, .rwl, .wwl
  );

  always_comb begin
    unique case (wr_src)
      2'd0:    begin wr_data = s_data;       wr_mask = s_mask;  end
      2'd1:    begin wr_data = '0;           wr_mask = '1;      end
      default: begin wr_data = host_wr_data; wr_mask = '1;      end
    endcase
  end

  dcim_array #(.COLS(COLS), .IN_BITS(IN_BITS), .PS_BITS(PS_BITS),
               .SF_ROWS(SF_ROWS), .PS_ROWS(PS_ROWS), .NROWS(NROWS)) u_arr (
    .clk, .rwl, .wwl, .tg1, .tg2, .tg3, .wr_data, .wr_mask, .rbl, .rblb, .wbl_sf
  );

  column_peripherals #(.COLS(COLS), .SF_BITS(SF_BITS), .PS_BITS(PS_BITS)) u_cp (
    .clk, .rst_n, .r_valid(op_valid), .r_phase(op_phase), .rbl, .rblb, .wbl_sf,
    .ce, .sub, .s_valid, .s_data, .s_mask
  );

  // Host read data: a single connected cell gives RBL = NOT(bit).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      host_rd_data  <= '0;
      host_rd_valid <= 1'b0;
    end else begin
      host_rd_valid <= host_rd;
      if (host_rd) host_rd_data <= ~rbl;
    end
  end

  // The write port is driven by the controller's store stage exactly when
  // the peripherals present a result.
  property p_store_aligned;
    @(posedge clk) disable iff (!rst_n) s_valid |-> (wr_en && wr_src == 2'd0);
  endproperty
  a_store_aligned: assert property (p_store_aligned);

endmodule
