// dcim_ctrl: control logic of the HCiM macro.
//
// Runs one matrix-vector multiplication (MVM) at a time and gives the host
// access to the digital CiM array in between.
//
// MVM sequence after a start pulse (while busy is high):
//   CLEAR  PS_ROWS cycles, only if clear_ps was set with start: writes 0 to
//          every partial-sum row.
//   LOADP  1 cycle: bit-stream 0 is on the crossbar word lines (bs_sel) and
//          p_load captures the comparator outputs into the p register.
//   RUN    IN_BITS x 2*GROUPS cycles: one row operation per cycle. For every
//          bit-stream j, the GROUPS odd-phase operations come first, then the
//          GROUPS even-phase ones (Fig. 4 of the paper). Operation (j, h, g)
//          reads scale-factor row j*GROUPS+g and partial-sum row 2g+h. In the
//          last operation of a bit-stream p_load takes the next bit-stream's
//          comparator outputs, so bit-streams follow without a bubble.
//   DRAIN  2 cycles: the last operations pass Compute and Store.
//   done   pulses for one cycle in the first idle cycle; the partial sums are
//          then final.
// The partial-sum row of every operation is delayed with the pipeline
// (Read -> Compute -> Store) and presented as the write row in Store.
// No two operations closer than 2*GROUPS cycles touch the same partial-sum
// row, so the pipeline needs no forwarding.
//
// Host access (only while idle; ignored while busy): host_wr writes a full
// array row (scale-factor preload or partial-sum initialisation), host_rd
// reads one row: it raises that row's read word line, and host_rd_sf tells
// the macro which side of the bit lines to connect. The 3-stage pipeline and
// the odd/even order are the paper's; the clear, the host port and the row
// numbering are this design's.
module dcim_ctrl #(
  parameter int IN_BITS = 4,
  parameter int PS_BITS = 8,
  parameter int GROUPS  = PS_BITS / 2,
  parameter int SF_ROWS = IN_BITS * GROUPS,
  parameter int PS_ROWS = 2 * GROUPS,
  parameter int NROWS   = SF_ROWS + PS_ROWS
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic                         clear_ps,
  input  logic                         host_wr_en,
  input  logic [$clog2(NROWS)-1:0]     host_wr_row,
  input  logic                         host_rd_en,
  input  logic [$clog2(NROWS)-1:0]     host_rd_row,
  output logic                         busy,
  output logic                         done,
  // crossbar side
  output logic [$clog2(IN_BITS)-1:0]   bs_sel,
  output logic                         p_load,
  // read stage of the array
  output logic                         op_valid,
  output logic                         op_phase,
  output logic [$clog2(GROUPS)-1:0]    op_group,
  output logic [$clog2(SF_ROWS)-1:0]   rd_sf_row,
  output logic                         rd_sf_en,
  output logic [$clog2(PS_ROWS)-1:0]   rd_ps_row,
  output logic                         rd_ps_en,
  output logic                         host_rd,
  output logic                         host_rd_sf,
  // write port of the array
  output logic                         wr_en,
  output logic [$clog2(NROWS)-1:0]     wr_row,
  output logic [1:0]                   wr_src     // 0 store stage, 1 zeros, 2 host
);

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_LOADP, S_RUN, S_DRAIN} state_t;

  localparam int JW = $clog2(IN_BITS);
  localparam int OW = $clog2(2 * GROUPS);
  localparam int RW = $clog2(NROWS);
  localparam int PW = $clog2(PS_ROWS);

  state_t          state;
  logic [JW-1:0]   j;
  logic [OW-1:0]   o;         // operation index within a bit-stream
  logic [PW-1:0]   cnt;       // clear row / drain counter
  logic            c_v, s_v;  // pipeline valids
  logic [PW-1:0]   c_row, s_row;

  assign op_valid = (state == S_RUN);
  assign op_phase = o[OW-1];
  assign op_group = o[OW-2:0];

  always_comb begin
    rd_sf_row = ($clog2(SF_ROWS))'(int'(j) * GROUPS + int'(op_group));
    rd_ps_row = PW'(2 * int'(op_group) + int'(op_phase));
    rd_sf_en  = op_valid;
    rd_ps_en  = op_valid;
    host_rd    = 1'b0;
    host_rd_sf = 1'b0;
    if (state == S_IDLE && host_rd_en) begin
      host_rd = 1'b1;
      if (int'(host_rd_row) < SF_ROWS) begin
        host_rd_sf = 1'b1;
        rd_sf_en   = 1'b1;
        rd_sf_row  = ($clog2(SF_ROWS))'(host_rd_row);
      end else begin
        rd_ps_en   = 1'b1;
        rd_ps_row  = PW'(int'(host_rd_row) - SF_ROWS);
      end
    end
  end

  always_comb begin
    p_load = 1'b0;
    bs_sel = j;
    if (state == S_LOADP) begin
      p_load = 1'b1;
      bs_sel = '0;
    end else if (state == S_RUN && int'(o) == 2 * GROUPS - 1 && int'(j) != IN_BITS - 1) begin
      p_load = 1'b1;
      bs_sel = j + 1'b1;
    end
  end

  always_comb begin
    wr_en  = 1'b0;
    wr_row = RW'(SF_ROWS + int'(s_row));
    wr_src = 2'd0;
    if (s_v) begin
      wr_en = 1'b1;
    end else if (state == S_CLEAR) begin
      wr_en  = 1'b1;
      wr_row = RW'(SF_ROWS + int'(cnt));
      wr_src = 2'd1;
    end else if (state == S_IDLE && host_wr_en) begin
      wr_en  = 1'b1;
      wr_row = host_wr_row;
      wr_src = 2'd2;
    end
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      j     <= '0;
      o     <= '0;
      cnt   <= '0;
      c_v   <= 1'b0;
      s_v   <= 1'b0;
      c_row <= '0;
      s_row <= '0;
      done  <= 1'b0;
    end else begin
      c_v   <= op_valid;
      s_v   <= c_v;
      c_row <= rd_ps_row;
      s_row <= c_row;
      done  <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            j     <= '0;
            o     <= '0;
            cnt   <= '0;
            state <= clear_ps ? S_CLEAR : S_LOADP;
          end
        end
        S_CLEAR: begin
          cnt <= cnt + 1'b1;
          if (int'(cnt) == PS_ROWS - 1) state <= S_LOADP;
        end
        S_LOADP: state <= S_RUN;
        S_RUN: begin
          o <= o + 1'b1;
          if (int'(o) == 2 * GROUPS - 1) begin
            o <= '0;
            if (int'(j) == IN_BITS - 1) begin
              cnt   <= '0;
              state <= S_DRAIN;
            end else begin
              j <= j + 1'b1;
            end
          end
        end
        S_DRAIN: begin
          cnt <= cnt + 1'b1;
          if (cnt == PW'(1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
