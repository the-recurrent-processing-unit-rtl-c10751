// rpu_ctrl: the RPU's synchronous run state machine.
//
// A run streams LENGTH input rows through the reservoir, one row per clock:
// it reads row c of the input RAM, applies it to the reservoir inputs for one
// clock period while the unclocked network evolves, samples all reservoir node
// states at the end of that period and writes them to row c of the output RAM.
// The RPU runs this at 200 MHz, so with one row per clock it stores 200 M
// reservoir states per second.
//
// The reservoir reset is driven from here, row by row. Row c is presented
// with the reset high when (c mod RST_PERIOD) < RST_LEN, or c < RST_LEN when
// RST_PERIOD is 0. For image classification the host writes each image into
// RST_PERIOD consecutive rows and sets RST_LEN to 1: every image starts from
// the all-ones reset state, and a period of 5 rows gives 40 M images per
// second. Between runs the reservoir is held in reset, which keeps it still.
// Row-by-row streaming and reservoir reset follow the RPU; the reset schedule
// registers, the hold in reset while idle and the exact pipeline are this
// design's choices.
//
// Pipeline (edges counted from the one that accepts start, E0):
//   cycle after E(c):   in_re/in_row = c                     (input RAM read)
//   E(c+1) .. E(c+2):   row c and its reset flag drive the reservoir
//   E(c+2):             sample_q <= reservoir state
//   E(c+3):             output RAM row c written
// busy is high from E0 to E(LENGTH+2); done rises with the last write and
// stays high until the next start; run_cycles then reads LENGTH + 2.
// A start while busy is ignored; LENGTH = 0 completes at once.
module rpu_ctrl #(
  parameter int unsigned DEPTH     = 1024,
  parameter int unsigned NUM_NODES = 2048,
  localparam int unsigned ROW_W    = (DEPTH <= 2) ? 1 : $clog2(DEPTH),
  localparam int unsigned CNT_W    = ROW_W + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // control from the host
  input  logic                 start,
  input  logic [CNT_W-1:0]     cfg_length,
  input  logic [CNT_W-1:0]     cfg_rst_period,
  input  logic [CNT_W-1:0]     cfg_rst_len,
  output logic                 busy,
  output logic                 done,
  output logic [31:0]          run_cycles,
  // input RAM engine port
  output logic                 in_re,
  output logic [ROW_W-1:0]     in_row,
  // reservoir
  output logic                 res_rst,
  input  logic [NUM_NODES-1:0] res_x,
  // output RAM engine port
  output logic                 out_we,
  output logic [ROW_W-1:0]     out_row,
  output logic [NUM_NODES-1:0] out_wdata
);
  timeunit 1ns;
  timeprecision 1ps;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [CNT_W-1:0]     len_q, period_q, rlen_q;
  logic [ROW_W-1:0]     row_q;     // row being read
  logic [CNT_W-1:0]     phase_q;   // position inside the reset period
  logic                 s1_v, s2_v;
  logic [ROW_W-1:0]     s1_row, s2_row;
  logic [NUM_NODES-1:0] sample_q;

  logic rst_flag;
  assign rst_flag = (phase_q < rlen_q);

  assign in_re     = (state == S_RUN);
  assign in_row    = row_q;
  assign out_we    = s2_v;
  assign out_row   = s2_row;
  assign out_wdata = sample_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      res_rst    <= 1'b1;
      s1_v       <= 1'b0;
      s2_v       <= 1'b0;
      s1_row     <= '0;
      s2_row     <= '0;
      row_q      <= '0;
      phase_q    <= '0;
      len_q      <= '0;
      period_q   <= '0;
      rlen_q     <= '0;
      busy       <= 1'b0;
      done       <= 1'b0;
      run_cycles <= '0;
      sample_q   <= '0;
    end else begin
      // stage 1: the row read this cycle reaches the reservoir
      s1_v    <= (state == S_RUN);
      s1_row  <= row_q;
      res_rst <= (state == S_RUN) ? rst_flag : 1'b1;
      // stage 2: sample the reservoir at the end of its row's clock period
      s2_v   <= s1_v;
      s2_row <= s1_row;
      if (s1_v) sample_q <= res_x;

      if (busy) run_cycles <= run_cycles + 1;

      case (state)
        S_IDLE: begin
          if (start) begin
            len_q      <= cfg_length;
            period_q   <= cfg_rst_period;
            rlen_q     <= cfg_rst_len;
            row_q      <= '0;
            phase_q    <= '0;
            run_cycles <= '0;
            done       <= (cfg_length == '0);
            busy       <= (cfg_length != '0);
            state      <= (cfg_length == '0) ? S_IDLE : S_RUN;
          end
        end
        S_RUN: begin
          phase_q <= (period_q != '0 && phase_q == period_q - 1) ? '0 : phase_q + 1;
          if (CNT_W'(row_q) == len_q - 1) state <= S_DRAIN;
          else row_q <= row_q + 1;
        end
        S_DRAIN: begin
          if (s2_v && CNT_W'(s2_row) == len_q - 1) begin
            busy  <= 1'b0;
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_len_range: assert property (@(posedge clk) disable iff (!rst_n)
                                (start && !busy) |-> cfg_length <= CNT_W'(DEPTH))
    else $error("rpu_ctrl: run length exceeds the buffer depth");
  a_write_in_run: assert property (@(posedge clk) disable iff (!rst_n) out_we |-> busy)
    else $error("rpu_ctrl: output write outside a run");
  a_read_in_range: assert property (@(posedge clk) disable iff (!rst_n)
                                    in_re |-> CNT_W'(in_row) < len_q)
    else $error("rpu_ctrl: input row beyond the run length");
endmodule
