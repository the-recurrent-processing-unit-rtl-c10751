// rpu_top: programmable-logic side of the recurrent processing unit (RPU).
//
// The RPU is a reservoir computer whose reservoir is a physical, unclocked
// network of Boolean gates. This top wires its five parts together:
//
//   host bus -> rpu_host_if -> rpu_input_ram  (DEPTH x NUM_INPUTS bits)
//                           -> rpu_ctrl       (run state machine, clk)
//                           <- rpu_output_ram (DEPTH x NUM_NODES bits)
//   rpu_input_ram row -> rpu_reservoir.u ; rpu_ctrl.res_rst -> rpu_reservoir.rst
//   rpu_reservoir.x -> sampled by rpu_ctrl -> rpu_output_ram row
//
// Use: write the input patterns into the input RAM over the host bus, set
// LENGTH and the reset schedule, write 1 to CTRL, poll STATUS until done and
// read the stored reservoir states from the output RAM. A run moves one row
// per clock (200 MHz in the RPU, i.e. 200 M samples per second); see rpu_ctrl
// for the pipeline and rpu_host_if for the address map. The trained output
// layer is not part of this hardware: the host evaluates it on the read-back
// states.
//
// Sizes follow the RPU (2048 gates, 1024 inputs, 1024-row buffers); the host
// bus is this design's own. Everything runs on one clock, clk; the reservoir
// itself has no clock.
module rpu_top #(
  parameter int unsigned NUM_NODES            = 2048,
  parameter int unsigned NUM_INPUTS           = 1024,
  parameter int unsigned DEPTH                = 1024,
  parameter int unsigned SEED                 = 1,
  parameter int unsigned GATE_DELAY_PS        = 100,
  parameter int unsigned GATE_DELAY_SPREAD_PS = 20,
  localparam int unsigned HOST_W     = 32,
  localparam int unsigned ROW_W      = (DEPTH <= 2) ? 1 : $clog2(DEPTH),
  localparam int unsigned CNT_W      = ROW_W + 1,
  localparam int unsigned IN_WORDS   = NUM_INPUTS / HOST_W,
  localparam int unsigned OUT_WORDS  = NUM_NODES / HOST_W,
  localparam int unsigned IN_WORD_W  = (IN_WORDS <= 2) ? 1 : $clog2(IN_WORDS),
  localparam int unsigned OUT_WORD_W = (OUT_WORDS <= 2) ? 1 : $clog2(OUT_WORDS),
  localparam int unsigned WORD_W     = (IN_WORD_W > OUT_WORD_W) ? IN_WORD_W : OUT_WORD_W,
  localparam int unsigned ADDR_W     = 2 + ROW_W + WORD_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              h_valid,
  input  logic              h_we,
  input  logic [ADDR_W-1:0] h_addr,
  input  logic [HOST_W-1:0] h_wdata,
  output logic              h_rvalid,
  output logic [HOST_W-1:0] h_rdata
);
  timeunit 1ns;
  timeprecision 1ps;

  // host port <-> RAMs and state machine
  logic                  hin_we, hin_re, hout_re;
  logic [ROW_W-1:0]      hin_row, hout_row;
  logic [IN_WORD_W-1:0]  hin_word;
  logic [OUT_WORD_W-1:0] hout_word;
  logic [HOST_W-1:0]     hin_wdata, hin_rdata, hout_rdata;
  logic                  start, busy, done;
  logic [CNT_W-1:0]      cfg_length, cfg_rst_period, cfg_rst_len;
  logic [31:0]           run_cycles;

  // engine datapath
  logic                  e_in_re, e_out_we;
  logic [ROW_W-1:0]      e_in_row, e_out_row;
  logic [NUM_INPUTS-1:0] res_u;
  logic                  res_rst;
  logic [NUM_NODES-1:0]  res_x, e_out_wdata;

  rpu_host_if #(.DEPTH(DEPTH), .NUM_INPUTS(NUM_INPUTS), .NUM_NODES(NUM_NODES)) u_host (
    .clk, .rst_n,
    .h_valid, .h_we, .h_addr, .h_wdata, .h_rvalid, .h_rdata,
    .in_we (hin_we), .in_re (hin_re), .in_row (hin_row), .in_word (hin_word),
    .in_wdata (hin_wdata), .in_rdata (hin_rdata),
    .out_re (hout_re), .out_row (hout_row), .out_word (hout_word), .out_rdata (hout_rdata),
    .start, .cfg_length, .cfg_rst_period, .cfg_rst_len, .busy, .done, .run_cycles
  );

  rpu_input_ram #(.DEPTH(DEPTH), .WIDTH(NUM_INPUTS), .HOST_W(HOST_W)) u_in_ram (
    .clk,
    .e_re (e_in_re), .e_row (e_in_row), .e_rdata (res_u),
    .h_we (hin_we), .h_re (hin_re), .h_row (hin_row), .h_word (hin_word),
    .h_wdata (hin_wdata), .h_rdata (hin_rdata)
  );

  rpu_ctrl #(.DEPTH(DEPTH), .NUM_NODES(NUM_NODES)) u_ctrl (
    .clk, .rst_n,
    .start, .cfg_length, .cfg_rst_period, .cfg_rst_len, .busy, .done, .run_cycles,
    .in_re (e_in_re), .in_row (e_in_row),
    .res_rst, .res_x,
    .out_we (e_out_we), .out_row (e_out_row), .out_wdata (e_out_wdata)
  );

  rpu_reservoir #(
    .NUM_NODES (NUM_NODES), .NUM_INPUTS (NUM_INPUTS), .SEED (SEED),
    .DELAY_PS (GATE_DELAY_PS), .DELAY_SPREAD_PS (GATE_DELAY_SPREAD_PS)
  ) u_res (
    .rst (res_rst), .u (res_u), .x (res_x)
  );

  rpu_output_ram #(.DEPTH(DEPTH), .WIDTH(NUM_NODES), .HOST_W(HOST_W)) u_out_ram (
    .clk,
    .e_we (e_out_we), .e_row (e_out_row), .e_wdata (e_out_wdata),
    .h_re (hout_re), .h_row (hout_row), .h_word (hout_word), .h_rdata (hout_rdata)
  );
endmodule
