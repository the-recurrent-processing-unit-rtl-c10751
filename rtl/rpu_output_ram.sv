// rpu_output_ram: reservoir state buffer of the RPU.
//
// DEPTH rows of WIDTH bits (1024 x 2048 in the RPU). The state machine writes
// one whole sampled reservoir state per clock on the engine port; the host
// reads the buffer back one HOST_W-bit word at a time. Both ports are
// synchronous to clk.
//
// Engine port: e_we writes e_wdata into row e_row at the clock edge.
// Host port: h_re reads word h_word of row h_row; h_rdata shows it one clock
// later. A host read of a row written in the same clock returns the old data.
//
// The size follows the RPU; the two-port organisation, the host word width
// and the read latency are this design's choices.
module rpu_output_ram #(
  parameter int unsigned DEPTH  = 1024,
  parameter int unsigned WIDTH  = 2048,
  parameter int unsigned HOST_W = 32,
  localparam int unsigned WORDS  = WIDTH / HOST_W,
  localparam int unsigned ROW_W  = (DEPTH <= 2) ? 1 : $clog2(DEPTH),
  localparam int unsigned WORD_W = (WORDS <= 2) ? 1 : $clog2(WORDS)
) (
  input  logic              clk,
  // engine port
  input  logic              e_we,
  input  logic [ROW_W-1:0]  e_row,
  input  logic [WIDTH-1:0]  e_wdata,
  // host port
  input  logic              h_re,
  input  logic [ROW_W-1:0]  h_row,
  input  logic [WORD_W-1:0] h_word,
  output logic [HOST_W-1:0] h_rdata
);
  timeunit 1ns;
  timeprecision 1ps;

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (e_we) mem[e_row] <= e_wdata;
  end

  always_ff @(posedge clk) begin
    if (h_re) h_rdata <= mem[h_row][h_word*HOST_W +: HOST_W];
  end

  initial begin
    assert (WIDTH % HOST_W == 0) else $error("rpu_output_ram: WIDTH must be a multiple of HOST_W");
  end
  a_host_word: assert property (@(posedge clk) h_re |-> (32'(h_word) < WORDS && 32'(h_row) < DEPTH))
    else $error("rpu_output_ram: host address out of range");
  a_engine_row: assert property (@(posedge clk) e_we |-> 32'(e_row) < DEPTH)
    else $error("rpu_output_ram: engine row out of range");
endmodule
