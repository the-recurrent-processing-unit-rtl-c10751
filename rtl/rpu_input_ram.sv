// rpu_input_ram: input pattern buffer of the RPU.
//
// DEPTH rows of WIDTH bits (1024 x 1024 in the RPU). Each row is one input
// pattern for the reservoir. The state machine reads one whole row per clock
// on the engine port; the host writes and reads back the buffer one HOST_W-bit
// word at a time. Both ports are synchronous to clk.
//
// Engine port: e_re with e_row; e_rdata shows the row one clock later and holds
// it until the next read (it feeds the reservoir inputs directly).
// Host port: h_we writes h_wdata into word h_word of row h_row; h_re returns
// that word on h_rdata one clock later. A host write and an engine read of
// the same row in the same clock return the old row to the engine.
//
// The size follows the RPU; the two-port organisation, the host word width
// and the read latency are this design's choices.
module rpu_input_ram #(
  parameter int unsigned DEPTH  = 1024,
  parameter int unsigned WIDTH  = 1024,
  parameter int unsigned HOST_W = 32,
  localparam int unsigned WORDS  = WIDTH / HOST_W,
  localparam int unsigned ROW_W  = (DEPTH <= 2) ? 1 : $clog2(DEPTH),
  localparam int unsigned WORD_W = (WORDS <= 2) ? 1 : $clog2(WORDS)
) (
  input  logic              clk,
  // engine port
  input  logic              e_re,
  input  logic [ROW_W-1:0]  e_row,
  output logic [WIDTH-1:0]  e_rdata,
  // host port
  input  logic              h_we,
  input  logic              h_re,
  input  logic [ROW_W-1:0]  h_row,
  input  logic [WORD_W-1:0] h_word,
  input  logic [HOST_W-1:0] h_wdata,
  output logic [HOST_W-1:0] h_rdata
);
  timeunit 1ns;
  timeprecision 1ps;

  // Rows are stored as WORDS host words so that the host writes one word
  // (a write-enabled lane of the row) without touching the rest.
  logic [WORDS-1:0][HOST_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (h_we) mem[h_row][h_word] <= h_wdata;
  end

  always_ff @(posedge clk) begin
    if (e_re) e_rdata <= mem[e_row];
  end

  always_ff @(posedge clk) begin
    if (h_re) h_rdata <= mem[h_row][h_word];
  end

  initial begin
    assert (WIDTH % HOST_W == 0) else $error("rpu_input_ram: WIDTH must be a multiple of HOST_W");
  end
  a_host_word: assert property (@(posedge clk) (h_we || h_re) |-> (32'(h_word) < WORDS && 32'(h_row) < DEPTH))
    else $error("rpu_input_ram: host address out of range");
  a_engine_row: assert property (@(posedge clk) e_re |-> 32'(e_row) < DEPTH)
    else $error("rpu_input_ram: engine row out of range");
endmodule
