// rpu_gate: one node of the RPU reservoir.
//
// The node is a single 3-input Boolean gate of type GATE whose result is
// ORed with the reservoir-wide reset, so that asserting rst drives every node
// to logic 1 regardless of its inputs (this reset scheme is the one the RPU
// uses to give each inference the same starting state). There is no clock:
// the output follows its inputs after the gate's propagation delay, DELAY_PS
// picoseconds, which is how the unclocked gate network gets its dynamics in
// simulation. On silicon or an FPGA the delay is the physical delay of the
// gate (one lookup table plus routing); synthesis ignores the delay value.
// The output net carries a keep attribute so that synthesis retains it as a
// separate node, as the RPU requires. The three-input gate library is this
// design's choice (see rpu_pkg).
//
// Interface: rst (active high), a[2:0] gate inputs, y node state.
// Timing: y = rst | f(a) after DELAY_PS. The delay is inertial, as for any
// delayed continuous assignment: a change at the gate that is undone within
// DELAY_PS never reaches the output.
module rpu_gate
  import rpu_pkg::*;
#(
  parameter gate_e       GATE     = GATE_XOR,
  parameter int unsigned DELAY_PS = 100
) (
  input  logic       rst,
  input  logic [FAN_IN-1:0] a,
  output logic       y
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam logic [2**FAN_IN-1:0] TABLE = gate_table(GATE);

  (* keep *) logic f;
  assign f = TABLE[a];
  assign #(DELAY_PS * 1ps) y = rst | f;
endmodule
