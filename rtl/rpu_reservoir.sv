// rpu_reservoir: the RPU reservoir, an autonomous (unclocked) Boolean network.
//
// NUM_NODES gates (rpu_gate) are wired into a sparse random recurrent
// network: the reservoir computer's fixed matrices A (node to node) and W_in
// (input to node) become wires. Node i has three input pins. For the first
// NUM_INPUTS nodes pin 0 is input bit u[i]; every other pin is driven by a
// node drawn uniformly from all nodes except i itself. Gate type, sources and
// propagation delay (DELAY_PS +/- DELAY_SPREAD_PS) of every node come from the
// elaboration-time hash in rpu_pkg, so SEED selects one network. The network
// runs at the speed of its gate delays; x is the vector of all node outputs,
// read by a clocked sampler outside this module.
//
// What follows the RPU: 2048 nodes, 1024 inputs, random gate types and
// connections, one gate per node kept through synthesis, a common reset ORed
// into every gate that drives all nodes to 1, all node states brought out.
// This design's own choices: three inputs per gate, the gate library and its
// weights, one input bit per node on the first NUM_INPUTS nodes, no
// self-connections, and the spread of gate delays.
//
// The combinational loops through the nodes are the point of this circuit;
// lint and synthesis tools report them, and they must not be broken.
//
// Interface: rst (active high, all nodes go to 1 one gate delay later),
// u[NUM_INPUTS-1:0] input pattern, x[NUM_NODES-1:0] node states.
module rpu_reservoir
  import rpu_pkg::*;
#(
  parameter int unsigned NUM_NODES       = 2048,
  parameter int unsigned NUM_INPUTS      = 1024,
  parameter int unsigned SEED            = 1,
  parameter int unsigned DELAY_PS        = 100,
  parameter int unsigned DELAY_SPREAD_PS = 20
) (
  input  logic                  rst,
  input  logic [NUM_INPUTS-1:0] u,
  output logic [NUM_NODES-1:0]  x
);
  timeunit 1ns;
  timeprecision 1ps;

  (* keep *) logic [NUM_NODES-1:0] node;

  for (genvar i = 0; i < NUM_NODES; i++) begin : g_node
    localparam gate_e       GATE  = node_gate(SEED, i);
    localparam int unsigned DLY   = node_delay_ps(SEED, i, DELAY_PS, DELAY_SPREAD_PS);
    localparam int unsigned SRC0  = node_src(SEED, i, 0, NUM_NODES);
    localparam int unsigned SRC1  = node_src(SEED, i, 1, NUM_NODES);
    localparam int unsigned SRC2  = node_src(SEED, i, 2, NUM_NODES);

    logic pin0;
    if (i < NUM_INPUTS) begin : g_in
      assign pin0 = u[i];
    end else begin : g_rec
      assign pin0 = node[SRC0];
    end

    rpu_gate #(.GATE(GATE), .DELAY_PS(DLY)) u_gate (
      .rst (rst),
      .a   ({node[SRC2], node[SRC1], pin0}),
      .y   (node[i])
    );
  end

  assign x = node;

  initial begin
    assert (NUM_NODES >= 2) else $error("rpu_reservoir: NUM_NODES must be at least 2");
    assert (NUM_INPUTS <= NUM_NODES) else $error("rpu_reservoir: more inputs than nodes");
    assert (DELAY_SPREAD_PS < DELAY_PS) else $error("rpu_reservoir: delay spread too large");
  end
endmodule
