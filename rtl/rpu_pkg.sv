// rpu_pkg: types, constants and elaboration-time functions shared by the
// recurrent processing unit (RPU).
//
// The RPU reservoir is a network of unclocked 3-input Boolean gates. Which
// gate type each node gets, which nodes feed it and how long its propagation
// delay is are drawn pseudo-randomly when the design is elaborated. The draw
// is a fixed integer hash of (SEED, node, pin), so a given SEED always yields
// the same netlist and any testbench can rebuild the netlist description from
// the same functions. The gate library (XOR, majority, OR, AND, NOR, NAND, all
// with three inputs) and the weights with which the types are drawn are this
// design's own choice; the idea of tuning the network's mean gate sensitivity
// through the mix of gate types follows the RPU concept. With the default
// weights the expected mean sensitivity is (3*1 + 2*0.5 + 11*0.25)/16 = 0.42,
// below the 0.5 under which such networks are expected to respond
// reproducibly instead of exciting themselves.
//
// Host bus word address layout, used by rpu_host_if and rpu_top:
//   {region[1:0], row[ROW_W-1:0], word[WORD_W-1:0]}
//   region 0: control/status registers (index in the word field)
//   region 1: input RAM  (row, 32-bit word within the row)
//   region 2: output RAM (row, 32-bit word within the row)
package rpu_pkg;
  timeunit 1ns;
  timeprecision 1ps;

  // Gate types of the reservoir nodes. Inputs are a[2:0]; the result is ORed
  // with the reservoir reset inside rpu_gate.
  typedef enum logic [2:0] {
    GATE_XOR  = 3'd0,  // a0 ^ a1 ^ a2          sensitivity 1
    GATE_MAJ  = 3'd1,  // majority of three     sensitivity 1/2
    GATE_OR   = 3'd2,  // a0 | a1 | a2          sensitivity 1/4
    GATE_AND  = 3'd3,  // a0 & a1 & a2          sensitivity 1/4
    GATE_NOR  = 3'd4,  // ~(a0 | a1 | a2)       sensitivity 1/4
    GATE_NAND = 3'd5   // ~(a0 & a1 & a2)       sensitivity 1/4
  } gate_e;

  localparam int unsigned NUM_GATE_TYPES = 6;
  localparam int unsigned FAN_IN         = 3;

  // Draw weights per gate type, out of WEIGHT_TOTAL (indexed by gate_e).
  localparam int unsigned WEIGHT_TOTAL = 16;
  localparam int unsigned GATE_WEIGHT [NUM_GATE_TYPES] = '{3, 2, 2, 3, 3, 3};

  // Host register indices (region 0).
  typedef enum logic [3:0] {
    REG_CTRL       = 4'd0,  // W: bit0 = start a run
    REG_STATUS     = 4'd1,  // R: bit0 = busy, bit1 = done
    REG_LENGTH     = 4'd2,  // RW: rows per run
    REG_RST_PERIOD = 4'd3,  // RW: rows between reservoir resets (0 = reset only at the start)
    REG_RST_LEN    = 4'd4,  // RW: rows held in reset at each period start
    REG_CYCLES     = 4'd5,  // R: clock cycles the last run took
    REG_INFO       = 4'd6   // R: {NUM_NODES[15:0], NUM_INPUTS[15:0]}
  } reg_e;

  typedef enum logic [1:0] {
    REGION_REGS = 2'd0,
    REGION_IN   = 2'd1,
    REGION_OUT  = 2'd2
  } region_e;

  // Truth table of a gate type; bit {a2,a1,a0} is the output for that input.
  function automatic logic [7:0] gate_table(gate_e g);
    case (g)
      GATE_XOR:  return 8'b1001_0110;
      GATE_MAJ:  return 8'b1110_1000;
      GATE_OR:   return 8'b1111_1110;
      GATE_AND:  return 8'b1000_0000;
      GATE_NOR:  return 8'b0000_0001;
      GATE_NAND: return 8'b0111_1111;
      default:   return 8'b0000_0000;
    endcase
  endfunction

  // 32-bit integer mixer (xorshift-multiply finaliser).
  function automatic logic [31:0] mix32(logic [31:0] v);
    logic [31:0] x;
    x = v;
    x = x ^ (x >> 16);
    x = x * 32'h7feb_352d;
    x = x ^ (x >> 15);
    x = x * 32'h846c_a68b;
    x = x ^ (x >> 16);
    return x;
  endfunction

  function automatic logic [31:0] node_hash(int unsigned seed, int unsigned node, int unsigned salt);
    return mix32(mix32(seed * 32'h9e37_79b9 + node) + salt * 32'h85eb_ca6b);
  endfunction

  // Gate type of a node, drawn with the weights GATE_WEIGHT.
  function automatic gate_e node_gate(int unsigned seed, int unsigned node);
    int unsigned r, acc;
    r   = node_hash(seed, node, 100) % WEIGHT_TOTAL;
    acc = 0;
    for (int t = 0; t < NUM_GATE_TYPES; t++) begin
      acc += GATE_WEIGHT[t];
      if (r < acc) return gate_e'(t);
    end
    return GATE_XOR;
  endfunction

  // Node that drives input pin `pin` of node `node`: uniform over all other
  // nodes (no node feeds itself).
  function automatic int unsigned node_src(int unsigned seed, int unsigned node,
                                           int unsigned pin, int unsigned num_nodes);
    int unsigned r;
    r = node_hash(seed, node, pin + 1) % (num_nodes - 1);
    return (r >= node) ? r + 1 : r;
  endfunction

  // Propagation delay of a node in ps: uniform in [base - spread, base + spread].
  function automatic int unsigned node_delay_ps(int unsigned seed, int unsigned node,
                                                int unsigned base, int unsigned spread);
    return base - spread + (node_hash(seed, node, 200) % (2 * spread + 1));
  endfunction

  function automatic int unsigned clog2_min1(int unsigned v);
    return (v <= 2) ? 1 : $clog2(v);
  endfunction
endpackage
