// tb_rpu_reservoir: self-checking test of the unclocked gate network.
//
// A reduced network (128 nodes, 64 inputs) is driven with random input
// patterns. Checks: (1) while reset is high every node reads 1; (2) after
// reset is released the network is left to run; once no node has changed for
// 3 ns the state must be a fixed point of the network, i.e. every node equals
// its gate function applied to its three sources, recomputed here from the
// netlist description with this testbench's own gate equations; (3) the mean
// gate sensitivity of the drawn network, counted here by flipping each input
// of each gate, lies below 0.5. Trials that never settle are counted and
// reported; at least one in eight must settle (with this mix of gate
// types part of the random input patterns leave the network oscillating).
module tb_rpu_reservoir;
  import rpu_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned N    = 128;
  localparam int unsigned NIN  = 64;
  localparam int unsigned SEED = 7;
  localparam int unsigned TRIALS = 40;

  logic           rst;
  logic [NIN-1:0] u;
  logic [N-1:0]   x;

  rpu_reservoir #(.NUM_NODES(N), .NUM_INPUTS(NIN), .SEED(SEED)) dut (.rst(rst), .u(u), .x(x));

  int checks = 0, failures = 0;
  realtime last_change = 0;
  int toggles = 0;
  always @(x) begin
    last_change = $realtime;
    toggles++;
  end

  function automatic logic eval_gate(gate_e g, logic a0, logic a1, logic a2);
    case (g)
      GATE_XOR:  return a0 ^ a1 ^ a2;
      GATE_MAJ:  return (a0 & a1) | (a0 & a2) | (a1 & a2);
      GATE_OR:   return a0 | a1 | a2;
      GATE_AND:  return a0 & a1 & a2;
      GATE_NOR:  return !(a0 | a1 | a2);
      GATE_NAND: return !(a0 & a1 & a2);
      default:   return 1'b0;
    endcase
  endfunction

  function automatic int fixed_point_errors(logic r);
    int errs = 0;
    for (int i = 0; i < N; i++) begin
      logic p0, e;
      p0 = (i < NIN) ? u[i] : x[node_src(SEED, i, 0, N)];
      e  = r | eval_gate(node_gate(SEED, i), p0, x[node_src(SEED, i, 1, N)],
                         x[node_src(SEED, i, 2, N)]);
      if (x[i] !== e) errs++;
    end
    return errs;
  endfunction

  initial begin
    #100us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int settled = 0;
    int sens_edges = 0;
    real mean_s;
    // Mean sensitivity: count input flips that change the output, per gate.
    for (int i = 0; i < N; i++) begin
      gate_e g;
      g = node_gate(SEED, i);
      for (int v = 0; v < 8; v++)
        for (int b = 0; b < 3; b++) begin
          int w;
          w = v ^ (1 << b);
          if (eval_gate(g, v[0], v[1], v[2]) != eval_gate(g, w[0], w[1], w[2])) sens_edges++;
        end
    end
    mean_s = real'(sens_edges) / real'(N * 24);
    checks++;
    if (!(mean_s > 0.3 && mean_s < 0.5)) begin
      failures++;
      $display("FAIL mean sensitivity %f", mean_s);
    end
    $display("mean gate sensitivity of the network: %f", mean_s);

    for (int t = 0; t < TRIALS; t++) begin
      rst = 1'b1;
      for (int k = 0; k < NIN; k += 32) u[k +: 32] = $urandom;
      #2ns;
      checks++;
      if (x !== '1) begin
        failures++;
        $display("FAIL trial %0d: reset does not set all nodes, x=%h", t, x);
      end
      checks++;
      if (fixed_point_errors(1'b1) != 0) begin
        failures++;
        $display("FAIL trial %0d: reset state is not a fixed point", t);
      end
      rst = 1'b0;
      toggles = 0;
      begin : wait_settle
        for (int w = 0; w < 400; w++) begin
          #1ns;
          if ($realtime - last_change > 3ns) disable wait_settle;
        end
      end
      if ($realtime - last_change > 3ns) begin
        int errs;
        settled++;
        errs = fixed_point_errors(1'b0);
        checks++;
        if (errs != 0) begin
          failures++;
          $display("FAIL trial %0d: %0d nodes disagree with their gate function", t, errs);
        end
      end
      $display("trial %0d: %0d output events after release, settled=%0d",
               t, toggles, ($realtime - last_change > 3ns));
    end
    checks++;
    if (settled < TRIALS / 8) begin
      failures++;
      $display("FAIL only %0d of %0d trials settled", settled, TRIALS);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
