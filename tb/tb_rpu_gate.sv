// tb_rpu_gate: self-checking test of one reservoir node.
//
// One rpu_gate of every type is instantiated with a 100 ps delay. For all
// eight input combinations and both reset levels the output is compared with
// this testbench's own gate equations once it has had time to settle. The
// propagation delay is checked on the XOR gate, whose output toggles on every
// input change: 1 ps before DELAY_PS the old value must still be there, 1 ps
// after it the new one. A glitch shorter than the delay must not reach the
// output.
module tb_rpu_gate;
  import rpu_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned D = 100;

  logic       rst;
  logic [2:0] a;
  logic [NUM_GATE_TYPES-1:0] y;

  for (genvar t = 0; t < NUM_GATE_TYPES; t++) begin : g_t
    rpu_gate #(.GATE(gate_e'(t)), .DELAY_PS(D)) dut (.rst(rst), .a(a), .y(y[t]));
  end

  int checks = 0, failures = 0;

  function automatic logic ref_gate(int t, logic [2:0] v);
    case (t)
      0: return ^v;
      1: return (v[0] & v[1]) | (v[0] & v[2]) | (v[1] & v[2]);
      2: return |v;
      3: return &v;
      4: return ~|v;
      5: return ~&v;
      default: return 1'b0;
    endcase
  endfunction

  initial begin
    #1us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 2; r++)
      for (int v = 0; v < 8; v++) begin
        rst = r[0];
        a   = v[2:0];
        #1ns;
        for (int t = 0; t < NUM_GATE_TYPES; t++) begin
          checks++;
          if (y[t] !== (r[0] | ref_gate(t, v[2:0]))) begin
            failures++;
            $display("FAIL type %0d rst=%0d a=%b y=%b", t, r, v[2:0], y[t]);
          end
        end
      end
    // Delay of the XOR gate.
    rst = 1'b0;
    a   = 3'b000;
    #1ns;
    a   = 3'b001;
    #((D - 1) * 1ps);
    checks++;
    if (y[0] !== 1'b0) begin failures++; $display("FAIL XOR changed before its delay"); end
    #2ps;
    checks++;
    if (y[0] !== 1'b1) begin failures++; $display("FAIL XOR did not change after its delay"); end
    // A 50 ps glitch is swallowed.
    #1ns;
    a = 3'b011;
    #50ps;
    a = 3'b001;
    #1ns;
    checks++;
    if (y[0] !== 1'b1) begin failures++; $display("FAIL short glitch reached the output"); end
    // Reset forces 1 after the delay.
    a = 3'b011;
    #1ns;
    rst = 1'b1;
    #((D - 1) * 1ps);
    checks++;
    if (y[0] !== 1'b0) begin failures++; $display("FAIL reset acted before the delay"); end
    #2ps;
    checks++;
    if (y[0] !== 1'b1) begin failures++; $display("FAIL reset did not act"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
