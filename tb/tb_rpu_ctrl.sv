// tb_rpu_ctrl: self-checking test of the run state machine.
//
// The input RAM is modelled here as a one-clock registered read of a random
// pattern table; the reservoir is replaced by a stand-in whose state is
// {~u, u} out of reset and all ones in reset, so every sampled row can be
// predicted exactly. Several runs with different lengths and reset schedules
// check: each output row holds the stand-in state for its own input row and
// reset flag; exactly one output row is written per clock; run_cycles reads
// LENGTH + 2; busy/done behave; the reservoir is held in reset while idle; a
// start during a run is ignored; LENGTH = 0 finishes at once.
module tb_rpu_ctrl;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned DEPTH = 32, NIN = 16, NODES = 2 * NIN;

  logic clk = 0;
  always #2.5ns clk = ~clk;

  logic             rst_n, start, busy, done;
  logic [5:0]       cfg_length, cfg_rst_period, cfg_rst_len;
  logic [31:0]      run_cycles;
  logic             in_re, res_rst, out_we;
  logic [4:0]       in_row, out_row;
  logic [NODES-1:0] res_x, out_wdata;

  rpu_ctrl #(.DEPTH(DEPTH), .NUM_NODES(NODES)) dut (.*);

  logic [NIN-1:0]   pat [DEPTH];
  logic [NIN-1:0]   u;
  logic [NODES-1:0] got [DEPTH];
  int writes, write_gap_errs, last_write_t;

  always_ff @(posedge clk) if (in_re) u <= pat[in_row];
  assign res_x = res_rst ? '1 : {~u, u};

  always @(posedge clk) begin
    if (out_we) begin
      got[out_row] = out_wdata;
      if (writes > 0 && $time - last_write_t != 5) write_gap_errs++;
      last_write_t = $time;
      writes++;
    end
  end

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic run(int len, int period, int rlen, bit poke_start);
    int cyc;
    writes = 0;
    write_gap_errs = 0;
    for (int r = 0; r < DEPTH; r++) got[r] = '0;
    cfg_length = 6'(len); cfg_rst_period = 6'(period); cfg_rst_len = 6'(rlen);
    start = 1;
    @(posedge clk); #1ns;
    start = 0;
    cyc = 1;
    while (busy) begin
      if (poke_start && cyc == 3) start = 1;   // must be ignored
      @(posedge clk); #1ns;
      start = 0;
      cyc++;
      if (cyc > 4 * DEPTH) break;
    end
    check(done, $sformatf("done not set after run len %0d", len));
    check(run_cycles == 32'(len + 2) || len == 0,
          $sformatf("run_cycles %0d for length %0d", run_cycles, len));
    check(cyc - 1 == len + 2 || len == 0, $sformatf("busy for %0d cycles, length %0d", cyc - 1, len));
    check(writes == len, $sformatf("%0d writes for length %0d", writes, len));
    check(write_gap_errs == 0, "output rows not written on consecutive clocks");
    for (int r = 0; r < len; r++) begin
      bit rf;
      logic [NODES-1:0] exp;
      rf  = (period == 0) ? (r < rlen) : ((r % period) < rlen);
      exp = rf ? '1 : {~pat[r], pat[r]};
      check(got[r] === exp, $sformatf("row %0d: %h expected %h (reset %0d)", r, got[r], exp, rf));
    end
    repeat (2) @(posedge clk);
    #1ns;
    check(res_rst == 1'b1, "reservoir not held in reset while idle");
  endtask

  initial begin
    rst_n = 0; start = 0; cfg_length = 0; cfg_rst_period = 0; cfg_rst_len = 0;
    for (int r = 0; r < DEPTH; r++) pat[r] = NIN'($urandom);
    repeat (3) @(posedge clk);
    #1ns;
    rst_n = 1;
    @(posedge clk); #1ns;
    check(!busy && !done && res_rst, "state after reset");
    run(DEPTH, 5, 1, 0);     // image mode: one reset row every five
    run(10, 0, 0, 1);        // no reset at all, start poked mid-run
    run(17, 4, 2, 0);
    run(1, 0, 1, 0);
    for (int r = 0; r < DEPTH; r++) pat[r] = NIN'($urandom);
    run(DEPTH, 0, 3, 0);
    run(0, 0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
