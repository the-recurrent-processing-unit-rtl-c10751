// tb_rpu_host_if: self-checking test of the host port.
//
// The two RAMs are modelled here as arrays with a one-clock registered read,
// and the run status inputs are driven directly. Checks: register reset
// values, register write/read-back, the start pulse (one clock, only on a
// write of 1 to CTRL bit 0), status and cycle-count read-back, INFO, routing
// of input-RAM writes to the right row and word, read-back of both RAMs and
// of unmapped addresses, and that every read returns exactly two clocks after
// the request, also when reads are issued back to back.
module tb_rpu_host_if;
  import rpu_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned DEPTH = 8, NIN = 64, NODES = 128;
  localparam int unsigned IN_WORDS = NIN / 32, OUT_WORDS = NODES / 32;

  logic clk = 0;
  always #2.5ns clk = ~clk;

  logic        rst_n, h_valid, h_we, h_rvalid;
  logic [6:0]  h_addr;             // 2 region + 3 row + 2 word
  logic [31:0] h_wdata, h_rdata;
  logic        in_we, in_re, out_re, start, busy, done;
  logic [2:0]  in_row, out_row;
  logic        in_word;
  logic [1:0]  out_word;
  logic [31:0] in_wdata, in_rdata, out_rdata, run_cycles;
  logic [3:0]  cfg_length, cfg_rst_period, cfg_rst_len;

  rpu_host_if #(.DEPTH(DEPTH), .NUM_INPUTS(NIN), .NUM_NODES(NODES)) dut (.*);

  logic [31:0] in_mem  [DEPTH][IN_WORDS];
  logic [31:0] out_mem [DEPTH][OUT_WORDS];
  always_ff @(posedge clk) begin
    if (in_we) in_mem[in_row][in_word] <= in_wdata;
    if (in_re) in_rdata <= in_mem[in_row][in_word];
    if (out_re) out_rdata <= out_mem[out_row][out_word];
  end

  int starts = 0;
  always @(posedge clk) if (start) starts++;

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [6:0] adr(int region, int row, int word);
    return {2'(region), 3'(row), 2'(word)};
  endfunction
  // Register index: spans the row and word fields.
  function automatic logic [6:0] radr(reg_e r);
    return {2'd0, 5'(r)};
  endfunction

  task automatic wr(logic [6:0] a, logic [31:0] d);
    h_valid = 1; h_we = 1; h_addr = a; h_wdata = d;
    @(posedge clk); #1ns;
    h_valid = 0; h_we = 0;
  endtask

  // Read; checks the two-clock return.
  task automatic rd(logic [6:0] a, output logic [31:0] d);
    h_valid = 1; h_we = 0; h_addr = a;
    @(posedge clk); #1ns;
    h_valid = 0;
    check(!h_rvalid, "rvalid one clock after request");
    @(posedge clk); #1ns;
    check(h_rvalid, "rvalid two clocks after request");
    d = h_rdata;
  endtask

  initial begin
    logic [31:0] d;
    rst_n = 0; h_valid = 0; h_we = 0; h_addr = 0; h_wdata = 0;
    busy = 0; done = 0; run_cycles = 0;
    for (int r = 0; r < DEPTH; r++) begin
      for (int w = 0; w < IN_WORDS; w++) in_mem[r][w] = 0;
      for (int w = 0; w < OUT_WORDS; w++) out_mem[r][w] = $urandom;
    end
    repeat (2) @(posedge clk); #1ns;
    rst_n = 1;
    rd(radr(REG_LENGTH), d);     check(d == DEPTH, "LENGTH reset value");
    rd(radr(REG_RST_PERIOD), d); check(d == 0, "RST_PERIOD reset value");
    rd(radr(REG_RST_LEN), d);    check(d == 1, "RST_LEN reset value");
    wr(radr(REG_LENGTH), 5);
    wr(radr(REG_RST_PERIOD), 3);
    wr(radr(REG_RST_LEN), 2);
    check(cfg_length == 5 && cfg_rst_period == 3 && cfg_rst_len == 2, "config outputs");
    rd(radr(REG_LENGTH), d);     check(d == 5, "LENGTH read-back");
    rd(radr(REG_RST_PERIOD), d); check(d == 3, "RST_PERIOD read-back");
    busy = 1; done = 0; run_cycles = 32'd1234;
    rd(radr(REG_STATUS), d);     check(d == 1, "STATUS busy");
    busy = 0; done = 1;
    rd(radr(REG_STATUS), d);     check(d == 2, "STATUS done");
    rd(radr(REG_CYCLES), d);     check(d == 1234, "CYCLES");
    rd(radr(REG_INFO), d);       check(d == {16'(NODES), 16'(NIN)}, "INFO");
    check(starts == 0, "no start yet");
    wr(radr(REG_CTRL), 0);
    check(starts == 0, "writing 0 to CTRL does not start");
    wr(radr(REG_CTRL), 1);
    check(starts == 1, "start is a single-clock pulse");
    // input RAM writes and read-back
    for (int r = 0; r < DEPTH; r++)
      for (int w = 0; w < IN_WORDS; w++) wr(adr(1, r, w), 32'h1000 * r + w + 32'hA0000000);
    wr(adr(1, 2, 3), 32'hDEADBEEF);   // word 3 does not exist in a 2-word row: dropped
    for (int r = 0; r < DEPTH; r++)
      for (int w = 0; w < IN_WORDS; w++) begin
        check(in_mem[r][w] == 32'h1000 * r + w + 32'hA0000000, "input RAM write routing");
        rd(adr(1, r, w), d);
        check(d == 32'h1000 * r + w + 32'hA0000000, $sformatf("input RAM read row %0d word %0d", r, w));
      end
    for (int r = 0; r < DEPTH; r++)
      for (int w = 0; w < OUT_WORDS; w++) begin
        rd(adr(2, r, w), d);
        check(d == out_mem[r][w], $sformatf("output RAM read row %0d word %0d", r, w));
      end
    rd(adr(3, 1, 1), d); check(d == 0, "unmapped region reads 0");
    // back-to-back reads: one per clock, returned in order two clocks later
    begin
      logic [31:0] got [OUT_WORDS + 2];
      for (int k = 0; k < OUT_WORDS + 2; k++) begin
        h_valid = 1; h_we = 0; h_addr = adr(2, 5, k % OUT_WORDS);
        @(posedge clk); #1ns;
        if (k >= 1) begin
          check(h_rvalid, "back-to-back rvalid");
          got[k - 1] = h_rdata;
        end
      end
      h_valid = 0;
      @(posedge clk); #1ns;
      got[OUT_WORDS + 1] = h_rdata;
      for (int k = 0; k < OUT_WORDS + 2; k++)
        check(got[k] == out_mem[5][k % OUT_WORDS], $sformatf("back-to-back read %0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
