// tb_rpu_input_ram: self-checking test of the input pattern buffer.
//
// A 16 x 128-bit buffer with 32-bit host words is filled through the host
// port with random words, mirrored in a reference array here. Rows are then
// read on the engine port (checked one clock after the request, and checked
// to hold while no read is requested) and words are read back on the host
// port, in random order, interleaved with further writes.
module tb_rpu_input_ram;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned DEPTH = 16, WIDTH = 128, HOST_W = 32;
  localparam int unsigned WORDS = WIDTH / HOST_W;

  logic clk = 0;
  always #2.5ns clk = ~clk;

  logic              e_re;
  logic [3:0]        e_row;
  logic [WIDTH-1:0]  e_rdata;
  logic              h_we, h_re;
  logic [3:0]        h_row;
  logic [1:0]        h_word;
  logic [HOST_W-1:0] h_wdata, h_rdata;

  rpu_input_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH), .HOST_W(HOST_W)) dut (.*);

  logic [WIDTH-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Stimulus changes 1 ns after a rising edge, so it never races the DUT.
  task automatic host_write(int r, int w, logic [31:0] d);
    h_we = 1; h_row = 4'(r); h_word = 2'(w); h_wdata = d;
    @(posedge clk);
    #1ns;
    h_we = 0;
    ref_mem[r][w*HOST_W +: HOST_W] = d;
  endtask

  initial begin
    e_re = 0; e_row = 0; h_we = 0; h_re = 0; h_row = 0; h_word = 0; h_wdata = 0;
    @(posedge clk);
    #1ns;
    for (int r = 0; r < DEPTH; r++)
      for (int w = 0; w < WORDS; w++) host_write(r, w, $urandom);
    // engine reads, one per clock
    for (int k = 0; k < 3 * DEPTH; k++) begin
      int r;
      r = $urandom_range(DEPTH - 1);
      e_re = 1; e_row = 4'(r);
      @(posedge clk);
      #1ns;
      e_re = 0;
      checks++;
      if (e_rdata !== ref_mem[r]) begin
        failures++;
        $display("FAIL engine row %0d: %h expected %h", r, e_rdata, ref_mem[r]);
      end
      // hold: no read requested, data stays
      if (k % 4 == 0) begin
        @(posedge clk);
        #1ns;
        checks++;
        if (e_rdata !== ref_mem[r]) begin failures++; $display("FAIL engine data not held"); end
      end
      if (k % 3 == 0) host_write($urandom_range(DEPTH - 1), $urandom_range(WORDS - 1), $urandom);
    end
    // host read-back
    for (int k = 0; k < 3 * DEPTH; k++) begin
      int r, w;
      r = $urandom_range(DEPTH - 1);
      w = $urandom_range(WORDS - 1);
      h_re = 1; h_row = 4'(r); h_word = 2'(w);
      @(posedge clk);
      #1ns;
      h_re = 0;
      checks++;
      if (h_rdata !== ref_mem[r][w*HOST_W +: HOST_W]) begin
        failures++;
        $display("FAIL host row %0d word %0d: %h", r, w, h_rdata);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
