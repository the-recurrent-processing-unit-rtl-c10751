// tb_rpu_output_ram: self-checking test of the reservoir state buffer.
//
// A 16 x 256-bit buffer with 32-bit host words is written row by row on the
// engine port with random data, one row per clock, mirrored in a reference
// array. Words are read back on the host port (result checked one clock after
// the request), including reads issued while the engine is writing other rows.
module tb_rpu_output_ram;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned DEPTH = 16, WIDTH = 256, HOST_W = 32;
  localparam int unsigned WORDS = WIDTH / HOST_W;

  logic clk = 0;
  always #2.5ns clk = ~clk;

  logic              e_we;
  logic [3:0]        e_row;
  logic [WIDTH-1:0]  e_wdata;
  logic              h_re;
  logic [3:0]        h_row;
  logic [2:0]        h_word;
  logic [HOST_W-1:0] h_rdata;

  rpu_output_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH), .HOST_W(HOST_W)) dut (.*);

  logic [WIDTH-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WIDTH-1:0] rand_row();
    logic [WIDTH-1:0] v;
    for (int k = 0; k < WIDTH; k += 32) v[k +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    e_we = 0; e_row = 0; e_wdata = 0; h_re = 0; h_row = 0; h_word = 0;
    @(posedge clk);
    for (int r = 0; r < DEPTH; r++) begin
      logic [WIDTH-1:0] v;
      v = rand_row();
      e_we <= 1; e_row <= 4'(r); e_wdata <= v;
      ref_mem[r] = v;
      @(posedge clk);
    end
    e_we <= 0;
    for (int k = 0; k < 6 * DEPTH; k++) begin
      int r, w;
      r = $urandom_range(DEPTH - 1);
      w = $urandom_range(WORDS - 1);
      h_re <= 1; h_row <= 4'(r); h_word <= 3'(w);
      // concurrently rewrite a different row
      if (k % 2 == 1) begin
        int r2;
        logic [WIDTH-1:0] v;
        r2 = (r + 1) % DEPTH;
        v = rand_row();
        e_we <= 1; e_row <= 4'(r2); e_wdata <= v;
        @(posedge clk);
        ref_mem[r2] = v;
      end else begin
        @(posedge clk);
      end
      h_re <= 0; e_we <= 0;
      #1ns;
      checks++;
      if (h_rdata !== ref_mem[r][w*HOST_W +: HOST_W]) begin
        failures++;
        $display("FAIL host row %0d word %0d: %h expected %h", r, w, h_rdata, ref_mem[r][w*HOST_W +: HOST_W]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
