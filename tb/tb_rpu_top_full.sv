// tb_rpu_top_full: end-to-end test of rpu_top with every parameter at its
// default, i.e. the RPU's own size: 2048 gates, 1024 inputs, 1024-row input
// and output buffers. It runs one batch of 12 binarised 28 x 28 images (five
// rows each, a 60-row run set through the LENGTH register): the event-driven
// simulation of 2048 unclocked gates is slow, so the batch is kept short.
// The first 10 rows go over the host bus; the others are loaded and compared
// directly in the RAM arrays. Stimulus and checks are in rpu_top_bench.
module tb_rpu_top_full;
  timeunit 1ns;
  timeprecision 1ps;

  logic        clk, rst_n, h_valid, h_we, h_rvalid;
  logic [17:0] h_addr;   // 2 region + 10 row + 6 word bits
  logic [31:0] h_wdata, h_rdata;
  logic          bd_we;
  logic [9:0]    bd_row, bd_rrow;
  logic [1023:0] bd_wdata;
  logic [2047:0] bd_rdata;

  rpu_top dut (.*);

  rpu_top_bench #(.HOST_ROWS(10), .RUN_ROWS(60)) bench (
    .clk, .rst_n, .h_valid, .h_we, .h_addr, .h_wdata, .h_rvalid, .h_rdata,
    .res_x (dut.u_res.x), .busy (dut.u_ctrl.busy),
    .bd_we, .bd_row, .bd_wdata, .bd_rrow, .bd_rdata
  );

  // direct access to the RAM arrays for the rows the bench does not move
  // over the host bus
  always @(posedge clk) if (bd_we) dut.u_in_ram.mem[bd_row] <= bd_wdata;
  assign bd_rdata = dut.u_out_ram.mem[bd_rrow];
endmodule
