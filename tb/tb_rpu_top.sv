// tb_rpu_top: end-to-end test of rpu_top at a reduced size (256 gates, 128
// inputs, 64-row buffers, 11 x 11 images), so that it builds and runs in
// seconds. Stimulus and checks are in rpu_top_bench.
module tb_rpu_top;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned NODES = 256, NIN = 128, DEPTH = 64;

  logic        clk, rst_n, h_valid, h_we, h_rvalid;
  logic [13:0] h_addr;   // 2 region + 6 row + 6 word bits
  logic [31:0] h_wdata, h_rdata;
  logic              bd_we;
  logic [5:0]        bd_row, bd_rrow;
  logic [NIN-1:0]    bd_wdata;
  logic [NODES-1:0]  bd_rdata;

  rpu_top #(.NUM_NODES(NODES), .NUM_INPUTS(NIN), .DEPTH(DEPTH)) dut (.*);

  rpu_top_bench #(.NODES(NODES), .NIN(NIN), .DEPTH(DEPTH), .IMG(11), .HOST_ROWS(DEPTH), .RUN_ROWS(DEPTH)) bench (
    .clk, .rst_n, .h_valid, .h_we, .h_addr, .h_wdata, .h_rvalid, .h_rdata,
    .res_x (dut.u_res.x), .busy (dut.u_ctrl.busy),
    .bd_we, .bd_row, .bd_wdata, .bd_rrow, .bd_rdata
  );

  // direct access to the RAM arrays for the rows the bench does not move
  // over the host bus
  always @(posedge clk) if (bd_we) dut.u_in_ram.mem[bd_row] <= bd_wdata;
  assign bd_rdata = dut.u_out_ram.mem[bd_rrow];
endmodule
