// rpu_host_if: memory-mapped host port of the RPU.
//
// The processor that runs the RPU software controls the programmable logic
// through this port: it writes input patterns into the input RAM, starts runs
// and reads the sampled reservoir states back from the output RAM. The port is
// a simple single-clock word bus: a request is h_valid with h_we, h_addr and
// h_wdata; every request is accepted at once; a read returns h_rdata with
// h_rvalid exactly two clocks after it was requested. Reads and writes may be
// issued back to back on every clock.
//
// Word address = {region[1:0], row[ROW_W-1:0], word[WORD_W-1:0]}:
//   region 0  registers, index in the row and word fields together
//             (see rpu_pkg::reg_e)
//   region 1  input RAM, 32-bit word `word` of row `row` (read/write)
//   region 2  output RAM, 32-bit word `word` of row `row` (read only)
// Unmapped reads return 0 and unmapped writes are dropped.
//
// Registers: CTRL (write 1 to bit 0 to start a run), STATUS {done, busy},
// LENGTH (rows per run, reset value DEPTH), RST_PERIOD (reset value 0),
// RST_LEN (reset value 1), CYCLES (clocks the last run took), INFO
// {NUM_NODES, NUM_INPUTS}.
//
// That the processor reads and writes the RAM buffers and does all control is
// the RPU's arrangement; the bus, the address map and the registers are this
// design's own.
module rpu_host_if
  import rpu_pkg::*;
#(
  parameter int unsigned DEPTH      = 1024,
  parameter int unsigned NUM_INPUTS = 1024,
  parameter int unsigned NUM_NODES  = 2048,
  localparam int unsigned HOST_W    = 32,
  localparam int unsigned IN_WORDS  = NUM_INPUTS / HOST_W,
  localparam int unsigned OUT_WORDS = NUM_NODES / HOST_W,
  localparam int unsigned ROW_W     = (DEPTH <= 2) ? 1 : $clog2(DEPTH),
  localparam int unsigned CNT_W     = ROW_W + 1,
  localparam int unsigned IN_WORD_W  = (IN_WORDS <= 2) ? 1 : $clog2(IN_WORDS),
  localparam int unsigned OUT_WORD_W = (OUT_WORDS <= 2) ? 1 : $clog2(OUT_WORDS),
  localparam int unsigned WORD_W    = (IN_WORD_W > OUT_WORD_W) ? IN_WORD_W : OUT_WORD_W,
  localparam int unsigned ADDR_W    = 2 + ROW_W + WORD_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host bus
  input  logic                  h_valid,
  input  logic                  h_we,
  input  logic [ADDR_W-1:0]     h_addr,
  input  logic [HOST_W-1:0]     h_wdata,
  output logic                  h_rvalid,
  output logic [HOST_W-1:0]     h_rdata,
  // input RAM host port
  output logic                  in_we,
  output logic                  in_re,
  output logic [ROW_W-1:0]      in_row,
  output logic [IN_WORD_W-1:0]  in_word,
  output logic [HOST_W-1:0]     in_wdata,
  input  logic [HOST_W-1:0]     in_rdata,
  // output RAM host port
  output logic                  out_re,
  output logic [ROW_W-1:0]      out_row,
  output logic [OUT_WORD_W-1:0] out_word,
  input  logic [HOST_W-1:0]     out_rdata,
  // run control
  output logic                  start,
  output logic [CNT_W-1:0]      cfg_length,
  output logic [CNT_W-1:0]      cfg_rst_period,
  output logic [CNT_W-1:0]      cfg_rst_len,
  input  logic                  busy,
  input  logic                  done,
  input  logic [31:0]           run_cycles
);
  timeunit 1ns;
  timeprecision 1ps;

  region_e           region;
  logic [ROW_W-1:0]  row;
  logic [WORD_W-1:0] word;
  assign {region, row, word} = h_addr;

  logic in_word_ok, out_word_ok;
  assign in_word_ok  = (32'(word) < IN_WORDS);
  assign out_word_ok = (32'(word) < OUT_WORDS);

  assign in_we    = h_valid && h_we && region == REGION_IN && in_word_ok;
  assign in_re    = h_valid && !h_we && region == REGION_IN && in_word_ok;
  assign in_row   = row;
  assign in_word  = IN_WORD_W'(word);
  assign in_wdata = h_wdata;
  assign out_re   = h_valid && !h_we && region == REGION_OUT && out_word_ok;
  assign out_row  = row;
  assign out_word = OUT_WORD_W'(word);

  localparam int unsigned IDX_W = ROW_W + WORD_W;
  logic [IDX_W-1:0] idx;
  assign idx = {row, word};

  logic reg_we;
  assign reg_we = h_valid && h_we && region == REGION_REGS;
  assign start  = reg_we && idx == IDX_W'(REG_CTRL) && h_wdata[0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cfg_length     <= CNT_W'(DEPTH);
      cfg_rst_period <= '0;
      cfg_rst_len    <= CNT_W'(1);
    end else if (reg_we) begin
      case (idx)
        IDX_W'(REG_LENGTH):     cfg_length     <= h_wdata[CNT_W-1:0];
        IDX_W'(REG_RST_PERIOD): cfg_rst_period <= h_wdata[CNT_W-1:0];
        IDX_W'(REG_RST_LEN):    cfg_rst_len    <= h_wdata[CNT_W-1:0];
        default: ;
      endcase
    end
  end

  // Register read value, looked up in the request cycle.
  logic [HOST_W-1:0] reg_val;
  always_comb begin
    case (idx)
      IDX_W'(REG_STATUS):     reg_val = {30'd0, done, busy};
      IDX_W'(REG_LENGTH):     reg_val = HOST_W'(cfg_length);
      IDX_W'(REG_RST_PERIOD): reg_val = HOST_W'(cfg_rst_period);
      IDX_W'(REG_RST_LEN):    reg_val = HOST_W'(cfg_rst_len);
      IDX_W'(REG_CYCLES):     reg_val = run_cycles;
      IDX_W'(REG_INFO):       reg_val = {16'(NUM_NODES), 16'(NUM_INPUTS)};
      default:                 reg_val = '0;
    endcase
  end

  // Two-stage read return: stage 1 is the RAM read, stage 2 the word mux.
  typedef enum logic [1:0] {SRC_NONE, SRC_REG, SRC_IN, SRC_OUT} src_e;
  src_e              src_q;
  logic              rd_q;
  logic [HOST_W-1:0] reg_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_q     <= 1'b0;
      src_q    <= SRC_NONE;
      reg_q    <= '0;
      h_rvalid <= 1'b0;
      h_rdata  <= '0;
    end else begin
      rd_q  <= h_valid && !h_we;
      reg_q <= reg_val;
      if (in_re)                                         src_q <= SRC_IN;
      else if (out_re)                                   src_q <= SRC_OUT;
      else if (h_valid && !h_we && region == REGION_REGS) src_q <= SRC_REG;
      else                                               src_q <= SRC_NONE;
      h_rvalid <= rd_q;
      case (src_q)
        SRC_REG: h_rdata <= reg_q;
        SRC_IN:  h_rdata <= in_rdata;
        SRC_OUT: h_rdata <= out_rdata;
        default: h_rdata <= '0;
      endcase
    end
  end

  initial begin
    assert (IDX_W >= 4) else $error("rpu_host_if: address too narrow for the registers");
  end

  a_read_return: assert property (@(posedge clk) disable iff (!rst_n)
                                  (h_valid && !h_we) |-> ##2 h_rvalid)
    else $error("rpu_host_if: read not returned after two clocks");
  a_no_write_to_output: assert property (@(posedge clk) disable iff (!rst_n)
                                         !(h_valid && h_we && region == REGION_OUT))
    else $warning("rpu_host_if: write to the read-only output RAM dropped");
endmodule
