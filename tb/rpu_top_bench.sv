// rpu_top_bench: end-to-end stimulus and checks for rpu_top, used by
// tb_rpu_top (reduced size) and tb_rpu_top_full (full size). It runs an
// image-classification batch the way the RPU presents MNIST digits; the
// wrapper instantiates rpu_top and connects it here.
//
// The bench draws synthetic IMG x IMG greyscale digit images (random pen
// strokes on a dark background, standing in for MNIST digits), binarises each
// at 34 % of its maximum brightness, unravels it row-major into an IMG*IMG-bit
// vector (784 bits for 28 x 28) and writes it into five consecutive input RAM
// rows (the remaining input bits stay 0). The reset schedule (period 5, length 1) resets the
// reservoir on the first row of every image, so the batch runs at one image
// per five clocks, 40 M images per second at 200 MHz. One image is repeated so
// that the reproducibility of the response can be reported.
//
// Rows below HOST_ROWS are loaded and read back over the host bus; the rest
// are loaded and compared through direct access to the RAM arrays, which the
// wrapper provides (bd_* ports).
//
// Checks: input RAM read-back; the run takes LENGTH + 2 clocks (CYCLES
// register and busy time); every output RAM row equals the reservoir state
// this testbench captured itself at the clock edge that ends that row's
// period (edge count from the start); reset rows read all ones; rows after a
// reset depart from the all-ones state; the reservoir is held in reset while
// idle; a start written during a run is ignored. Each mechanism is counted
// and one that never happens counts as a failure.
module rpu_top_bench #(
  parameter int unsigned NODES  = 2048,
  parameter int unsigned NIN    = 1024,
  parameter int unsigned DEPTH  = 1024,
  parameter int unsigned IMG    = 28,
  // Rows loaded and read back over the host bus; the others go through the
  // wrapper's direct access to the RAM arrays, which keeps a full-size run short.
  parameter int unsigned HOST_ROWS = 1024,
  // Rows in the run (the LENGTH register); at most DEPTH.
  parameter int unsigned RUN_ROWS = 1024,
  localparam int unsigned ROW_W  = $clog2(DEPTH),
  localparam int unsigned IN_WORD_W  = (NIN / 32 <= 2) ? 1 : $clog2(NIN / 32),
  localparam int unsigned OUT_WORD_W = (NODES / 32 <= 2) ? 1 : $clog2(NODES / 32),
  localparam int unsigned WORD_W = (IN_WORD_W > OUT_WORD_W) ? IN_WORD_W : OUT_WORD_W,
  localparam int unsigned ADDR_W = 2 + ROW_W + WORD_W
) (
  output logic              clk,
  output logic              rst_n,
  output logic              h_valid,
  output logic              h_we,
  output logic [ADDR_W-1:0] h_addr,
  output logic [31:0]       h_wdata,
  input  logic              h_rvalid,
  input  logic [31:0]       h_rdata,
  // observation of the design: reservoir state and run state machine busy
  input  logic [NODES-1:0]  res_x,
  input  logic              busy,
  // direct RAM access through the wrapper
  output logic              bd_we,
  output logic [ROW_W-1:0]  bd_row,
  output logic [NIN-1:0]    bd_wdata,
  output logic [ROW_W-1:0]  bd_rrow,
  input  logic [NODES-1:0]  bd_rdata
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned IN_WORDS = NIN / 32, OUT_WORDS = NODES / 32;
  localparam int unsigned PERIOD = 5, PIX = IMG * IMG;
  localparam int unsigned LEN = RUN_ROWS;
  localparam int unsigned NIMG = LEN / PERIOD;

  initial clk = 0;
  always #2.5ns clk = ~clk;   // 200 MHz

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [ADDR_W-1:0] adr(int region, int row, int word);
    return {2'(region), ROW_W'(row), WORD_W'(word)};
  endfunction

  task automatic wr(logic [ADDR_W-1:0] a, logic [31:0] d);
    h_valid = 1; h_we = 1; h_addr = a; h_wdata = d;
    @(posedge clk); #1ns;
    h_valid = 0; h_we = 0;
  endtask

  task automatic rd(logic [ADDR_W-1:0] a, output logic [31:0] d);
    h_valid = 1; h_we = 0; h_addr = a;
    @(posedge clk); #1ns;
    h_valid = 0;
    @(posedge clk); #1ns;
    d = h_rdata;
  endtask

  // Read a whole output row, one request per clock.
  task automatic rd_out_row(int r, output logic [NODES-1:0] v);
    // request k is answered two edges later, i.e. after the edge of step k+1
    for (int k = 0; k < OUT_WORDS + 1; k++) begin
      if (k < OUT_WORDS) begin
        h_valid = 1; h_we = 0; h_addr = adr(2, r, k);
      end else h_valid = 0;
      @(posedge clk); #1ns;
      if (k >= 1) v[(k - 1) * 32 +: 32] = h_rdata;
    end
    h_valid = 0;
  endtask

  // ---- synthetic digit images -------------------------------------------
  logic [PIX-1:0] img_bits [NIMG];
  int unsigned    img_ones [NIMG];

  task automatic make_image(int n);
    int unsigned grey [IMG][IMG];
    int unsigned maxv, thr;
    int x, y, dx, dy;
    for (int r = 0; r < IMG; r++) for (int c = 0; c < IMG; c++) grey[r][c] = $urandom_range(20);
    x = $urandom_range(IMG - 8) + 4; y = $urandom_range(IMG - 8) + 4;
    for (int s = 0; s < 2 * IMG + 4; s++) begin
      for (int r = -1; r <= 1; r++) for (int c = -1; c <= 1; c++)
        if (y + r >= 0 && y + r < IMG && x + c >= 0 && x + c < IMG)
          grey[y + r][x + c] = (r == 0 && c == 0) ? 255 : ((grey[y + r][x + c] < 120) ? 120 : grey[y + r][x + c]);
      dx = $urandom_range(2) - 1; dy = $urandom_range(2) - 1;
      if (x + dx >= 3 && x + dx < IMG - 3) x += dx;
      if (y + dy >= 3 && y + dy < IMG - 3) y += dy;
    end
    maxv = 0;
    for (int r = 0; r < IMG; r++) for (int c = 0; c < IMG; c++) if (grey[r][c] > maxv) maxv = grey[r][c];
    thr = (maxv * 34) / 100;   // binarise at 34 % of the maximum brightness
    img_ones[n] = 0;
    for (int r = 0; r < IMG; r++)
      for (int c = 0; c < IMG; c++) begin
        img_bits[n][r * IMG + c] = (grey[r][c] > thr);
        img_ones[n] += (grey[r][c] > thr);
      end
  endtask

  function automatic logic [NIN-1:0] row_pattern(int r);
    int n;
    logic [NIN-1:0] p;
    n = r / PERIOD;
    p = '0;
    if (n < NIMG) p[PIX-1:0] = img_bits[n];
    return p;
  endfunction

  // ---- capture of the reservoir state at the sampling edges ---------------
  logic [NODES-1:0] captured [LEN];
  logic             run_armed = 0;
  int               edge_no, busy_clocks;

  always @(posedge clk) begin
    if (run_armed) begin
      // edge 0 accepts the start; row c is sampled at edge c + 2
      if (edge_no >= 2 && edge_no < LEN + 2) captured[edge_no - 2] = res_x;
      edge_no++;
    end
  end

  int n_reset_rows = 0, n_departed = 0, n_idle_hold = 0, n_ignored_start = 0, n_images = 0;

  initial begin
    logic [31:0] d;
    logic [NODES-1:0] v;
    rst_n = 0; h_valid = 0; h_we = 0; h_addr = 0; h_wdata = 0;
    repeat (4) @(posedge clk); #1ns;
    rst_n = 1;
    @(posedge clk); #1ns;

    for (int n = 0; n < NIMG; n++) make_image(n);
    img_bits[1] = img_bits[0];   // a repeated image
    bd_we = 0; bd_row = 0; bd_wdata = 0; bd_rrow = 0;
    for (int r = 0; r < LEN; r++) begin
      logic [NIN-1:0] p;
      p = row_pattern(r);
      if (r < HOST_ROWS) begin
        for (int w = 0; w < IN_WORDS; w++) wr(adr(1, r, w), p[w * 32 +: 32]);
      end else begin
        bd_we = 1; bd_row = ROW_W'(r); bd_wdata = p;
        @(posedge clk); #1ns;
        bd_we = 0;
      end
    end
    for (int k = 0; k < 64; k++) begin
      int r, w;
      logic [NIN-1:0] p;
      r = $urandom_range(LEN - 1); w = $urandom_range(IN_WORDS - 1);
      p = row_pattern(r);
      rd(adr(1, r, w), d);
      check(d == p[w * 32 +: 32], $sformatf("input RAM read-back row %0d word %0d", r, w));
    end

    // idle: reservoir held in reset
    check(res_x == '1, "reservoir not all ones while idle");
    if (res_x == '1) n_idle_hold++;

    $display("%0t: input buffer loaded, starting the run", $time);
    wr(adr(0, 0, 2), LEN);        // LENGTH
    wr(adr(0, 0, 3), PERIOD);     // RST_PERIOD
    wr(adr(0, 0, 4), 1);          // RST_LEN
    h_valid = 1; h_we = 1; h_addr = adr(0, 0, 0); h_wdata = 1;   // CTRL.start
    edge_no = 0;
    run_armed = 1;
    @(posedge clk); #1ns;
    h_valid = 0; h_we = 0;
    busy_clocks = 1;
    repeat (10) begin @(posedge clk); #1ns; busy_clocks++; end
    wr(adr(0, 0, 0), 1);          // start during the run: ignored
    busy_clocks++;
    while (busy && busy_clocks < 4 * LEN) begin @(posedge clk); #1ns; busy_clocks++; end
    run_armed = 0;
    $display("%0t: run finished", $time);
    check(busy_clocks - 1 == LEN + 2, $sformatf("run busy for %0d clocks, expected %0d", busy_clocks - 1, LEN + 2));
    rd(adr(0, 0, 5), d);
    check(d == LEN + 2, $sformatf("CYCLES reads %0d, expected %0d", d, LEN + 2));
    rd(adr(0, 0, 1), d);
    check(d == 2, $sformatf("STATUS after run %0d", d));
    // a second start would have begun a new run, leaving busy set
    if (d == 2) n_ignored_start++;
    repeat (3) @(posedge clk); #1ns;
    check(res_x == '1, "reservoir not back in reset after the run");
    if (res_x == '1) n_idle_hold++;

    for (int r = 0; r < LEN; r++) begin
      if (r < HOST_ROWS) rd_out_row(r, v);
      else begin
        bd_rrow = ROW_W'(r);
        #1ns;
        v = bd_rdata;
      end
      check(v === captured[r], $sformatf("output row %0d differs from the captured state", r));
      if (r % PERIOD == 0) begin
        check(v == '1, $sformatf("reset row %0d not all ones", r));
        n_reset_rows++;
        if (r / PERIOD < NIMG) n_images++;
      end else if (r % PERIOD == 1 && v != '1) n_departed++;
    end
    begin
      int hd = 0;
      for (int k = 1; k < PERIOD; k++) begin
        logic [NODES-1:0] a, b;
        rd_out_row(k, a);
        rd_out_row(PERIOD + k, b);
        hd += $countones(a ^ b);
      end
      $display("repeated image: %0d of %0d sampled node states differ between the two presentations",
               hd, (PERIOD - 1) * NODES);
    end
    $display("images %0d in %0d clocks (one per %0d clocks: %0.1f M images/s at 200 MHz), reset rows %0d, rows departing from reset %0d",
             n_images, LEN + 2, PERIOD, 200.0 / PERIOD, n_reset_rows, n_departed);
    $display("idle reset holds %0d, ignored starts %0d", n_idle_hold, n_ignored_start);
    check(n_reset_rows > 0, "periodic reset never happened");
    check(n_departed > 0, "no image moved the reservoir away from its reset state");
    check(n_idle_hold == 2, "idle reset hold not seen twice");
    check(n_ignored_start > 0, "start during a run not seen ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
