// imc_denoise_sram_full_tb: end-to-end test of imc_denoise_sram at its full size (240 rows, 320
// columns, 22 banks), default parameters.
//
// Loads a synthetic event-camera frame (sparse salt noise plus solid
// rectangular "objects") one bit per write command, reads it all back, runs
// the in-memory filter with a 3x3 kernel, reads the frame back and compares it
// with a software non-overlap median filter; then repeats with a new frame and
// a 5x5 kernel. The reference works on the frame held in the testbench: for
// every n x n block (n x m at the right edge) count the ones; more ones than
// zeros makes the whole block 1, more zeros makes it 0, a tie leaves it.
// The filter's latency must be 2*ROWS/n cycles. Every mechanism is counted
// and must occur: writes, reads, 3x3 and 5x5 filter passes, kernels with
// flipped minority pixels, kernels left untouched, back-to-back commands.
module imc_denoise_sram_full_tb;
  import imc_pkg::*;
  localparam int unsigned ROWS = 240;
  localparam int unsigned COLS = 320;

  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, wdata, done, busy, rdata;
  cmd_e cmd;
  logic [$clog2(ROWS)-1:0] row;
  logic [$clog2(COLS)-1:0] col;
  ksize_e ksize;

  bit frame    [ROWS][COLS];
  bit expected [ROWS][COLS];
  int checks = 0, failures = 0;
  int n_write = 0, n_read = 0, n_f3 = 0, n_f5 = 0, n_flip_kernels = 0, n_clean_kernels = 0;
  int n_tie_kernels = 0, n_back_to_back = 0, n_flipped_pixels = 0;
  int latency;

  imc_denoise_sram dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .row, .col, .wdata, .ksize, .done, .busy, .rdata
  );

  always #5 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Issue one command and wait for its done; returns the cycles from the
  // accepting edge to the edge that raised done.
  task automatic run_cmd(cmd_e c, int r, int cl, bit d, ksize_e k, output int cycles);
    while (!cmd_ready) @(negedge clk);
    if (done) n_back_to_back++;
    cmd_valid = 1; cmd = c; row = r[$bits(row)-1:0]; col = cl[$bits(col)-1:0]; wdata = d; ksize = k;
    @(negedge clk);
    cmd_valid = 0;
    cycles = 1;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
    cycles--;
  endtask

  task automatic make_frame(int seed_objects, int noise_per_mille);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        frame[r][c] = ($urandom % 1000) < noise_per_mille;
    for (int o = 0; o < seed_objects; o++) begin
      int r0, c0, h, w;
      r0 = $urandom % ROWS; c0 = $urandom % COLS;
      h = 2 + $urandom % (ROWS / 4); w = 2 + $urandom % (COLS / 4);
      for (int r = r0; r < r0 + h && r < ROWS; r++)
        for (int c = c0; c < c0 + w && c < COLS; c++)
          frame[r][c] = 1;
    end
  endtask

  task automatic load_frame();
    int cy;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        run_cmd(CMD_WRITE, r, c, frame[r][c], K3, cy);
        n_write++;
        checks++;
        if (cy != 2) begin failures++; $display("FAIL write latency %0d", cy); end
      end
  endtask

  task automatic read_and_compare(string what);
    int cy, bad = 0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        run_cmd(CMD_READ, r, c, 0, K3, cy);
        n_read++;
        checks++;
        if (rdata != frame[r][c] || cy != 2) begin
          failures++;
          if (bad++ < 10) $display("FAIL %s (%0d,%0d): read %0d expected %0d", what, r, c, rdata, frame[r][c]);
        end
      end
  endtask

  // Software non-overlap median filter on frame[], in place.
  task automatic reference_nomf(int n);
    for (int r0 = 0; r0 < ROWS; r0 += n)
      for (int c0 = 0; c0 < COLS; c0 += n) begin
        int ones = 0, zeros = 0, flips = 0;
        for (int r = r0; r < r0 + n && r < ROWS; r++)
          for (int c = c0; c < c0 + n && c < COLS; c++)
            if (frame[r][c]) ones++; else zeros++;
        if (ones == zeros) n_tie_kernels++;
        for (int r = r0; r < r0 + n && r < ROWS; r++)
          for (int c = c0; c < c0 + n && c < COLS; c++) begin
            bit v;
            v = (ones > zeros) ? 1'b1 : (zeros > ones) ? 1'b0 : frame[r][c];
            if (v != frame[r][c]) flips++;
            frame[r][c] = v;
          end
        if (flips != 0) n_flip_kernels++; else n_clean_kernels++;
        n_flipped_pixels += flips;
      end
  endtask

  task automatic filter_frame(ksize_e k);
    int n, flips_before;
    n = (k == K5) ? 5 : 3;
    run_cmd(CMD_FILTER, 0, 0, 0, k, latency);
    if (k == K5) n_f5++; else n_f3++;
    checks++;
    if (latency != 2 * ROWS / n) begin
      failures++;
      $display("FAIL %0dx%0d filter took %0d cycles, expected %0d", n, n, latency, 2 * ROWS / n);
    end else begin
      // n*n-1 additions per kernel is the usual way to count operations of a
      // majority filter; the result is quoted at a 200 MHz clock.
      real ops, gops;
      ops  = real'(n * n - 1) * (real'(ROWS) / n) * (real'(COLS) / n);
      gops = ops / (latency * 5.0e-9) / 1.0e9;
      $display("%0dx%0d filter of %0dx%0d frame: %0d cycles (%0d ns at 200 MHz), %0.1f GOPS",
               n, n, COLS, ROWS, latency, latency * 5, gops);
    end
    flips_before = n_flipped_pixels;
    reference_nomf(n);
    $display("fraction of pixels flipped by the %0dx%0d filter: %0.4f", n, n,
             real'(n_flipped_pixels - flips_before) / (ROWS * COLS));
  endtask

  task automatic need(int count, string what);
    checks++;
    if (count == 0) begin failures++; $display("FAIL mechanism never exercised: %s", what); end
    else $display("mechanism %s: %0d", what, count);
  endtask

  initial begin
    cmd_valid = 0; cmd = CMD_READ; row = '0; col = '0; wdata = 0; ksize = K3;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // frame 1, 3x3 kernel
    make_frame(6, 60);

    load_frame();
    read_and_compare("frame 1 load");
    filter_frame(K3);
    read_and_compare("frame 1 after 3x3 filter");

    // frame 2, 5x5 kernel
    make_frame(6, 60);
    load_frame();
    filter_frame(K5);
    read_and_compare("frame 2 after 5x5 filter");

    need(n_write, "single-bit writes");
    need(n_read, "single-bit reads");
    need(n_f3, "3x3 filter frames");
    need(n_f5, "5x5 filter frames");
    need(n_flip_kernels, "kernels with minority pixels flipped");
    need(n_clean_kernels, "kernels left unchanged");
    need(n_back_to_back, "back-to-back commands");

    $display("pixels flipped by the filters: %0d", n_flipped_pixels);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
