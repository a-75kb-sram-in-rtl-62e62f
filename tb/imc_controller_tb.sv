// imc_controller_tb: command sequencing at 240 rows.
// Checks, cycle by cycle, that a write and a read are one precharge cycle
// followed by one word-line cycle with the right strobes and operands; that a
// filter steps through the bands 0, n, 2n, ... with S (filter_mode) held high,
// alternating precharge and word-line cycles; and that it takes exactly
// 2*240/n cycles (160 for 3x3, 96 for 5x5) from acceptance to done.
module imc_controller_tb;
  import imc_pkg::*;
  localparam int unsigned ROWS = 240;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, wdata, done, busy;
  cmd_e cmd;
  logic [7:0] row, row_addr;
  logic [8:0] col, col_addr;
  ksize_e ksize, ksize_q;
  logic precharge, wl_en, row_en, col_en, we, drv_val, filter_mode, sae;
  int checks = 0, failures = 0;

  imc_controller dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .row, .col, .wdata, .ksize,
    .done, .busy, .precharge, .wl_en, .row_en, .row_addr, .col_en, .col_addr, .we, .drv_val,
    .filter_mode, .ksize_q, .sae);

  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(cmd_e c, int r, int cl, bit d, ksize_e k);
    cmd_valid = 1; cmd = c; row = 8'(r); col = 9'(cl); wdata = d; ksize = k;
    chk(cmd_ready, "ready before command");
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic access(cmd_e c, int r, int cl, bit d);
    issue(c, r, cl, d, K3);
    chk(precharge && !wl_en && busy && !cmd_ready, "access precharge cycle");
    @(negedge clk);
    chk(wl_en && !precharge && row_en && row_addr == 8'(r) && !filter_mode, "access word-line cycle");
    chk(col_en && col_addr == 9'(cl), "access column");
    chk(we == (c == CMD_WRITE) && sae == (c == CMD_READ) && (c != CMD_WRITE || drv_val == d), "access strobes");
    @(negedge clk);
    chk(done && cmd_ready && !busy, "access done");
  endtask

  task automatic frame(ksize_e k);
    int n, cycles = 0, band = 0;
    n = (k == K5) ? 5 : 3;
    issue(CMD_FILTER, 17, 5, 0, k);
    cycles = 1;
    while (!done && cycles < 1000) begin
      if (cycles % 2 == 1) chk(precharge && !wl_en && filter_mode && !col_en, "filter precharge");
      else begin
        chk(wl_en && row_en && filter_mode && ksize_q == k && !we && !sae, "filter word-line");
        chk(row_addr == 8'(band * n), $sformatf("band %0d start", band));
        band++;
      end
      @(negedge clk);
      cycles++;
    end
    // cycles counts the edge that raised done
    chk(cycles - 1 == 2 * ROWS / n, $sformatf("filter n=%0d took %0d cycles", n, cycles - 1));
    chk(band == ROWS / n, "band count");
  endtask

  initial begin
    cmd_valid = 0; cmd = CMD_READ; row = 0; col = 0; wdata = 0; ksize = K3;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(cmd_ready && !busy && !precharge && !wl_en, "idle after reset");
    access(CMD_WRITE, 5, 17, 1);
    access(CMD_WRITE, 239, 319, 0);
    access(CMD_READ, 100, 200, 0);
    frame(K3);
    frame(K5);
    access(CMD_READ, 7, 8, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
