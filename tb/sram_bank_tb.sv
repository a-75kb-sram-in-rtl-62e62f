// sram_bank_tb: one bank of 240 rows x 15 columns against a shadow array.
// Fills the bank through the line inputs (write), then raises random sets of
// word lines and compares the per-column 0/1 counts with counts taken from the
// shadow (at most five consecutive lines, as the array uses); checks that bank select and the word-line phase gate everything, that
// LINE_PRE and LINE_TIE leave cells alone, and that a resolved line is written
// into every cell on every raised word line (the in-memory filter write-back).
module sram_bank_tb;
  import imc_pkg::*;
  localparam int unsigned ROWS = 240, NCOLS = 15, CW = 3;
  logic clk = 0;
  logic [ROWS-1:0] gwl;
  logic bank_sel, wl_en;
  line_e line [NCOLS];
  logic [CW-1:0] cnt0 [NCOLS];
  logic [CW-1:0] cnt1 [NCOLS];
  bit shadow [ROWS][NCOLS];
  int checks = 0, failures = 0;

  sram_bank dut (.clk, .gwl, .bank_sel, .wl_en, .line, .cnt0, .cnt1);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic set_lines(line_e v);
    for (int c = 0; c < NCOLS; c++) line[c] = v;
  endtask

  // Compare the counts with the shadow for the current gwl / select / phase.
  task automatic check_counts(string what);
    #1;
    for (int c = 0; c < NCOLS; c++) begin
      int e0 = 0, e1 = 0;
      if (bank_sel && wl_en)
        for (int r = 0; r < ROWS; r++) if (gwl[r]) begin
          if (shadow[r][c]) e1++; else e0++;
        end
      checks++;
      if (cnt0[c] != CW'(e0) || cnt1[c] != CW'(e1)) begin
        failures++;
        $display("FAIL %s col %0d: cnt0=%0d/%0d cnt1=%0d/%0d", what, c, cnt0[c], e0, cnt1[c], e1);
      end
    end
  endtask

  // One word-line cycle with the current lines; the shadow is updated as a
  // real array would be.
  task automatic cycle();
    @(posedge clk);
    if (bank_sel && wl_en)
      for (int r = 0; r < ROWS; r++) if (gwl[r])
        for (int c = 0; c < NCOLS; c++) begin
          if (line[c] == LINE_BL_LOW)  shadow[r][c] = 0;
          if (line[c] == LINE_BLB_LOW) shadow[r][c] = 1;
        end
    @(negedge clk);
  endtask

  initial begin
    gwl = '0; bank_sel = 1; wl_en = 1; set_lines(LINE_PRE);
    @(negedge clk);
    // fill
    for (int r = 0; r < ROWS; r++) begin
      gwl = '0; gwl[r] = 1'b1;
      for (int c = 0; c < NCOLS; c++) line[c] = ($urandom % 2 == 1) ? LINE_BLB_LOW : LINE_BL_LOW;
      cycle();
    end
    // single-row reads
    set_lines(LINE_PRE);
    for (int r = 0; r < ROWS; r += 7) begin
      gwl = '0; gwl[r] = 1'b1;
      check_counts($sformatf("read row %0d", r));
      cycle();
    end
    // random multi-row sets, including kernels of 3 and 5 rows
    for (int i = 0; i < 40; i++) begin
      int base;
      base = ($urandom % 48) * 5;
      gwl = '0;
      if (i % 3 == 0)      for (int j = 0; j < 3; j++) gwl[(base / 3) * 3 + j] = 1'b1;
      else if (i % 3 == 1) for (int j = 0; j < 5; j++) gwl[base + j] = 1'b1;
      else begin
        int s0;
        s0 = $urandom % (ROWS - 4);
        for (int j = 0; j < 5; j++) gwl[s0 + j] = 1'($urandom);
      end
      check_counts($sformatf("set %0d", i));
    end
    // gating by bank select and phase
    gwl = '0; for (int j = 100; j < 105; j++) gwl[j] = 1'($urandom);
    bank_sel = 0; check_counts("bank_sel low");
    set_lines(LINE_BLB_LOW); cycle();
    bank_sel = 1; wl_en = 0; check_counts("wl_en low");
    set_lines(LINE_BL_LOW); cycle();
    wl_en = 1; set_lines(LINE_PRE); check_counts("after gated writes");
    // PRE and TIE keep the cells
    set_lines(LINE_TIE); cycle();
    check_counts("after tie");
    // kernel write-back: rows 9..13 raised, alternate columns forced to 1 / 0
    gwl = '0; for (int j = 9; j < 14; j++) gwl[j] = 1'b1;
    for (int c = 0; c < NCOLS; c++) line[c] = (c % 2) ? LINE_BLB_LOW : LINE_BL_LOW;
    cycle();
    set_lines(LINE_PRE);
    check_counts("after kernel write");
    for (int c = 0; c < NCOLS; c++) begin
      checks++;
      if ((c % 2 == 1 && cnt1[c] != 5) || (c % 2 == 0 && cnt0[c] != 5)) begin
        failures++;
        $display("FAIL kernel write col %0d", c);
      end
    end
    // everything still consistent row by row
    for (int r = 0; r < ROWS; r++) begin
      gwl = '0; gwl[r] = 1'b1;
      check_counts($sformatf("final row %0d", r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
