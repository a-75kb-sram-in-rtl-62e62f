// bitline_array_tb: precharge / race / write-driver behaviour of the bit lines.
// Eight columns. Each word-line cycle gets random strengths and driver enables;
// the expected line state is worked out from the rules (driver first, then a
// stale level if the pair was not precharged, then the race). Sequences with
// and without a precharge in between are mixed.
module bitline_array_tb;
  import imc_pkg::*;
  localparam int unsigned COLS = 8, GW = 5;
  logic clk = 0, rst_n = 0;
  logic precharge, wl_en, drv_val;
  logic [GW-1:0] g0 [COLS];
  logic [GW-1:0] g1 [COLS];
  logic [COLS-1:0] drv_en;
  line_e line [COLS];
  line_e ref_kept [COLS];
  bit    ref_fresh [COLS];
  int checks = 0, failures = 0;
  int n_stale = 0, n_race = 0, n_drive = 0, n_tie = 0;

  bitline_array #(.COLS(COLS), .GW(GW)) dut (.clk, .rst_n, .precharge, .wl_en, .g0, .g1, .drv_en, .drv_val, .line);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    precharge = 0; wl_en = 0; drv_en = '0; drv_val = 0;
    for (int c = 0; c < COLS; c++) begin g0[c] = '0; g1[c] = '0; ref_kept[c] = LINE_PRE; ref_fresh[c] = 1; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      // optional precharge
      if ($urandom % 4 != 0) begin
        precharge = 1; wl_en = 0;
        @(negedge clk);
        precharge = 0;
        for (int c = 0; c < COLS; c++) begin ref_kept[c] = LINE_PRE; ref_fresh[c] = 1; end
      end
      wl_en = 1;
      drv_val = 1'($urandom);
      drv_en = COLS'($urandom) & COLS'($urandom);
      for (int c = 0; c < COLS; c++) begin
        g0[c] = GW'($urandom % 4);
        g1[c] = GW'($urandom % 4);
      end
      #1;
      for (int c = 0; c < COLS; c++) begin
        line_e e;
        if (drv_en[c]) begin e = drv_val ? LINE_BLB_LOW : LINE_BL_LOW; n_drive++; end
        else if (!ref_fresh[c]) begin e = ref_kept[c]; n_stale++; end
        else begin
          n_race++;
          if (g0[c] == 0 && g1[c] == 0) e = LINE_PRE;
          else if (g0[c] == g1[c]) begin e = LINE_TIE; n_tie++; end
          else if (g0[c] > g1[c]) e = LINE_BL_LOW;
          else e = LINE_BLB_LOW;
        end
        checks++;
        if (line[c] != e) begin
          failures++;
          if (failures < 10) $display("FAIL it=%0d col %0d: %s expected %s", it, c, line[c].name(), e.name());
        end
        if (e != LINE_PRE) begin ref_fresh[c] = 0; ref_kept[c] = e; end
      end
      @(negedge clk);
      wl_en = 0;
    end
    checks++;
    if (n_stale == 0 || n_race == 0 || n_drive == 0 || n_tie == 0) begin
      failures++;
      $display("FAIL coverage stale=%0d race=%0d drive=%0d tie=%0d", n_stale, n_race, n_drive, n_tie);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
