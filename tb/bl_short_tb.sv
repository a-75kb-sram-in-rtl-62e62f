// bl_short_tb: the BL/BLB short network at 320 columns.
// Random per-column strengths; with S low every column must see only its own
// strengths; with S high it must see the sums over its kernel group. The
// expected groups are written out from the group number c / n, including the
// two-column group at the right edge for n = 3.
module bl_short_tb;
  import imc_pkg::*;
  localparam int unsigned COLS = 320, CW = 3, GW = 5;
  logic s;
  ksize_e ksize;
  logic [CW-1:0] cnt0 [COLS];
  logic [CW-1:0] cnt1 [COLS];
  logic [GW-1:0] g0 [COLS];
  logic [GW-1:0] g1 [COLS];
  int checks = 0, failures = 0;
  int sum0 [COLS];
  int sum1 [COLS];

  bl_short dut (.s, .ksize, .cnt0, .cnt1, .g0, .g1);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 30; it++) begin
      int n;
      s = (it % 3 != 0);
      ksize = (it % 2) ? K5 : K3;
      n = (ksize == K5) ? 5 : 3;
      for (int c = 0; c < COLS; c++) begin
        cnt0[c] = CW'($urandom % 6);
        cnt1[c] = CW'($urandom % 6);
      end
      // group totals, accumulated by group number
      for (int c = 0; c < COLS; c++) begin sum0[c] = 0; sum1[c] = 0; end
      for (int c = 0; c < COLS; c++) begin
        sum0[c / n] += cnt0[c];
        sum1[c / n] += cnt1[c];
      end
      #1;
      for (int c = 0; c < COLS; c++) begin
        int e0, e1;
        e0 = s ? sum0[c / n] : cnt0[c];
        e1 = s ? sum1[c / n] : cnt1[c];
        checks++;
        if (g0[c] != GW'(e0) || g1[c] != GW'(e1)) begin
          failures++;
          if (failures < 10) $display("FAIL it=%0d s=%0d n=%0d col %0d: %0d/%0d %0d/%0d", it, s, n, c, g0[c], e0, g1[c], e1);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
