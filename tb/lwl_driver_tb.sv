// lwl_driver_tb: random global word lines against bank select and phase; the
// local lines must follow the global ones only when both are high.
module lwl_driver_tb;
  localparam int unsigned ROWS = 240;
  logic [ROWS-1:0] gwl, lwl, exp_lwl;
  logic bank_sel, wl_en;
  int checks = 0, failures = 0;

  lwl_driver #(.ROWS(ROWS)) dut (.gwl, .bank_sel, .wl_en, .lwl);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 200; i++) begin
      for (int w = 0; w < ROWS; w += 32) gwl[w +: 32] = $urandom;
      bank_sel = 1'($urandom); wl_en = 1'($urandom);
      for (int r = 0; r < ROWS; r++) exp_lwl[r] = (bank_sel == 1 && wl_en == 1) ? gwl[r] : 1'b0;
      #1;
      checks++;
      if (lwl !== exp_lwl) begin
        failures++;
        $display("FAIL sel=%0d wl_en=%0d", bank_sel, wl_en);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
