// sense_amp_tb: random line states on 320 columns, one column selected; rdata
// must become 1 exactly when the selected pair has BLB low, only at an edge
// with sae high, and hold otherwise.
module sense_amp_tb;
  import imc_pkg::*;
  localparam int unsigned COLS = 320;
  logic clk = 0, rst_n = 0, sae;
  logic [COLS-1:0] col_sel;
  line_e line [COLS];
  logic rdata;
  bit expected = 0;
  int checks = 0, failures = 0;

  sense_amp dut (.clk, .rst_n, .sae, .col_sel, .line, .rdata);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sae = 0; col_sel = '0;
    for (int c = 0; c < COLS; c++) line[c] = LINE_PRE;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 500; it++) begin
      int sel;
      sel = $urandom % COLS;
      col_sel = '0; col_sel[sel] = 1'b1;
      for (int c = 0; c < COLS; c++) line[c] = line_e'($urandom % 4);
      sae = 1'($urandom);
      if (sae) expected = (line[sel] == LINE_BLB_LOW);
      @(negedge clk);
      checks++;
      if (rdata != expected) begin
        failures++;
        if (failures < 10) $display("FAIL it=%0d col=%0d", it, sel);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
