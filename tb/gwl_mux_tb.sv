// gwl_mux_tb: checks the global word-line multiplexer at 240 rows.
// Normal mode: the decoder vector passes unchanged (random vectors). Filter
// mode: for every band start b (multiple of n) the decoder line b alone must
// raise exactly rows b .. b+n-1; a decoder line inside a band raises nothing.
module gwl_mux_tb;
  import imc_pkg::*;
  localparam int unsigned ROWS = 240;
  logic            filter_mode;
  ksize_e          ksize;
  logic [ROWS-1:0] dec, gwl, exp_gwl;
  int checks = 0, failures = 0;

  gwl_mux #(.ROWS(ROWS)) dut (.filter_mode, .ksize, .dec, .gwl);

  task automatic cmp(string what);
    #1;
    checks++;
    if (gwl !== exp_gwl) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    filter_mode = 0; ksize = K3;
    for (int i = 0; i < 50; i++) begin
      for (int w = 0; w < ROWS; w += 32) dec[w +: 32] = $urandom;
      exp_gwl = dec;
      cmp("normal");
    end
    filter_mode = 1;
    for (int k = 0; k < 2; k++) begin
      int n;
      ksize = k ? K5 : K3;
      n = k ? 5 : 3;
      for (int b = 0; b < ROWS; b++) begin
        dec = '0; dec[b] = 1'b1;
        exp_gwl = '0;
        if (b % n == 0) for (int j = 0; j < n; j++) exp_gwl[b + j] = 1'b1;
        cmp($sformatf("filter n=%0d row %0d", n, b));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
