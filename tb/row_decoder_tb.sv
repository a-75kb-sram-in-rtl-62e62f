// row_decoder_tb: exhaustive check of the row decoder at 240 rows.
// Every 8-bit address with enable high and low; the expected vector is built
// by setting a single bit when the address is in range.
module row_decoder_tb;
  localparam int unsigned ROWS = 240;
  logic            en;
  logic [7:0]      addr;
  logic [ROWS-1:0] dec, exp_dec;
  int checks = 0, failures = 0;

  row_decoder #(.ROWS(ROWS)) dut (.en, .addr, .dec);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++) begin
      for (int a = 0; a < 256; a++) begin
        en = e[0]; addr = 8'(a);
        exp_dec = '0;
        if (e == 1 && a < ROWS) exp_dec[a] = 1'b1;
        #1;
        checks++;
        if (dec !== exp_dec) begin
          failures++;
          $display("FAIL en=%0d addr=%0d", e, a);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
