// column_decoder_tb: every column address (and a few out of range) in read,
// write and filter mode at 320 columns, banks of 15. Expected bank number is
// counted by walking the banks, not by division.
module column_decoder_tb;
  localparam int unsigned COLS = 320, BANK_COLS = 15, NBANKS = 22;
  logic filter_mode, en, we;
  logic [8:0] col;
  logic [NBANKS-1:0] bank_sel, exp_bank;
  logic [COLS-1:0] col_sel, drv_en, exp_col, exp_drv;
  int checks = 0, failures = 0;

  column_decoder dut (.filter_mode, .en, .we, .col, .bank_sel, .col_sel, .drv_en);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int mode = 0; mode < 4; mode++) begin
      for (int a = 0; a < 330; a++) begin
        int b, left;
        filter_mode = (mode == 2);
        en = (mode != 3);
        we = (mode == 1);
        col = 9'(a);
        b = 0; left = a;
        while (left >= BANK_COLS) begin left -= BANK_COLS; b++; end
        exp_bank = '0; exp_col = '0; exp_drv = '0;
        if (filter_mode) exp_bank = '1;
        else if (en && a < COLS) begin
          exp_bank[b] = 1'b1;
          exp_col[a]  = 1'b1;
          if (we) exp_drv[a] = 1'b1;
        end
        #1;
        checks++;
        if (bank_sel !== exp_bank || col_sel !== exp_col || drv_en !== exp_drv) begin
          failures++;
          if (failures < 10) $display("FAIL mode=%0d col=%0d", mode, a);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
