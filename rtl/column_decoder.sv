// column_decoder: column decoder with bit-line write and half-select drivers.
//
// In normal mode the column address selects one column (col_sel, one-hot) and
// the bank that holds it (bank index = column / BANK_COLS). For a write the
// selected column's write driver is enabled (drv_en), forcing the data and its
// complement onto BL and BLB: a single bit is written per access, since event
// cameras produce isolated pixels. All other columns of the bank are held at
// VDD by the half-select driver, which in this model is simply "not driven".
// In filter mode every bank is selected and no driver is enabled, so all
// columns evaluate their kernels in parallel. Addresses at or beyond COLS
// select nothing. Combinational.
module column_decoder #(
  parameter int unsigned COLS      = 320,
  parameter int unsigned BANK_COLS = 15,
  parameter int unsigned NBANKS    = (COLS + BANK_COLS - 1) / BANK_COLS,
  parameter int unsigned CAW       = $clog2(COLS)
) (
  input  logic              filter_mode,
  input  logic              en,
  input  logic              we,
  input  logic [CAW-1:0]    col,
  output logic [NBANKS-1:0] bank_sel,
  output logic [COLS-1:0]   col_sel,
  output logic [COLS-1:0]   drv_en
);
  always_comb begin
    for (int unsigned c = 0; c < COLS; c++) begin
      col_sel[c] = en && !filter_mode && (col == CAW'(c));
    end
    drv_en = we ? col_sel : '0;
    for (int unsigned b = 0; b < NBANKS; b++) begin
      bank_sel[b] = filter_mode ||
                    (en && (32'(col) < COLS) && (col >= CAW'(b * BANK_COLS)) && (col < CAW'((b + 1) * BANK_COLS)));
    end
  end
endmodule
