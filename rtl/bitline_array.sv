// bitline_array: the BL/BLB pairs of all columns.
//
// Every access takes two cycles. In the precharge cycle all pairs are charged
// to VDD. In the word-line cycle the raised cells discharge them; the line
// pulled harder falls first and settles the pair (g0 > g1: BL low, a 0 is
// imposed; g1 > g0: BLB low, a 1 is imposed; equal: tie, no decision; both
// zero: the pair stays precharged). A column whose write driver is enabled is
// forced instead, to BLB low for a 1 and BL low for a 0; the driver is
// stronger than any cell. Columns not driven are held precharged by the
// half-select driver, so their cells only see a read.
//
// The settled state is kept until the next precharge. A word-line cycle on a
// pair that was discharged and not precharged again sees the stale level,
// which then acts like a write driver: this is why every access is preceded
// by a precharge. `line` is combinational from the inputs and the kept state
// and is valid during the word-line cycle; it goes to the banks (write-back at
// the closing edge) and to the sense amplifier. Reset leaves all pairs
// precharged. Precharge-then-evaluate follows the published design; the
// abstraction of voltages to four states is this design's.
module bitline_array
  import imc_pkg::*;
#(
  parameter int unsigned COLS = 320,
  parameter int unsigned GW   = 5
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          precharge,
  input  logic          wl_en,
  input  logic [GW-1:0] g0 [COLS],
  input  logic [GW-1:0] g1 [COLS],
  input  logic [COLS-1:0] drv_en,
  input  logic          drv_val,
  output line_e         line [COLS]
);
  line_e            kept  [COLS];
  logic [COLS-1:0]  fresh;           // pair precharged since its last discharge

  always_comb begin
    for (int unsigned c = 0; c < COLS; c++) begin
      if (drv_en[c])                line[c] = drv_val ? LINE_BLB_LOW : LINE_BL_LOW;
      else if (!fresh[c])           line[c] = kept[c];
      else if (g0[c] > g1[c])       line[c] = LINE_BL_LOW;
      else if (g1[c] > g0[c])       line[c] = LINE_BLB_LOW;
      else if (g0[c] != '0)         line[c] = LINE_TIE;
      else                          line[c] = LINE_PRE;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fresh <= '1;
      for (int unsigned c = 0; c < COLS; c++) kept[c] <= LINE_PRE;
    end else if (precharge) begin
      fresh <= '1;
      for (int unsigned c = 0; c < COLS; c++) kept[c] <= LINE_PRE;
    end else if (wl_en) begin
      for (int unsigned c = 0; c < COLS; c++) begin
        if (line[c] != LINE_PRE) begin
          fresh[c] <= 1'b0;
          kept[c]  <= line[c];
        end
      end
    end
  end

  // Precharge and word-line phases never overlap.
  assert property (@(posedge clk) disable iff (!rst_n) !(precharge && wl_en));
endmodule
