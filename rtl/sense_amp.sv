// sense_amp: read sense amplifier.
//
// At the end of a read's word-line cycle (sae high) it resolves the selected
// column's BL/BLB pair and latches the bit: BLB pulled low means the cell holds
// a 1, BL pulled low a 0. rdata is registered and holds until the next sense.
// The filter mode never uses it, since there the kernel itself decides.
// The published design only names this block; the latch-type behaviour is
// this design's choice.
module sense_amp
  import imc_pkg::*;
#(
  parameter int unsigned COLS = 320
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            sae,
  input  logic [COLS-1:0] col_sel,
  input  line_e           line [COLS],
  output logic            rdata
);
  logic bit_sel;

  always_comb begin
    bit_sel = 1'b0;
    for (int unsigned c = 0; c < COLS; c++) begin
      if (col_sel[c] && line[c] == LINE_BLB_LOW) bit_sel = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   rdata <= 1'b0;
    else if (sae) rdata <= bit_sel;
  end
endmodule
