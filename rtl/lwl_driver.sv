// lwl_driver: local word-line driver of one bank.
//
// A global word line reaches the cells of a bank only while the bank is
// selected and the access is in its word-line cycle (the second of its two
// cycles; the first precharges the bit lines). In filter mode every bank is
// selected, so all 320 columns of the enabled rows take part at once.
// Qualifying the global lines with the bank select follows the published
// architecture; the explicit word-line phase input is this design's choice.
// Combinational.
module lwl_driver #(
  parameter int unsigned ROWS = 240
) (
  input  logic [ROWS-1:0] gwl,
  input  logic            bank_sel,
  input  logic            wl_en,
  output logic [ROWS-1:0] lwl
);
  assign lwl = gwl & {ROWS{bank_sel & wl_en}};
endmodule
