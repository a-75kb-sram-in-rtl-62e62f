// gwl_mux: global word-line multiplexer.
//
// In normal mode each global word line follows its own row-decoder output, so
// exactly one row is enabled. In filter mode the n rows of a band (n = 3 or 5)
// are enabled together: word line r follows the decoder output of the band's
// first row, r - (r mod n). Bands start at row 0, so a frame of 240 rows has
// 80 bands for n = 3 and 48 for n = 5. Enabling n successive word lines is the
// published mechanism; deriving them from the band's first decoder line is this
// design's choice. Combinational. Rows that begin a band for both kernel
// sizes (multiples of 15, row 0 included) follow their own decoder line in
// every mode, so synthesis reduces them to wires.
module gwl_mux
  import imc_pkg::*;
#(
  parameter int unsigned ROWS = 240
) (
  input  logic            filter_mode,
  input  ksize_e          ksize,
  input  logic [ROWS-1:0] dec,
  output logic [ROWS-1:0] gwl
);
  always_comb begin
    for (int unsigned r = 0; r < ROWS; r++) begin
      if (!filter_mode)     gwl[r] = dec[r];
      else if (ksize == K5) gwl[r] = dec[r - (r % 5)];
      else                  gwl[r] = dec[r - (r % 3)];
    end
  end
endmodule
