// row_decoder: binary row address to one-hot row select.
//
// Drives the global word-line multiplexer. In normal mode the address is the
// row to read or write; in filter mode it is the first row of the band of n
// rows being filtered. Purely combinational: dec[addr] = en, all other bits 0.
// An address at or beyond ROWS selects nothing. The decoding itself is the
// obvious one; the published design only names the block.
module row_decoder #(
  parameter int unsigned ROWS = 240,
  parameter int unsigned AW   = $clog2(ROWS)
) (
  input  logic            en,
  input  logic [AW-1:0]   addr,
  output logic [ROWS-1:0] dec
);
  always_comb begin
    for (int unsigned r = 0; r < ROWS; r++) begin
      dec[r] = en && (addr == AW'(r));
    end
  end
endmodule
