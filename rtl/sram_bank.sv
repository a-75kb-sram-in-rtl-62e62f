// sram_bank: one bank of bitcells with its local word-line driver.
//
// NCOLS columns by ROWS rows of single-bit cells (15 x 240 in all banks but
// the last, which has 5 columns). Each cell follows the 6T convention where a
// stored 0 pulls the bit line BL low and a stored 1 pulls the complement BLB
// low once its word line is raised.
//
// The analog discharge is abstracted as counts: for every column the bank
// reports cnt0, the number of cells on raised local word lines that store 0
// (the strength pulling BL), and cnt1, the number storing 1 (pulling BLB).
// The bit-line network outside the bank turns these into a settled line state
// per column, fed back on `line`. At the clock edge that ends the word-line
// cycle every cell on a raised word line takes the value its column's lines
// impose: 0 for LINE_BL_LOW, 1 for LINE_BLB_LOW, unchanged for LINE_PRE and
// LINE_TIE. One mechanism thus covers a read (a single cell wins against
// precharged lines and keeps its value), a write (the driver forces the
// lines), and the in-memory filter (the majority of an n x n kernel wins and
// the minority cells flip).
//
// At most KMAX = 5 word lines are ever raised together (a 5 x 5 kernel), and
// they are consecutive. The bank finds the first raised line and works on the
// KMAX rows from there, so the cells are a plain memory with KMAX read and
// KMAX write ports; raised lines outside that window are not supported (an
// assertion flags them). This is the model's choice, not a circuit property.
//
// The cells have no reset, like any SRAM. Mismatch-induced wrong decisions,
// which the published design reports only below 1.2 V, are not modelled.
module sram_bank
  import imc_pkg::*;
#(
  parameter int unsigned ROWS  = 240,
  parameter int unsigned NCOLS = 15,
  parameter int unsigned KMAX  = 5,
  parameter int unsigned CW    = $clog2(KMAX + 1),
  parameter int unsigned AW    = $clog2(ROWS)
) (
  input  logic                clk,
  input  logic [ROWS-1:0]     gwl,
  input  logic                bank_sel,
  input  logic                wl_en,
  input  line_e               line [NCOLS],
  output logic [CW-1:0]       cnt0 [NCOLS],
  output logic [CW-1:0]       cnt1 [NCOLS]
);
  logic [ROWS-1:0]  lwl;
  logic [NCOLS-1:0] cells [ROWS];

  logic [AW-1:0]    first;
  logic [AW-1:0]    addr   [KMAX];
  logic [KMAX-1:0]  active;
  logic [NCOLS-1:0] word   [KMAX];
  logic [NCOLS-1:0] update [KMAX];

  lwl_driver #(.ROWS(ROWS)) u_lwl (
    .gwl     (gwl),
    .bank_sel(bank_sel),
    .wl_en   (wl_en),
    .lwl     (lwl)
  );

  // First raised local word line (0 when none is raised).
  always_comb begin
    first = '0;
    for (int r = ROWS - 1; r >= 0; r--) begin
      if (lwl[r]) first = AW'(r);
    end
  end

  // Read the window of KMAX rows from the first raised line.
  always_comb begin
    for (int unsigned k = 0; k < KMAX; k++) begin
      if (32'(first) + k < ROWS) begin
        addr[k]   = first + AW'(k);
        active[k] = lwl[32'(first) + k];
      end else begin
        addr[k]   = first;
        active[k] = 1'b0;
      end
      word[k] = cells[addr[k]];
    end
  end

  // Discharge strengths per column.
  always_comb begin
    for (int unsigned c = 0; c < NCOLS; c++) begin
      cnt0[c] = '0;
      cnt1[c] = '0;
      for (int unsigned k = 0; k < KMAX; k++) begin
        if (active[k]) begin
          if (word[k][c]) cnt1[c] = cnt1[c] + CW'(1);
          else            cnt0[c] = cnt0[c] + CW'(1);
        end
      end
    end
  end

  // Value each raised row takes at the end of the word-line cycle.
  always_comb begin
    for (int unsigned k = 0; k < KMAX; k++) begin
      for (int unsigned c = 0; c < NCOLS; c++) begin
        unique case (line[c])
          LINE_BL_LOW:  update[k][c] = 1'b0;
          LINE_BLB_LOW: update[k][c] = 1'b1;
          default:      update[k][c] = word[k][c];
        endcase
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int unsigned k = 0; k < KMAX; k++) begin
      if (active[k]) cells[addr[k]] <= update[k];
    end
  end

  // Raised word lines must all lie in the KMAX-row window from the first one.
  always_comb begin
    for (int unsigned r = 0; r < ROWS; r++) begin
      if (lwl[r]) assert (r < 32'(first) + KMAX)
        else $error("sram_bank: word line %0d raised outside the %0d-row window", r, KMAX);
    end
  end
endmodule
