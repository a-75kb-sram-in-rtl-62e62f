// imc_denoise_sram: 320 x 240 SRAM with in-memory non-overlap median filtering.
//
// Holds one binary frame from an event camera (one bit per pixel, row = image
// line, column = pixel in the line). Normal mode writes or reads one bit per
// two-cycle access. Filter mode denoises the whole frame in place: for each
// band of n rows (n = 3 or 5) the n word lines are raised together in all
// banks, the bit lines of each group of n columns are shorted together, and
// the majority of every n x n kernel wins the bit-line discharge race and is
// written back into all n*n cells. Each band takes two cycles, so a frame
// takes 2*ROWS/n cycles.
//
// Structure: imc_controller sequences the steps; row_decoder and gwl_mux pick
// the word lines; column_decoder picks the bank, the column and the write
// driver; NBANKS sram_bank instances (each with its lwl_driver) hold the
// cells; bl_short ties kernel columns; bitline_array resolves the race,
// precharge and write drivers; sense_amp latches read data.
//
// Interface: commands on cmd_valid/cmd_ready (see imc_controller); done pulses
// for one cycle when a command finishes; rdata is valid from the done of a
// read until the next read.
module imc_denoise_sram
  import imc_pkg::*;
#(
  parameter int unsigned ROWS      = 240,
  parameter int unsigned COLS      = 320,
  parameter int unsigned BANK_COLS = 15,
  parameter int unsigned NBANKS    = (COLS + BANK_COLS - 1) / BANK_COLS,
  parameter int unsigned AW        = $clog2(ROWS),
  parameter int unsigned CAW       = $clog2(COLS)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           cmd_valid,
  output logic           cmd_ready,
  input  cmd_e           cmd,
  input  logic [AW-1:0]  row,
  input  logic [CAW-1:0] col,
  input  logic           wdata,
  input  ksize_e         ksize,
  output logic           done,
  output logic           busy,
  output logic           rdata
);
  localparam int unsigned CW = 3;  // counts up to 5 cells per column
  localparam int unsigned GW = CW + 2;  // up to 25 cells per kernel

  logic           precharge, wl_en, row_en, col_en, we, drv_val, filter_mode, sae;
  logic [AW-1:0]  row_addr;
  logic [CAW-1:0] col_addr;
  ksize_e         ksize_q;

  logic [ROWS-1:0]   dec, gwl;
  logic [NBANKS-1:0] bank_sel;
  logic [COLS-1:0]   col_sel, drv_en;
  logic [CW-1:0]     cnt0 [COLS];
  logic [CW-1:0]     cnt1 [COLS];
  logic [GW-1:0]     g0   [COLS];
  logic [GW-1:0]     g1   [COLS];
  line_e             line [COLS];

  imc_controller #(.ROWS(ROWS), .COLS(COLS)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .row, .col, .wdata, .ksize,
    .done, .busy, .precharge, .wl_en, .row_en, .row_addr, .col_en, .col_addr,
    .we, .drv_val, .filter_mode, .ksize_q, .sae
  );

  row_decoder #(.ROWS(ROWS)) u_rowdec (.en(row_en), .addr(row_addr), .dec(dec));

  gwl_mux #(.ROWS(ROWS)) u_gwl (.filter_mode(filter_mode), .ksize(ksize_q), .dec(dec), .gwl(gwl));

  column_decoder #(.COLS(COLS), .BANK_COLS(BANK_COLS)) u_coldec (
    .filter_mode(filter_mode), .en(col_en), .we(we), .col(col_addr),
    .bank_sel(bank_sel), .col_sel(col_sel), .drv_en(drv_en)
  );

  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    localparam int unsigned FIRST = b * BANK_COLS;
    localparam int unsigned NC    = (COLS - FIRST < BANK_COLS) ? COLS - FIRST : BANK_COLS;
    line_e         bline [NC];
    logic [CW-1:0] bcnt0 [NC];
    logic [CW-1:0] bcnt1 [NC];

    always_comb begin
      for (int unsigned c = 0; c < NC; c++) bline[c] = line[FIRST + c];
    end
    for (genvar c = 0; c < NC; c++) begin : g_col
      assign cnt0[FIRST + c] = bcnt0[c];
      assign cnt1[FIRST + c] = bcnt1[c];
    end

    sram_bank #(.ROWS(ROWS), .NCOLS(NC), .CW(CW)) u_bank (
      .clk, .gwl(gwl), .bank_sel(bank_sel[b]), .wl_en(wl_en),
      .line(bline), .cnt0(bcnt0), .cnt1(bcnt1)
    );
  end

  bl_short #(.COLS(COLS), .CW(CW), .GW(GW)) u_short (
    .s(filter_mode), .ksize(ksize_q), .cnt0(cnt0), .cnt1(cnt1), .g0(g0), .g1(g1)
  );

  bitline_array #(.COLS(COLS), .GW(GW)) u_bitlines (
    .clk, .rst_n, .precharge, .wl_en, .g0, .g1, .drv_en, .drv_val, .line
  );

  sense_amp #(.COLS(COLS)) u_sa (
    .clk, .rst_n, .sae, .col_sel, .line, .rdata
  );
endmodule
