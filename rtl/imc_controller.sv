// imc_controller: sequencer for normal accesses and the frame filter.
//
// Commands arrive on a valid/ready handshake, one at a time:
//   CMD_WRITE  write one bit at (row, col)
//   CMD_READ   read one bit at (row, col); rdata is valid while done is high
//   CMD_FILTER denoise the whole frame in place with an n x n non-overlap
//              median filter, n = 3 or 5 (ksize)
// Every step is two cycles: a precharge cycle, then a word-line cycle. A write
// or read is one step. The filter is one step per band of n rows, bands taken
// top to bottom, ROWS/n steps in all, with every bank selected and the bit-line
// short S held high throughout. A filter of 240 rows therefore takes 160
// cycles for n = 3 (0.8 us at 200 MHz) and 96 cycles for n = 5.
//
// Timing: the command is accepted at an edge with cmd_valid && cmd_ready; the
// next cycle is the first precharge; done is high for one cycle right after the
// last word-line cycle, and cmd_ready is high in that same cycle, so commands
// can follow back to back. The two-cycle step and the band-by-band repetition
// follow the published design; the command interface is this design's own.
module imc_controller
  import imc_pkg::*;
#(
  parameter int unsigned ROWS = 240,
  parameter int unsigned COLS = 320,
  parameter int unsigned AW   = $clog2(ROWS),
  parameter int unsigned CAW  = $clog2(COLS)
) (
  input  logic           clk,
  input  logic           rst_n,
  // command side
  input  logic           cmd_valid,
  output logic           cmd_ready,
  input  cmd_e           cmd,
  input  logic [AW-1:0]  row,
  input  logic [CAW-1:0] col,
  input  logic           wdata,
  input  ksize_e         ksize,
  output logic           done,
  output logic           busy,
  // array side
  output logic           precharge,
  output logic           wl_en,
  output logic           row_en,
  output logic [AW-1:0]  row_addr,
  output logic           col_en,
  output logic [CAW-1:0] col_addr,
  output logic           we,
  output logic           drv_val,
  output logic           filter_mode,
  output ksize_e         ksize_q,
  output logic           sae
);
  typedef enum logic [1:0] {S_IDLE, S_PRE, S_WL} state_e;

  state_e         state;
  cmd_e           cmd_q;
  logic [AW-1:0]  row_q;
  logic [CAW-1:0] col_q;
  logic           wdata_q;
  logic           last_band;
  int unsigned    n;

  assign n         = kernel_n(ksize_q);
  assign last_band = (32'(row_q) + n >= ROWS);
  assign cmd_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);

  assign precharge   = (state == S_PRE);
  assign wl_en       = (state == S_WL);
  assign filter_mode = busy && (cmd_q == CMD_FILTER);
  assign row_en      = wl_en;
  assign row_addr    = row_q;
  assign col_en      = wl_en && (cmd_q != CMD_FILTER);
  assign col_addr    = col_q;
  assign we          = wl_en && (cmd_q == CMD_WRITE);
  assign drv_val     = wdata_q;
  assign sae         = wl_en && (cmd_q == CMD_READ);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cmd_q   <= CMD_READ;
      row_q   <= '0;
      col_q   <= '0;
      wdata_q <= 1'b0;
      ksize_q <= K3;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          cmd_q   <= cmd;
          row_q   <= (cmd == CMD_FILTER) ? '0 : row;
          col_q   <= col;
          wdata_q <= wdata;
          ksize_q <= ksize;
          state   <= S_PRE;
        end
        S_PRE: state <= S_WL;
        S_WL: begin
          if (cmd_q == CMD_FILTER && !last_band) begin
            row_q <= row_q + AW'(n);
            state <= S_PRE;
          end else begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A command is never dropped: valid stays until ready in a well-behaved source.
  assert property (@(posedge clk) disable iff (!rst_n)
                   cmd_valid && !cmd_ready |=> cmd_valid);
endmodule
