// imc_pkg: types and constants shared by the in-memory denoising SRAM.
//
// The array is 320 columns by 240 rows of single-bit cells, split into banks of
// 15 columns (the last bank holds the remaining 5). These sizes, the kernel
// sizes 3 and 5 and the two-cycle access are the published design's; the
// encodings below are this design's own.
package imc_pkg;

  // Kernel size of the non-overlap median filter.
  typedef enum logic {
    K3 = 1'b0,
    K5 = 1'b1
  } ksize_e;

  // Commands accepted by the controller.
  typedef enum logic [1:0] {
    CMD_WRITE  = 2'd0,
    CMD_READ   = 2'd1,
    CMD_FILTER = 2'd2
  } cmd_e;

  // Settled state of one BL/BLB pair after a word-line cycle.
  //   LINE_PRE     : both lines still at VDD (precharged, nothing pulled them)
  //   LINE_BL_LOW  : BL won the discharge race, the pair imposes a 0 on its cells
  //   LINE_BLB_LOW : BLB won the race, the pair imposes a 1
  //   LINE_TIE     : both pulled equally hard, no decision, cells keep their value
  typedef enum logic [1:0] {
    LINE_PRE     = 2'b00,
    LINE_BL_LOW  = 2'b01,
    LINE_BLB_LOW = 2'b10,
    LINE_TIE     = 2'b11
  } line_e;

  function automatic int unsigned kernel_n(ksize_e k);
    return (k == K5) ? 5 : 3;
  endfunction

endpackage
