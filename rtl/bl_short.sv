// bl_short: the BL & BLB short network (transmission gates driven by S).
//
// While S is high the bit lines of n consecutive columns are tied together,
// and separately their complements, so the n x n kernel formed with the n
// raised word lines behaves as a single BL/BLB pair. Columns are grouped from
// column 0 in steps of n (0-2, 3-5, ... for n = 3); with banks 15 columns wide
// no group crosses a bank. With 320 columns and n = 3 the last two columns
// form a group of 2; the published design does not say how that group is
// treated, here it is shorted like the others.
//
// The transmission gates are sized so that tied lines discharge together;
// this model takes that as exact, so the pulling strength of a group is the
// sum of its columns' strengths. Outputs give, for every column, the total
// strengths g0 (pulling BL) and g1 (pulling BLB) of the group it belongs to.
// With S low every column stands alone. Combinational.
module bl_short
  import imc_pkg::*;
#(
  parameter int unsigned COLS = 320,
  parameter int unsigned CW   = 3,
  parameter int unsigned GW   = CW + 2
) (
  input  logic          s,
  input  ksize_e        ksize,
  input  logic [CW-1:0] cnt0 [COLS],
  input  logic [CW-1:0] cnt1 [COLS],
  output logic [GW-1:0] g0   [COLS],
  output logic [GW-1:0] g1   [COLS]
);
  // Group totals for both kernel sizes, with the group members fixed at
  // elaboration; the kernel size only selects between them.
  for (genvar c = 0; c < COLS; c++) begin : g_col
    localparam int unsigned F3 = c - (c % 3);
    localparam int unsigned F5 = c - (c % 5);
    logic [GW-1:0] s3_0, s3_1, s5_0, s5_1;

    always_comb begin
      s3_0 = '0; s3_1 = '0; s5_0 = '0; s5_1 = '0;
      for (int unsigned k = 0; k < 3; k++) begin
        if (F3 + k < COLS) begin
          s3_0 = s3_0 + GW'(cnt0[F3 + k]);
          s3_1 = s3_1 + GW'(cnt1[F3 + k]);
        end
      end
      for (int unsigned k = 0; k < 5; k++) begin
        if (F5 + k < COLS) begin
          s5_0 = s5_0 + GW'(cnt0[F5 + k]);
          s5_1 = s5_1 + GW'(cnt1[F5 + k]);
        end
      end
    end

    always_comb begin
      if (!s) begin
        g0[c] = GW'(cnt0[c]);
        g1[c] = GW'(cnt1[c]);
      end else if (ksize == K5) begin
        g0[c] = s5_0;
        g1[c] = s5_1;
      end else begin
        g0[c] = s3_0;
        g1[c] = s3_1;
      end
    end
  end
endmodule
