// pruned_dct2d -- 2-D pruned approximate DCT of 8x8 blocks, 4x4 output.
//
// Computes B' = T4 * A * T4^T for each 8x8 block A, where T4 holds the four
// low-frequency rows of the modified rounded DCT. The twelve high-frequency
// rows and columns are never computed, so the 2-D transform costs
// 8 row passes + 4 column passes = 12 x 10 = 120 additions per block.
//
// Structure (separable): a row unit (pruned_dct1d) turns each 8-sample row
// into 4 coefficients; a ping-pong transpose buffer collects the 8x4 result;
// a column unit (a second pruned_dct1d, 3 bits wider) transforms each of the
// 4 columns of 8 values, producing one column of B' per cycle.
//
// Interface: in_valid/in_row carry one image row (8 signed IN_W-bit samples)
// per cycle; the 8 rows of a block come in order, top row first, and may be
// separated by idle cycles. out_valid/out_col/out_coef give column j of B'
// (out_coef[k] = B'[k][j], signed IN_W+6 bits, exact, unscaled) for
// j = 0..3 on four consecutive cycles.
//
// Timing: one block per 8 cycles at full input rate (a 288 MHz clock gives
// 36 M blocks/s). Column 0 of a block leaves 3 cycles after the clock edge
// that samples its 8th row. The separable structure, the two 1-D units, the
// transpose buffer and the 10-adder network come from the paper; row-
// parallel input, the output order, the widths and the latency are this
// design's choices. Scaling by D4 is left to the quantiser.
module pruned_dct2d
  import dct_pkg::*;
#(
  parameter int unsigned IN_W = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic signed [IN_W-1:0]      in_row [N_PTS],
  output logic                        out_valid,
  output logic [1:0]                  out_col,
  output logic signed [IN_W+2*GROWTH-1:0] out_coef [N_KEEP]
);

  localparam int unsigned MID_W = IN_W + GROWTH;

  logic                     row_valid;
  logic signed [MID_W-1:0]  row_coef [N_KEEP];
  logic                     col_valid;
  logic signed [MID_W-1:0]  col_data [N_PTS];
  logic [1:0]               col_idx;

  pruned_dct1d #(.IN_W(IN_W)) u_row (
    .clk, .rst_n,
    .in_valid (in_valid),
    .x        (in_row),
    .out_valid(row_valid),
    .X        (row_coef)
  );

  transpose_buffer #(.W(MID_W)) u_tbuf (
    .clk, .rst_n,
    .wr_valid (row_valid),
    .wr_row   (row_coef),
    .rd_valid (col_valid),
    .rd_col   (col_data),
    .rd_idx   (col_idx)
  );

  pruned_dct1d #(.IN_W(MID_W)) u_col (
    .clk, .rst_n,
    .in_valid (col_valid),
    .x        (col_data),
    .out_valid(out_valid),
    .X        (out_coef)
  );

  // Column index travels alongside the column unit's one-cycle latency.
  always_ff @(posedge clk) begin
    if (col_valid) out_col <= col_idx;
  end

endmodule
