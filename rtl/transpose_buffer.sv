// transpose_buffer -- ping-pong 8x4 buffer between the row and column passes.
//
// The row pass delivers, for each of the 8 rows of a block, the 4 kept
// coefficients of that row. The column pass needs, for each of those 4
// coefficient positions, the 8 values down the block. This buffer stores the
// 8x4 intermediate matrix and reads it out transposed.
//
// How it works: two banks of 8x4 words. Rows are written into the write bank
// in order 0..7. When row 7 lands, the banks swap: the full bank is read out
// one column (8 words) per cycle for 4 cycles while the next block's rows go
// into the other bank. Because writing a bank takes at least 8 cycles and
// reading one takes 4, the reader is always done before the writer fills the
// other bank, so no back-pressure is needed and the input may pause freely
// between rows (wr_valid low).
//
// Interface: wr_valid/wr_row take one row of 4 words. rd_valid/rd_col/rd_idx
// give one column of 8 words and its index 0..3 (index 0 marks the start of
// a block). Timing: registered output; column 0 of a block appears 1 cycle
// after the write of its 8th row, then columns 1..3 on the following cycles.
//
// The paper names a transpose buffer between the two 1-D units; the
// ping-pong organisation, the column-per-cycle read-out and the timing are
// this design's own.
module transpose_buffer
  import dct_pkg::*;
#(
  parameter int unsigned W = 11
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_valid,
  input  logic signed [W-1:0]  wr_row [N_KEEP],
  output logic                 rd_valid,
  output logic signed [W-1:0]  rd_col [N_PTS],
  output logic [1:0]           rd_idx
);

  logic signed [W-1:0] mem [2][N_PTS][N_KEEP];

  logic       wr_bank;     // bank being written
  logic [2:0] wr_ptr;      // next row to write
  logic       rd_bank;     // bank being read
  logic       rd_busy;     // a read-out is in progress
  logic [1:0] rd_ptr;      // next column to read

  wire row_last = wr_valid && (wr_ptr == 3'(N_PTS - 1));

  // Write side: row counter and bank select.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_bank <= 1'b0;
      wr_ptr  <= '0;
    end else begin
      if (wr_valid) begin
        wr_ptr <= wr_ptr + 3'd1;
        if (row_last) wr_bank <= ~wr_bank;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_valid) mem[wr_bank][wr_ptr] <= wr_row;
  end

  // Read side: starts in the same edge that writes the 8th row.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_busy <= 1'b0;
      rd_bank <= 1'b0;
      rd_ptr  <= '0;
    end else if (row_last) begin
      rd_busy <= 1'b1;
      rd_bank <= wr_bank;
      rd_ptr  <= '0;
    end else if (rd_busy) begin
      rd_ptr <= rd_ptr + 2'd1;
      if (rd_ptr == 2'(N_KEEP - 1)) rd_busy <= 1'b0;
    end
  end

  // Output register: one column per cycle.
  always_ff @(posedge clk) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_busy;
  end

  always_ff @(posedge clk) begin
    if (rd_busy) begin
      for (int r = 0; r < N_PTS; r++) rd_col[r] <= mem[rd_bank][r][rd_ptr];
      rd_idx <= rd_ptr;
    end
  end

  // A bank may only complete once the other bank's read-out is finishing.
  always_ff @(posedge clk) begin
    if (rst_n && row_last)
      assert (!rd_busy || rd_ptr == 2'(N_KEEP - 1))
        else $error("transpose_buffer: bank completed while the other was still being read");
  end

endmodule
