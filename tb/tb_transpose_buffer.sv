// tb_transpose_buffer -- self-checking test of the ping-pong transpose buffer.
//
// Writes blocks of 8 rows x 4 random words, sometimes back to back, sometimes
// with idle cycles between rows and between blocks, and checks that every
// block comes out as 4 columns of 8 words in order 0..3, each column equal to
// the transposed input, the first column exactly 1 cycle after the write
// edge of the 8th row, and that consecutive blocks alternate banks correctly.
module tb_transpose_buffer;
  import dct_pkg::*;

  localparam int unsigned W = 11;
  localparam int NBLK = 400;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic wr_valid = 1'b0;
  logic signed [W-1:0] wr_row [N_KEEP];
  logic rd_valid;
  logic signed [W-1:0] rd_col [N_PTS];
  logic [1:0] rd_idx;

  int checks = 0, failures = 0;
  int back_to_back = 0, gapped = 0;

  transpose_buffer #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference: queue of expected blocks and the cycle each should start.
  typedef logic signed [W-1:0] blk_t [N_PTS][N_KEEP];
  blk_t exp_q [$];
  int   due_q [$];
  int   cycle = 0;

  always_ff @(posedge clk) cycle <= cycle + 1;

  // Checker, sampling in the middle of each cycle.
  int out_col = 0;
  initial begin
    @(posedge rst_n);
    forever begin
      @(negedge clk);
      if (rd_valid) begin
        checks++;
        if (exp_q.size() == 0) begin
          failures++; $display("unexpected output column");
        end else begin
          if (rd_idx != 2'(out_col)) begin
            failures++; $display("column index %0d, expected %0d", rd_idx, out_col);
          end
          if (out_col == 0) begin
            checks++;
            if (cycle != due_q[0]) begin
              failures++; $display("block started at cycle %0d, expected %0d", cycle, due_q[0]);
            end
          end
          for (int r = 0; r < N_PTS; r++) begin
            checks++;
            if (rd_col[r] != exp_q[0][r][out_col]) begin
              failures++;
              $display("col %0d row %0d: %0d expected %0d", out_col, r, rd_col[r], exp_q[0][r][out_col]);
            end
          end
          if (out_col == N_KEEP - 1) begin
            void'(exp_q.pop_front());
            void'(due_q.pop_front());
            out_col = 0;
          end else out_col++;
        end
      end else if (out_col != 0) begin
        checks++; failures++; $display("gap inside a block read-out");
        out_col = 0;
      end
    end
  end

  initial begin
    automatic blk_t b;
    foreach (wr_row[k]) wr_row[k] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < NBLK; i++) begin
      automatic bit gaps = (i % 3 == 2);
      if (gaps) gapped++; else back_to_back++;
      for (int r = 0; r < N_PTS; r++) begin
        while (gaps && $urandom_range(0, 2) == 0) begin
          @(negedge clk); wr_valid = 1'b0;
        end
        @(negedge clk);
        wr_valid = 1'b1;
        for (int k = 0; k < N_KEEP; k++) begin
          wr_row[k] = W'($urandom);
          b[r][k] = wr_row[k];
        end
        if (r == N_PTS - 1) begin
          exp_q.push_back(b);
          // Written at the next edge (cycle+1); column 0 is registered at
          // the edge after that.
          due_q.push_back(cycle + 2);
        end
      end
    end
    @(negedge clk); wr_valid = 1'b0;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d blocks never came out", exp_q.size()); end
    checks++;
    if (back_to_back == 0 || gapped == 0) failures++;
    $display("blocks: back_to_back=%0d gapped=%0d", back_to_back, gapped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
