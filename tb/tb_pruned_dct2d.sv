// tb_pruned_dct2d -- end-to-end test of the 2-D pruned transform at its
// default parameters (8-bit signed samples).
//
// Streams 12000 8x8 blocks through the design and compares every one of the
// 16 output coefficients with B'[k][j] = sum_m sum_n T4[k][m] A[m][n] T4[j][n],
// computed here straight from the matrix T4. Block contents mix random
// samples, full-scale extremes (all +127 / all -128 / checkerboards, which
// give the largest coefficients) and small values.
//
// Timing checks: column 0 of a block leaves 3 cycles after the edge that
// samples its 8th row; columns come out in order 0..3 on consecutive cycles;
// blocks sent back to back leave exactly 8 cycles apart (the block rate is
// the clock / 8). Coverage counters, each of which must be non-zero: blocks
// sent at full rate, blocks with idle cycles between rows, read-outs of each
// of the two transpose-buffer banks, and full-scale blocks.
module tb_pruned_dct2d;
  import dct_pkg::*;

  localparam int unsigned IN_W  = 8;
  localparam int unsigned OUT_W = IN_W + 2 * GROWTH;
  localparam int NBLK = 12000;

  localparam int T4 [N_KEEP][N_PTS] = '{
    '{1,  1,  1,  1,  1,  1,  1, 1},
    '{1,  0,  0,  0,  0,  0,  0, -1},
    '{1,  0,  0, -1, -1,  0,  0, 1},
    '{0,  0, -1,  0,  0,  1,  0, 0}
  };

  typedef int blk_t [N_PTS][N_PTS];
  typedef int coef_t [N_KEEP][N_KEEP];

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [IN_W-1:0] in_row [N_PTS];
  logic out_valid;
  logic [1:0] out_col;
  logic signed [OUT_W-1:0] out_coef [N_KEEP];

  int checks = 0, failures = 0;
  int n_full_rate = 0, n_gapped = 0, n_extreme = 0;
  int n_bank [2] = '{0, 0};
  int n_rate_checked = 0;

  pruned_dct2d dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic coef_t reference(blk_t a);
    coef_t b;
    for (int k = 0; k < N_KEEP; k++)
      for (int j = 0; j < N_KEEP; j++) begin
        b[k][j] = 0;
        for (int m = 0; m < N_PTS; m++)
          for (int n = 0; n < N_PTS; n++)
            b[k][j] += T4[k][m] * a[m][n] * T4[j][n];
      end
    return b;
  endfunction

  int cycle = 0;
  always_ff @(posedge clk) cycle <= cycle + 1;

  coef_t exp_q [$];
  int    due_q [$];
  bit    b2b_q [$];   // block followed its predecessor at full rate

  // Count which transpose-buffer bank each block is read from.
  always @(posedge clk)
    if (rst_n && dut.u_tbuf.rd_busy && dut.u_tbuf.rd_ptr == 2'd0)
      n_bank[dut.u_tbuf.rd_bank]++;

  // Output checker.
  initial begin
    automatic int col = 0;
    automatic int last_start = -100;
    @(posedge rst_n);
    forever begin
      @(negedge clk);
      if (out_valid) begin
        checks++;
        if (exp_q.size() == 0) begin
          failures++; $display("unexpected output at cycle %0d", cycle);
        end else begin
          if (out_col != 2'(col)) begin
            failures++; $display("out_col %0d, expected %0d", out_col, col);
          end
          if (col == 0) begin
            checks++;
            if (cycle != due_q[0]) begin
              failures++; $display("block out at cycle %0d, expected %0d", cycle, due_q[0]);
            end
            if (b2b_q[0]) begin
              checks++; n_rate_checked++;
              if (cycle - last_start != N_PTS) begin
                failures++; $display("block spacing %0d cycles at full rate", cycle - last_start);
              end
            end
            last_start = cycle;
          end
          for (int k = 0; k < N_KEEP; k++) begin
            checks++;
            if (int'(out_coef[k]) != exp_q[0][k][col]) begin
              failures++;
              if (failures < 20)
                $display("B'[%0d][%0d] = %0d, expected %0d", k, col, out_coef[k], exp_q[0][k][col]);
            end
          end
          if (col == N_KEEP - 1) begin
            void'(exp_q.pop_front()); void'(due_q.pop_front()); void'(b2b_q.pop_front());
            col = 0;
          end else col++;
        end
      end else if (col != 0) begin
        checks++; failures++; $display("gap inside a block's output");
        col = 0;
      end
    end
  end

  localparam int MAXV = 2 ** (IN_W - 1) - 1;
  localparam int MINV = -(2 ** (IN_W - 1));

  function automatic int sample(int kind, int m, int n);
    case (kind)
      0: return MAXV;
      1: return MINV;
      2: return ((m + n) % 2 == 0) ? MAXV : MINV;
      3: return (n < 4) ? MAXV : MINV;
      4: return (m < 4) ? MAXV : MINV;
      5: return ($urandom_range(0, 1) != 0) ? MAXV : MINV;
      6: return int'($urandom_range(0, 15)) - 8;
      default: return int'($urandom_range(0, 2 ** IN_W - 1)) + MINV;
    endcase
  endfunction

  // Stimulus.
  initial begin
    automatic blk_t a;
    automatic bit prev_gapless = 1'b0;
    foreach (in_row[n]) in_row[n] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < NBLK; i++) begin
      automatic int kind = (i < 7) ? i : ((i % 10 == 3) ? $urandom_range(0, 6) : 7);
      automatic bit gaps = (i % 5 == 4);
      automatic bit idle_before = (i % 97 == 50);
      if (kind <= 5) n_extreme++;
      if (idle_before) repeat ($urandom_range(1, 12)) begin
        @(negedge clk); in_valid = 1'b0;
      end
      for (int m = 0; m < N_PTS; m++) begin
        while (gaps && $urandom_range(0, 2) == 0) begin
          @(negedge clk); in_valid = 1'b0;
        end
        @(negedge clk);
        in_valid = 1'b1;
        for (int n = 0; n < N_PTS; n++) begin
          a[m][n] = sample(kind, m, n);
          in_row[n] = IN_W'(a[m][n]);
        end
      end
      exp_q.push_back(reference(a));
      // 8th row sampled at the next edge (cycle+1); output 3 edges later.
      due_q.push_back(cycle + 4);
      // Full-rate block: it and the previous block were sent without gaps.
      b2b_q.push_back(!gaps && !idle_before && prev_gapless);
      if (!gaps && !idle_before) n_full_rate++; else n_gapped++;
      prev_gapless = !gaps;
    end
    @(negedge clk); in_valid = 1'b0;
    repeat (20) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d blocks never came out", exp_q.size()); end
    $display("coverage: full_rate=%0d gapped=%0d extreme=%0d bank0=%0d bank1=%0d rate_checked=%0d",
             n_full_rate, n_gapped, n_extreme, n_bank[0], n_bank[1], n_rate_checked);
    checks++; if (n_full_rate == 0)    begin failures++; $display("no full-rate blocks"); end
    checks++; if (n_gapped == 0)       begin failures++; $display("no gapped blocks"); end
    checks++; if (n_extreme == 0)      begin failures++; $display("no full-scale blocks"); end
    checks++; if (n_bank[0] == 0 || n_bank[1] == 0) begin failures++; $display("a bank was never used"); end
    checks++; if (n_rate_checked == 0) begin failures++; $display("block rate never checked"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
