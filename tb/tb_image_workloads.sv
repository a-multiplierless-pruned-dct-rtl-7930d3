// tb_image_workloads -- whole images streamed through the 2-D pruned transform.
//
// Runs three picture sizes through the design at its default parameters:
//   512x512, one 8-bit plane   (still-image test set size)
//   416x240, one 8-bit plane   (low-resolution video frame)
//   1920x1080, three 8-bit planes (one full-HD RGB frame)
// Each picture is synthesised here: a smooth two-dimensional ramp plus a
// little pseudo-random texture, level-shifted by -128 to signed samples.
// Blocks go in raster order, rows of each block on consecutive cycles with no
// gaps. Every coefficient is compared with T4 * A * T4^T computed from the
// matrix, and the number of cycles from the first row in to the last column
// out must be 8 per block plus the 3-cycle pipeline latency, i.e. one block
// per 8 clocks (a full-HD RGB frame takes 777,600 cycles).
module tb_image_workloads;
  import dct_pkg::*;

  localparam int unsigned IN_W  = 8;
  localparam int unsigned OUT_W = IN_W + 2 * GROWTH;

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

  pruned_dct2d dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cycle = 0;
  always_ff @(posedge clk) cycle <= cycle + 1;

  function automatic coef_t reference(blk_t a);
    coef_t b;
    int y [N_PTS][N_KEEP];
    for (int m = 0; m < N_PTS; m++)
      for (int j = 0; j < N_KEEP; j++) begin
        y[m][j] = 0;
        for (int n = 0; n < N_PTS; n++) y[m][j] += a[m][n] * T4[j][n];
      end
    for (int k = 0; k < N_KEEP; k++)
      for (int j = 0; j < N_KEEP; j++) begin
        b[k][j] = 0;
        for (int m = 0; m < N_PTS; m++) b[k][j] += T4[k][m] * y[m][j];
      end
    return b;
  endfunction

  // Synthetic picture sample at (row r, column c) of plane p, level-shifted.
  function automatic int pixel(int p, int r, int c, int w, int h);
    int v = (r * 255) / h / 2 + (c * 255) / w / 2 + 40 * p;
    v += int'($urandom_range(0, 23)) - 12;
    if (v < 0) v = 0;
    if (v > 255) v = 255;
    return v - 128;
  endfunction

  coef_t exp_q [$];
  int    out_blocks = 0;
  int    last_out_cycle = 0;

  // Output checker.
  initial begin
    automatic int col = 0;
    forever begin
      @(negedge clk);
      if (out_valid) begin
        if (exp_q.size() == 0) begin
          checks++; failures++; $display("unexpected output");
        end else begin
          checks++;
          if (out_col != 2'(col)) begin
            failures++; $display("out_col %0d, expected %0d", out_col, col);
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
            void'(exp_q.pop_front());
            out_blocks++;
            last_out_cycle = cycle;
            col = 0;
          end else col++;
        end
      end
    end
  end

  task automatic run_picture(string name, int w, int h, int planes);
    automatic blk_t a;
    automatic int first_cycle = -1;
    automatic int nblk = (w / N_PTS) * (h / N_PTS) * planes;
    automatic int start_blocks = out_blocks;
    for (int p = 0; p < planes; p++)
      for (int by = 0; by < h / N_PTS; by++)
        for (int bx = 0; bx < w / N_PTS; bx++) begin
          for (int m = 0; m < N_PTS; m++) begin
            @(negedge clk);
            if (first_cycle < 0) first_cycle = cycle;
            in_valid = 1'b1;
            for (int n = 0; n < N_PTS; n++) begin
              a[m][n] = pixel(p, by * N_PTS + m, bx * N_PTS + n, w, h);
              in_row[n] = IN_W'(a[m][n]);
            end
          end
          exp_q.push_back(reference(a));
        end
    @(negedge clk); in_valid = 1'b0;
    repeat (10) @(negedge clk);
    checks++;
    if (out_blocks - start_blocks != nblk) begin
      failures++; $display("%s: %0d of %0d blocks came out", name, out_blocks - start_blocks, nblk);
    end
    // First row is sampled at edge first_cycle+1 and the last block's 8th
    // row 8*nblk-1 edges later; its column 0 leaves 3 edges after that and
    // its column 3 another 3 edges later.
    checks++;
    if (last_out_cycle - (first_cycle + 1) != N_PTS * nblk + 5) begin
      failures++;
      $display("%s: took %0d cycles, expected %0d", name,
               last_out_cycle - (first_cycle + 1), N_PTS * nblk + 5);
    end
    $display("%s: %0d blocks in %0d cycles (%0d per block)", name, nblk,
             last_out_cycle - first_cycle, (last_out_cycle - first_cycle) / nblk);
  endtask

  initial begin
    foreach (in_row[n]) in_row[n] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    run_picture("512x512 grey", 512, 512, 1);
    run_picture("416x240 grey", 416, 240, 1);
    run_picture("1920x1080 RGB", 1920, 1080, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
