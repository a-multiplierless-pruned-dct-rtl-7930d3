// tb_pruned_dct1d -- self-checking test of the pruned 8-point transform.
//
// Drives random and extreme 8-sample vectors, one per cycle with random idle
// cycles, and compares each output with X = T4 * x computed here directly
// from the 4x8 matrix T4 (not from the adder factorisation). Also checks the
// one-cycle latency: each result must appear exactly one cycle after its
// input. Runs the unit at the row width (8 bits).
module tb_pruned_dct1d;
  import dct_pkg::*;

  localparam int unsigned IN_W = 8;
  localparam int unsigned OW   = IN_W + GROWTH;
  localparam int NVEC = 3000;

  // Rows 0..3 of the modified rounded DCT matrix.
  localparam int T4 [N_KEEP][N_PTS] = '{
    '{1,  1,  1,  1,  1,  1,  1, 1},
    '{1,  0,  0,  0,  0,  0,  0, -1},
    '{1,  0,  0, -1, -1,  0,  0, 1},
    '{0,  0, -1,  0,  0,  1,  0, 0}
  };

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [IN_W-1:0] x [N_PTS];
  logic out_valid;
  logic signed [OW-1:0] X [N_KEEP];

  int checks = 0, failures = 0;

  pruned_dct1d #(.IN_W(IN_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_coef(int k, logic signed [IN_W-1:0] v [N_PTS]);
    int s = 0;
    for (int n = 0; n < N_PTS; n++) s += T4[k][n] * int'(v[n]);
    return s;
  endfunction

  logic signed [IN_W-1:0] prev [N_PTS];
  logic prev_valid;
  int sent = 0;

  initial begin
    foreach (x[n]) x[n] = '0;
    prev_valid = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    while (sent < NVEC) begin
      @(negedge clk);
      // Check the output for what was sent in the previous cycle.
      if (prev_valid !== out_valid) begin
        failures++;
        $display("latency/valid mismatch: expected out_valid=%0b", prev_valid);
      end
      checks++;
      if (prev_valid) begin
        for (int k = 0; k < N_KEEP; k++) begin
          checks++;
          if (int'(X[k]) != ref_coef(k, prev)) begin
            failures++;
            $display("X%0d = %0d, expected %0d", k, X[k], ref_coef(k, prev));
          end
        end
      end
      // New input.
      in_valid = ($urandom_range(0, 4) != 0);
      for (int n = 0; n < N_PTS; n++) begin
        case (sent % 4)
          0:       x[n] = IN_W'($urandom);
          1:       x[n] = (sent / 4) % 2 ? {1'b1, {(IN_W-1){1'b0}}} : {1'b0, {(IN_W-1){1'b1}}};
          2:       x[n] = ($urandom_range(0, 1) != 0) ? {1'b1, {(IN_W-1){1'b0}}} : {1'b0, {(IN_W-1){1'b1}}};
          default: x[n] = IN_W'($urandom_range(0, 7)) - IN_W'(4);
        endcase
      end
      prev = x;
      prev_valid = in_valid;
      if (in_valid) sent++;
    end
    @(negedge clk);
    checks++;
    if (!out_valid) begin failures++; $display("last output missing"); end
    else for (int k = 0; k < N_KEEP; k++) begin
      checks++;
      if (int'(X[k]) != ref_coef(k, prev)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
