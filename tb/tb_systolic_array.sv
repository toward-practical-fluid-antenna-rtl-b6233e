// Self-checking testbench of the systolic array: random matrix products of
// random depth; checks every accumulator against a reference product exactly
// ROWS+COLS-1 cycles after the last reduction step was presented (the
// array's latency), and checks that clr zeroes the array.
// A grid of 4x4 PEs follows the published architecture figure; the skew and
// output-stationary latency checked here are this design's own.
module tb_systolic_array;
  import fas_pkg::*;
  localparam int R = 4, C = 4;
  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, in_valid = 1'b0;
  data_t a_in [R];
  data_t b_in [C];
  acc_t  acc  [R][C];
  int checks = 0, failures = 0;
  data_t A [R][64];
  data_t B [64][C];
  acc_t  ref_y [R][C];

  systolic_array #(.ROWS(R), .COLS(C)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < R; r++) a_in[r] = '0;
    for (int c = 0; c < C; c++) b_in[c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 40; trial++) begin
      int depth;
      depth = 1 + $urandom % 64;
      for (int r = 0; r < R; r++) for (int k = 0; k < depth; k++) A[r][k] = data_t'($urandom);
      for (int k = 0; k < depth; k++) for (int c = 0; c < C; c++) B[k][c] = data_t'($urandom);
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        ref_y[r][c] = 0;
        for (int k = 0; k < depth; k++) ref_y[r][c] += acc_t'(A[r][k] * B[k][c]);
      end
      // clear, then feed depth steps
      @(negedge clk); clr = 1'b1;
      @(negedge clk); clr = 1'b0;
      checks++;
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) if (acc[r][c] != 0) begin
        failures++; $display("clr failed"); break;
      end
      for (int k = 0; k < depth; k++) begin
        in_valid = 1'b1;
        for (int r = 0; r < R; r++) a_in[r] = A[r][k];
        for (int c = 0; c < C; c++) b_in[c] = B[k][c];
        @(negedge clk);
      end
      in_valid = 1'b0;
      for (int r = 0; r < R; r++) a_in[r] = data_t'($urandom);  // must be ignored
      // the last step is taken at edge 0; the corner PE adds it at edge R+C-2,
      // so one edge before that it must still be incomplete
      repeat (R + C - 3) @(negedge clk);
      checks++;
      if (acc[R-1][C-1] == ref_y[R-1][C-1] && ref_y[R-1][C-1] != acc_t'(0) && depth > 1) begin
        // corner PE must not be complete one cycle early unless its last product is 0
        if (A[R-1][depth-1] * B[depth-1][C-1] != 0) begin
          failures++; $display("trial %0d: corner result early", trial);
        end
      end
      @(negedge clk);
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        checks++;
        if (acc[r][c] != ref_y[r][c]) begin
          failures++;
          if (failures < 8) $display("trial %0d PE(%0d,%0d): %0d exp %0d", trial, r, c, acc[r][c], ref_y[r][c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
