// Output-stationary systolic array of ROWS x COLS processing elements.
//
// Row r of the activation matrix enters at the left edge, column c of the
// weight tile enters at the top edge. The caller presents one reduction step
// per cycle (a vector of ROWS activations and COLS weights, all for the same
// index k); the array skews them internally, delaying row r by r cycles and
// column c by c cycles, so that a[r][k] and w[k][c] meet in PE(r,c). After the
// last step has been presented, PE(ROWS-1,COLS-1) holds its final sum
// ROWS+COLS-1 cycles later (LATENCY). acc[r][c] is the running sum of
// a[r][k]*w[k][c]; clr zeroes all accumulators.
//
// The 4 x 4 default size is the grid drawn in the architecture figure; the
// skewed, output-stationary dataflow is this design's choice.
module systolic_array
  import fas_pkg::*;
#(
  parameter int unsigned ROWS = 4,
  parameter int unsigned COLS = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  logic  in_valid,
  input  data_t a_in [ROWS],
  input  data_t b_in [COLS],
  output acc_t  acc  [ROWS][COLS]
);


  // skew registers: row r delayed by r cycles, column c by c cycles
  data_t a_sk [ROWS][ROWS];
  logic  av_sk[ROWS][ROWS];
  data_t b_sk [COLS][COLS];
  logic  bv_sk[COLS][COLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++)
        for (int s = 0; s < ROWS; s++) begin a_sk[r][s] <= '0; av_sk[r][s] <= 1'b0; end
      for (int c = 0; c < COLS; c++)
        for (int s = 0; s < COLS; s++) begin b_sk[c][s] <= '0; bv_sk[c][s] <= 1'b0; end
    end else begin
      for (int r = 0; r < ROWS; r++) begin
        a_sk[r][0]  <= a_in[r];
        av_sk[r][0] <= in_valid;
        for (int s = 1; s < ROWS; s++) begin
          a_sk[r][s]  <= a_sk[r][s-1];
          av_sk[r][s] <= av_sk[r][s-1];
        end
      end
      for (int c = 0; c < COLS; c++) begin
        b_sk[c][0]  <= b_in[c];
        bv_sk[c][0] <= in_valid;
        for (int s = 1; s < COLS; s++) begin
          b_sk[c][s]  <= b_sk[c][s-1];
          bv_sk[c][s] <= bv_sk[c][s-1];
        end
      end
    end
  end

  // operand wires between PEs: ah[r][c] enters PE(r,c) from the left
  data_t ah [ROWS][COLS+1];
  logic  ahv[ROWS][COLS+1];
  data_t bv [ROWS+1][COLS];
  logic  bvv[ROWS+1][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_left
    // row r: in_valid -> r skew stages; row 0 bypasses the skew
    if (r == 0) begin : g_r0
      assign ah[r][0]  = a_in[r];
      assign ahv[r][0] = in_valid;
    end else begin : g_rn
      assign ah[r][0]  = a_sk[r][r-1];
      assign ahv[r][0] = av_sk[r][r-1];
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_top
    if (c == 0) begin : g_c0
      assign bv[0][c]  = b_in[c];
      assign bvv[0][c] = in_valid;
    end else begin : g_cn
      assign bv[0][c]  = b_sk[c][c-1];
      assign bvv[0][c] = bv_sk[c][c-1];
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      pe u_pe (
        .clk     (clk),
        .rst_n   (rst_n),
        .clr     (clr),
        .a_in    (ah[r][c]),
        .a_v_in  (ahv[r][c]),
        .b_in    (bv[r][c]),
        .b_v_in  (bvv[r][c]),
        .a_out   (ah[r][c+1]),
        .a_v_out (ahv[r][c+1]),
        .b_out   (bv[r+1][c]),
        .b_v_out (bvv[r+1][c]),
        .acc     (acc[r][c])
      );
    end
  end

endmodule
