// Processing element of the systolic array.
//
// Each PE multiplies the activation arriving from its left neighbour with the
// weight arriving from its upper neighbour, adds the product to a local
// accumulator, and passes both operands on (right and down) one clock later.
// This is the behaviour described for the PEs of the computing cores: partial
// products, local accumulation and rhythmic passing to adjacent elements. The
// array is output stationary: the accumulator stays in the PE until the
// sequencer reads it (own choice of dataflow).
//
// Interface: a_in/a_v_in from the left, b_in/b_v_in from above, a_out/b_out
// registered copies to the right and below. clr zeroes the accumulator and
// has priority over a MAC in the same cycle. A MAC happens in a cycle where
// both valid bits are high; acc shows the result one cycle later.
module pe
  import fas_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  data_t a_in,
  input  logic  a_v_in,
  input  data_t b_in,
  input  logic  b_v_in,
  output data_t a_out,
  output logic  a_v_out,
  output data_t b_out,
  output logic  b_v_out,
  output acc_t  acc
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out   <= '0;
      a_v_out <= 1'b0;
      b_out   <= '0;
      b_v_out <= 1'b0;
      acc     <= '0;
    end else begin
      a_out   <= a_in;
      a_v_out <= a_v_in;
      b_out   <= b_in;
      b_v_out <= b_v_in;
      if (clr)                 acc <= '0;
      else if (a_v_in && b_v_in) acc <= acc + ACC_W'(a_in * b_in);
    end
  end

endmodule
