// Intermediate result buffer.
//
// Holds the activations produced by the post processing unit so that they can
// be fed back into the computing cores for the next layer, and hands final
// results to the memory write unit, which avoids round trips to off-chip
// memory between layers (as published). The buffer is a matrix of up to
// MAXROWS rows by ICOLS 8-bit columns. A word packs the 4 rows of one row
// group in one column; word address = row_group * ICOLS + column. Matrices
// are placed side by side as column ranges, so a concatenation along the
// feature dimension is two adjacent ranges (layout is this design's choice).
//
// One write port (post processing) and three independent read ports (cores,
// post processing, memory write), each with one cycle of read latency. The
// three read ports are this design's choice; on an FPGA they map to
// replicated block RAMs.
module inter_buffer
  import fas_pkg::*;
#(
  parameter int unsigned MAXROWS = 16,
  parameter int unsigned ICOLS   = 4096,
  localparam int unsigned DEPTH  = MAXROWS / RG * ICOLS,
  localparam int unsigned AW     = $clog2(DEPTH)
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    wr_en,
  input  logic [AW-1:0] wr_addr,
  input  aword_t  wr_data,
  input  logic [AW-1:0] rd0_addr,
  output aword_t  rd0_data,
  input  logic [AW-1:0] rd1_addr,
  output aword_t  rd1_data,
  input  logic [AW-1:0] rd2_addr,
  output aword_t  rd2_data
);

  aword_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd0_data <= '0;
      rd1_data <= '0;
      rd2_data <= '0;
    end else begin
      rd0_data <= mem[rd0_addr];
      rd1_data <= mem[rd1_addr];
      rd2_data <= mem[rd2_addr];
    end
  end

endmodule
