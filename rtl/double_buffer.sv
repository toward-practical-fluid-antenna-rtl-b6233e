// Ping-pong (double) on-chip buffer for weights, inputs and biases.
//
// Two identical banks each hold a weight tile, an input region and a bias
// region. The memory read unit fills one bank from off-chip memory while the
// computing cores and the post processing unit read the other one, so loading
// and computing overlap; which bank each side uses is chosen per instruction
// by the program. The three regions and the ping-pong scheme follow the
// published architecture; region sizes and word layouts are this design's.
//
// Write port: one 64-bit beat per cycle, addressed in beats within a region.
//   weight region: tile row = beat / (NT/8), lane = beat % (NT/8)
//   input region:  beat b holds activation words 2b and 2b+1
//   bias region:   beat b holds bias bytes 8b..8b+7
// Read ports (all one cycle latency, registered):
//   w_rd:  one tile row of NT weights (one per output column)
//   in_rd: one activation word (4 rows of one column)
//   b_rd:  one bias byte
// The assertion checks the ping-pong rule: the weight region of a bank is
// never written in the same cycle as the cores read it.
module double_buffer
  import fas_pkg::*;
#(
  parameter int unsigned NT      = 32,    // weight-tile columns (bytes per tile row)
  parameter int unsigned WDEPTH  = 1024,  // weight-tile rows per bank
  parameter int unsigned INDEPTH = 256,   // activation words per bank (input region)
  parameter int unsigned BDEPTH  = 1024   // bias bytes per bank
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // write side (memory read unit)
  input  logic                         wr_en,
  input  logic                         wr_bank,
  input  logic [1:0]                   wr_region,  // 0 weight, 1 input, 2 bias
  input  logic [15:0]                  wr_addr,    // beat address in the region
  input  beat_t                        wr_data,
  // weight read (computing cores)
  input  logic                         w_rd_en,
  input  logic                         w_rd_bank,
  input  logic [$clog2(WDEPTH)-1:0]    w_rd_addr,
  output logic [NT*DATA_W-1:0]         w_rd_data,
  // input read (computing cores)
  input  logic                         in_rd_bank,
  input  logic [$clog2(INDEPTH)-1:0]   in_rd_addr,
  output aword_t                       in_rd_data,
  // bias read (post processing)
  input  logic                         b_rd_bank,
  input  logic [$clog2(BDEPTH)-1:0]    b_rd_addr,
  output data_t                        b_rd_data
);

  localparam int unsigned WL = NT * DATA_W / BEAT_W;  // beats per weight row

  // one simple memory per weight lane, per input half and for the biases;
  // the bank is the top address bit
  localparam int unsigned WAW = $clog2(WDEPTH);
  localparam int unsigned IAW = $clog2(INDEPTH) - 1;
  localparam int unsigned BAW = $clog2(BDEPTH) - 3;

  for (genvar l = 0; l < WL; l++) begin : g_wlane
    beat_t wmem [2*WDEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && wr_region == 2'd0 && 32'(wr_addr) % WL == l)
        wmem[{wr_bank, WAW'(32'(wr_addr) / WL)}] <= wr_data;
      w_rd_data[l*BEAT_W +: BEAT_W] <= wmem[{w_rd_bank, w_rd_addr}];
    end
  end

  aword_t imem_lo [INDEPTH];   // even activation words
  aword_t imem_hi [INDEPTH];   // odd activation words
  aword_t ilo_q, ihi_q;
  logic   isel_q;
  always_ff @(posedge clk) begin
    if (wr_en && wr_region == 2'd1) begin
      imem_lo[{wr_bank, wr_addr[IAW-1:0]}] <= wr_data[AWORD_W-1:0];
      imem_hi[{wr_bank, wr_addr[IAW-1:0]}] <= wr_data[2*AWORD_W-1:AWORD_W];
    end
    ilo_q  <= imem_lo[{in_rd_bank, in_rd_addr[IAW:1]}];
    ihi_q  <= imem_hi[{in_rd_bank, in_rd_addr[IAW:1]}];
    isel_q <= in_rd_addr[0];
  end
  assign in_rd_data = isel_q ? ihi_q : ilo_q;

  beat_t      bmem [2*BDEPTH/8];
  beat_t      b_beat_q;
  logic [2:0] b_lane_q;
  always_ff @(posedge clk) begin
    if (wr_en && wr_region == 2'd2) bmem[{wr_bank, wr_addr[BAW-1:0]}] <= wr_data;
    b_beat_q <= bmem[{b_rd_bank, b_rd_addr[$clog2(BDEPTH)-1:3]}];
    b_lane_q <= b_rd_addr[2:0];
  end
  assign b_rd_data = data_t'(b_beat_q[b_lane_q*8 +: 8]);

  // ping-pong rule: never load a bank's weights while the cores read them
  assert property (@(posedge clk) disable iff (!rst_n)
                   !(wr_en && wr_region == 2'd0 && w_rd_en && wr_bank == w_rd_bank))
    else $error("double_buffer: weight bank %0d written while being read", wr_bank);

endmodule
