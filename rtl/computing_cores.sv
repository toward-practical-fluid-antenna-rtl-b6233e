// Computing cores: NUM_SA systolic arrays and their sequencer.
//
// Executes one matrix-processing instruction: Y = X * W for an activation
// matrix X (rows x depth, columns src_col.. of the input region of the
// double buffer, inst.src_sel = 0, or of the intermediate buffer,
// inst.src_sel = 1) and a weight tile W (depth x NT, rows imm.. of the weight
// region of double-buffer bank inst.bank; the input region is read from the
// same bank). All arrays see the same activation rows;
// array s computes output columns s*SA_COLS .. s*SA_COLS+SA_COLS-1, so one
// pass produces SA_ROWS rows by NT columns. Rows are processed in passes of
// SA_ROWS (one activation word per reduction step), which is how several port
// selections stacked as extra rows share one weight tile: the weights are read
// from off-chip memory once and reused by every pass.
//
// The result of each pass is added to (inst.acc = 1) or written into
// (inst.acc = 0) the accumulator buffer, which the post processing unit reads
// through the acc_rd port (combinational). Accumulation over several
// instructions lets a long reduction be split into tiles.
//
// Timing: after start is accepted, each pass takes depth + SA_ROWS + SA_COLS
// + 2 cycles (depth feed cycles, array drain, one write-back cycle); busy is
// high for passes * (depth + SA_ROWS + SA_COLS + 2) cycles.
//
// The use of several systolic arrays as the compute engine follows the
// published design; the 4 x 4 array size is the grid of its figure. The
// number of arrays (8) is this design's choice: with 8-bit data and a 64-bit
// off-chip bus it makes weight consumption of one pass 4x the bus rate, so a
// single port selection is memory bound and four stacked selections (16 rows,
// 4 passes) just match the bus rate, as the published measurements describe.
module computing_cores
  import fas_pkg::*;
#(
  parameter int unsigned SA_ROWS = 4,
  parameter int unsigned SA_COLS = 4,
  parameter int unsigned NUM_SA  = 8,
  parameter int unsigned MAXROWS = 16,
  parameter int unsigned WDEPTH  = 1024,
  parameter int unsigned INDEPTH = 256,
  parameter int unsigned INCOLS  = 64,
  parameter int unsigned ICOLS   = 4096,
  localparam int unsigned NT     = NUM_SA * SA_COLS,
  localparam int unsigned NPASS  = MAXROWS / SA_ROWS,
  localparam int unsigned IBAW   = $clog2(MAXROWS / RG * ICOLS)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  inst_t                      inst,
  output logic                       busy,
  // weight region of the double buffer
  output logic                       w_rd_en,
  output logic                       w_rd_bank,
  output logic [$clog2(WDEPTH)-1:0]  w_rd_addr,
  input  logic [NT*DATA_W-1:0]       w_rd_data,
  // input region of the double buffer
  output logic                       in_rd_bank,
  output logic [$clog2(INDEPTH)-1:0] in_rd_addr,
  input  aword_t                     in_rd_data,
  // intermediate buffer
  output logic [IBAW-1:0]            ib_rd_addr,
  input  aword_t                     ib_rd_data,
  // accumulator read port for post processing
  input  logic [$clog2(NPASS)-1:0]   acc_rd_pass,
  input  logic [$clog2(NT)-1:0]      acc_rd_col,
  output acc_t                       acc_rd_data [SA_ROWS]
);

  typedef enum logic [1:0] {S_IDLE, S_FEED, S_DRAIN, S_WRITE} state_e;
  state_e state;

  inst_t                      cur;
  logic [$clog2(NPASS)-1:0]   pass;
  logic [$clog2(NPASS)-1:0]   last_pass;
  logic [10:0]                t;
  logic [$clog2(SA_ROWS+SA_COLS+1):0] dcnt;
  logic                       feed_d;

  acc_t acc_buf [NPASS][NT][SA_ROWS];
  acc_t sa_acc  [NUM_SA][SA_ROWS][SA_COLS];
  data_t a_vec  [SA_ROWS];
  data_t b_vec  [NUM_SA][SA_COLS];
  logic  sa_clr;

  assign busy = (state != S_IDLE);

  // operand addresses for reduction step t of the current pass
  assign w_rd_en    = (state == S_FEED);
  assign w_rd_bank  = cur.bank;
  assign w_rd_addr  = $clog2(WDEPTH)'(32'(cur.imm) + 32'(t));
  assign in_rd_bank = cur.bank;
  assign in_rd_addr = $clog2(INDEPTH)'(32'(pass) * INCOLS + 32'(cur.src_col) + 32'(t));
  assign ib_rd_addr = IBAW'(32'(pass) * ICOLS + 32'(cur.src_col) + 32'(t));

  // operands arrive one cycle after their address
  always_comb begin
    for (int r = 0; r < SA_ROWS; r++)
      a_vec[r] = cur.src_sel ? data_t'(ib_rd_data[r*DATA_W +: DATA_W])
                             : data_t'(in_rd_data[r*DATA_W +: DATA_W]);
    for (int s = 0; s < NUM_SA; s++)
      for (int c = 0; c < SA_COLS; c++)
        b_vec[s][c] = data_t'(w_rd_data[(s*SA_COLS + c)*DATA_W +: DATA_W]);
  end

  assign sa_clr = (state == S_WRITE);

  for (genvar s = 0; s < NUM_SA; s++) begin : g_sa
    systolic_array #(.ROWS(SA_ROWS), .COLS(SA_COLS)) u_sa (
      .clk      (clk),
      .rst_n    (rst_n),
      .clr      (sa_clr),
      .in_valid (feed_d),
      .a_in     (a_vec),
      .b_in     (b_vec[s]),
      .acc      (sa_acc[s])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cur       <= '0;
      pass      <= '0;
      last_pass <= '0;
      t         <= '0;
      dcnt      <= '0;
      feed_d    <= 1'b0;
    end else begin
      feed_d <= (state == S_FEED);
      unique case (state)
        S_IDLE: if (start) begin
          cur       <= inst;
          pass      <= '0;
          last_pass <= $clog2(NPASS)'((32'(inst.rows) + SA_ROWS - 1) / SA_ROWS - 1);
          t         <= '0;
          state     <= S_FEED;
        end
        S_FEED: begin
          if (t == cur.depth - 11'd1) begin
            state <= S_DRAIN;
            dcnt  <= '0;
          end else begin
            t <= t + 11'd1;
          end
        end
        S_DRAIN: begin
          if (32'(dcnt) == SA_ROWS + SA_COLS) state <= S_WRITE;
          else dcnt <= dcnt + 1'b1;
        end
        S_WRITE: begin
          t <= '0;
          if (pass == last_pass) begin
            state <= S_IDLE;
          end else begin
            pass  <= pass + 1'b1;
            state <= S_FEED;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // write back one pass: overwrite or accumulate
  always_ff @(posedge clk) begin
    if (state == S_WRITE) begin
      for (int s = 0; s < NUM_SA; s++)
        for (int r = 0; r < SA_ROWS; r++)
          for (int c = 0; c < SA_COLS; c++)
            acc_buf[pass][s*SA_COLS + c][r] <=
              (cur.acc ? acc_buf[pass][s*SA_COLS + c][r] : acc_t'(0)) + sa_acc[s][r][c];
    end
  end

  always_comb begin
    for (int r = 0; r < SA_ROWS; r++) acc_rd_data[r] = acc_buf[acc_rd_pass][acc_rd_col][r];
  end

  // the array rows and the packing of activation words must agree
  initial assert (SA_ROWS == RG) else $error("computing_cores: SA_ROWS must equal %0d", RG);

  assert property (@(posedge clk) disable iff (!rst_n) start && state == S_IDLE |-> inst.depth != 0)
    else $error("computing_cores: zero-depth matrix instruction");

endmodule
