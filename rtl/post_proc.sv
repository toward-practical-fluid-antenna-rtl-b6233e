// Post processing unit.
//
// Executes the post-processing instruction class, the operations of a GNN
// layer other than matrix multiplication. Results go to the intermediate
// buffer, from where the computing cores or the memory write unit read them.
//   PP_MADD   : out[r][c] = sat8((acc[r][c] + (bias[c] << shift)) >>> shift),
//               then ReLU if inst.relu. acc is the accumulator of the
//               computing cores (rows x cols, cols <= NT), bias comes from the
//               bias region of double-buffer bank inst.bank at byte imm + c.
//               This is the matrix addition of the bias row, the activation
//               and the requantization to 8 bits in one pass.
//   PP_MAXP   : for every row r and column c,
//               out[r][c] = max over rows r' != r of the same group of src[r'][c];
//               groups are inst.group consecutive rows (the UEs of one port
//               selection). This is the aggregation "max-pooling over all
//               other UEs" of a GNN layer; applied to rows stacked from
//               several port selections it keeps them apart. A group of one
//               row yields -128.
//   PP_CONCAT : copy rows x cols from column src_col to dst_col, used to put
//               two feature matrices side by side (feature concatenation).
//   PP_NORM   : per group g, out = sat8(x * imm / ||X_g||_F), where ||X_g||_F
//               is the Frobenius norm of the group's rows x cols block and
//               imm the target norm sqrt(P) in the data format. Computed in
//               three steps: sum of squares, then per group an iterative
//               square root (16 cycles) and reciprocal (32 cycles), then one
//               multiply per element.
// The operation list follows the published post processing unit. The exact
// arithmetic (requantization by shift and saturation, the ReLU position, a
// Frobenius-norm power normalization for the final "normalization" layer) is
// this design's reading; see the documentation for why.
//
// Timing: MADD, CONCAT and the two scans of NORM process one 4-row word per
// cycle; MAXP needs 2*ceil(rows/4)+1 cycles per column.
module post_proc
  import fas_pkg::*;
#(
  parameter int unsigned MAXROWS = 16,
  parameter int unsigned ICOLS   = 4096,
  parameter int unsigned NT      = 32,
  parameter int unsigned BDEPTH  = 1024,
  localparam int unsigned NPASS  = MAXROWS / RG,
  localparam int unsigned IBAW   = $clog2(NPASS * ICOLS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  inst_t                     inst,
  output logic                      busy,
  // accumulator of the computing cores
  output logic [$clog2(NPASS)-1:0]  acc_rd_pass,
  output logic [$clog2(NT)-1:0]     acc_rd_col,
  input  acc_t                      acc_rd_data [RG],
  // bias region of the double buffer
  output logic                      b_rd_bank,
  output logic [$clog2(BDEPTH)-1:0] b_rd_addr,
  input  data_t                     b_rd_data,
  // intermediate buffer
  output logic [IBAW-1:0]           ib_rd_addr,
  input  aword_t                    ib_rd_data,
  output logic                      ib_wr_en,
  output logic [IBAW-1:0]           ib_wr_addr,
  output aword_t                    ib_wr_data
);

  typedef enum logic [3:0] {
    S_IDLE, S_SCAN, S_SCAN_LAST, S_MP_RD, S_MP_LAST, S_MP_WR,
    S_SQRT, S_DIV
  } state_e;

  state_e state;
  inst_t  cur;
  logic   norm_out;        // NORM: 0 = sum-of-squares scan, 1 = output scan

  logic [$clog2(NPASS)-1:0] p, last_p;
  logic [11:0]              c;
  logic [$clog2(NPASS)-1:0] p1;     // stage-1 copy of the issued address
  logic [11:0]              c1;
  logic                     v1;
  acc_t                     acc_q [RG];

  // group of each row
  logic [$clog2(MAXROWS)-1:0] grp [MAXROWS];
  always_comb begin
    int g, k;
    g = 0; k = 0;
    for (int r = 0; r < MAXROWS; r++) begin
      grp[r] = $clog2(MAXROWS)'(g);
      k++;
      if (k >= int'(cur.group)) begin k = 0; g++; end
    end
  end

  // max-pooling registers
  data_t mp_val [MAXROWS];
  data_t mp_out [MAXROWS];
  logic [$clog2(NPASS)-1:0] mp_i;
  logic                     mp_cap;
  logic [$clog2(NPASS)-1:0] mp_cap_i;

  always_comb begin
    for (int r = 0; r < MAXROWS; r++) begin
      mp_out[r] = data_t'(-8'sd128);
      for (int q = 0; q < MAXROWS; q++)
        if (q != r && grp[q] == grp[r] && mp_val[q] > mp_out[r]) mp_out[r] = mp_val[q];
    end
  end

  // normalization registers
  logic [31:0] sumsq [MAXROWS];
  logic [31:0] recip [MAXROWS];
  logic [$clog2(MAXROWS)-1:0] g_i, last_g;
  logic [31:0] sq_n, sq_res, sq_bit;
  logic [31:0] dv_q, dv_r;
  logic [15:0] dv_den;
  logic [5:0]  it;

  assign busy = (state != S_IDLE);

  // squares of the word being scanned, summed per group
  logic [31:0] sq_inc [MAXROWS];
  always_comb begin
    for (int g = 0; g < MAXROWS; g++) sq_inc[g] = '0;
    for (int r = 0; r < RG; r++)
      if (32'(p1) * RG + r < 32'(cur.rows)) begin
        automatic data_t x = data_t'(ib_rd_data[r*DATA_W +: DATA_W]);
        sq_inc[grp[32'(p1)*RG + r]] = sq_inc[grp[32'(p1)*RG + r]] + 32'(x * x);
      end
  end

  // stage 0: addresses of the element being issued
  always_comb begin
    acc_rd_pass = p;
    acc_rd_col  = $clog2(NT)'(c);
    b_rd_bank   = cur.bank;
    b_rd_addr   = $clog2(BDEPTH)'(32'(cur.imm) + 32'(c));
    if (state == S_MP_RD)
      ib_rd_addr = IBAW'(32'(mp_i) * ICOLS + 32'(cur.src_col) + 32'(c));
    else
      ib_rd_addr = IBAW'(32'(p) * ICOLS + 32'(cur.src_col) + 32'(c));
  end

  // stage 1: compute and write
  always_comb begin
    ib_wr_en   = 1'b0;
    ib_wr_addr = IBAW'(32'(p1) * ICOLS + 32'(cur.dst_col) + 32'(c1));
    ib_wr_data = '0;
    if (v1) begin
      unique case (pp_sub_e'(cur.sub))
        PP_MADD: begin
          ib_wr_en = 1'b1;
          for (int r = 0; r < RG; r++) begin
            logic signed [47:0] s;
            data_t y;
            s = (48'(acc_q[r]) + (48'(b_rd_data) <<< cur.shift)) >>> cur.shift;
            y = sat8(s);
            if (cur.relu && y < 0) y = '0;
            ib_wr_data[r*DATA_W +: DATA_W] = y;
          end
        end
        PP_CONCAT: begin
          ib_wr_en   = 1'b1;
          ib_wr_data = ib_rd_data;
        end
        PP_NORM: if (norm_out) begin
          ib_wr_en = 1'b1;
          for (int r = 0; r < RG; r++) begin
            logic signed [47:0] s;
            s = (48'(data_t'(ib_rd_data[r*DATA_W +: DATA_W])) *
                 $signed({16'd0, recip[grp[32'(p1)*RG + r]]})) >>> 16;
            ib_wr_data[r*DATA_W +: DATA_W] = sat8(s);
          end
        end
        default: ;
      endcase
    end
    if (state == S_MP_WR) begin
      ib_wr_en   = 1'b1;
      ib_wr_addr = IBAW'(32'(mp_i) * ICOLS + 32'(cur.dst_col) + 32'(c));
      for (int r = 0; r < RG; r++)
        ib_wr_data[r*DATA_W +: DATA_W] = mp_out[32'(mp_i)*RG + r];
    end
  end

  logic last_elem;
  assign last_elem = (p == last_p) && (c == 12'(cur.cols - 11'd1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cur <= '0;
      norm_out <= 1'b0;
      p <= '0; last_p <= '0; c <= '0;
      p1 <= '0; c1 <= '0; v1 <= 1'b0;
      for (int r = 0; r < RG; r++) acc_q[r] <= '0;
      for (int r = 0; r < MAXROWS; r++) begin
        mp_val[r] <= '0; sumsq[r] <= '0; recip[r] <= '0;
      end
      mp_i <= '0; mp_cap <= 1'b0; mp_cap_i <= '0;
      g_i <= '0; last_g <= '0;
      sq_n <= '0; sq_res <= '0; sq_bit <= '0;
      dv_q <= '0; dv_r <= '0; dv_den <= '0; it <= '0;
    end else begin
      // stage-1 pipeline registers
      v1 <= 1'b0;
      p1 <= p;
      c1 <= c;
      for (int r = 0; r < RG; r++) acc_q[r] <= acc_rd_data[r];

      // NORM scan 1: accumulate squares per group
      if (v1 && pp_sub_e'(cur.sub) == PP_NORM && !norm_out) begin
        for (int g = 0; g < MAXROWS; g++) sumsq[g] <= sumsq[g] + sq_inc[g];
      end

      // MAXP capture (one cycle after each read address)
      mp_cap <= 1'b0;
      if (mp_cap) begin
        for (int r = 0; r < RG; r++)
          mp_val[32'(mp_cap_i)*RG + r] <= data_t'(ib_rd_data[r*DATA_W +: DATA_W]);
      end

      unique case (state)
        S_IDLE: if (start) begin
          cur      <= inst;
          norm_out <= 1'b0;
          p <= '0; c <= '0; mp_i <= '0;
          last_p   <= $clog2(NPASS)'((32'(inst.rows) + RG - 1) / RG - 1);
          last_g   <= $clog2(MAXROWS)'((32'(inst.rows) + 32'(inst.group) - 1) / 32'(inst.group) - 1);
          for (int r = 0; r < MAXROWS; r++) sumsq[r] <= '0;
          state    <= (pp_sub_e'(inst.sub) == PP_MAXP) ? S_MP_RD : S_SCAN;
        end

        // one 4-row word per cycle: MADD, CONCAT, NORM scans
        S_SCAN: begin
          v1 <= 1'b1;
          if (last_elem) state <= S_SCAN_LAST;
          else if (c == 12'(cur.cols - 11'd1)) begin c <= '0; p <= p + 1'b1; end
          else c <= c + 12'd1;
        end
        S_SCAN_LAST: begin
          p <= '0; c <= '0;
          if (pp_sub_e'(cur.sub) == PP_NORM && !norm_out) begin
            g_i <= '0;
            state <= S_SQRT;
            it <= '0;
          end else state <= S_IDLE;
        end

        // MAXP: read the column's words, then write the pooled words
        S_MP_RD: begin
          mp_cap   <= 1'b1;
          mp_cap_i <= mp_i;
          if (mp_i == last_p) state <= S_MP_LAST;
          else mp_i <= mp_i + 1'b1;
        end
        S_MP_LAST: begin
          mp_i  <= '0;
          state <= S_MP_WR;
        end
        S_MP_WR: begin
          if (mp_i == last_p) begin
            mp_i <= '0;
            if (c == 12'(cur.cols - 11'd1)) state <= S_IDLE;
            else begin c <= c + 12'd1; state <= S_MP_RD; end
          end else mp_i <= mp_i + 1'b1;
        end

        // NORM: integer square root of the group's sum of squares
        S_SQRT: begin
          if (it == 6'd0) begin
            sq_n   <= sumsq[g_i];
            sq_res <= '0;
            sq_bit <= 32'h4000_0000;
            it     <= 6'd1;
          end else begin
            if (sq_n >= sq_res + sq_bit) begin
              sq_n   <= sq_n - (sq_res + sq_bit);
              sq_res <= (sq_res >> 1) + sq_bit;
            end else begin
              sq_res <= sq_res >> 1;
            end
            sq_bit <= sq_bit >> 2;
            if (it == 6'd16) begin it <= '0; state <= S_DIV; end
            else it <= it + 6'd1;
          end
        end
        // NORM: recip = (imm << 16) / norm, restoring division
        S_DIV: begin
          if (it == 6'd0) begin
            dv_den <= sq_res[15:0];
            dv_q   <= {cur.imm, 16'd0};
            dv_r   <= '0;
            it     <= 6'd1;
          end else begin
            automatic logic [32:0] rr = {dv_r, dv_q[31]};
            if (rr >= {17'd0, dv_den}) begin
              dv_r <= 32'(rr - {17'd0, dv_den});
              dv_q <= {dv_q[30:0], 1'b1};
            end else begin
              dv_r <= 32'(rr);
              dv_q <= {dv_q[30:0], 1'b0};
            end
            if (it == 6'd32) begin
              it <= '0;
              if (g_i == last_g) begin
                norm_out <= 1'b1;
                state    <= S_SCAN;
              end else begin
                g_i   <= g_i + 1'b1;
                state <= S_SQRT;
              end
            end else it <= it + 6'd1;
          end
        end
        default: state <= S_IDLE;
      endcase

      // last division step: store the reciprocal (0 for an all-zero group)
      if (state == S_DIV && it == 6'd32) begin
        automatic logic [32:0] rr = {dv_r, dv_q[31]};
        recip[g_i] <= (dv_den == 16'd0) ? 32'd0
                    : {dv_q[30:0], (rr >= {17'd0, dv_den})};
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   start && state == S_IDLE && pp_sub_e'(inst.sub) == PP_MADD |-> inst.cols <= 11'(NT))
    else $error("post_proc: MADD wider than the accumulator");
  assert property (@(posedge clk) disable iff (!rst_n)
                   start && state == S_IDLE && (pp_sub_e'(inst.sub) inside {PP_MAXP, PP_NORM}) |-> inst.group != 0)
    else $error("post_proc: group size of zero");

endmodule
