// Self-checking testbench of the post processing unit. Accumulator, bias
// memory and intermediate buffer are testbench models (accumulator read is
// combinational, the memories have one cycle read latency). Each operation
// (MADD with and without ReLU, max-pooling with group sizes 2 and 4,
// concatenation copy, Frobenius-norm scaling) is run on random data and the
// written buffer is compared with a reference computed here. The cycle count
// of MADD (one column of 4 rows per cycle) is checked too.
// The operation list follows the published post processing unit; the exact
// requantization and normalization formulas checked here are this design's own.
module tb_post_proc;
  import fas_pkg::*;
  localparam int MR = 16, IC = 256, NT = 32, BD = 64, NP = MR/4, IBAW = $clog2(MR/4*IC);
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy;
  inst_t inst;
  logic [$clog2(NP)-1:0] acc_rd_pass; logic [$clog2(NT)-1:0] acc_rd_col;
  acc_t acc_rd_data [4];
  logic b_rd_bank; logic [$clog2(BD)-1:0] b_rd_addr; data_t b_rd_data;
  logic [IBAW-1:0] ib_rd_addr, ib_wr_addr; aword_t ib_rd_data, ib_wr_data; logic ib_wr_en;
  int checks = 0, failures = 0;

  acc_t   accm [NP][NT][4];
  data_t  bmem [2][BD];
  aword_t ibmem [MR/4*IC];

  post_proc #(.MAXROWS(MR), .ICOLS(IC), .NT(NT), .BDEPTH(BD)) dut (.*);
  always #5 clk = ~clk;
  always_comb for (int r = 0; r < 4; r++) acc_rd_data[r] = accm[acc_rd_pass][acc_rd_col][r];
  always_ff @(posedge clk) begin
    b_rd_data  <= bmem[b_rd_bank][b_rd_addr];
    ib_rd_data <= ibmem[ib_rd_addr];
    if (ib_wr_en) ibmem[ib_wr_addr] <= ib_wr_data;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic data_t rd(input int row, input int col);
    return data_t'(ibmem[(row/4)*IC + col][(row%4)*8 +: 8]);
  endfunction
  function automatic data_t s8(input longint v);
    return (v > 127) ? 8'sd127 : (v < -128) ? -8'sd128 : data_t'(v);
  endfunction

  data_t expm [MR][64];

  task automatic run(input inst_t i, output int cyc);
    @(negedge clk); inst = i; start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (busy) begin cyc++; @(negedge clk); end
  endtask

  task automatic compare(input string what, input int rows, input int cols, input int dcol);
    for (int r = 0; r < rows; r++) for (int c = 0; c < cols; c++) begin
      checks++;
      if (rd(r, dcol + c) !== expm[r][c]) begin
        failures++;
        if (failures < 10) $display("%s: row %0d col %0d got %0d exp %0d", what, r, c, rd(r, dcol + c), expm[r][c]);
      end
    end
  endtask

  initial begin
    inst = '0;
    for (int i = 0; i < MR/4*IC; i++) ibmem[i] = $urandom;
    for (int b = 0; b < 2; b++) for (int i = 0; i < BD; i++) bmem[b][i] = data_t'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 12; trial++) begin
      inst_t i; int rows, cols, cyc, g;
      // ---- MADD ----
      for (int p = 0; p < NP; p++) for (int c = 0; c < NT; c++) for (int r = 0; r < 4; r++)
        accm[p][c][r] = acc_t'($signed($urandom) >>> ($urandom % 24));
      rows = 4 * (1 + $urandom % 4); cols = 1 + $urandom % NT;
      i = '0; i.typ = IT_POST; i.sub = PP_MADD; i.rows = 5'(rows); i.cols = 11'(cols);
      i.bank = $urandom; i.relu = trial[0]; i.shift = 4'($urandom % 10); i.imm = 16'($urandom % (BD - NT));
      i.dst_col = 12'(64 + $urandom % 64);
      for (int r = 0; r < rows; r++) for (int c = 0; c < cols; c++) begin
        longint s;
        s = (longint'(accm[r/4][c][r%4]) + (longint'(bmem[i.bank][i.imm + c]) <<< i.shift)) >>> i.shift;
        expm[r][c] = s8(s);
        if (i.relu && expm[r][c] < 0) expm[r][c] = 0;
      end
      run(i, cyc);
      compare("MADD", rows, cols, int'(i.dst_col));
      checks++;
      if (cyc != rows / 4 * cols + 1) begin failures++; $display("MADD took %0d cycles", cyc); end
      // ---- MAXP ----
      g = (trial % 2) ? 4 : 2;
      rows = g * (1 + $urandom % (MR / g)); cols = 1 + $urandom % 8;
      i = '0; i.typ = IT_POST; i.sub = PP_MAXP; i.rows = 5'(rows); i.cols = 11'(cols); i.group = 5'(g);
      i.src_col = 12'($urandom % 32); i.dst_col = 12'(160 + $urandom % 32);
      for (int r = 0; r < rows; r++) for (int c = 0; c < cols; c++) begin
        data_t m; m = -8'sd128;
        for (int q = (r / g) * g; q < (r / g) * g + g; q++)
          if (q != r && rd(q, int'(i.src_col) + c) > m) m = rd(q, int'(i.src_col) + c);
        expm[r][c] = m;
      end
      run(i, cyc);
      compare("MAXP", rows, cols, int'(i.dst_col));
      // ---- CONCAT ----
      rows = 1 + $urandom % MR; cols = 1 + $urandom % 40;
      i = '0; i.typ = IT_POST; i.sub = PP_CONCAT; i.rows = 5'(rows); i.cols = 11'(cols);
      i.src_col = 12'($urandom % 40); i.dst_col = 12'(192 + $urandom % 20);
      for (int r = 0; r < rows; r++) for (int c = 0; c < cols; c++) expm[r][c] = rd(r, int'(i.src_col) + c);
      run(i, cyc);
      compare("CONCAT", rows, cols, int'(i.dst_col));
      // ---- NORM ----
      g = (trial % 2) ? 4 : 2;
      rows = g * (1 + $urandom % (MR / g)); cols = 2 * (1 + $urandom % 4);
      i = '0; i.typ = IT_POST; i.sub = PP_NORM; i.rows = 5'(rows); i.cols = 11'(cols); i.group = 5'(g);
      i.src_col = 12'($urandom % 32); i.dst_col = 12'(40 + $urandom % 20); i.imm = 16'(1 + $urandom % 300);
      for (int q = 0; q < rows / g; q++) begin
        longint ss, nrm, rec;
        ss = 0;
        for (int r = q * g; r < q * g + g; r++) for (int c = 0; c < cols; c++)
          ss += longint'(rd(r, int'(i.src_col) + c)) * longint'(rd(r, int'(i.src_col) + c));
        nrm = 0;
        while ((nrm + 1) * (nrm + 1) <= ss) nrm++;
        rec = (nrm == 0) ? 0 : ((longint'(i.imm) << 16) / nrm);
        for (int r = q * g; r < q * g + g; r++) for (int c = 0; c < cols; c++)
          expm[r][c] = s8((longint'(rd(r, int'(i.src_col) + c)) * rec) >>> 16);
      end
      run(i, cyc);
      compare("NORM", rows, cols, int'(i.dst_col));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
