// Self-checking testbench of the computing cores. The double buffer and the
// intermediate buffer are modelled in the testbench as memories with one
// cycle of read latency. Random matrix instructions (1..16 rows, random
// depth, weight-row offset, source and bank, overwrite or accumulate) are
// executed; after each one every accumulator entry is compared with a
// reference product, and the number of busy cycles is compared with
// passes * (depth + SA_ROWS + SA_COLS + 2).
// The expected values come from a plain integer matrix product; the cycle
// count checked is this design's own pass timing (no published per-unit figure).
module tb_computing_cores;
  import fas_pkg::*;
  localparam int SR = 4, SC = 4, NSA = 8, MR = 16, WD = 64, INC = 32, IC = 128;
  localparam int NT = NSA*SC, NP = MR/SR, IND = MR/4*INC, IBAW = $clog2(MR/4*IC);
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy;
  inst_t inst;
  logic w_rd_en, w_rd_bank, in_rd_bank;
  logic [$clog2(WD)-1:0] w_rd_addr;
  logic [NT*8-1:0] w_rd_data;
  logic [$clog2(IND)-1:0] in_rd_addr;
  aword_t in_rd_data, ib_rd_data;
  logic [IBAW-1:0] ib_rd_addr;
  logic [$clog2(NP)-1:0] acc_rd_pass;
  logic [$clog2(NT)-1:0] acc_rd_col;
  acc_t acc_rd_data [SR];
  int checks = 0, failures = 0;

  logic [NT*8-1:0] wmem [2][WD];
  aword_t imem [2][IND];
  aword_t ibmem [MR/4*IC];
  acc_t acc_ref [NP][NT][SR];

  computing_cores #(.SA_ROWS(SR), .SA_COLS(SC), .NUM_SA(NSA), .MAXROWS(MR), .WDEPTH(WD),
                    .INDEPTH(IND), .INCOLS(INC), .ICOLS(IC)) dut (.*);
  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    w_rd_data  <= wmem[w_rd_bank][w_rd_addr];
    in_rd_data <= imem[in_rd_bank][in_rd_addr];
    ib_rd_data <= ibmem[ib_rd_addr];
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic data_t act(input logic src, input logic bank, input int row, input int col);
    aword_t w;
    if (src) w = ibmem[(row/4)*IC + col];
    else     w = imem[bank][(row/4)*INC + col];
    return data_t'(w[(row%4)*8 +: 8]);
  endfunction

  initial begin
    acc_rd_pass = 0; acc_rd_col = 0; inst = '0;
    for (int b = 0; b < 2; b++) begin
      for (int i = 0; i < WD; i++) for (int j = 0; j < NT/4; j++) wmem[b][i][j*32 +: 32] = $urandom;
      for (int i = 0; i < IND; i++) imem[b][i] = $urandom;
    end
    for (int i = 0; i < MR/4*IC; i++) ibmem[i] = $urandom;
    for (int p = 0; p < NP; p++) for (int c = 0; c < NT; c++) for (int r = 0; r < SR; r++) acc_ref[p][c][r] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 40; trial++) begin
      int rows, depth, woff, scol, passes, cyc, exp_cyc;
      logic src, bank, accf;
      rows  = 1 + $urandom % MR;
      depth = 1 + $urandom % 40;
      woff  = $urandom % (WD - depth + 1);
      src   = $urandom; bank = $urandom;
      accf  = (trial % 3 == 2);
      scol  = $urandom % ((src ? IC : INC) - depth + 1);
      passes = (rows + 3) / 4;
      // reference
      for (int p = 0; p < passes; p++) for (int c = 0; c < NT; c++) for (int r = 0; r < SR; r++) begin
        acc_t s;
        s = accf ? acc_ref[p][c][r] : 0;
        for (int k = 0; k < depth; k++)
          s += acc_t'(act(src, bank, p*4 + r, scol + k) * data_t'(wmem[bank][woff + k][c*8 +: 8]));
        acc_ref[p][c][r] = s;
      end
      @(negedge clk);
      inst = '0;
      inst.typ = IT_MM; inst.rows = 5'(rows); inst.depth = 11'(depth); inst.imm = 16'(woff);
      inst.src_sel = src; inst.bank = bank; inst.acc = accf; inst.src_col = 12'(scol);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 0;
      while (busy) begin cyc++; @(negedge clk); end
      exp_cyc = passes * (depth + SR + SC + 2);
      checks++;
      if (cyc != exp_cyc) begin failures++; $display("trial %0d: %0d busy cycles, expected %0d", trial, cyc, exp_cyc); end
      for (int p = 0; p < passes; p++) for (int c = 0; c < NT; c++) begin
        acc_rd_pass = 2'(p); acc_rd_col = 5'(c);
        #1;
        for (int r = 0; r < SR; r++) begin
          checks++;
          if (acc_rd_data[r] !== acc_ref[p][c][r]) begin
            failures++;
            if (failures < 10) $display("trial %0d pass %0d col %0d row %0d: %0d exp %0d", trial, p, c, r, acc_rd_data[r], acc_ref[p][c][r]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
