// Self-checking testbench of the memory write unit. The intermediate buffer
// is a testbench memory with one cycle read latency; the testbench accepts
// the burst request, applies random backpressure on the beat stream and
// compares every beat (two 4-row words) and tlast with the expected layout.
// Writing final results back over a 64-bit stream follows the published
// design; the beat packing checked here is this design's own.
module tb_mem_write;
  import fas_pkg::*;
  localparam int MR = 16, IC = 64, IBAW = $clog2(MR/4*IC);
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy;
  inst_t inst;
  logic wr_req_valid, wr_req_ready = 0, wr_tvalid, wr_tready = 0, wr_tlast;
  logic [31:0] wr_req_addr; logic [15:0] wr_req_len;
  beat_t wr_tdata;
  logic [IBAW-1:0] ib_rd_addr; aword_t ib_rd_data;
  aword_t ibmem [MR/4*IC];
  int checks = 0, failures = 0;

  mem_write #(.MAXROWS(MR), .ICOLS(IC)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) ib_rd_data <= ibmem[ib_rd_addr];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    inst = '0;
    for (int i = 0; i < MR/4*IC; i++) ibmem[i] = $urandom;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 20; trial++) begin
      int rows, cols, scol, n, k;
      logic [31:0] addr;
      rows = 1 + $urandom % MR; cols = 2 * (1 + $urandom % 8); scol = $urandom % (IC - cols);
      n = (rows + 3) / 4 * cols / 2; addr = $urandom;
      inst = '0; inst.typ = IT_MEM; inst.sub = MEM_WR; inst.rows = 5'(rows); inst.cols = 11'(cols);
      inst.src_col = 12'(scol); inst.ddr_addr = addr;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      repeat ($urandom % 3) @(negedge clk);
      checks++;
      if (!wr_req_valid || wr_req_addr != addr || 32'(wr_req_len) != n) begin
        failures++; $display("trial %0d: bad request", trial);
      end
      wr_req_ready = 1; @(negedge clk); wr_req_ready = 0;
      k = 0;
      while (k < n) begin
        wr_tready = ($urandom % 3) != 0;
        if (wr_tvalid && wr_tready) begin
          int g, j;
          g = k / (cols / 2); j = k % (cols / 2);
          checks++;
          if (wr_tdata !== {ibmem[g*IC + scol + 2*j + 1], ibmem[g*IC + scol + 2*j]} || wr_tlast != (k == n - 1)) begin
            failures++; $display("trial %0d beat %0d mismatch", trial, k);
          end
          k++;
        end
        @(negedge clk);
      end
      wr_tready = 0;
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("trial %0d still busy", trial); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
