// Self-checking testbench of the memory read unit. The testbench acts as the
// off-chip memory: it accepts the burst request after a random delay, checks
// address and length, and streams the beats with random gaps and tlast on
// the final beat. Every double-buffer write is compared with the region,
// bank, beat address and data expected for weight, bias and input loads; the
// unit must take exactly one cycle per beat offered.
// Streaming beats of 64 bits follows the published design; the request
// handshake and the buffer address rules checked here are this design's own.
module tb_mem_read;
  import fas_pkg::*;
  localparam int NT = 32, INC = 64;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy;
  inst_t inst;
  logic rd_req_valid, rd_req_ready = 0, rd_tvalid = 0, rd_tready, rd_tlast = 0;
  logic [31:0] rd_req_addr; logic [15:0] rd_req_len;
  beat_t rd_tdata = 0;
  logic buf_wr_en, buf_wr_bank; logic [1:0] buf_wr_region; logic [15:0] buf_wr_addr; beat_t buf_wr_data;
  int checks = 0, failures = 0;

  mem_read #(.NT(NT), .INCOLS(INC)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_addr [$];
  beat_t exp_data [$];
  int exp_region, nwrites;
  logic exp_bank;

  always @(posedge clk) if (rst_n && buf_wr_en) begin
    checks++;
    nwrites++;
    if (exp_addr.size() == 0) begin failures++; $display("unexpected write"); end
    else begin
      int a; beat_t d;
      a = exp_addr.pop_front(); d = exp_data.pop_front();
      if (32'(buf_wr_addr) != a || buf_wr_data !== d || 32'(buf_wr_region) != exp_region || buf_wr_bank != exp_bank) begin
        failures++;
        if (failures < 10) $display("write addr %0d exp %0d region %0d exp %0d", buf_wr_addr, a, buf_wr_region, exp_region);
      end
    end
  end

  initial begin
    inst = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 30; trial++) begin
      int sub, n, rows, cols, dst, rg0;
      logic [31:0] addr;
      sub = trial % 3;
      inst = '0;
      inst.typ = IT_MEM; inst.bank = $urandom; addr = $urandom & 32'hFFFF_FFF8;
      inst.ddr_addr = addr;
      exp_bank = inst.bank;
      exp_addr.delete(); exp_data.delete();
      if (sub == 0) begin
        inst.sub = MEM_RD_W; inst.depth = 11'(1 + $urandom % 20);
        n = int'(inst.depth) * NT / 8; exp_region = 0;
        for (int i = 0; i < n; i++) exp_addr.push_back(i);
      end else if (sub == 1) begin
        inst.sub = MEM_RD_B; cols = 8 * (1 + $urandom % 6); dst = 8 * ($urandom % 16);
        inst.cols = 11'(cols); inst.dst_col = 12'(dst);
        n = cols / 8; exp_region = 2;
        for (int i = 0; i < n; i++) exp_addr.push_back(dst / 8 + i);
      end else begin
        inst.sub = MEM_RD_IN; rows = 1 + $urandom % 16; cols = 2 * (1 + $urandom % 8);
        dst = 2 * ($urandom % 8); rg0 = (rows <= 4) ? $urandom % 4 : 0;
        inst.rows = 5'(rows); inst.cols = 11'(cols); inst.dst_col = 12'(dst); inst.imm = 16'(rg0);
        n = (rows + 3) / 4 * cols / 2; exp_region = 1;
        for (int g = 0; g < (rows + 3) / 4; g++)
          for (int j = 0; j < cols / 2; j++) exp_addr.push_back(((rg0 + g) * INC + dst) / 2 + j);
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      // request
      repeat ($urandom % 4) @(negedge clk);
      checks++;
      if (!rd_req_valid || rd_req_addr != addr || 32'(rd_req_len) != n) begin
        failures++; $display("trial %0d: request valid %0b addr %h len %0d exp %0d", trial, rd_req_valid, rd_req_addr, rd_req_len, n);
      end
      rd_req_ready = 1; @(negedge clk); rd_req_ready = 0;
      nwrites = 0;
      for (int i = 0; i < n; i++) begin
        beat_t d;
        while ($urandom % 3 == 0) begin rd_tvalid = 0; @(negedge clk); end
        d = {$urandom, $urandom};
        exp_data.push_back(d);
        rd_tvalid = 1; rd_tdata = d; rd_tlast = (i == n - 1);
        checks++;
        if (!rd_tready) begin failures++; $display("trial %0d: not ready at beat %0d", trial, i); end
        @(negedge clk);
      end
      rd_tvalid = 0; rd_tlast = 0;
      @(negedge clk);
      checks++;
      if (busy || nwrites != n || exp_addr.size() != 0) begin
        failures++; $display("trial %0d: busy %0b writes %0d of %0d", trial, busy, nwrites, n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
