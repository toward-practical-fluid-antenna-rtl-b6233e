// Self-checking testbench of the ping-pong double buffer: fills all three
// regions of both banks with random beats, then reads every weight row,
// activation word and bias byte back and compares with a testbench copy;
// also checks that writing one bank leaves the other bank untouched.
// The ping-pong behaviour follows the published architecture; the region
// layout and read latency checked here are this design's own.
module tb_double_buffer;
  import fas_pkg::*;
  localparam int NT = 32, WD = 16, IND = 16, BD = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 0, wr_bank = 0; logic [1:0] wr_region = 0; logic [15:0] wr_addr = 0; beat_t wr_data = 0;
  logic w_rd_en = 0, w_rd_bank = 0; logic [$clog2(WD)-1:0] w_rd_addr = 0; logic [NT*8-1:0] w_rd_data;
  logic in_rd_bank = 0; logic [$clog2(IND)-1:0] in_rd_addr = 0; aword_t in_rd_data;
  logic b_rd_bank = 0; logic [$clog2(BD)-1:0] b_rd_addr = 0; data_t b_rd_data;
  int checks = 0, failures = 0;
  beat_t wref [2][WD*NT/8];
  beat_t iref [2][IND/2];
  beat_t bref [2][BD/8];

  double_buffer #(.NT(NT), .WDEPTH(WD), .INDEPTH(IND), .BDEPTH(BD)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic bank, input logic [1:0] reg_, input int addr, input beat_t d);
    @(negedge clk);
    wr_en = 1; wr_bank = bank; wr_region = reg_; wr_addr = 16'(addr); wr_data = d;
    @(negedge clk);
    wr_en = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 2; b++) begin
      for (int i = 0; i < WD*NT/8; i++) begin wref[b][i] = {$urandom, $urandom}; wr(b[0], 2'd0, i, wref[b][i]); end
      for (int i = 0; i < IND/2; i++)     begin iref[b][i] = {$urandom, $urandom}; wr(b[0], 2'd1, i, iref[b][i]); end
      for (int i = 0; i < BD/8; i++)      begin bref[b][i] = {$urandom, $urandom}; wr(b[0], 2'd2, i, bref[b][i]); end
    end
    for (int b = 0; b < 2; b++) begin
      for (int r = 0; r < WD; r++) begin
        @(negedge clk); w_rd_en = 1; w_rd_bank = b[0]; w_rd_addr = 4'(r);
        @(negedge clk); w_rd_en = 0;
        checks++;
        for (int l = 0; l < NT/8; l++)
          if (w_rd_data[l*64 +: 64] !== wref[b][r*NT/8 + l]) begin
            failures++; $display("weight bank %0d row %0d lane %0d", b, r, l);
          end
      end
      for (int a = 0; a < IND; a++) begin
        @(negedge clk); in_rd_bank = b[0]; in_rd_addr = 4'(a);
        @(negedge clk);
        checks++;
        if (in_rd_data !== iref[b][a/2][(a%2)*32 +: 32]) begin
          failures++; $display("input bank %0d word %0d", b, a);
        end
      end
      for (int a = 0; a < BD; a++) begin
        @(negedge clk); b_rd_bank = b[0]; b_rd_addr = 6'(a);
        @(negedge clk);
        checks++;
        if (b_rd_data !== data_t'(bref[b][a/8][(a%8)*8 +: 8])) begin
          failures++; $display("bias bank %0d byte %0d", b, a);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
