// Self-checking testbench of the intermediate buffer: random writes, then
// all three read ports read random addresses in the same cycles and are
// compared with a testbench copy (one cycle read latency).
// That intermediate results stay on chip follows the published design; port
// count and read latency are this design's own.
module tb_inter_buffer;
  import fas_pkg::*;
  localparam int MR = 8, IC = 32, DEPTH = MR/4*IC, AW = $clog2(DEPTH);
  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 0; logic [AW-1:0] wr_addr = 0, rd0_addr = 0, rd1_addr = 0, rd2_addr = 0;
  aword_t wr_data = 0, rd0_data, rd1_data, rd2_data;
  aword_t mref [DEPTH];
  int checks = 0, failures = 0;

  inter_buffer #(.MAXROWS(MR), .ICOLS(IC)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = AW'(i); wr_data = $urandom; mref[i] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 300; i++) begin
      logic [AW-1:0] a0, a1, a2;
      a0 = AW'($urandom); a1 = AW'($urandom); a2 = AW'($urandom);
      rd0_addr = a0; rd1_addr = a1; rd2_addr = a2;
      // a write in the same cycle goes to another address
      wr_en = 1; wr_addr = AW'($urandom); wr_data = $urandom;
      @(negedge clk);
      checks++;
      if (rd0_data !== mref[a0] || rd1_data !== mref[a1] || rd2_data !== mref[a2]) begin
        failures++;
        if (failures < 5) $display("read mismatch %0d", i);
      end
      mref[wr_addr] = wr_data;
      wr_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
