// Self-checking testbench of the processing element: random operand streams
// with random valid bits and clears; the accumulator and the forwarded
// operands are compared with a reference computed in the testbench.
// Multiply, accumulate and pass-on follow the published PE description; the
// valid bits and clear priority checked here are this design's own.
module tb_pe;
  import fas_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, clr;
  data_t a_in, b_in, a_out, b_out;
  logic a_v_in, b_v_in, a_v_out, b_v_out;
  acc_t acc;
  int checks = 0, failures = 0;
  acc_t ref_acc;

  pe dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 0; a_in = 0; b_in = 0; a_v_in = 0; b_v_in = 0; ref_acc = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      a_in = data_t'($urandom); b_in = data_t'($urandom);
      a_v_in = ($urandom % 4) != 0; b_v_in = ($urandom % 4) != 0;
      clr = ($urandom % 50) == 0;
      if (clr) ref_acc = 0;
      else if (a_v_in && b_v_in) ref_acc = ref_acc + acc_t'(a_in * b_in);
      @(posedge clk); #1;
      checks++;
      if (acc !== ref_acc || a_out !== a_in || b_out !== b_in || a_v_out !== a_v_in || b_v_out !== b_v_in) begin
        failures++;
        if (failures < 5) $display("mismatch at %0d: acc %0d exp %0d", i, acc, ref_acc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
