// Self-checking testbench of the external (host) control: register writes
// and reads, start pulse generation, refusal of a start while running, the
// busy/done status bits, the irq line and the cycle counter of a run.
// The register map checked here is this design's own; the published design
// only says that an external control unit starts and configures the core.
module tb_host_ctrl;
  logic clk = 1'b0, rst_n = 1'b0;
  logic reg_wr = 0; logic [2:0] reg_addr = 0; logic [31:0] reg_wdata = 0, reg_rdata;
  logic irq, start, running = 0, done_pulse = 0;
  logic [31:0] base_addr, stall_cycles = 32'd77, inst_count = 32'd12;
  int checks = 0, failures = 0, starts = 0, run_cycles = 0;

  host_ctrl dut (.*);
  always #5 clk = ~clk;
  always @(negedge clk) if (start) starts++;
  always @(posedge clk) if (running) run_cycles++;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk); reg_wr = 1; reg_addr = 3'(a); reg_wdata = d;
    @(negedge clk); reg_wr = 0;
  endtask
  task automatic expect_reg(input int a, input logic [31:0] e, input string what);
    @(negedge clk); reg_addr = 3'(a); #1;
    checks++;
    if (reg_rdata !== e) begin failures++; $display("%s: read %h expected %h", what, reg_rdata, e); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wr(2, 32'h0001_2340);
    expect_reg(2, 32'h0001_2340, "INSTR_BASE");
    checks++; if (base_addr !== 32'h0001_2340) begin failures++; $display("base_addr port"); end
    expect_reg(1, 32'd0, "STATUS idle");
    wr(0, 32'd1);                    // start
    @(negedge clk);
    checks++; if (starts != 1) begin failures++; $display("no start pulse"); end
    running = 1;
    wr(0, 32'd1);                    // ignored while running
    @(negedge clk);
    checks++; if (starts != 1) begin failures++; $display("start accepted while running"); end
    expect_reg(1, 32'd1, "STATUS busy");
    repeat (20) @(negedge clk);
    running = 0; done_pulse = 1; @(negedge clk); done_pulse = 0;
    expect_reg(1, 32'd2, "STATUS done");
    checks++; if (!irq) begin failures++; $display("irq low after done"); end
    expect_reg(3, 32'(run_cycles), "CYCLES");
    expect_reg(4, 32'd77, "STALLS");
    expect_reg(5, 32'd12, "INSTS");
    wr(0, 32'd1);                    // a new start clears done
    @(negedge clk);
    expect_reg(1, 32'd0, "STATUS after restart");
    checks++; if (irq || starts != 2) begin failures++; $display("restart: irq %0b starts %0d", irq, starts); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
