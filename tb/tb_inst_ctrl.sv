// Self-checking testbench of the internal instruction control unit. The
// testbench holds a random program (memory, matrix and post instructions
// with random wait masks, then END) in an instruction memory that answers
// fetch bursts with random gaps, and models the four units as busy for a
// random number of cycles after each start. It checks that instructions are
// dispatched in program order to the right unit, never to a busy unit or
// while a unit named in the wait mask is busy, that done comes only after all
// units are idle, and that the instruction and stall counters agree.
// Fetching, prefetching and dispatching follow the published control unit;
// the wait-mask rules and the END behaviour checked here are this design's own.
module tb_inst_ctrl;
  import fas_pkg::*;
  localparam int NPROG = 40, FN = 4;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [31:0] base_addr;
  logic running, done;
  logic [31:0] stall_cycles, inst_count;
  logic if_req_valid, if_req_ready = 0, if_tvalid = 0, if_tready, if_tlast = 0;
  logic [31:0] if_req_addr; logic [15:0] if_req_len; beat_t if_tdata = 0;
  logic [NUNITS-1:0] unit_start, unit_busy;
  inst_t unit_inst;
  int checks = 0, failures = 0;

  inst_ctrl #(.PF_DEPTH(8), .FETCH_N(FN)) dut (.*);
  always #5 clk = ~clk;

  beat_t imem [0:255];
  inst_t prog [NPROG+1];
  int    busy_left [NUNITS];
  int    next_id = 0, stalls_seen = 0;
  logic  done_seen = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_comb for (int u = 0; u < NUNITS; u++) unit_busy[u] = busy_left[u] > 0;

  function automatic int unit_of(input inst_t i);
    if (itype_e'(i.typ) == IT_MEM) return (mem_sub_e'(i.sub) == MEM_WR) ? U_MWR : U_MRD;
    if (itype_e'(i.typ) == IT_MM) return U_MM;
    return U_POST;
  endfunction

  // unit models and dispatch checks
  always @(posedge clk) if (rst_n) begin
    for (int u = 0; u < NUNITS; u++) if (busy_left[u] > 0) busy_left[u]--;
    if (unit_start != 0) begin
      int u;
      u = unit_of(unit_inst);
      checks++;
      if (unit_start != (4'b1 << u) || int'(unit_inst.ddr_addr) != next_id) begin
        failures++; $display("dispatch %0d: start %b id %0d", next_id, unit_start, unit_inst.ddr_addr);
      end
      checks++;
      if (unit_busy[u] || (unit_busy & unit_inst.wait_mask) != 0) begin
        failures++; $display("dispatch %0d: unit busy %b mask %b", next_id, unit_busy, unit_inst.wait_mask);
      end
      next_id++;
      busy_left[u] = 1 + $urandom % 12;
    end
    if (done) begin
      done_seen <= 1;
      checks++;
      if (unit_busy != 0 || next_id != NPROG) begin
        failures++; $display("done with busy %b after %0d dispatches", unit_busy, next_id);
      end
    end
  end

  // fetch responder
  initial begin
    forever begin
      @(negedge clk);
      if (if_req_valid) begin
        int a, n;
        a = int'(if_req_addr) / 8; n = int'(if_req_len);
        repeat ($urandom % 3) @(negedge clk);
        if_req_ready = 1; @(negedge clk); if_req_ready = 0;
        for (int k = 0; k < n; k++) begin
          while ($urandom % 4 == 0) begin if_tvalid = 0; @(negedge clk); end
          if_tvalid = 1; if_tdata = imem[(a + k) % 256]; if_tlast = (k == n - 1);
          @(negedge clk);
        end
        if_tvalid = 0; if_tlast = 0;
      end
    end
  end

  initial begin
    for (int u = 0; u < NUNITS; u++) busy_left[u] = 0;
    for (int k = 0; k < 256; k++) imem[k] = {$urandom, $urandom};
    for (int k = 0; k < NPROG; k++) begin
      prog[k] = '0;
      prog[k].typ = 2'($urandom % 3);
      prog[k].sub = (prog[k].typ == IT_MEM) ? 4'($urandom % 4) : 4'd0;
      prog[k].wait_mask = 4'($urandom);
      prog[k].ddr_addr = k;
    end
    prog[NPROG] = '0; prog[NPROG].typ = IT_CTRL;
    base_addr = 32'd256;   // beat 32
    for (int k = 0; k <= NPROG; k++) begin
      imem[32 + 2*k]     = prog[k][63:0];
      imem[32 + 2*k + 1] = prog[k][127:64];
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done_seen) begin
      @(negedge clk);
    end
    repeat (5) @(negedge clk);
    checks++;
    if (running || inst_count != NPROG || next_id != NPROG) begin
      failures++; $display("end: running %0b count %0d dispatched %0d", running, inst_count, next_id);
    end
    checks++;
    if (stall_cycles == 0) begin failures++; $display("no stall counted"); end
    // a second run from the same address must work after the flush
    next_id = 0; done_seen = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done_seen) @(negedge clk);
    checks++;
    if (next_id != NPROG) begin failures++; $display("second run dispatched %0d", next_id); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
