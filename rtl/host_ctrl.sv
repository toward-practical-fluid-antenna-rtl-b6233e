// External (host-side) control of the accelerator.
//
// Handles the commands, configuration and global execution control that the
// host issues, kept apart from the internal instruction control so that only
// this block depends on the host interconnect. The host sees a small bank of
// 32-bit registers on a simple synchronous register bus (write strobe,
// address, data; read data is combinational):
//   0 CTRL       write bit 0 = 1: start the program at INSTR_BASE
//   1 STATUS     bit 0 busy, bit 1 done (sticky, cleared by a new start)
//   2 INSTR_BASE byte address of the first instruction in off-chip memory
//   3 CYCLES     clock cycles of the last (or current) run
//   4 STALLS     dispatch stall cycles of the last run
//   5 INSTS      instructions dispatched in the last run
// irq is high while STATUS.done is set. The split into external and internal
// control follows the published design; the register map and bus are this
// design's own (a PCIe or AXI-Lite bridge would drive this bus).
module host_ctrl (
  input  logic        clk,
  input  logic        rst_n,
  // host register bus
  input  logic        reg_wr,
  input  logic [2:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output logic        irq,
  // to / from the internal control
  output logic        start,
  output logic [31:0] base_addr,
  input  logic        running,
  input  logic        done_pulse,
  input  logic [31:0] stall_cycles,
  input  logic [31:0] inst_count
);

  logic        done_flag;
  logic [31:0] cycles;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start     <= 1'b0;
      base_addr <= '0;
      done_flag <= 1'b0;
      cycles    <= '0;
    end else begin
      start <= 1'b0;
      if (reg_wr && reg_addr == 3'd2) base_addr <= reg_wdata;
      if (reg_wr && reg_addr == 3'd0 && reg_wdata[0] && !running && !start) begin
        start     <= 1'b1;
        done_flag <= 1'b0;
        cycles    <= '0;
      end
      if (running) cycles <= cycles + 32'd1;
      if (done_pulse) done_flag <= 1'b1;
    end
  end

  always_comb begin
    unique case (reg_addr)
      3'd1:    reg_rdata = {30'd0, done_flag, running | start};
      3'd2:    reg_rdata = base_addr;
      3'd3:    reg_rdata = cycles;
      3'd4:    reg_rdata = stall_cycles;
      3'd5:    reg_rdata = inst_count;
      default: reg_rdata = '0;
    endcase
  end

  assign irq = done_flag;

endmodule
