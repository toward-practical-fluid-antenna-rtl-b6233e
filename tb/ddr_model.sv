// Behavioural model of the off-chip DDR memory (not synthesizable, testbench
// only). It serves the accelerator's three memory ports from one array of
// 64-bit beats: instruction read, data read and data write. Each read burst is
// accepted, then after LAT cycles streamed at one beat per cycle (the 64-bit
// per cycle bandwidth of the prototype); with GAPS = 1 random idle cycles are
// inserted in read bursts and random backpressure is applied to writes.
// gap_cycles counts the idle cycles inserted. The testbench fills and reads
// mem directly. Handshake signals are driven and sampled at the falling
// clock edge; a transfer happens at the following rising edge. dwr_tlast is
// not needed, the request carries the length.
// The memory itself is outside the accelerator design; only the 64-bit beat
// width follows the published prototype, latency and stall pattern are
// choices of this model.
module ddr_model
  import fas_pkg::*;
#(
  parameter int MEM_BEATS = 1 << 20,
  parameter int LAT       = 8,
  parameter bit GAPS      = 1'b0
) (
  input  logic        clk,
  input  logic        ird_req_valid,
  output logic        ird_req_ready,
  input  logic [31:0] ird_req_addr,
  input  logic [15:0] ird_req_len,
  output logic        ird_tvalid,
  input  logic        ird_tready,
  output beat_t       ird_tdata,
  output logic        ird_tlast,
  input  logic        drd_req_valid,
  output logic        drd_req_ready,
  input  logic [31:0] drd_req_addr,
  input  logic [15:0] drd_req_len,
  output logic        drd_tvalid,
  input  logic        drd_tready,
  output beat_t       drd_tdata,
  output logic        drd_tlast,
  input  logic        dwr_req_valid,
  output logic        dwr_req_ready,
  input  logic [31:0] dwr_req_addr,
  input  logic [15:0] dwr_req_len,
  input  logic        dwr_tvalid,
  output logic        dwr_tready,
  input  beat_t       dwr_tdata,
  input  logic        dwr_tlast
);

  beat_t mem [MEM_BEATS];
  int gap_cycles = 0;
  int write_beats = 0;

  initial begin
    ird_req_ready = 0; ird_tvalid = 0; ird_tdata = 0; ird_tlast = 0;
    drd_req_ready = 0; drd_tvalid = 0; drd_tdata = 0; drd_tlast = 0;
    dwr_req_ready = 0; dwr_tready = 0;
  end

  // instruction read port
  initial forever begin
    @(negedge clk);
    if (ird_req_valid) begin
      int a, n;
      a = int'(ird_req_addr / 8); n = int'(ird_req_len);
      ird_req_ready = 1; @(negedge clk); ird_req_ready = 0;
      repeat (LAT) @(negedge clk);
      for (int k = 0; k < n; k++) begin
        ird_tvalid = 1; ird_tdata = mem[(a + k) % MEM_BEATS]; ird_tlast = (k == n - 1);
        #1;
        while (!ird_tready) begin @(negedge clk); #1; end
        @(negedge clk);
      end
      ird_tvalid = 0; ird_tlast = 0;
    end
  end

  // data read port
  initial forever begin
    @(negedge clk);
    if (drd_req_valid) begin
      int a, n;
      a = int'(drd_req_addr / 8); n = int'(drd_req_len);
      drd_req_ready = 1; @(negedge clk); drd_req_ready = 0;
      repeat (LAT) @(negedge clk);
      for (int k = 0; k < n; k++) begin
        if (GAPS) while ($urandom % 4 == 0) begin
          drd_tvalid = 0; gap_cycles++; @(negedge clk);
        end
        drd_tvalid = 1; drd_tdata = mem[(a + k) % MEM_BEATS]; drd_tlast = (k == n - 1);
        #1;
        while (!drd_tready) begin @(negedge clk); #1; end
        @(negedge clk);
      end
      drd_tvalid = 0; drd_tlast = 0;
    end
  end

  // data write port
  initial forever begin
    @(negedge clk);
    if (dwr_req_valid) begin
      int a, n, k;
      a = int'(dwr_req_addr / 8); n = int'(dwr_req_len);
      dwr_req_ready = 1; @(negedge clk); dwr_req_ready = 0;
      k = 0;
      while (k < n) begin
        dwr_tready = GAPS ? ($urandom % 3 != 0) : 1'b1;
        if (!dwr_tready) gap_cycles++;
        #1;
        if (dwr_tvalid && dwr_tready) begin
          mem[(a + k) % MEM_BEATS] = dwr_tdata;
          k++;
          write_beats++;
        end
        @(negedge clk);
      end
      dwr_tready = 0;
    end
  end

endmodule
