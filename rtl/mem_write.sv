// Memory write unit: intermediate buffer -> off-chip memory.
//
// Executes the write form (MEM_WR) of the memory access instruction: the
// final results of an inference (rows x cols, in the intermediate buffer at
// column src_col) are written back to off-chip memory at ddr_addr. The unit
// issues one burst request and then sends cols/2 beats per row group, each
// beat holding two 4-row activation words (columns c and c+1), over an
// AXI-stream style channel with tlast on the final beat. Writing final
// results back to off-chip memory is as published; the layout and handshake
// are this design's own.
//
// Timing: each beat needs two buffer reads, so a beat is offered every 4
// cycles at best (2 read cycles, 1 capture cycle, 1 send cycle).
module mem_write
  import fas_pkg::*;
#(
  parameter int unsigned MAXROWS = 16,
  parameter int unsigned ICOLS   = 4096,
  localparam int unsigned IBAW   = $clog2(MAXROWS / RG * ICOLS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  inst_t           inst,
  output logic            busy,
  output logic            wr_req_valid,
  input  logic            wr_req_ready,
  output logic [31:0]     wr_req_addr,
  output logic [15:0]     wr_req_len,
  output logic            wr_tvalid,
  input  logic            wr_tready,
  output beat_t           wr_tdata,
  output logic            wr_tlast,
  output logic [IBAW-1:0] ib_rd_addr,
  input  aword_t          ib_rd_data
);

  typedef enum logic [2:0] {S_IDLE, S_REQ, S_RDLO, S_RDHI, S_CAP, S_SEND} state_e;
  state_e state;
  inst_t  cur;
  logic [15:0] total, cnt, rg, cp, row_beats;

  assign busy         = (state != S_IDLE);
  assign wr_req_valid = (state == S_REQ);
  assign wr_req_addr  = cur.ddr_addr;
  assign wr_req_len   = total;
  assign wr_tvalid    = (state == S_SEND);
  assign wr_tlast     = (cnt == total - 16'd1);

  // column c = src_col + 2*cp, +1 in the cycle after
  always_comb begin
    ib_rd_addr = IBAW'(32'(rg) * ICOLS + 32'(cur.src_col) + 2 * 32'(cp));
    if (state == S_RDHI) ib_rd_addr = ib_rd_addr + IBAW'(1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cur <= '0;
      total <= '0; cnt <= '0; rg <= '0; cp <= '0; row_beats <= '0;
      wr_tdata <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          cur       <= inst;
          total     <= 16'((32'(inst.rows) + RG - 1) / RG * (32'(inst.cols) / 2));
          row_beats <= 16'(inst.cols / 2);
          cnt <= '0; rg <= '0; cp <= '0;
          state <= S_REQ;
        end
        S_REQ:  if (wr_req_ready) state <= (total == 0) ? S_IDLE : S_RDLO;
        S_RDLO: state <= S_RDHI;
        S_RDHI: begin wr_tdata[31:0] <= ib_rd_data; state <= S_CAP; end
        S_CAP:  begin wr_tdata[63:32] <= ib_rd_data; state <= S_SEND; end
        S_SEND: if (wr_tready) begin
          cnt <= cnt + 16'd1;
          if (cp == row_beats - 16'd1) begin cp <= '0; rg <= rg + 16'd1; end
          else cp <= cp + 16'd1;
          state <= (cnt == total - 16'd1) ? S_IDLE : S_RDLO;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // AXI-stream rule: data held stable while valid and not ready
  assert property (@(posedge clk) disable iff (!rst_n)
                   wr_tvalid && !wr_tready |=> wr_tvalid && $stable(wr_tdata))
    else $error("mem_write: stream data changed while stalled");

endmodule
