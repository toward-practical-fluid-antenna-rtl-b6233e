// Memory read unit: off-chip memory -> double buffer.
//
// Executes the read forms of the memory access instruction. It issues one
// burst request (byte address, length in 64-bit beats) and then accepts the
// burst as an AXI-stream style beat stream (tvalid/tready/tlast), writing
// every beat into the selected region of the selected double-buffer bank.
// The memory-type field selects the region:
//   MEM_RD_W : depth x NT weight tile, NT/8 beats per tile row, from the first
//              tile row of the bank onward
//   MEM_RD_B : cols bias bytes, to bias byte dst_col (multiple of 8)
//   MEM_RD_IN: rows x cols activations stored as 4-row words, cols/2 beats per
//              row group, row group g to word (imm+g)*INCOLS + dst_col, so
//              the channel matrices of several port selections loaded one
//              after another end up stacked (concatenated) on chip
// Off-chip data must already be laid out in these on-chip formats; that is
// the compiler's job. Off-chip to on-chip streaming and the double buffer are
// as published; the request/stream handshake and the layouts are this
// design's own. One beat is written per cycle in which tvalid and tready are
// both high, so a burst of n beats takes n cycles at full memory rate.
// buf_wr_data is the stream data itself (wired straight through, no
// register), which is why those 64 output bits follow an input directly.
module mem_read
  import fas_pkg::*;
#(
  parameter int unsigned NT     = 32,
  parameter int unsigned INCOLS = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  inst_t       inst,
  output logic        busy,
  // burst request
  output logic        rd_req_valid,
  input  logic        rd_req_ready,
  output logic [31:0] rd_req_addr,
  output logic [15:0] rd_req_len,
  // beat stream
  input  logic        rd_tvalid,
  output logic        rd_tready,
  input  beat_t       rd_tdata,
  input  logic        rd_tlast,
  // double-buffer write port
  output logic        buf_wr_en,
  output logic        buf_wr_bank,
  output logic [1:0]  buf_wr_region,
  output logic [15:0] buf_wr_addr,
  output beat_t       buf_wr_data
);

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_DATA} state_e;
  state_e state;
  inst_t  cur;
  logic [15:0] total, cnt;
  logic [15:0] rg, cp, row_beats;

  assign busy      = (state != S_IDLE);
  assign rd_req_valid = (state == S_REQ);
  assign rd_req_addr  = cur.ddr_addr;
  assign rd_req_len   = total;
  assign rd_tready    = (state == S_DATA);

  function automatic logic [15:0] beats_of(input inst_t i);
    unique case (mem_sub_e'(i.sub))
      MEM_RD_W:  beats_of = 16'(32'(i.depth) * NT / 8);
      MEM_RD_B:  beats_of = 16'(i.cols / 8);
      MEM_RD_IN: beats_of = 16'((32'(i.rows) + RG - 1) / RG * (32'(i.cols) / 2));
      default:   beats_of = 16'd0;
    endcase
  endfunction

  always_comb begin
    buf_wr_en     = (state == S_DATA) && rd_tvalid;
    buf_wr_bank   = cur.bank;
    buf_wr_data   = rd_tdata;
    unique case (mem_sub_e'(cur.sub))
      MEM_RD_W:  begin buf_wr_region = 2'd0; buf_wr_addr = cnt; end
      MEM_RD_IN: begin buf_wr_region = 2'd1;
                       buf_wr_addr = 16'((32'(rg) * INCOLS + 32'(cur.dst_col)) / 2 + 32'(cp)); end
      default:   begin buf_wr_region = 2'd2; buf_wr_addr = 16'(cur.dst_col / 8) + cnt; end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cur <= '0;
      total <= '0;
      cnt <= '0;
      rg <= '0;
      cp <= '0;
      row_beats <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          cur       <= inst;
          total     <= beats_of(inst);
          row_beats <= 16'(inst.cols / 2);
          cnt <= '0; rg <= (mem_sub_e'(inst.sub) == MEM_RD_IN) ? inst.imm : '0; cp <= '0;
          state <= S_REQ;
        end
        S_REQ: if (rd_req_ready) state <= (total == 0) ? S_IDLE : S_DATA;
        S_DATA: if (rd_tvalid) begin
          cnt <= cnt + 16'd1;
          if (cp == row_beats - 16'd1) begin cp <= '0; rg <= rg + 16'd1; end
          else cp <= cp + 16'd1;
          if (cnt == total - 16'd1) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the last beat of a burst must carry tlast
  assert property (@(posedge clk) disable iff (!rst_n)
                   state == S_DATA && rd_tvalid |-> (rd_tlast == (cnt == total - 16'd1)))
    else $error("mem_read: tlast does not match burst length");

endmodule
