// Internal instruction control unit.
//
// Fetches the instruction stream from off-chip memory, keeps up to PF_DEPTH
// instructions prefetched, decodes the class of the instruction at the head
// and dispatches it to one of four functional units: memory read, computing
// cores (matrix processing), post processing and memory write. Fetching,
// prefetching, decoding, dispatching and dependency handling are the duties
// given to the internal control logic in the published design; how they are
// done here is this design's own choice:
//   * Fetch: bursts of FETCH_N instructions (2*FETCH_N beats of 64 bits, low
//     half first) whenever that many prefetch slots are free. Fetching stops
//     after an END instruction has been fetched.
//   * Dispatch: strictly in order, at most one instruction per cycle. An
//     instruction waits while its own unit is busy or while any unit named in
//     its wait_mask is busy. The compiler sets wait masks so that, e.g., a
//     matrix instruction waits for the weight load it consumes, while the next
//     load into the other ping-pong bank is dispatched at once and overlaps
//     the computation. Cycles in which the head instruction is held back are
//     counted in stall_cycles.
//   * END: waits until all units are idle, then pulses done and flushes the
//     prefetch queue.
// The fetch burst length if_req_len is the constant 2*FETCH_N beats; it is
// an output so that the memory side needs no knowledge of the burst size.
// Units register start in the cycle of dispatch and raise busy in the next
// cycle, so the busy vector seen by the next instruction is always current.
module inst_ctrl
  import fas_pkg::*;
#(
  parameter int unsigned PF_DEPTH = 8,
  parameter int unsigned FETCH_N  = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // from the external (host) control
  input  logic              start,
  input  logic [31:0]       base_addr,
  output logic              running,
  output logic              done,
  output logic [31:0]       stall_cycles,
  output logic [31:0]       inst_count,
  // instruction fetch port
  output logic              if_req_valid,
  input  logic              if_req_ready,
  output logic [31:0]       if_req_addr,
  output logic [15:0]       if_req_len,
  input  logic              if_tvalid,
  output logic              if_tready,
  input  beat_t             if_tdata,
  input  logic              if_tlast,
  // dispatch to the functional units
  output logic [NUNITS-1:0] unit_start,
  output inst_t             unit_inst,
  input  logic [NUNITS-1:0] unit_busy
);

  localparam int unsigned PW = $clog2(PF_DEPTH);

  // prefetch queue
  inst_t       q [PF_DEPTH];
  logic [PW:0] q_cnt;
  logic [PW-1:0] q_rd, q_wr;

  // fetch state
  typedef enum logic [1:0] {F_IDLE, F_REQ, F_DATA, F_STOP} fstate_e;
  fstate_e     fstate;
  logic [31:0] fetch_addr;
  logic [15:0] beat_cnt;
  logic        half;          // 0: expecting low beat
  beat_t       lo_beat;
  logic [PW:0] reserved;      // slots claimed by the burst in flight
  logic        saw_end;

  inst_t head;
  logic  head_valid, head_is_end, can_go, dispatch, pop, push, fetch_busy;
  logic [1:0] unit_sel;
  inst_t new_inst;

  assign head       = q[q_rd];
  assign fetch_busy = (fstate == F_DATA) || (fstate == F_REQ);
  assign head_valid = running && (q_cnt != 0);
  assign head_is_end = (itype_e'(head.typ) == IT_CTRL);

  always_comb begin
    unique case (itype_e'(head.typ))
      IT_MEM:  unit_sel = (mem_sub_e'(head.sub) == MEM_WR) ? 2'(U_MWR) : 2'(U_MRD);
      IT_MM:   unit_sel = 2'(U_MM);
      default: unit_sel = 2'(U_POST);
    endcase
  end

  assign can_go   = head_is_end ? (unit_busy == '0)
                                : (!unit_busy[unit_sel] && ((unit_busy & head.wait_mask) == '0));
  assign dispatch = head_valid && !head_is_end && can_go;
  assign pop      = head_valid && can_go && !(head_is_end && fetch_busy);

  always_comb begin
    unit_start = '0;
    if (dispatch) unit_start[unit_sel] = 1'b1;
  end
  assign unit_inst = head;

  // fetch side
  assign if_req_valid = (fstate == F_REQ);
  assign if_req_addr  = fetch_addr;
  assign if_req_len   = 16'(2 * FETCH_N);
  assign if_tready    = (fstate == F_DATA);
  assign new_inst     = inst_t'({if_tdata, lo_beat});
  assign push         = (fstate == F_DATA) && if_tvalid && half;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      done <= 1'b0;
      stall_cycles <= '0;
      inst_count <= '0;
      q_cnt <= '0; q_rd <= '0; q_wr <= '0;
      fstate <= F_IDLE;
      fetch_addr <= '0;
      beat_cnt <= '0;
      half <= 1'b0;
      lo_beat <= '0;
      reserved <= '0;
      saw_end <= 1'b0;
      for (int i = 0; i < PF_DEPTH; i++) q[i] <= '0;
    end else begin
      done <= 1'b0;

      if (start && !running) begin
        running      <= 1'b1;
        fetch_addr   <= base_addr;
        stall_cycles <= '0;
        inst_count   <= '0;
        saw_end      <= 1'b0;
        fstate       <= F_IDLE;
      end

      // fetch engine
      unique case (fstate)
        F_IDLE: if (running && !saw_end && (32'(q_cnt) + FETCH_N <= PF_DEPTH)) begin
          fstate   <= F_REQ;
          reserved <= (PW+1)'(FETCH_N);
        end
        F_REQ: if (if_req_ready) begin
          fstate   <= F_DATA;
          beat_cnt <= '0;
          half     <= 1'b0;
        end
        F_DATA: if (if_tvalid) begin
          beat_cnt <= beat_cnt + 16'd1;
          half     <= !half;
          if (!half) lo_beat <= if_tdata;
          if (beat_cnt == 16'(2 * FETCH_N - 1)) begin
            fetch_addr <= fetch_addr + 32'(16 * FETCH_N);
            reserved   <= '0;
            fstate     <= (saw_end || (push && itype_e'(new_inst.typ) == IT_CTRL)) ? F_STOP : F_IDLE;
          end
        end
        F_STOP: ;
        default: fstate <= F_IDLE;
      endcase

      // queue; instructions after an END in the same burst are dropped
      if (push && !saw_end) begin
        q[q_wr] <= new_inst;
        q_wr    <= q_wr + 1'b1;
        if (itype_e'(new_inst.typ) == IT_CTRL) saw_end <= 1'b1;
      end
      q_cnt <= q_cnt + (PW+1)'(push && !saw_end) - (PW+1)'(pop);
      if (pop) q_rd <= q_rd + 1'b1;

      if (dispatch) inst_count <= inst_count + 32'd1;
      if (head_valid && !pop) stall_cycles <= stall_cycles + 32'd1;

      // END retired: flush and stop
      if (pop && head_is_end) begin
        running <= 1'b0;
        done    <= 1'b1;
        q_cnt <= '0; q_rd <= '0; q_wr <= '0;
        fstate  <= F_IDLE;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (q_cnt + reserved) <= (PW+1)'(PF_DEPTH) + (PW+1)'(FETCH_N))
    else $error("inst_ctrl: prefetch queue overflow");
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(unit_start))
    else $error("inst_ctrl: two units started at once");

  logic unused;
  assign unused = if_tlast;

endmodule
