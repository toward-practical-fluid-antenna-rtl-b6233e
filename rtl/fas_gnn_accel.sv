// Instruction-driven GNN accelerator for beamforming in fluid antenna systems.
//
// Top level. A host loads the GNN model, the channel features of one or more
// port selections and a compiled instruction stream into off-chip memory,
// writes the stream's address and starts the run through the host register
// bus. The internal instruction control unit then fetches the stream and
// dispatches every instruction to one of four units:
//   memory read     off-chip -> ping-pong double buffer (weights, inputs, biases)
//   computing cores 8 output-stationary 4x4 systolic arrays, Y = X * W
//   post processing bias add, ReLU, max-pooling, concatenation, normalization
//   memory write    intermediate buffer -> off-chip (final beamforming matrix)
// Intermediate activations never leave the chip: post processing writes them
// to the intermediate buffer, which the computing cores read for the next
// layer. Several port selections are processed as extra rows of the same
// matrices, so one weight stream serves all of them.
//
// Off-chip memory is reached through three ports: an instruction read port,
// a data read port and a data write port. Each has a burst request
// (valid/ready, byte address, length in 64-bit beats) followed by an
// AXI-stream style beat channel (tvalid/tready/tdata/tlast). The 64-bit data
// width is the off-chip bandwidth of the published prototype; the port split
// and handshakes are this design's own.
//
// ird_req_len is constant (fixed instruction burst of 8 beats), given as a
// port so the memory side needs no knowledge of the burst size.
//
// Block structure, the three instruction classes and the unit list follow the
// published architecture figure; sizes marked "own choice" in the parameter
// list are this design's.
module fas_gnn_accel
  import fas_pkg::*;
#(
  parameter int unsigned SA_ROWS  = 4,     // PE rows per systolic array (figure)
  parameter int unsigned SA_COLS  = 4,     // PE columns per systolic array (figure)
  parameter int unsigned NUM_SA   = 8,     // systolic arrays (own choice)
  parameter int unsigned MAXROWS  = 16,    // 4 UEs x 4 port selections
  parameter int unsigned WDEPTH   = 1024,  // weight-tile rows = widest layer input
  parameter int unsigned INCOLS   = 64,    // input-region columns (own choice)
  parameter int unsigned ICOLS    = 4096,  // intermediate-buffer columns (own choice)
  parameter int unsigned BDEPTH   = 1024,  // bias bytes per bank = widest layer output
  parameter int unsigned PF_DEPTH = 8,     // prefetched instructions (own choice)
  localparam int unsigned NT      = NUM_SA * SA_COLS,
  localparam int unsigned INDEPTH = MAXROWS / RG * INCOLS,
  localparam int unsigned NPASS   = MAXROWS / RG,
  localparam int unsigned IBAW    = $clog2(NPASS * ICOLS)
) (
  input  logic        clk,
  input  logic        rst_n,
  // host register bus
  input  logic        reg_wr,
  input  logic [2:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output logic        irq,
  // off-chip memory: instruction read
  output logic        ird_req_valid,
  input  logic        ird_req_ready,
  output logic [31:0] ird_req_addr,
  output logic [15:0] ird_req_len,
  input  logic        ird_tvalid,
  output logic        ird_tready,
  input  beat_t       ird_tdata,
  input  logic        ird_tlast,
  // off-chip memory: data read
  output logic        drd_req_valid,
  input  logic        drd_req_ready,
  output logic [31:0] drd_req_addr,
  output logic [15:0] drd_req_len,
  input  logic        drd_tvalid,
  output logic        drd_tready,
  input  beat_t       drd_tdata,
  input  logic        drd_tlast,
  // off-chip memory: data write
  output logic        dwr_req_valid,
  input  logic        dwr_req_ready,
  output logic [31:0] dwr_req_addr,
  output logic [15:0] dwr_req_len,
  output logic        dwr_tvalid,
  input  logic        dwr_tready,
  output beat_t       dwr_tdata,
  output logic        dwr_tlast,
  // performance event pulses (EV_* in fas_pkg), for counters outside the core
  output logic [NEV-1:0] perf_ev
);

  // control
  logic        start, running, done_pulse;
  logic [31:0] base_addr, stall_cycles, inst_count;
  logic [NUNITS-1:0] unit_start, unit_busy;
  inst_t       unit_inst;

  // double buffer
  logic        db_wr_en, db_wr_bank;
  logic [1:0]  db_wr_region;
  logic [15:0] db_wr_addr;
  beat_t       db_wr_data;
  logic        w_rd_en, w_rd_bank, in_rd_bank, b_rd_bank;
  logic [$clog2(WDEPTH)-1:0]  w_rd_addr;
  logic [NT*DATA_W-1:0]       w_rd_data;
  logic [$clog2(INDEPTH)-1:0] in_rd_addr;
  aword_t                     in_rd_data;
  logic [$clog2(BDEPTH)-1:0]  b_rd_addr;
  data_t                      b_rd_data;

  // intermediate buffer
  logic            ib_wr_en;
  logic [IBAW-1:0] ib_wr_addr, ib_rd0_addr, ib_rd1_addr, ib_rd2_addr;
  aword_t          ib_wr_data, ib_rd0_data, ib_rd1_data, ib_rd2_data;

  // accumulator
  logic [$clog2(NPASS)-1:0] acc_rd_pass;
  logic [$clog2(NT)-1:0]    acc_rd_col;
  acc_t                     acc_rd_data [RG];

  host_ctrl u_host (
    .clk, .rst_n,
    .reg_wr, .reg_addr, .reg_wdata, .reg_rdata, .irq,
    .start, .base_addr, .running, .done_pulse, .stall_cycles, .inst_count
  );

  inst_ctrl #(.PF_DEPTH(PF_DEPTH)) u_ctrl (
    .clk, .rst_n,
    .start, .base_addr, .running, .done(done_pulse), .stall_cycles, .inst_count,
    .if_req_valid(ird_req_valid), .if_req_ready(ird_req_ready),
    .if_req_addr(ird_req_addr), .if_req_len(ird_req_len),
    .if_tvalid(ird_tvalid), .if_tready(ird_tready), .if_tdata(ird_tdata), .if_tlast(ird_tlast),
    .unit_start, .unit_inst, .unit_busy
  );

  mem_read #(.NT(NT), .INCOLS(INCOLS)) u_mrd (
    .clk, .rst_n,
    .start(unit_start[U_MRD]), .inst(unit_inst), .busy(unit_busy[U_MRD]),
    .rd_req_valid(drd_req_valid), .rd_req_ready(drd_req_ready),
    .rd_req_addr(drd_req_addr), .rd_req_len(drd_req_len),
    .rd_tvalid(drd_tvalid), .rd_tready(drd_tready), .rd_tdata(drd_tdata), .rd_tlast(drd_tlast),
    .buf_wr_en(db_wr_en), .buf_wr_bank(db_wr_bank), .buf_wr_region(db_wr_region),
    .buf_wr_addr(db_wr_addr), .buf_wr_data(db_wr_data)
  );

  double_buffer #(.NT(NT), .WDEPTH(WDEPTH), .INDEPTH(INDEPTH), .BDEPTH(BDEPTH)) u_dbuf (
    .clk, .rst_n,
    .wr_en(db_wr_en), .wr_bank(db_wr_bank), .wr_region(db_wr_region),
    .wr_addr(db_wr_addr), .wr_data(db_wr_data),
    .w_rd_en, .w_rd_bank, .w_rd_addr, .w_rd_data,
    .in_rd_bank, .in_rd_addr, .in_rd_data,
    .b_rd_bank, .b_rd_addr, .b_rd_data
  );

  computing_cores #(
    .SA_ROWS(SA_ROWS), .SA_COLS(SA_COLS), .NUM_SA(NUM_SA), .MAXROWS(MAXROWS),
    .WDEPTH(WDEPTH), .INDEPTH(INDEPTH), .INCOLS(INCOLS), .ICOLS(ICOLS)
  ) u_cores (
    .clk, .rst_n,
    .start(unit_start[U_MM]), .inst(unit_inst), .busy(unit_busy[U_MM]),
    .w_rd_en, .w_rd_bank, .w_rd_addr, .w_rd_data,
    .in_rd_bank, .in_rd_addr, .in_rd_data,
    .ib_rd_addr(ib_rd0_addr), .ib_rd_data(ib_rd0_data),
    .acc_rd_pass, .acc_rd_col, .acc_rd_data
  );

  post_proc #(.MAXROWS(MAXROWS), .ICOLS(ICOLS), .NT(NT), .BDEPTH(BDEPTH)) u_post (
    .clk, .rst_n,
    .start(unit_start[U_POST]), .inst(unit_inst), .busy(unit_busy[U_POST]),
    .acc_rd_pass, .acc_rd_col, .acc_rd_data,
    .b_rd_bank, .b_rd_addr, .b_rd_data,
    .ib_rd_addr(ib_rd1_addr), .ib_rd_data(ib_rd1_data),
    .ib_wr_en, .ib_wr_addr, .ib_wr_data
  );

  inter_buffer #(.MAXROWS(MAXROWS), .ICOLS(ICOLS)) u_ibuf (
    .clk, .rst_n,
    .wr_en(ib_wr_en), .wr_addr(ib_wr_addr), .wr_data(ib_wr_data),
    .rd0_addr(ib_rd0_addr), .rd0_data(ib_rd0_data),
    .rd1_addr(ib_rd1_addr), .rd1_data(ib_rd1_data),
    .rd2_addr(ib_rd2_addr), .rd2_data(ib_rd2_data)
  );

  mem_write #(.MAXROWS(MAXROWS), .ICOLS(ICOLS)) u_mwr (
    .clk, .rst_n,
    .start(unit_start[U_MWR]), .inst(unit_inst), .busy(unit_busy[U_MWR]),
    .wr_req_valid(dwr_req_valid), .wr_req_ready(dwr_req_ready),
    .wr_req_addr(dwr_req_addr), .wr_req_len(dwr_req_len),
    .wr_tvalid(dwr_tvalid), .wr_tready(dwr_tready), .wr_tdata(dwr_tdata), .wr_tlast(dwr_tlast),
    .ib_rd_addr(ib_rd2_addr), .ib_rd_data(ib_rd2_data)
  );

  // ---------------- performance events ----------------
  logic ev_sat;
  always_comb begin
    ev_sat = 1'b0;
    for (int r = 0; r < RG; r++)
      if (ib_wr_data[r*DATA_W +: DATA_W] == 8'h7f || ib_wr_data[r*DATA_W +: DATA_W] == 8'h80)
        ev_sat = ib_wr_en;
  end

  always_comb begin
    perf_ev = '0;
    perf_ev[EV_OVERLAP]  = unit_busy[U_MRD] && unit_busy[U_MM];
    perf_ev[EV_MM_B0]    = unit_start[U_MM] && !unit_inst.bank;
    perf_ev[EV_MM_B1]    = unit_start[U_MM] && unit_inst.bank;
    perf_ev[EV_MM_ACC]   = unit_start[U_MM] && unit_inst.acc;
    perf_ev[EV_MM_MULTI] = unit_start[U_MM] && (unit_inst.rows > 5'(RG));
    perf_ev[EV_MADD_R]   = unit_start[U_POST] && unit_inst.sub == 4'(PP_MADD) && unit_inst.relu;
    perf_ev[EV_MADD_L]   = unit_start[U_POST] && unit_inst.sub == 4'(PP_MADD) && !unit_inst.relu;
    perf_ev[EV_MAXP]     = unit_start[U_POST] && unit_inst.sub == 4'(PP_MAXP);
    perf_ev[EV_CONCAT]   = unit_start[U_POST] && unit_inst.sub == 4'(PP_CONCAT);
    perf_ev[EV_NORM]     = unit_start[U_POST] && unit_inst.sub == 4'(PP_NORM);
    perf_ev[EV_LD_IN]    = unit_start[U_MRD] && unit_inst.sub == 4'(MEM_RD_IN);
    perf_ev[EV_MWR]      = unit_start[U_MWR];
    perf_ev[EV_SAT]      = ev_sat;
  end

endmodule
