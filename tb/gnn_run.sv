// End-to-end test harness of the accelerator (testbench only).
//
// Builds a complete GNN beamforming inference for one cell, runs it on the
// accelerator (default parameters) with a behavioural off-chip memory, and
// compares the beamforming output with a reference model computed here.
// The network is the one of the published evaluation, with configurable
// widths: an input MLP (2N -> H0 -> H), two GNN layers, each
//   MLP1 (H -> H -> H), max-pooling over the other UEs of the same port
//   selection, concatenation [x, max], MLP2 (2H -> H -> H),
// an output FC layer (H -> 2N, no ReLU) and a power normalization. ReLU
// follows every FC layer except the output one.
//
// A small compiler below lays weights (32-column tiles) and biases out in
// memory and emits the instruction stream: weight/bias loads alternate
// between the two double-buffer banks and each tile's load is issued before
// the previous tile's post processing, so loads overlap computation. T port
// selections of K UEs each are stacked as M = K*T rows. The depth of the
// second input layer is split over two accumulating matrix instructions.
//
// One or two inferences are run (T_A, then T_B port selections if T_B > 0);
// with two, the latency ratio is checked. Weights, biases and channel inputs
// are pseudo-random (hash of their indices), so no data files are needed.
// Each mechanism of the design is counted and must occur at least once.
module gnn_run
  import fas_pkg::*;
#(
  parameter int K    = 4,      // UEs per cell = rows per port selection
  parameter int NFA  = 4,      // fluid antennas per BS (2N features)
  parameter int H0   = 1024,   // first hidden width
  parameter int H    = 512,    // GNN hidden width
  parameter int T_A  = 1,      // port selections in the first inference
  parameter int T_B  = 0,      // port selections in the second (0 = none)
  parameter bit GAPS = 1'b0,   // random stalls in the memory model
  parameter int SQRTP = 64,    // target norm of each beamforming matrix
  parameter real MAX_RATIO = 1.25,  // allowed latency ratio T_B / T_A
  parameter int LAT_MIN = 0,        // published latency range for one
  parameter int LAT_MAX = 0,        // port selection (0: not checked)
  parameter int WATCHDOG = 4000000
);
  localparam int IN = 2 * NFA, OUTC = 2 * NFA, NT = 32;
  localparam int XB = (H0 > 2*H) ? H0 : 2*H;   // layer input/output column
  localparam int X3B = XB + H;                 // concatenated [x, max]
  localparam int FB = X3B + 2*H;               // output FC result
  localparam int NB = FB + 8;                  // normalized output
  localparam int PROG_ADDR = 32'h0000_0000, IN_ADDR = 32'h0001_0000,
                 OUT_ADDR = 32'h0002_0000, W_ADDR = 32'h0010_0000;
  localparam int NL = 11;                      // FC layers

  logic clk = 1'b0, rst_n = 1'b0;
  logic reg_wr = 0; logic [2:0] reg_addr = 0; logic [31:0] reg_wdata = 0, reg_rdata;
  logic irq;
  logic [NEV-1:0] perf_ev;
  logic ird_req_valid, ird_req_ready, ird_tvalid, ird_tready, ird_tlast;
  logic [31:0] ird_req_addr; logic [15:0] ird_req_len; beat_t ird_tdata;
  logic drd_req_valid, drd_req_ready, drd_tvalid, drd_tready, drd_tlast;
  logic [31:0] drd_req_addr; logic [15:0] drd_req_len; beat_t drd_tdata;
  logic dwr_req_valid, dwr_req_ready, dwr_tvalid, dwr_tready, dwr_tlast;
  logic [31:0] dwr_req_addr; logic [15:0] dwr_req_len; beat_t dwr_tdata;

  fas_gnn_accel dut (.*);
  ddr_model #(.MEM_BEATS(1 << 20), .LAT(8), .GAPS(GAPS)) u_ddr (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- network description ----------------
  int l_din [NL], l_dout [NL], l_src [NL], l_scol [NL], l_dcol [NL], l_relu [NL], l_sh [NL];
  int l_w [NL], l_b [NL];
  // post operations after a layer: bit0 MAXP+CONCAT, bit1 NORM
  int l_after [NL];

  function automatic int clog2i(input int v);
    int r; r = 0;
    while ((1 << r) < v) r++;
    return r;
  endfunction

  task automatic def_layer(input int l, input int din, input int dout, input int src, input int scol,
                           input int dcol, input int relu, input int after);
    l_din[l] = din; l_dout[l] = dout; l_src[l] = src; l_scol[l] = scol; l_dcol[l] = dcol;
    l_relu[l] = relu; l_after[l] = after; l_sh[l] = clog2i(din) / 2 + 1;
  endtask

  initial begin
    def_layer(0, IN, H0, 0, 0, 0, 1, 0);
    def_layer(1, H0, H, 1, 0, XB, 1, 0);
    for (int g = 0; g < 2; g++) begin
      def_layer(2 + 4*g, H, H, 1, XB, 0, 1, 0);
      def_layer(3 + 4*g, H, H, 1, 0, H, 1, 1);        // then MAXP + CONCAT
      def_layer(4 + 4*g, 2*H, H, 1, X3B, 0, 1, 0);
      def_layer(5 + 4*g, H, H, 1, 0, XB, 1, 0);
    end
    def_layer(10, H, OUTC, 1, XB, FB, 0, 2);          // then NORM
  end

  // ---------------- pseudo-random data ----------------
  function automatic int hsh(input int a, input int b, input int c, input int d);
    int unsigned x;
    x = a * 32'd73856093 ^ b * 32'd19349663 ^ c * 32'd83492791 ^ d * 32'd2654435761;
    x ^= x >> 13; x *= 32'h5bd1e995; x ^= x >> 15;
    return int'(x & 32'h7fff_ffff);
  endfunction
  function automatic data_t wgen(input int l, input int i, input int j);
    return data_t'(hsh(l, i, j, 1) % 7 - 3);
  endfunction
  function automatic data_t bgen(input int l, input int j);
    return data_t'(hsh(l, j, 0, 2) % 17 - 8);
  endfunction
  function automatic data_t xgen(input int run, input int row, input int c);
    return data_t'(hsh(run, row, c, 3) % 128 - 64);
  endfunction

  task automatic put_byte(input int addr, input data_t v);
    u_ddr.mem[addr / 8][8 * (addr % 8) +: 8] = v;
  endtask
  function automatic data_t get_byte(input int addr);
    beat_t b;
    b = u_ddr.mem[addr / 8];
    return data_t'(b[8 * (addr % 8) +: 8]);
  endfunction

  int weight_beats;
  task automatic load_model();
    int a, ntile;
    a = W_ADDR;
    weight_beats = 0;
    for (int l = 0; l < NL; l++) begin
      ntile = (l_dout[l] + NT - 1) / NT;
      l_w[l] = a;
      for (int j = 0; j < ntile; j++)
        for (int i = 0; i < l_din[l]; i++)
          for (int c = 0; c < NT; c++)
            put_byte(a + (j * l_din[l] + i) * NT + c,
                     (j * NT + c < l_dout[l]) ? wgen(l, i, j * NT + c) : data_t'(0));
      a += ntile * l_din[l] * NT;
      weight_beats += ntile * l_din[l] * NT / 8;
      l_b[l] = a;
      for (int c = 0; c < ntile * NT; c++) put_byte(a + c, (c < l_dout[l]) ? bgen(l, c) : data_t'(0));
      a += ntile * NT;
    end
  endtask

  // ---------------- compiler ----------------
  inst_t prog [$];

  function automatic inst_t mk(input itype_e typ, input logic [3:0] sub);
    inst_t i;
    i = '0; i.typ = typ; i.sub = sub;
    return i;
  endfunction

  task automatic emit_load(input int l, input int j, input logic bank);
    inst_t i;
    i = mk(IT_MEM, MEM_RD_W); i.bank = bank; i.depth = 11'(l_din[l]);
    i.ddr_addr = 32'(l_w[l] + j * l_din[l] * NT);
    prog.push_back(i);
    i = mk(IT_MEM, MEM_RD_B); i.bank = bank; i.cols = 11'(NT); i.dst_col = 0;
    i.ddr_addr = 32'(l_b[l] + j * NT);
    prog.push_back(i);
  endtask

  task automatic emit_mm(input int l, input int j, input logic bank, input int m);
    inst_t i;
    int parts;
    parts = (l == 1) ? 2 : 1;   // split the reduction of layer 1 over two instructions
    for (int p = 0; p < parts; p++) begin
      i = mk(IT_MM, 4'd0); i.bank = bank; i.rows = 5'(m); i.src_sel = l_src[l][0];
      i.depth = 11'(l_din[l] / parts); i.imm = 16'(p * l_din[l] / parts);
      i.src_col = 12'(l_scol[l] + p * l_din[l] / parts); i.acc = (p > 0);
      i.wait_mask = 4'b0101;   // loads done, accumulator free
      prog.push_back(i);
    end
  endtask

  task automatic emit_post(input int l, input int j, input logic bank, input int m);
    inst_t i;
    i = mk(IT_POST, PP_MADD); i.bank = bank; i.rows = 5'(m);
    i.cols = 11'((l_dout[l] - j * NT < NT) ? l_dout[l] - j * NT : NT);
    i.relu = l_relu[l][0]; i.shift = 4'(l_sh[l]); i.imm = 0; i.dst_col = 12'(l_dcol[l] + j * NT);
    i.wait_mask = 4'b0010;
    prog.push_back(i);
  endtask

  task automatic compile(input int t);
    int tl [$], tj [$];
    int m;
    inst_t i;
    m = K * t;
    prog.delete();
    for (int l = 0; l < NL; l++)
      for (int j = 0; j < (l_dout[l] + NT - 1) / NT; j++) begin tl.push_back(l); tj.push_back(j); end
    // channel matrices of all port selections, stacked on chip, into both banks
    for (int b = 0; b < 2; b++)
      for (int s = 0; s < t; s++) begin
        i = mk(IT_MEM, MEM_RD_IN); i.bank = b[0]; i.rows = 5'(K); i.cols = 11'(IN);
        i.dst_col = 0; i.imm = 16'(s * K / 4); i.ddr_addr = 32'(IN_ADDR + s * (K / 4) * IN * 4);
        prog.push_back(i);
      end
    emit_load(tl[0], tj[0], 1'b0);
    for (int n = 0; n < tl.size(); n++) begin
      int l;
      l = tl[n];
      emit_mm(l, tj[n], n[0], m);
      if (n + 1 < tl.size()) emit_load(tl[n+1], tj[n+1], ~n[0]);
      emit_post(l, tj[n], n[0], m);
      if (tj[n] == (l_dout[l] + NT - 1) / NT - 1) begin
        if (l_after[l] == 1) begin
          i = mk(IT_POST, PP_MAXP); i.rows = 5'(m); i.cols = 11'(H); i.group = 5'(K);
          i.src_col = 12'(H); i.dst_col = 12'(X3B + H);
          prog.push_back(i);
          i = mk(IT_POST, PP_CONCAT); i.rows = 5'(m); i.cols = 11'(H);
          i.src_col = 12'(XB); i.dst_col = 12'(X3B);
          prog.push_back(i);
        end else if (l_after[l] == 2) begin
          i = mk(IT_POST, PP_NORM); i.rows = 5'(m); i.cols = 11'(OUTC); i.group = 5'(K);
          i.src_col = 12'(FB); i.dst_col = 12'(NB); i.imm = 16'(SQRTP);
          prog.push_back(i);
        end
      end
    end
    i = mk(IT_MEM, MEM_WR); i.rows = 5'(m); i.cols = 11'(OUTC); i.src_col = 12'(NB);
    i.ddr_addr = 32'(OUT_ADDR); i.wait_mask = 4'b0100;
    prog.push_back(i);
    i = mk(IT_CTRL, 4'd0); i.wait_mask = 4'b1111;
    prog.push_back(i);
    for (int k = 0; k < prog.size(); k++) begin
      u_ddr.mem[(PROG_ADDR / 8) + 2*k]     = prog[k][63:0];
      u_ddr.mem[(PROG_ADDR / 8) + 2*k + 1] = prog[k][127:64];
    end
  endtask

  task automatic load_inputs(input int run, input int t);
    for (int s = 0; s < t; s++)
      for (int r = 0; r < K; r++)
        for (int c = 0; c < IN; c++)
          // word (row group, column) of 4 bytes, row groups one after another
          put_byte(IN_ADDR + ((s * K + r) / 4 * IN + c) * 4 + (r % 4), xgen(run, s * K + r, c));
  endtask

  // ---------------- reference model ----------------
  typedef data_t mat_t [][];
  data_t refm [][];
  data_t ref_out [][];

  function automatic data_t s8(input longint v);
    return (v > 127) ? 8'sd127 : (v < -128) ? -8'sd128 : data_t'(v);
  endfunction

  task automatic ref_fc(input int l, input int m, ref data_t x [][], ref data_t y [][]);
    data_t wcol [];
    y = new[m];
    for (int r = 0; r < m; r++) y[r] = new[l_dout[l]];
    wcol = new[l_din[l]];
    for (int j = 0; j < l_dout[l]; j++) begin
      for (int i = 0; i < l_din[l]; i++) wcol[i] = wgen(l, i, j);
      for (int r = 0; r < m; r++) begin
        longint s;
        data_t v;
        s = 0;
        for (int i = 0; i < l_din[l]; i++) s += longint'(x[r][i]) * longint'(wcol[i]);
        s = (s + (longint'(bgen(l, j)) <<< l_sh[l])) >>> l_sh[l];
        v = s8(s);
        if (l_relu[l] != 0 && v < 0) v = 0;
        y[r][j] = v;
      end
    end
  endtask

  task automatic reference(input int run, input int t);
    data_t x [][];
    data_t y [][];
    data_t x1 [][];
    data_t cat [][];
    int m;
    m = K * t;
    x = new[m];
    for (int r = 0; r < m; r++) begin
      x[r] = new[IN];
      for (int c = 0; c < IN; c++) x[r][c] = xgen(run, r, c);
    end
    ref_fc(0, m, x, y); x = y;
    ref_fc(1, m, x, y); x1 = y;
    for (int g = 0; g < 2; g++) begin
      ref_fc(2 + 4*g, m, x1, y); x = y;
      ref_fc(3 + 4*g, m, x, y); x = y;
      cat = new[m];
      for (int r = 0; r < m; r++) begin
        cat[r] = new[2*H];
        for (int c = 0; c < H; c++) begin
          data_t mx; mx = -8'sd128;
          for (int q = (r / K) * K; q < (r / K) * K + K; q++)
            if (q != r && x[q][c] > mx) mx = x[q][c];
          cat[r][c] = x1[r][c];
          cat[r][H + c] = mx;
        end
      end
      ref_fc(4 + 4*g, m, cat, y); x = y;
      ref_fc(5 + 4*g, m, x, y); x1 = y;
    end
    ref_fc(10, m, x1, y);
    ref_out = new[m];
    for (int r = 0; r < m; r++) ref_out[r] = new[OUTC];
    for (int q = 0; q < t; q++) begin
      longint ss, nrm, rec;
      ss = 0;
      for (int r = q * K; r < q * K + K; r++) for (int c = 0; c < OUTC; c++) ss += longint'(y[r][c]) * longint'(y[r][c]);
      nrm = 0;
      while ((nrm + 1) * (nrm + 1) <= ss) nrm++;
      rec = (nrm == 0) ? 0 : ((longint'(SQRTP) << 16) / nrm);
      for (int r = q * K; r < q * K + K; r++) for (int c = 0; c < OUTC; c++)
        ref_out[r][c] = s8((longint'(y[r][c]) * rec) >>> 16);
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_overlap = 0, n_madd_relu = 0, n_madd_lin = 0, n_maxp = 0, n_concat = 0, n_norm = 0;
  int n_acc = 0, n_multipass = 0, n_bank [2] = '{0, 0}, n_mwr = 0, n_ldin = 0, n_sat = 0;
  always @(posedge clk) if (rst_n) begin
    if (perf_ev[EV_OVERLAP])  n_overlap++;
    if (perf_ev[EV_MM_B0])    n_bank[0]++;
    if (perf_ev[EV_MM_B1])    n_bank[1]++;
    if (perf_ev[EV_MM_ACC])   n_acc++;
    if (perf_ev[EV_MM_MULTI]) n_multipass++;
    if (perf_ev[EV_MADD_R])   n_madd_relu++;
    if (perf_ev[EV_MADD_L])   n_madd_lin++;
    if (perf_ev[EV_MAXP])     n_maxp++;
    if (perf_ev[EV_CONCAT])   n_concat++;
    if (perf_ev[EV_NORM])     n_norm++;
    if (perf_ev[EV_LD_IN])    n_ldin++;
    if (perf_ev[EV_MWR])      n_mwr++;
    if (perf_ev[EV_SAT])      n_sat++;
  end

  // ---------------- host accesses ----------------
  task automatic host_wr(input int a, input logic [31:0] d);
    @(negedge clk); reg_wr = 1; reg_addr = 3'(a); reg_wdata = d;
    @(negedge clk); reg_wr = 0;
  endtask
  task automatic host_rd(input int a, output logic [31:0] d);
    @(negedge clk); reg_addr = 3'(a); #1; d = reg_rdata;
  endtask

  task automatic run_one(input int run, input int t, output int cycles);
    logic [31:0] v, stalls, ninst;
    int m;
    m = K * t;
    compile(t);
    load_inputs(run, t);
    reference(run, t);
    host_wr(2, PROG_ADDR);
    host_wr(0, 1);
    while (!irq) @(negedge clk);
    host_rd(3, v); cycles = int'(v);
    host_rd(4, stalls);
    host_rd(5, ninst);
    $display("inference with %0d port selection(s): %0d cycles, %0d instructions, %0d dispatch stall cycles",
             t, cycles, ninst, stalls);
    checks++;
    if (int'(ninst) != prog.size() - 1) begin failures++; $display("dispatched %0d of %0d", ninst, prog.size() - 1); end
    checks++;
    if (stalls == 0) begin failures++; $display("no dispatch stall seen"); end
    for (int r = 0; r < m; r++)
      for (int c = 0; c < OUTC; c++) begin
        data_t got;
        got = get_byte(OUT_ADDR + ((r / 4) * (OUTC / 2) + c / 2) * 8 + (c % 2) * 4 + (r % 4));
        checks++;
        if (got !== ref_out[r][c]) begin
          failures++;
          if (failures < 10) $display("output row %0d col %0d: %0d expected %0d", r, c, got, ref_out[r][c]);
        end
      end
  endtask

  task automatic need(input string what, input int n);
    checks++;
    $display("  %-34s %0d", what, n);
    if (n == 0) begin failures++; $display("mechanism never exercised: %s", what); end
  endtask

  initial begin
    int cyc_a, cyc_b;
    if (K % 4 != 0) $fatal(1, "K must be a multiple of 4");
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    load_model();
    $display("model: %0d weight beats of 64 bits", weight_beats);
    run_one(1, T_A, cyc_a);
    if (T_B > 0) begin
      real ratio;
      run_one(2, T_B, cyc_b);
      ratio = real'(cyc_b) / real'(cyc_a);
      $display("latency ratio %0d / %0d port selections: %f", T_B, T_A, ratio);
      checks++;
      if (ratio > MAX_RATIO) begin failures++; $display("latency ratio above %f", MAX_RATIO); end
    end
    if (LAT_MAX > 0) begin
      $display("one port selection: %0d cycles, published range %0d..%0d", cyc_a, LAT_MIN, LAT_MAX);
      checks++;
      if (cyc_a < LAT_MIN || cyc_a > LAT_MAX) begin failures++; $display("latency outside the published range"); end
    end
    // a memory-bound design cannot beat the weight stream
    checks++;
    if (cyc_a < weight_beats) begin failures++; $display("faster than the weight stream?"); end
    $display("mechanisms:");
    need("load/compute overlap cycles", n_overlap);
    need("MM in bank 0", n_bank[0]);
    need("MM in bank 1", n_bank[1]);
    need("accumulating MM", n_acc);
    need("multi-pass MM (stacked selections)", n_multipass);
    need("MADD with ReLU", n_madd_relu);
    need("MADD without ReLU", n_madd_lin);
    need("max-pooling", n_maxp);
    need("concatenation", n_concat);
    need("normalization", n_norm);
    need("input loads", n_ldin);
    need("result write-backs", n_mwr);
    need("saturated results", n_sat);
    if (GAPS) need("memory stall cycles", u_ddr.gap_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
