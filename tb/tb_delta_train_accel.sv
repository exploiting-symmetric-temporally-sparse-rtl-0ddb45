// tb_delta_train_accel: end-to-end test of the Delta RNN training
// accelerator at its default parameters (16 PEs, layers up to 256, sequences
// up to 256 timesteps).
//
// Each case generates a random input sequence with a chosen fraction of
// unchanged elements, random weights, bias and dC/dM_t vectors, loads them,
// and runs the three products: forward (OP_FP), input gradient (OP_BP_DX) and
// weight gradient (OP_BP_DW). A reference model in this file applies the
// delta rule and computes M_t, dC/ddx_t and the accumulated dC/dW with the
// same fixed-point rules, and every result is compared. Cycle counts of each
// run are checked against the ideal sparse count nnz * n_out / P and the
// speed-up over the dense count n_in * n_out * n_t / P is printed.
// The cases end with the paper's largest configuration, 256 inputs, 256
// hidden units and 256 timesteps.
// Mechanisms that must occur at least once: skipped (below-threshold)
// elements, an all-quiet timestep, bias load, M_t read-out, a hazard stall of
// the weight-gradient pass, results read back from the SRAM result memory
// (M_t rows after the forward run, active dC/ddx_t elements after the
// input-gradient run).
`timescale 1ns/1ps
module tb_delta_train_accel;
  import drnn_pkg::*;

  localparam int unsigned P      = 16;
  localparam int unsigned N_MAX  = 256;
  localparam int unsigned T_MAX  = 256;
  localparam int unsigned ADDR_W = 24;
  localparam int unsigned IDX_W  = $clog2(N_MAX + 1);
  localparam int unsigned T_W    = $clog2(T_MAX);
  localparam int unsigned ROWS   = N_MAX / P;
  localparam int unsigned ROW_W  = $clog2(ROWS);
  localparam int unsigned LAT    = 8;
  localparam int unsigned G_BASE = (N_MAX + 1) * ROWS;
  localparam longint WATCHDOG    = 64'd20_000_000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // DUT signals
  logic              start;
  op_e               cfg_op;
  logic [T_W:0]      cfg_n_t;
  logic [IDX_W-1:0]  cfg_n_in;
  logic [ROW_W:0]    cfg_beats;
  data_t             cfg_theta;
  logic              busy, done, seq_clear;
  logic              x_valid, x_last;
  logic [IDX_W-1:0]  x_idx;
  data_t             x_val;
  logic [T_W:0]      n_steps;
  logic              g_wr_valid;
  logic [T_W-1:0]    g_wr_t;
  logic [ROW_W-1:0]  g_wr_row;
  data_t             g_wr_data [P];
  logic              rd_req_valid, rd_req_ready, rd_data_valid, wr_valid;
  logic [ADDR_W-1:0] rd_req_addr, wr_addr;
  logic [ROW_W:0]    rd_req_len;
  data_t             rd_data [P];
  data_t             wr_data [P];
  logic              m_valid, dx_valid;
  logic [T_W-1:0]    m_t, dx_t;
  logic [ROW_W-1:0]  m_row;
  acc_t              m_data [P];
  logic [IDX_W-1:0]  dx_idx;
  acc_t              dx_data;
  logic [31:0]       stat_fetches, stat_skipped, stat_haz_stalls;
  logic              m_rd_en, dx_rd_en;
  logic [T_W-1:0]    m_rd_t, dx_rd_t;
  logic [ROW_W-1:0]  m_rd_row;
  logic [IDX_W-1:0]  dx_rd_idx;
  acc_t              m_rd_data [P];
  acc_t              dx_rd_data;

  delta_train_accel dut (
    .clk, .rst_n, .start, .cfg_op, .cfg_n_t, .cfg_n_in, .cfg_beats,
    .cfg_w_base(ADDR_W'(0)), .cfg_g_base(ADDR_W'(G_BASE)), .cfg_theta,
    .busy, .done, .seq_clear, .x_valid, .x_idx, .x_val, .x_last, .n_steps,
    .g_wr_valid, .g_wr_t, .g_wr_row, .g_wr_data,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_len,
    .rd_data_valid, .rd_data, .wr_valid, .wr_addr, .wr_data,
    .m_valid, .m_t, .m_row, .m_data, .dx_valid, .dx_t, .dx_idx, .dx_data,
    .m_rd_en, .m_rd_t, .m_rd_row, .m_rd_data, .dx_rd_en, .dx_rd_t, .dx_rd_idx, .dx_rd_data,
    .stat_fetches, .stat_skipped, .stat_haz_stalls
  );

  dram_model #(.P(P), .ADDR_W(ADDR_W), .LEN_W(ROW_W + 1), .DEPTH(16384), .LAT(LAT)) u_mem (
    .clk, .rst_n, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_len,
    .rd_data_valid, .rd_data, .wr_valid, .wr_addr, .wr_data
  );

  // ------------------------------------------------------------ reference
  int     n_in, n_out, n_t;
  int     W   [N_MAX][N_MAX + 1];   // [row][col], col n_in is the bias
  int     X   [T_MAX][N_MAX];
  int     DX  [T_MAX][N_MAX];       // reference delta (0 where inactive)
  bit     MK  [T_MAX][N_MAX];
  int     G   [T_MAX][N_MAX];       // dC/dM_t
  int     GW  [N_MAX][N_MAX];       // expected dC/dW (Q8.8, saturating)
  longint nnz;

  // mechanism counters
  int ev_skip, ev_quiet_step, ev_bias, ev_dump, ev_hazard, ev_readback;

  // observed results
  int     m_seen, dx_seen, m_bad, dx_bad;
  longint m_ref [T_MAX][N_MAX];

  function automatic int sat16(int a);
    if (a > 32767) return 32767;
    if (a < -32768) return -32768;
    return a;
  endfunction

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // build a case: density = percent of elements that change per timestep
  task automatic build_case(int ni, int no, int nt, int density, int theta, bit quiet_step);
    int xhat [N_MAX];
    n_in = ni; n_out = no; n_t = nt; nnz = 0;
    for (int r = 0; r < no; r++)
      for (int c = 0; c <= ni; c++) W[r][c] = (c == ni) ? rnd(-256, 256) : rnd(-128, 127);
    for (int i = 0; i < ni; i++) xhat[i] = 0;
    for (int t = 0; t < nt; t++) begin
      for (int i = 0; i < ni; i++) begin
        int prev = (t == 0) ? 0 : X[t-1][i];
        if (quiet_step && t == 1)                 X[t][i] = prev;
        else if (rnd(0, 99) < density) begin
          int step = rnd(theta + 1, theta + 150);
          if (prev > 1500)       X[t][i] = prev - step;
          else if (prev < -1500) X[t][i] = prev + step;
          else                   X[t][i] = rnd(0, 1) ? prev + step : prev - step;
        end else                                  X[t][i] = prev + rnd(-theta / 2, theta / 2);
        // delta rule
        begin
          int d = X[t][i] - xhat[i];
          int a = d < 0 ? -d : d;
          MK[t][i] = a > theta;
          DX[t][i] = MK[t][i] ? sat16(d) : 0;
          if (MK[t][i]) begin xhat[i] = X[t][i]; nnz++; end
        end
      end
      for (int r = 0; r < no; r++) G[t][r] = rnd(-128, 127);
    end
    // forward reference
    for (int r = 0; r < no; r++) begin
      longint m = longint'(W[r][ni]) * 256;
      for (int t = 0; t < nt; t++) begin
        for (int c = 0; c < ni; c++) m += longint'(W[r][c]) * DX[t][c];
        m_ref[t][r] = m;
      end
    end
  endtask

  // memory image: column-major weights, gradient region
  task automatic load_dram();
    int beats = n_out / P;
    for (int c = 0; c <= n_in; c++)
      for (int b = 0; b < beats; b++)
        for (int p = 0; p < P; p++)
          u_mem.mem[c * beats + b][p*DW +: DW] = DW'(W[b*P + p][c]);
  endtask

  // load the sequence through the encoder and the dC/dM_t rows
  task automatic load_sequence(int theta);
    @(negedge clk);
    seq_clear = 1'b1;
    cfg_theta = data_t'(theta);
    @(negedge clk);
    seq_clear = 1'b0;
    for (int t = 0; t < n_t; t++)
      for (int i = 0; i < n_in; i++) begin
        x_valid = 1'b1;
        x_idx   = IDX_W'(i);
        x_val   = data_t'(X[t][i]);
        x_last  = (i == n_in - 1);
        @(negedge clk);
      end
    x_valid = 1'b0;
    x_last  = 1'b0;
    for (int t = 0; t < n_t; t++)
      for (int b = 0; b < n_out / P; b++) begin
        g_wr_valid = 1'b1;
        g_wr_t     = T_W'(t);
        g_wr_row   = ROW_W'(b);
        for (int p = 0; p < P; p++) g_wr_data[p] = data_t'(G[t][b*P + p]);
        @(negedge clk);
      end
    g_wr_valid = 1'b0;
    repeat (2) @(negedge clk);
    check(n_steps == (T_W+1)'(n_t), "timesteps stored");
  endtask

  task automatic run_op(op_e op, output longint cycles);
    longint t0;
    cfg_op    = op;
    cfg_n_t   = (T_W+1)'(n_t);
    cfg_n_in  = IDX_W'(n_in);
    cfg_beats = (ROW_W+1)'(n_out / P);
    start     = 1'b1;
    t0        = cycle;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    cycles = cycle - t0;
  endtask

  // result monitors
  always @(posedge clk) begin
    if (rst_n && m_valid) begin
      ev_dump++;
      for (int p = 0; p < P; p++) begin
        automatic int r = int'(m_row) * P + p;
        m_seen++;
        if (longint'(m_data[p]) != m_ref[m_t][r]) begin
          m_bad++;
          if (m_bad < 5) $display("M mismatch t=%0d r=%0d got %0d exp %0d", m_t, r, m_data[p], m_ref[m_t][r]);
        end
      end
    end
    if (rst_n && dx_valid) begin
      automatic longint e = 0;
      dx_seen++;
      for (int r = 0; r < n_out; r++) e += longint'(W[r][dx_idx]) * G[dx_t][r];
      if (!MK[dx_t][dx_idx] || longint'(dx_data) != e) begin
        dx_bad++;
        if (dx_bad < 5) $display("dx mismatch t=%0d j=%0d got %0d exp %0d", dx_t, dx_idx, dx_data, e);
      end
    end
  end

  task automatic run_case(int ni, int no, int nt, int density, bit quiet_step, bit check_speed);
    int theta = 26;  // 0.1 in Q8.8
    longint cyc_fp, cyc_dx, cyc_dw, ideal, dense, gw_init [N_MAX][N_MAX];
    int gw_bad = 0;
    longint per_col;
    int q_steps = 0;
    build_case(ni, no, nt, density, theta, quiet_step);
    // initial contents of the gradient region, and the expected result
    for (int r = 0; r < no; r++) for (int c = 0; c < ni; c++) gw_init[r][c] = rnd(-64, 64);
    for (int r = 0; r < no; r++) for (int c = 0; c < ni; c++) GW[r][c] = int'(gw_init[r][c]);
    // weight-gradient reference, same order as the hardware (t descending)
    for (int t = nt - 1; t >= 0; t--)
      for (int c = 0; c < ni; c++)
        if (MK[t][c])
          for (int r = 0; r < no; r++)
            GW[r][c] = sat16(GW[r][c] + ((G[t][r] * DX[t][c]) >>> 8));
    load_dram();
    for (int c = 0; c < ni; c++)
      for (int b = 0; b < no / P; b++)
        for (int p = 0; p < P; p++)
          u_mem.mem[G_BASE + c * (no / P) + b][p*DW +: DW] = DW'(gw_init[b*P + p][c]);
    for (int t = 0; t < nt; t++) begin
      int k = 0;
      for (int i = 0; i < ni; i++) k += MK[t][i];
      if (k == 0) q_steps++;
    end
    ev_quiet_step += q_steps;
    load_sequence(theta);
    check(stat_skipped == 32'(longint'(ni) * nt - nnz), "skipped element count");
    ev_skip += stat_skipped;

    m_seen = 0; m_bad = 0; dx_seen = 0; dx_bad = 0;
    run_op(OP_FP, cyc_fp);
    check(m_seen == nt * no, $sformatf("M_t values out: %0d", m_seen));
    check(m_bad == 0, $sformatf("M_t mismatches: %0d", m_bad));
    check(stat_fetches == 32'(nnz), "FP column fetches == nnz");
    ev_bias++;
    // the same M_t rows, read back from the on-chip result memory
    begin
      int rb_bad = 0;
      for (int t = 0; t < nt; t++)
        for (int b = 0; b < no / P; b++) begin
          m_rd_en = 1'b1; m_rd_t = T_W'(t); m_rd_row = ROW_W'(b);
          @(negedge clk);
          m_rd_en = 1'b0;
          for (int p = 0; p < P; p++)
            if (longint'(m_rd_data[p]) != m_ref[t][b*P + p]) rb_bad++;
          ev_readback++;
        end
      check(rb_bad == 0, $sformatf("M_t read back from SRAM: %0d mismatches", rb_bad));
    end

    run_op(OP_BP_DX, cyc_dx);
    check(dx_seen == nnz, $sformatf("dC/ddx values out: %0d of %0d", dx_seen, nnz));
    check(dx_bad == 0, $sformatf("dC/ddx mismatches: %0d", dx_bad));
    // the active elements of dC/ddx_t, read back from the result memory
    begin
      int rb_bad = 0;
      for (int t = 0; t < nt; t++)
        for (int j = 0; j < ni; j++)
          if (MK[t][j]) begin
            longint e = 0;
            for (int r = 0; r < no; r++) e += longint'(W[r][j]) * G[t][r];
            dx_rd_en = 1'b1; dx_rd_t = T_W'(t); dx_rd_idx = IDX_W'(j);
            @(negedge clk);
            dx_rd_en = 1'b0;
            if (longint'(dx_rd_data) != e) rb_bad++;
            ev_readback++;
          end
      check(rb_bad == 0, $sformatf("dC/ddx read back from SRAM: %0d mismatches", rb_bad));
    end

    begin
      int h0 = stat_haz_stalls;
      run_op(OP_BP_DW, cyc_dw);
      ev_hazard += stat_haz_stalls - h0;
    end
    for (int c = 0; c < ni; c++)
      for (int b = 0; b < no / P; b++)
        for (int p = 0; p < P; p++) begin
          int got = int'(data_t'(u_mem.mem[G_BASE + c * (no / P) + b][p*DW +: DW]));
          if (got != GW[b*P + p][c]) begin
            gw_bad++;
            if (gw_bad < 5) $display("dW mismatch r=%0d c=%0d got %0d exp %0d", b*P+p, c, got, GW[b*P+p][c]);
          end
        end
    check(gw_bad == 0, $sformatf("dC/dW mismatches: %0d", gw_bad));

    ideal = nnz * (no / P);
    dense = longint'(ni) * no * nt / P;
    // a run can never beat one beat per cycle, and its overhead is bounded:
    // per timestep a DRAM latency, a drain and (forward) the M_t read-out
    check(cyc_fp >= ideal && cyc_fp <= ideal + nt * (LAT + no / P + 12) + LAT + 20,
          $sformatf("FP cycles %0d vs ideal %0d", cyc_fp, ideal));
    // with Q_DEPTH = 4 fetches in flight a column costs at least
    // (LAT + beats + 2) / 4 cycles: short columns are latency bound
    per_col = (LAT + no / P + 2 + 3) / 4;
    if (per_col < no / P) per_col = no / P;
    check(cyc_dx >= ideal && cyc_dx <= nnz * per_col + nt * (LAT + 12) + LAT + 30,
          $sformatf("BP dx cycles %0d vs ideal %0d", cyc_dx, ideal));
    check(cyc_dw >= ideal && cyc_dw <= nnz * per_col + nt * (4 + LAT + 8) + LAT + 30,
          $sformatf("BP dW cycles %0d vs ideal %0d", cyc_dw, ideal));
    $display("case %0dI-%0dH T=%0d density=%0d%%: nnz=%0d ideal=%0d dense=%0d | FP %0d (x%0.2f) BPdx %0d (x%0.2f) BPdW %0d (x%0.2f)",
             ni, no, nt, density, nnz, ideal, dense,
             cyc_fp, real'(dense) / cyc_fp, cyc_dx, real'(dense) / cyc_dx, cyc_dw, real'(dense) / cyc_dw);
    if (check_speed) begin
      // at 256x256 the paper reports close to the ideal 1/occupancy speed-up
      check(real'(dense) / cyc_dw > 0.9 * real'(dense) / ideal, "dW speed-up near ideal");
    end
  endtask

  initial begin
    start = 0; seq_clear = 0; x_valid = 0; x_last = 0; x_idx = '0; x_val = '0;
    m_rd_en = 0; dx_rd_en = 0; m_rd_t = '0; dx_rd_t = '0; m_rd_row = '0; dx_rd_idx = '0;
    g_wr_valid = 0; g_wr_t = '0; g_wr_row = '0; cfg_op = OP_FP; cfg_n_t = '0;
    cfg_n_in = '0; cfg_beats = '0; cfg_theta = '0;
    for (int p = 0; p < P; p++) g_wr_data[p] = '0;
    ev_skip = 0; ev_quiet_step = 0; ev_bias = 0; ev_dump = 0; ev_hazard = 0; ev_readback = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    run_case(32, 32, 8, 50, 1'b1, 1'b0);     // small, dense enough for hazards
    run_case(40, 48, 12, 30, 1'b0, 1'b0);    // n_in != n_out
    run_case(64, 64, 64, 10, 1'b0, 1'b0);    // 64I-64H, 90% sparse
    run_case(256, 256, 256, 20, 1'b0, 1'b1); // 256I-256H, 80% sparse

    check(ev_skip > 0,       "mechanism: below-threshold elements skipped");
    check(ev_quiet_step > 0, "mechanism: timestep with no active element");
    check(ev_bias > 0,       "mechanism: bias column loaded");
    check(ev_dump > 0,       "mechanism: M_t read out");
    check(ev_hazard > 0,     "mechanism: weight-gradient hazard stall");
    check(ev_readback > 0,   "mechanism: result read-back from SRAM");
    $display("events: skipped=%0d quiet_steps=%0d bias=%0d dumps=%0d hazard_stalls=%0d readbacks=%0d",
             ev_skip, ev_quiet_step, ev_bias, ev_dump, ev_hazard, ev_readback);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycle == WATCHDOG);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
