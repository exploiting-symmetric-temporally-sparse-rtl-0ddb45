// tb_sram_ctrl: fills the non-zero lists of several timesteps (one of them
// empty) and dC/dM_t rows, then reads everything back through the table, the
// list port and the row port and compares with what was written. Checks the
// one-cycle read latency and that seq_clear empties the lists. Then writes
// M_t result rows and dC/ddx_t result words at scattered {t, row} and
// {t, neuron} addresses (including the last neuron and timestep) and reads
// them back, also checking that a word that was not written keeps its value.
`timescale 1ns/1ps
module tb_sram_ctrl;
  import drnn_pkg::*;
  localparam int unsigned P = 16, N_MAX = 256, T_MAX = 256;
  localparam int unsigned IDX_W = $clog2(N_MAX + 1), T_W = $clog2(T_MAX);
  localparam int unsigned NZ_AW = $clog2(T_MAX * N_MAX), ROWS = N_MAX / P, ROW_W = $clog2(ROWS);
  localparam int NT = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic seq_clear, nz_wr_valid, eot_wr, g_wr_valid, nz_rd_en, g_rd_en;
  logic [IDX_W-1:0] nz_wr_idx, tbl_count, nz_rd_idx;
  data_t nz_wr_val, nz_rd_val;
  logic [T_W:0] n_steps;
  logic [T_W-1:0] g_wr_t, tbl_t, g_rd_t;
  logic [ROW_W-1:0] g_wr_row, g_rd_row;
  data_t g_wr_data [P], g_rd_data [P];
  logic [NZ_AW:0] tbl_start, nz_rd_addr;
  logic m_wr_valid, dx_wr_valid, m_rd_en, dx_rd_en;
  logic [T_W-1:0] m_wr_t, dx_wr_t, m_rd_t, dx_rd_t;
  logic [ROW_W-1:0] m_wr_row, m_rd_row;
  logic [IDX_W-1:0] dx_wr_idx, dx_rd_idx;
  acc_t m_wr_data [P], m_rd_data [P], dx_wr_data, dx_rd_data;

  sram_ctrl #(.P(P), .N_MAX(N_MAX), .T_MAX(T_MAX)) dut (.*);

  int cnt [NT];
  int idx [NT][N_MAX];
  int val [NT][N_MAX];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    seq_clear = 0; nz_wr_valid = 0; eot_wr = 0; g_wr_valid = 0; nz_rd_en = 0; g_rd_en = 0;
    nz_wr_idx = '0; nz_wr_val = '0; tbl_t = '0; nz_rd_addr = '0; g_wr_t = '0; g_wr_row = '0;
    g_rd_t = '0; g_rd_row = '0;
    m_wr_valid = 0; dx_wr_valid = 0; m_rd_en = 0; dx_rd_en = 0;
    m_wr_t = '0; dx_wr_t = '0; m_rd_t = '0; dx_rd_t = '0; m_wr_row = '0; m_rd_row = '0;
    dx_wr_idx = '0; dx_rd_idx = '0; dx_wr_data = '0;
    for (int p = 0; p < P; p++) m_wr_data[p] = '0;
    for (int p = 0; p < P; p++) g_wr_data[p] = '0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    seq_clear = 1; @(negedge clk); seq_clear = 0;
    for (int t = 0; t < NT; t++) begin
      cnt[t] = (t == 3) ? 0 : int'($urandom % 40) + 1;
      for (int k = 0; k < cnt[t]; k++) begin
        idx[t][k] = k * 5 + t; val[t][k] = int'($urandom % 65536) - 32768;
        nz_wr_valid = 1; nz_wr_idx = IDX_W'(idx[t][k]); nz_wr_val = data_t'(val[t][k]);
        eot_wr = (k == cnt[t] - 1);   // last entry and end of timestep together
        @(negedge clk);
      end
      nz_wr_valid = 0;
      if (cnt[t] == 0) begin eot_wr = 1; @(negedge clk); end
      eot_wr = 0;
    end
    check(n_steps == (T_W+1)'(NT), "timestep count");
    for (int t = 0; t < NT; t++) begin
      tbl_t = T_W'(t); #1;
      check(tbl_count == IDX_W'(cnt[t]), $sformatf("count t=%0d %0d/%0d", t, tbl_count, cnt[t]));
      for (int k = 0; k < cnt[t]; k++) begin
        nz_rd_en = 1; nz_rd_addr = tbl_start + (NZ_AW+1)'(k);
        @(negedge clk);
        nz_rd_en = 0;
        check(nz_rd_idx == IDX_W'(idx[t][k]) && nz_rd_val == data_t'(val[t][k]),
              $sformatf("entry t=%0d k=%0d", t, k));
      end
    end
    // dC/dM rows
    for (int t = 0; t < 4; t++)
      for (int r = 0; r < ROWS; r++) begin
        g_wr_valid = 1; g_wr_t = T_W'(t * 60); g_wr_row = ROW_W'(r);
        for (int p = 0; p < P; p++) g_wr_data[p] = data_t'(t * 1000 + r * 16 + p - 2000);
        @(negedge clk);
      end
    g_wr_valid = 0;
    for (int t = 3; t >= 0; t--)
      for (int r = 0; r < ROWS; r++) begin
        automatic bit ok = 1;
        g_rd_en = 1; g_rd_t = T_W'(t * 60); g_rd_row = ROW_W'(r);
        @(negedge clk);
        g_rd_en = 0;
        for (int p = 0; p < P; p++) if (g_rd_data[p] != data_t'(t * 1000 + r * 16 + p - 2000)) ok = 0;
        check(ok, $sformatf("g row t=%0d r=%0d", t * 60, r));
      end
    // reads hold their output while idle
    @(negedge clk);
    check(g_rd_data[0] == data_t'(-2000 + (ROWS - 1) * 16), "read output holds");
    seq_clear = 1; @(negedge clk); seq_clear = 0;
    check(n_steps == '0, "clear empties the lists");
    // result memories
    for (int k = 0; k < 40; k++) begin
      automatic int t = (k * 37) % T_MAX, r = k % ROWS, j = (k * 53 + 7) % N_MAX;
      if (k == 39) begin t = T_MAX - 1; r = ROWS - 1; j = N_MAX - 1; end
      m_wr_valid = 1; m_wr_t = T_W'(t); m_wr_row = ROW_W'(r);
      for (int p = 0; p < P; p++) m_wr_data[p] = acc_t'(k * 100003 + p * 7919 - 1000000);
      dx_wr_valid = 1; dx_wr_t = T_W'(t); dx_wr_idx = IDX_W'(j); dx_wr_data = acc_t'(-k * 65537 + 12345);
      @(negedge clk);
    end
    m_wr_valid = 0; dx_wr_valid = 0;
    // the word next to the first one was never written: give it a value now,
    // then show that writes elsewhere left it alone
    dx_wr_valid = 1; dx_wr_t = '0; dx_wr_idx = IDX_W'(8); dx_wr_data = acc_t'(777);
    @(negedge clk); dx_wr_valid = 0;
    for (int k = 39; k >= 0; k--) begin
      automatic bit ok = 1;
      automatic int t = (k * 37) % T_MAX, r = k % ROWS, j = (k * 53 + 7) % N_MAX;
      if (k == 39) begin t = T_MAX - 1; r = ROWS - 1; j = N_MAX - 1; end
      m_rd_en = 1; m_rd_t = T_W'(t); m_rd_row = ROW_W'(r);
      dx_rd_en = 1; dx_rd_t = T_W'(t); dx_rd_idx = IDX_W'(j);
      @(negedge clk);
      m_rd_en = 0; dx_rd_en = 0;
      for (int p = 0; p < P; p++) if (m_rd_data[p] != acc_t'(k * 100003 + p * 7919 - 1000000)) ok = 0;
      check(ok, $sformatf("M_t row t=%0d r=%0d", t, r));
      check(dx_rd_data == acc_t'(-k * 65537 + 12345), $sformatf("dx word t=%0d j=%0d", t, j));
    end
    dx_rd_en = 1; dx_rd_t = '0; dx_rd_idx = IDX_W'(8); @(negedge clk); dx_rd_en = 0;
    check(dx_rd_data == acc_t'(777), "unwritten neighbour keeps its own value");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
