// tb_train_ctrl: the sequencer against a model of the SRAM lists and of the
// datapath. A random sequence of 12 timesteps (some empty) is stored in the
// list model; the command port is accepted with random back-pressure and
// every accepted fetch stays "in flight" for a random number of cycles.
// Checks for each product: the order of the fetched columns (timesteps
// ascending for the forward pass, descending for the backward passes, list
// order within a timestep), the tag fields (timestep, delta value, bias
// flag), that the bias column comes first in the forward pass, that M_t
// read-out happens only with nothing in flight and covers every row, that
// a gradient fetch waits while haz_busy is high, that the forward and
// input-gradient passes start a timestep only once the previous one has
// drained, and that done comes once.
`timescale 1ns/1ps
module tb_train_ctrl;
  import drnn_pkg::*;
  localparam int unsigned P = 16, N_MAX = 256, T_MAX = 256;
  localparam int unsigned IDX_W = $clog2(N_MAX + 1), T_W = $clog2(T_MAX);
  localparam int unsigned NZ_AW = $clog2(T_MAX * N_MAX), ROWS = N_MAX / P, ROW_W = $clog2(ROWS);
  localparam int NT = 12, NIN = 100, BEATS = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, nz_rd_en, cmd_valid, cmd_ready, cmd_grad, cmd_bias;
  logic haz_busy, drained, dump_valid, haz_stall;
  op_e op;
  logic [T_W:0] cfg_n_t = NT;
  logic [IDX_W-1:0] cfg_n_in = NIN;
  logic [ROW_W:0] cfg_beats = BEATS;
  logic [T_W-1:0] tbl_t, cmd_t, dump_t;
  logic [NZ_AW:0] tbl_start, nz_rd_addr;
  logic [IDX_W-1:0] tbl_count, nz_rd_idx, cmd_col;
  data_t nz_rd_val, cmd_val;
  logic [ROW_W-1:0] dump_row;

  train_ctrl #(.P(P), .N_MAX(N_MAX), .T_MAX(T_MAX)) dut (.*);

  // list model
  int st [NT], cn [NT];
  int li [NT*NIN], lv [NT*NIN];
  assign tbl_start = (NZ_AW+1)'(st[tbl_t]);
  assign tbl_count = IDX_W'(cn[tbl_t]);
  always @(posedge clk) if (nz_rd_en) begin
    nz_rd_idx <= IDX_W'(li[nz_rd_addr]);
    nz_rd_val <= data_t'(lv[nz_rd_addr]);
  end

  // datapath model
  int inflight [$];
  bit force_haz;
  assign drained = inflight.size() == 0;
  always @(posedge clk) begin
    foreach (inflight[i]) inflight[i]--;
    while (inflight.size() && inflight[0] <= 0) void'(inflight.pop_front());
    if (cmd_valid && cmd_ready) inflight.push_back(int'($urandom % 20) + 1);
    cmd_ready <= ($urandom % 4) != 0;
  end
  assign haz_busy = force_haz;

  // a new timestep may start only when the previous one has drained; sampled
  // at the falling edge, before the model adds the accepted command
  always @(negedge clk) if (rst_n && cmd_valid && cmd_ready) begin
    if (int'(cmd_t) != last_cmd_t && !drained) step_overlap++;
    last_cmd_t = int'(cmd_t);
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // expected command stream and observers
  int exp_t[$], exp_col[$], exp_val[$];
  int dumps [NT];
  int done_cnt, haz_cycles, haz_violations, dump_in_flight, step_overlap;
  int last_cmd_t;

  always @(posedge clk) if (rst_n) begin
    if (done) done_cnt++;
    if (haz_busy && busy && op == OP_BP_DW) begin
      if (cmd_valid && !cmd_bias) haz_violations++;
      if (haz_stall) haz_cycles++;
    end
    if (dump_valid) begin
      if (!drained) dump_in_flight++;
      if (int'(dump_row) == dumps[dump_t]) dumps[dump_t]++;
      else dumps[dump_t] = -1000;
    end
    if (cmd_valid && cmd_ready) begin
      if (exp_col.size() == 0) check(0, "unexpected command");
      else begin
        check(int'(cmd_col) == exp_col[0] && int'(cmd_t) == exp_t[0] &&
              (cmd_bias || int'(cmd_val) == exp_val[0]) && (cmd_bias == (exp_col[0] == NIN))
              && cmd_grad == (op == OP_BP_DW),
              $sformatf("command col %0d/%0d t %0d/%0d", cmd_col, exp_col[0], cmd_t, exp_t[0]));
        void'(exp_col.pop_front()); void'(exp_t.pop_front()); void'(exp_val.pop_front());
      end
    end
  end

  task automatic run(op_e o);
    longint c0 = 0;
    int nnz = 0;
    exp_t.delete(); exp_col.delete(); exp_val.delete();
    if (o == OP_FP) begin exp_col.push_back(NIN); exp_t.push_back(0); exp_val.push_back(0); end
    for (int k = 0; k < NT; k++) begin
      int t = (o == OP_FP) ? k : NT - 1 - k;
      for (int e = 0; e < cn[t]; e++) begin
        exp_col.push_back(li[st[t] + e]); exp_t.push_back(t); exp_val.push_back(lv[st[t] + e]); nnz++;
      end
    end
    for (int t = 0; t < NT; t++) dumps[t] = 0;
    done_cnt = 0; dump_in_flight = 0; step_overlap = 0; last_cmd_t = -1;
    op = o; start = 1; @(negedge clk); start = 0;
    while (!done) begin
      c0++;
      // assert the hazard for a while in the weight-gradient pass
      force_haz = (o == OP_BP_DW) && (c0 % 40 < 6);
      @(negedge clk);
    end
    force_haz = 0;
    @(negedge clk);
    check(exp_col.size() == 0, $sformatf("%s: all columns fetched", o.name()));
    check(done_cnt == 1 && !busy, $sformatf("%s: one done pulse", o.name()));
    check(dump_in_flight == 0, $sformatf("%s: read-out only when drained", o.name()));
    if (o != OP_BP_DW)
      check(step_overlap == 0, $sformatf("%s: timesteps overlapped %0d times", o.name(), step_overlap));
    for (int t = 0; t < NT; t++)
      check(dumps[t] == ((o == OP_FP) ? BEATS : 0), $sformatf("%s: M_%0d read-out rows %0d", o.name(), t, dumps[t]));
    // no worse than 2 cycles per entry plus back-pressure and per-step overhead
    check(c0 < 8 * nnz + 30 * NT + 200, $sformatf("%s: %0d cycles for %0d columns", o.name(), c0, nnz));
  endtask

  initial begin
    int p = 0;
    start = 0; op = OP_FP; force_haz = 0; haz_cycles = 0; haz_violations = 0;
    for (int t = 0; t < NT; t++) begin
      st[t] = p;
      cn[t] = (t % 5 == 2) ? 0 : int'($urandom % 12) + 1;
      for (int e = 0; e < cn[t]; e++) begin
        li[p] = e * 7 + (t % 3); lv[p] = int'($urandom % 2000) - 1000; p++;
      end
    end
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    run(OP_FP);
    run(OP_BP_DX);
    run(OP_BP_DW);
    check(haz_cycles > 0, "hazard stall happened");
    check(haz_violations == 0, "no fetch issued during a hazard");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
