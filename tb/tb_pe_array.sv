// tb_pe_array: the 16-lane array on the three products.
// Forward: a bias load then random columns times deltas are accumulated into
// the rows and read back lane by lane. Input gradient: random columns of
// random length (beats) times a gradient vector; the adder-tree result must
// equal the dot product, two cycles after the last beat, with its meta word.
// Weight gradient: every lane's saturating update is checked one cycle later.
`timescale 1ns/1ps
module tb_pe_array;
  import drnn_pkg::*;
  localparam int unsigned P = 16, ROWS = 16, ROW_W = 4, META_W = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic en, last, y_valid, dx_valid;
  pe_cmd_e cmd;
  logic [ROW_W-1:0] row;
  data_t w [P], g [P], v;
  logic [META_W-1:0] meta, y_meta, dx_meta;
  acc_t y [P], dx_sum;

  pe_array #(.P(P), .ROWS(ROWS), .META_W(META_W)) dut (.*);

  longint acc [ROWS*P];
  longint exp_dx[$];
  int     exp_meta[$];
  int     dx_got = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (rst_n && dx_valid) begin
    dx_got++;
    check(exp_dx.size() > 0 && longint'(dx_sum) == exp_dx[0] && dx_meta == META_W'(exp_meta[0]),
          $sformatf("dx sum %0d exp %0d", dx_sum, exp_dx.size() ? exp_dx[0] : 0));
    if (exp_dx.size()) begin void'(exp_dx.pop_front()); void'(exp_meta.pop_front()); end
  end

  task automatic issue(pe_cmd_e c, int r, bit l, int m);
    en = 1; cmd = c; row = ROW_W'(r); last = l; meta = META_W'(m);
    @(negedge clk);
    en = 0; cmd = PE_NOP;
  endtask

  initial begin
    en = 0; cmd = PE_NOP; row = '0; last = 0; meta = '0; v = '0;
    for (int p = 0; p < P; p++) begin w[p] = '0; g[p] = '0; end
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    // forward
    for (int r = 0; r < ROWS; r++) begin
      for (int p = 0; p < P; p++) begin w[p] = data_t'(int'($urandom % 512) - 256); acc[r*P+p] = longint'(w[p]) * 256; end
      issue(PE_BIAS, r, 0, 0);
    end
    for (int k = 0; k < 20; k++) begin
      v = data_t'(int'($urandom % 1024) - 512);
      for (int r = 0; r < ROWS; r++) begin
        for (int p = 0; p < P; p++) begin w[p] = data_t'(int'($urandom % 256) - 128); acc[r*P+p] += longint'(w[p]) * v; end
        issue(PE_FMAC, r, 0, 0);
      end
    end
    for (int r = 0; r < ROWS; r++) begin
      automatic bit ok = 1;
      en = 1; cmd = PE_READ; row = ROW_W'(r); meta = META_W'(100 + r);
      @(negedge clk); en = 0; cmd = PE_NOP;
      for (int p = 0; p < P; p++) if (longint'(y[p]) != acc[r*P+p]) ok = 0;
      check(ok && y_valid && y_meta == META_W'(100 + r), $sformatf("M read row %0d", r));
    end
    // input gradient: columns of random length, back to back
    for (int k = 0; k < 30; k++) begin
      automatic int beats = int'($urandom % 16) + 1;
      automatic longint s = 0;
      for (int b = 0; b < beats; b++) begin
        for (int p = 0; p < P; p++) begin
          w[p] = data_t'(int'($urandom % 512) - 256); g[p] = data_t'(int'($urandom % 512) - 256);
          s += longint'(w[p]) * g[p];
        end
        if (b == beats - 1) begin exp_dx.push_back(s); exp_meta.push_back(k); end
        issue(PE_DMAC, b, b == beats - 1, k);
      end
    end
    repeat (4) @(negedge clk);
    check(dx_got == 30 && exp_dx.size() == 0, "all input-gradient sums delivered");
    // weight gradient update
    for (int k = 0; k < 20; k++) begin
      automatic bit ok = 1;
      automatic int e [P];
      v = data_t'(int'($urandom % 4096) - 2048);
      for (int p = 0; p < P; p++) begin
        automatic int s;
        w[p] = data_t'(int'($urandom % 65536) - 32768); g[p] = data_t'(int'($urandom % 4096) - 2048);
        s = int'(w[p]) + ((int'(g[p]) * int'(v)) >>> 8);
        e[p] = s > 32767 ? 32767 : (s < -32768 ? -32768 : s);
      end
      issue(PE_WUPD, 0, 0, 0);
      for (int p = 0; p < P; p++) if (int'(y[p]) != e[p]) ok = 0;
      check(ok && y_valid && !dx_valid, $sformatf("weight-gradient update %0d", k));
    end
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
