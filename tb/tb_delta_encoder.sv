// tb_delta_encoder: checks the delta rule element by element.
// Random vectors of 48 elements over 30 timesteps (part of the elements move
// by more than the threshold, the rest by less) go through the encoder; an
// independent model keeps xhat and predicts mask, delta and the vector-end
// flag. Also checks the one-cycle latency, that clear forgets xhat, and
// that values equal to the threshold are not propagated (strict compare).
`timescale 1ns/1ps
module tb_delta_encoder;
  import drnn_pkg::*;
  localparam int unsigned N_MAX = 256;
  localparam int unsigned IDX_W = $clog2(N_MAX + 1);
  localparam int N = 48;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, in_valid, in_last, out_valid, out_mask, out_last;
  logic [IDX_W-1:0] in_idx, out_idx;
  data_t theta, in_x, out_delta;

  delta_encoder #(.N_MAX(N_MAX)) dut (.*);

  int xhat [N];
  int exp_mask, exp_delta, exp_idx, exp_last, exp_valid;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic send(int i, int x, bit last);
    int d, a;
    in_valid = 1; in_idx = IDX_W'(i); in_x = data_t'(x); in_last = last;
    d = x - xhat[i]; a = d < 0 ? -d : d;
    exp_valid = 1; exp_idx = i; exp_last = last;
    exp_mask = a > int'(theta);
    exp_delta = exp_mask ? d : 0;
    if (exp_mask) xhat[i] = x;
    @(negedge clk);
    // outputs appear one cycle after the input
    check(out_valid && out_idx == IDX_W'(exp_idx) && out_mask == exp_mask[0] &&
          int'(out_delta) == exp_delta && out_last == exp_last[0],
          $sformatf("elem %0d x=%0d: mask %0d/%0d delta %0d/%0d", i, x, out_mask, exp_mask, out_delta, exp_delta));
  endtask

  initial begin
    int x [N];
    clear = 0; in_valid = 0; in_last = 0; in_idx = '0; in_x = '0; theta = 16'sd26;
    for (int i = 0; i < N; i++) begin xhat[i] = 0; x[i] = 0; end
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int t = 0; t < 30; t++)
      for (int i = 0; i < N; i++) begin
        if ($urandom % 3 == 0) x[i] = x[i] + int'($urandom % 200) - 100;
        else                   x[i] = x[i] + int'($urandom % 41) - 20;
        send(i, x[i], i == N - 1);
      end
    // exactly at the threshold: not activated
    send(0, xhat[0] + 26, 0);
    check(out_mask == 0, "|d| == theta is not propagated");
    send(0, xhat[0] - 27, 1);
    check(out_mask == 1, "|d| == theta+1 is propagated");
    // idle input: no output next cycle
    in_valid = 0; @(negedge clk);
    check(!out_valid, "no output without input");
    // clear forgets the stored values
    clear = 1; @(negedge clk); clear = 0;
    for (int i = 0; i < N; i++) xhat[i] = 0;
    send(5, 20, 0);
    check(out_mask == 0, "after clear xhat is 0 (20 below threshold)");
    send(6, -300, 1);
    check(out_delta == -16'sd300, "after clear delta measured from 0");
    in_valid = 0;
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
