// tb_mac_pe: random command sequences against a software model of one PE.
// Covers bias load, forward MAC into several rows, the input-gradient partial
// sum with its output on 'last', the saturating weight-gradient update and
// read-out of the pre-activation memory, each with its one-cycle latency.
`timescale 1ns/1ps
module tb_mac_pe;
  import drnn_pkg::*;
  localparam int unsigned ROWS = 16, ROW_W = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic en, last, y_valid;
  pe_cmd_e cmd;
  logic [ROW_W-1:0] row;
  data_t w, v, g;
  acc_t y;

  mac_pe #(.ROWS(ROWS)) dut (.*);

  longint acc [ROWS];
  longint psum;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic int sat16(longint a);
    if (a > 32767) return 32767;
    if (a < -32768) return -32768;
    return int'(a);
  endfunction

  task automatic op(pe_cmd_e c, int r, int wi, int vi, int gi, bit l);
    longint e; bit ev = 0;
    en = 1; cmd = c; row = ROW_W'(r); w = data_t'(wi); v = data_t'(vi); g = data_t'(gi); last = l;
    case (c)
      PE_BIAS: acc[r] = longint'(wi) * 256;
      PE_FMAC: acc[r] += longint'(wi) * vi;
      PE_DMAC: begin psum += longint'(wi) * gi; if (l) begin e = psum; ev = 1; psum = 0; end end
      PE_WUPD: begin e = sat16(longint'(wi) + ((longint'(gi) * vi) >>> 8)); ev = 1; end
      PE_READ: begin e = acc[r]; ev = 1; end
      default: ;
    endcase
    @(negedge clk);
    en = 0;
    check(y_valid == ev, $sformatf("y_valid for cmd %s", c.name()));
    if (ev) check(longint'(y) == e, $sformatf("%s: y=%0d exp %0d", c.name(), y, e));
  endtask

  initial begin
    en = 0; cmd = PE_NOP; row = '0; w = '0; v = '0; g = '0; last = 0; psum = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int r = 0; r < ROWS; r++) op(PE_BIAS, r, int'($urandom % 512) - 256, 0, 0, 0);
    for (int k = 0; k < 400; k++) begin
      automatic int sel = int'($urandom % 4);
      automatic int wi = int'($urandom % 65536) - 32768;
      automatic int vi = int'($urandom % 2048) - 1024;
      automatic int gi = int'($urandom % 2048) - 1024;
      case (sel)
        0: op(PE_FMAC, int'($urandom % ROWS), wi / 64, vi, gi, 0);
        1: op(PE_DMAC, 0, wi / 64, vi, gi, ($urandom % 4) == 0);
        2: op(PE_WUPD, 0, wi, vi * 16, gi * 16, 0);   // large: exercises saturation
        default: op(PE_READ, int'($urandom % ROWS), 0, 0, 0, 0);
      endcase
    end
    for (int r = 0; r < ROWS; r++) op(PE_READ, r, 0, 0, 0, 0);
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
