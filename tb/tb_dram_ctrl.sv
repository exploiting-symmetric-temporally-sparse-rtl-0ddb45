// tb_dram_ctrl: column fetches and gradient write-backs against the DRAM
// model. A memory image where every word encodes its own address lets each
// returned beat be checked for column, row and lane. Commands with random
// tags and regions are issued back to back; the test checks beat order, row
// numbers, last flags, tags, the burst addresses, that the queue fills to
// Q_DEPTH and then refuses commands, the hazard query against outstanding
// gradient fetches, and the address of written-back beats.
`timescale 1ns/1ps
module tb_dram_ctrl;
  import drnn_pkg::*;
  localparam int unsigned P = 16, N_MAX = 256, ADDR_W = 24, TAG_W = 32, QD = 4;
  localparam int unsigned IDX_W = $clog2(N_MAX + 1), ROWS = N_MAX / P, ROW_W = $clog2(ROWS);
  localparam int unsigned G_BASE = 5000, W_BASE = 16, BEATS = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [ADDR_W-1:0] cfg_w_base = W_BASE, cfg_g_base = G_BASE;
  logic [ROW_W:0] cfg_beats = BEATS;
  logic cmd_valid, cmd_ready, cmd_grad, haz_hit, q_empty;
  logic [IDX_W-1:0] cmd_col, haz_col, beat_col, wr_in_col;
  logic [TAG_W-1:0] cmd_tag, beat_tag;
  logic rd_req_valid, rd_req_ready, rd_data_valid, beat_valid, beat_last, wr_in_valid, wr_valid;
  logic [ADDR_W-1:0] rd_req_addr, wr_addr;
  logic [ROW_W:0] rd_req_len;
  data_t rd_data [P], beat_data [P], wr_in_data [P], wr_data [P];
  logic [ROW_W-1:0] beat_row, wr_in_row;

  dram_ctrl #(.P(P), .N_MAX(N_MAX), .ADDR_W(ADDR_W), .TAG_W(TAG_W), .Q_DEPTH(QD)) dut (.*);
  dram_model #(.P(P), .ADDR_W(ADDR_W), .LEN_W(ROW_W + 1), .DEPTH(8192), .LAT(6), .REQ_DEPTH(8)) mem (
    .clk, .rst_n, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_len,
    .rd_data_valid, .rd_data, .wr_valid, .wr_addr, .wr_data);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // expected stream of commands
  int exp_col[$], exp_grad[$], exp_tag[$];
  int row_exp = 0;

  // word content: low 13 bits of the beat address and the lane
  function automatic data_t word(int addr, int lane);
    return data_t'(((addr & 16'h0fff) << 4) | lane);
  endfunction

  always @(posedge clk) if (rst_n && beat_valid) begin
    automatic int base = (exp_grad[0] != 0 ? G_BASE : W_BASE) + exp_col[0] * BEATS;
    automatic bit ok = 1;
    for (int p = 0; p < P; p++) if (beat_data[p] != word(base + row_exp, p)) ok = 0;
    check(ok, $sformatf("beat data col %0d row %0d", exp_col[0], row_exp));
    check(beat_row == ROW_W'(row_exp) && beat_col == IDX_W'(exp_col[0]) &&
          beat_tag == TAG_W'(exp_tag[0]) && beat_last == (row_exp == BEATS - 1),
          $sformatf("beat side info col %0d row %0d", exp_col[0], row_exp));
    if (row_exp == BEATS - 1) begin
      row_exp = 0;
      void'(exp_col.pop_front()); void'(exp_grad.pop_front()); void'(exp_tag.pop_front());
    end else row_exp++;
  end

  int full_seen = 0;

  initial begin
    cmd_valid = 0; cmd_grad = 0; cmd_col = '0; cmd_tag = '0; haz_col = '0;
    wr_in_valid = 0; wr_in_col = '0; wr_in_row = '0;
    for (int p = 0; p < P; p++) wr_in_data[p] = '0;
    for (int a = 0; a < 8192; a++)
      for (int p = 0; p < P; p++) mem.mem[a][p*DW +: DW] = word(a, p);
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    check(q_empty, "queue empty after reset");
    // 40 back-to-back commands
    for (int k = 0; k < 40; k++) begin
      automatic int col = int'($urandom % 200);
      automatic int grad = int'($urandom % 2);
      automatic int tag = int'($urandom);
      cmd_valid = 1; cmd_col = IDX_W'(col); cmd_grad = grad[0]; cmd_tag = TAG_W'(tag);
      #1;
      while (!cmd_ready) begin full_seen++; @(negedge clk); end
      check(rd_req_valid && rd_req_addr == ADDR_W'((grad ? G_BASE : W_BASE) + col * BEATS) &&
            rd_req_len == (ROW_W+1)'(BEATS), "burst request address/length");
      exp_col.push_back(col); exp_grad.push_back(grad); exp_tag.push_back(tag);
      @(negedge clk);
    end
    cmd_valid = 0;
    check(full_seen > 0, "queue filled and refused a command");
    // hazard query: one gradient fetch and one weight fetch of column 77
    wait (q_empty); @(negedge clk);
    cmd_valid = 1; cmd_col = 77; cmd_grad = 1; cmd_tag = 1;
    exp_col.push_back(77); exp_grad.push_back(1); exp_tag.push_back(1);
    @(negedge clk);
    cmd_col = 78; cmd_grad = 0; cmd_tag = 2;
    exp_col.push_back(78); exp_grad.push_back(0); exp_tag.push_back(2);
    @(negedge clk);
    cmd_valid = 0;
    haz_col = 77; #1; check(haz_hit, "hazard on outstanding gradient column");
    haz_col = 78; #1; check(!haz_hit, "no hazard on weight-region column");
    haz_col = 79; #1; check(!haz_hit, "no hazard on other column");
    wait (q_empty); @(negedge clk);
    haz_col = 77; #1; check(!haz_hit, "hazard clears once the fetch returned");
    // write-back address
    wr_in_valid = 1; wr_in_col = 9; wr_in_row = 3;
    for (int p = 0; p < P; p++) wr_in_data[p] = data_t'(p * 7 - 50);
    #1; check(wr_valid && wr_addr == ADDR_W'(G_BASE + 9 * BEATS + 3), "write-back address");
    @(negedge clk); wr_in_valid = 0; @(negedge clk);
    check(mem.mem[G_BASE + 9 * BEATS + 3][5*DW +: DW] == DW'(5 * 7 - 50), "write-back data landed");
    check(exp_col.size() == 0, "all beats returned");
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
