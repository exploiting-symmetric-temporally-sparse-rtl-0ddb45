// dram_ctrl: fetches whole weight columns from external DRAM and writes
// weight-gradient columns back.
//
// The weight matrix W (n_out x n_in) and its gradient dC/dW are stored in
// DRAM column by column: column j is cfg_beats consecutive beats of P words
// starting at base + j*cfg_beats. A column fetch is therefore one burst, which
// is what lets a delta network skip the columns of inactive neurons at the
// cost of one DRAM addressing step per active neuron. Column j == n_in of the
// weight region holds the bias vector.
//
// Read side: a command {col, region, tag} becomes one burst request
// (rd_req_*). Accepted commands wait in an in-order queue of Q_DEPTH entries;
// returning beats (rd_data_*) leave as beat_* with the row number within the
// column, a last flag, the column and the command's tag. The queue also
// answers a hazard query: haz_hit is 1 when a gradient-region fetch of
// column haz_col is outstanding. Write side: wr_in_* {col, row, data} become
// one addressed beat write to the gradient region in the same cycle.
//
// The paper names the DRAM controller and the burst column access; the
// request/response protocol, the queue and the column-major layout are this
// design's. There is no back-pressure on returning read data or on writes.
// The data buses themselves (rd_data -> beat_data, wr_in_data -> wr_data,
// rd_data_valid -> beat_valid, cfg_beats -> rd_req_len) are passed through
// unregistered on purpose: this block adds addresses, row numbers and tags
// to the data, it does not buffer it.
module dram_ctrl
  import drnn_pkg::*;
#(
  parameter int unsigned P       = 16,
  parameter int unsigned N_MAX   = 256,
  parameter int unsigned ADDR_W  = 24,
  parameter int unsigned TAG_W   = 32,
  parameter int unsigned Q_DEPTH = 4,
  parameter int unsigned IDX_W   = $clog2(N_MAX + 1),
  parameter int unsigned ROWS    = N_MAX / P,
  parameter int unsigned ROW_W   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] cfg_w_base,
  input  logic [ADDR_W-1:0] cfg_g_base,
  input  logic [ROW_W:0]    cfg_beats,     // beats per column = n_out / P
  // column commands
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  logic [IDX_W-1:0]  cmd_col,
  input  logic              cmd_grad,      // 1: gradient region, 0: weights
  input  logic [TAG_W-1:0]  cmd_tag,
  // hazard query
  input  logic [IDX_W-1:0]  haz_col,
  output logic              haz_hit,
  output logic              q_empty,
  // DRAM read request
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output logic [ADDR_W-1:0] rd_req_addr,
  output logic [ROW_W:0]    rd_req_len,
  // DRAM read data
  input  logic              rd_data_valid,
  input  data_t             rd_data [P],
  // beats to the datapath
  output logic              beat_valid,
  output data_t             beat_data [P],
  output logic [ROW_W-1:0]  beat_row,
  output logic              beat_last,
  output logic [IDX_W-1:0]  beat_col,
  output logic [TAG_W-1:0]  beat_tag,
  // gradient write-back
  input  logic              wr_in_valid,
  input  logic [IDX_W-1:0]  wr_in_col,
  input  logic [ROW_W-1:0]  wr_in_row,
  input  data_t             wr_in_data [P],
  output logic              wr_valid,
  output logic [ADDR_W-1:0] wr_addr,
  output data_t             wr_data [P]
);

  localparam int unsigned QP_W = (Q_DEPTH > 1) ? $clog2(Q_DEPTH) : 1;

  typedef struct packed {
    logic [IDX_W-1:0] col;
    logic             grad;
    logic [TAG_W-1:0] tag;
  } q_entry_t;

  q_entry_t         q [Q_DEPTH];
  logic [QP_W-1:0]  q_rd, q_wr;
  logic [QP_W:0]    q_cnt;
  logic [ROW_W:0]   row_cnt;
  logic             push, pop;

  assign cmd_ready    = rd_req_ready && (q_cnt < (QP_W+1)'(Q_DEPTH));
  assign rd_req_valid = cmd_valid && (q_cnt < (QP_W+1)'(Q_DEPTH));
  assign rd_req_addr  = (cmd_grad ? cfg_g_base : cfg_w_base)
                      + ADDR_W'(cmd_col) * ADDR_W'(cfg_beats);
  assign rd_req_len   = cfg_beats;
  assign push         = cmd_valid && cmd_ready;

  // beats leave with the head entry of the queue
  assign beat_valid = rd_data_valid;
  assign beat_data  = rd_data;
  assign beat_row   = row_cnt[ROW_W-1:0];
  assign beat_last  = (row_cnt + 1'b1) == cfg_beats;
  assign beat_col   = q[q_rd].col;
  assign beat_tag   = q[q_rd].tag;
  assign pop        = rd_data_valid && beat_last;
  assign q_empty    = (q_cnt == '0);

  always_ff @(posedge clk) begin
    if (push) q[q_wr] <= '{col: cmd_col, grad: cmd_grad, tag: cmd_tag};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_rd    <= '0;
      q_wr    <= '0;
      q_cnt   <= '0;
      row_cnt <= '0;
    end else begin
      if (push) q_wr <= (q_wr == QP_W'(Q_DEPTH-1)) ? '0 : q_wr + 1'b1;
      if (pop)  q_rd <= (q_rd == QP_W'(Q_DEPTH-1)) ? '0 : q_rd + 1'b1;
      q_cnt <= q_cnt + (QP_W+1)'(push) - (QP_W+1)'(pop);
      if (rd_data_valid) row_cnt <= beat_last ? '0 : row_cnt + 1'b1;
    end
  end

  // hazard query against every outstanding gradient-region fetch
  always_comb begin
    haz_hit = 1'b0;
    for (int i = 0; i < Q_DEPTH; i++) begin
      logic [QP_W-1:0] k;
      k = QP_W'((int'(q_rd) + i) % Q_DEPTH);
      if (((QP_W+1)'(i) < q_cnt) && q[k].grad && q[k].col == haz_col)
        haz_hit = 1'b1;
    end
  end

  // gradient write-back address generation
  assign wr_valid = wr_in_valid;
  assign wr_addr  = cfg_g_base + ADDR_W'(wr_in_col) * ADDR_W'(cfg_beats) + ADDR_W'(wr_in_row);
  assign wr_data  = wr_in_data;

  // a beat may only arrive for a fetch that was requested
  a_no_orphan_beat: assert property (@(posedge clk) disable iff (!rst_n)
                                     rd_data_valid |-> q_cnt != '0);

endmodule
