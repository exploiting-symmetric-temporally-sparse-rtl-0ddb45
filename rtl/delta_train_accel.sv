// delta_train_accel: accelerator for training Delta RNNs with temporally
// sparse back-propagation through time, batch size 1.
//
// A delta network only propagates the elements of its input / hidden-state
// vectors that changed by more than a threshold since they were last
// propagated. The same set of active elements governs the three matrix-vector
// products of training, so every one of them can skip the weight columns of
// inactive elements:
//   forward          M_t      = W dx_t + M_{t-1}          (OP_FP)
//   input gradient   dC/ddx_t = (W^T dC/dM_t) .* m_t      (OP_BP_DX)
//   weight gradient  dC/dW   += dC/dM_t dx_t^T            (OP_BP_DW)
// Weights live in external DRAM column by column, so skipping an element
// skips a whole DRAM burst as well as its P-lane MAC work.
//
// Blocks: delta_encoder turns each x_t (or h_t) into its non-zero index and
// value lists; sram_ctrl stores those lists, the dC/dM_t vectors and the
// results;
// train_ctrl walks the lists and requests one weight column per non-zero
// element; dram_ctrl turns requests into DRAM bursts and gradient
// write-backs; pe_array (P MAC PEs and an adder tree) does the arithmetic.
// The non-linearities, the loss and the weight update rule stay with the
// host, as in the paper's accelerator, which computes only the three MxVs.
//
// Use: clear the sequence (seq_clear), stream the n_t vectors in through
// x_* (one element per cycle, x_last on each vector's final element), write
// dC/dM_t rows through g_wr_* for the backward runs, set cfg_* and pulse
// start with cfg_op. Results: M_t on m_* (one row of P values per cycle,
// Q16.16), dC/ddx_t elements on dx_* (Q16.16, index = neuron), weight
// gradients written into the DRAM gradient region (Q8.8, accumulated over
// all timesteps). M_t rows and dC/ddx_t elements are also stored in the
// SRAM, as the block diagram's result bus from the PE array to the SRAM
// shows, and can be read back later through m_rd_* and dx_rd_*. done
// pulses at the end of a run.
//
// Pipeline from a returned DRAM beat: cycle A beat arrives and the matching
// dC/dM_t row is read from SRAM; cycle B the PEs compute; cycle C results
// leave (M_t rows, gradient write-back); the input-gradient adder tree adds
// one more cycle.
module delta_train_accel
  import drnn_pkg::*;
#(
  parameter int unsigned P       = 16,   // PEs (paper: 16)
  parameter int unsigned N_MAX   = 256,  // largest layer (paper: 64/128/256)
  parameter int unsigned T_MAX   = 256,  // longest sequence (paper: = layer size)
  parameter int unsigned ADDR_W  = 24,   // DRAM beat address width
  parameter int unsigned Q_DEPTH = 4,    // outstanding column fetches
  parameter int unsigned IDX_W   = $clog2(N_MAX + 1),
  parameter int unsigned T_W     = $clog2(T_MAX),
  parameter int unsigned ROWS    = N_MAX / P,
  parameter int unsigned ROW_W   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // run control and configuration
  input  logic              start,
  input  op_e               cfg_op,
  input  logic [T_W:0]      cfg_n_t,      // timesteps
  input  logic [IDX_W-1:0]  cfg_n_in,     // columns of W (delta vector length)
  input  logic [ROW_W:0]    cfg_beats,    // rows of W / P
  input  logic [ADDR_W-1:0] cfg_w_base,
  input  logic [ADDR_W-1:0] cfg_g_base,
  input  data_t             cfg_theta,
  output logic              busy,
  output logic              done,
  // sequence loading
  input  logic              seq_clear,
  input  logic              x_valid,
  input  logic [IDX_W-1:0]  x_idx,
  input  data_t             x_val,
  input  logic              x_last,
  output logic [T_W:0]      n_steps,
  input  logic              g_wr_valid,
  input  logic [T_W-1:0]    g_wr_t,
  input  logic [ROW_W-1:0]  g_wr_row,
  input  data_t             g_wr_data [P],
  // external DRAM
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output logic [ADDR_W-1:0] rd_req_addr,
  output logic [ROW_W:0]    rd_req_len,
  input  logic              rd_data_valid,
  input  data_t             rd_data [P],
  output logic              wr_valid,
  output logic [ADDR_W-1:0] wr_addr,
  output data_t             wr_data [P],
  // results
  output logic              m_valid,
  output logic [T_W-1:0]    m_t,
  output logic [ROW_W-1:0]  m_row,
  output acc_t              m_data [P],
  output logic              dx_valid,
  output logic [T_W-1:0]    dx_t,
  output logic [IDX_W-1:0]  dx_idx,
  output acc_t              dx_data,
  // result read-back from SRAM (1-cycle latency)
  input  logic              m_rd_en,
  input  logic [T_W-1:0]    m_rd_t,
  input  logic [ROW_W-1:0]  m_rd_row,
  output acc_t              m_rd_data [P],
  input  logic              dx_rd_en,
  input  logic [T_W-1:0]    dx_rd_t,
  input  logic [IDX_W-1:0]  dx_rd_idx,
  output acc_t              dx_rd_data,
  // event counters (cleared by seq_clear)
  output logic [31:0]       stat_fetches,    // weight columns fetched
  output logic [31:0]       stat_skipped,    // vector elements below threshold
  output logic [31:0]       stat_haz_stalls  // cycles a gradient fetch waited
);

  localparam int unsigned NZ_AW  = $clog2(T_MAX * N_MAX);
  localparam int unsigned TAG_W  = 1 + T_W + DW;
  localparam int unsigned META_W = 1 + T_W + IDX_W + ROW_W;

  typedef struct packed {
    logic             bias;
    logic [T_W-1:0]   t;
    data_t            val;
  } tag_t;

  typedef struct packed {
    logic             dump;
    logic [T_W-1:0]   t;
    logic [IDX_W-1:0] col;
    logic [ROW_W-1:0] row;
  } meta_t;

  // ---------------------------------------------------------------- encoder
  logic             enc_valid, enc_mask, enc_last;
  logic [IDX_W-1:0] enc_idx;
  data_t            enc_delta;

  delta_encoder #(.N_MAX(N_MAX)) u_enc (
    .clk, .rst_n, .clear(seq_clear), .theta(cfg_theta),
    .in_valid(x_valid), .in_idx(x_idx), .in_x(x_val), .in_last(x_last),
    .out_valid(enc_valid), .out_mask(enc_mask), .out_idx(enc_idx),
    .out_delta(enc_delta), .out_last(enc_last)
  );

  // ------------------------------------------------------------------- SRAM
  logic [T_W-1:0]   tbl_t;
  logic [NZ_AW:0]   tbl_start, nz_rd_addr;
  logic [IDX_W-1:0] tbl_count, nz_rd_idx;
  logic             nz_rd_en, g_rd_en;
  data_t            nz_rd_val;
  logic [T_W-1:0]   g_rd_t;
  logic [ROW_W-1:0] g_rd_row;
  data_t            g_rd_data [P];

  sram_ctrl #(.P(P), .N_MAX(N_MAX), .T_MAX(T_MAX)) u_sram (
    .clk, .rst_n, .seq_clear,
    .nz_wr_valid(enc_valid && enc_mask), .nz_wr_idx(enc_idx), .nz_wr_val(enc_delta),
    .eot_wr(enc_last), .n_steps,
    .g_wr_valid, .g_wr_t, .g_wr_row, .g_wr_data,
    .tbl_t, .tbl_start, .tbl_count,
    .nz_rd_en, .nz_rd_addr, .nz_rd_idx, .nz_rd_val,
    .g_rd_en, .g_rd_t, .g_rd_row, .g_rd_data,
    .m_wr_valid(m_valid), .m_wr_t(m_t), .m_wr_row(m_row), .m_wr_data(m_data),
    .dx_wr_valid(dx_valid), .dx_wr_t(dx_t), .dx_wr_idx(dx_idx), .dx_wr_data(dx_data),
    .m_rd_en, .m_rd_t, .m_rd_row, .m_rd_data,
    .dx_rd_en, .dx_rd_t, .dx_rd_idx, .dx_rd_data
  );

  // -------------------------------------------------------------- sequencer
  logic             cmd_valid, cmd_ready, cmd_grad, cmd_bias;
  logic [IDX_W-1:0] cmd_col;
  logic [T_W-1:0]   cmd_t;
  data_t            cmd_val;
  logic             haz_busy, drained, haz_stall;
  logic             dump_valid;
  logic [ROW_W-1:0] dump_row;
  logic [T_W-1:0]   dump_t;
  op_e              op_q;

  train_ctrl #(.P(P), .N_MAX(N_MAX), .T_MAX(T_MAX)) u_ctrl (
    .clk, .rst_n, .start, .op(cfg_op), .cfg_n_t, .cfg_n_in, .cfg_beats,
    .busy, .done,
    .tbl_t, .tbl_start, .tbl_count, .nz_rd_en, .nz_rd_addr, .nz_rd_idx, .nz_rd_val,
    .cmd_valid, .cmd_ready, .cmd_col, .cmd_grad, .cmd_bias, .cmd_t, .cmd_val,
    .haz_busy, .drained, .dump_valid, .dump_row, .dump_t, .haz_stall
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                op_q <= OP_FP;
    else if (start && !busy)   op_q <= cfg_op;
  end

  // ------------------------------------------------------------------- DRAM
  logic              beat_valid, beat_last, q_empty, haz_hit;
  data_t             beat_data [P];
  logic [ROW_W-1:0]  beat_row;
  logic [IDX_W-1:0]  beat_col;
  logic [TAG_W-1:0]  beat_tag_bits;
  tag_t              beat_tag;
  logic              wb_valid;
  logic [IDX_W-1:0]  wb_col;
  logic [ROW_W-1:0]  wb_row;
  data_t             wb_data [P];

  dram_ctrl #(.P(P), .N_MAX(N_MAX), .ADDR_W(ADDR_W), .TAG_W(TAG_W),
              .Q_DEPTH(Q_DEPTH)) u_dram (
    .clk, .rst_n, .cfg_w_base, .cfg_g_base, .cfg_beats,
    .cmd_valid, .cmd_ready, .cmd_col, .cmd_grad,
    .cmd_tag(TAG_W'(tag_t'{bias: cmd_bias, t: cmd_t, val: cmd_val})),
    .haz_col(cmd_col), .haz_hit, .q_empty,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_len,
    .rd_data_valid, .rd_data,
    .beat_valid, .beat_data, .beat_row, .beat_last, .beat_col, .beat_tag(beat_tag_bits),
    .wr_in_valid(wb_valid), .wr_in_col(wb_col), .wr_in_row(wb_row), .wr_in_data(wb_data),
    .wr_valid, .wr_addr, .wr_data
  );

  assign beat_tag = tag_t'(beat_tag_bits);

  // stage A: fetch the matching dC/dM_t row
  assign g_rd_en  = beat_valid;
  assign g_rd_t   = beat_tag.t;
  assign g_rd_row = beat_row;

  // stage B registers
  logic             sb_valid, sb_last;
  data_t            sb_data [P];
  logic [ROW_W-1:0] sb_row;
  logic [IDX_W-1:0] sb_col;
  tag_t             sb_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sb_valid <= 1'b0;
    else        sb_valid <= beat_valid;
  end

  always_ff @(posedge clk) begin
    if (beat_valid) begin
      sb_data <= beat_data;
      sb_row  <= beat_row;
      sb_last <= beat_last;
      sb_col  <= beat_col;
      sb_tag  <= beat_tag;
    end
  end

  // ------------------------------------------------------------- PE array
  logic             pe_en, y_valid, pdx_valid;
  pe_cmd_e          pe_cmd;
  logic [ROW_W-1:0] pe_row;
  meta_t            pe_meta, y_meta, pdx_meta;
  logic [META_W-1:0] y_meta_bits, pdx_meta_bits;
  acc_t             y [P];
  acc_t             pdx_sum;
  logic             pe_pend1, pe_pend2;

  always_comb begin
    pe_en   = sb_valid || dump_valid;
    pe_row  = dump_valid ? dump_row : sb_row;
    pe_meta = '{dump: dump_valid, t: dump_valid ? dump_t : sb_tag.t,
                col: sb_col, row: pe_row};
    if (dump_valid)              pe_cmd = PE_READ;
    else if (op_q == OP_BP_DX)   pe_cmd = PE_DMAC;
    else if (op_q == OP_BP_DW)   pe_cmd = PE_WUPD;
    else if (sb_tag.bias)        pe_cmd = PE_BIAS;
    else                         pe_cmd = PE_FMAC;
  end

  pe_array #(.P(P), .ROWS(ROWS), .META_W(META_W)) u_pe (
    .clk, .rst_n, .en(pe_en), .cmd(pe_cmd), .row(pe_row), .last(sb_last),
    .w(sb_data), .g(g_rd_data), .v(sb_tag.val), .meta(META_W'(pe_meta)),
    .y_valid, .y, .y_meta(y_meta_bits),
    .dx_valid(pdx_valid), .dx_sum(pdx_sum), .dx_meta(pdx_meta_bits)
  );

  assign y_meta   = meta_t'(y_meta_bits);
  assign pdx_meta = meta_t'(pdx_meta_bits);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pe_pend1 <= 1'b0;
      pe_pend2 <= 1'b0;
    end else begin
      pe_pend1 <= sb_valid;
      pe_pend2 <= pe_pend1;
    end
  end

  // stage C: results
  assign m_valid = y_valid && y_meta.dump;
  assign m_t     = y_meta.t;
  assign m_row   = y_meta.row;
  assign m_data  = y;

  assign wb_valid = y_valid && !y_meta.dump && op_q == OP_BP_DW;
  assign wb_col   = y_meta.col;
  assign wb_row   = y_meta.row;
  always_comb begin
    for (int p = 0; p < P; p++) wb_data[p] = data_t'(y[p][DW-1:0]);
  end

  assign dx_valid = pdx_valid;
  assign dx_t     = pdx_meta.t;
  assign dx_idx   = pdx_meta.col;
  assign dx_data  = pdx_sum;

  // ----------------------------------------------------- hazards and drain
  assign drained  = q_empty && !sb_valid && !pe_pend1 && !pe_pend2;
  assign haz_busy = haz_hit
                 || (sb_valid && sb_col == cmd_col)
                 || (pe_pend1 && y_meta.col == cmd_col);

  // ------------------------------------------------------------- counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stat_fetches    <= '0;
      stat_skipped    <= '0;
      stat_haz_stalls <= '0;
    end else if (seq_clear) begin
      stat_fetches    <= '0;
      stat_skipped    <= '0;
      stat_haz_stalls <= '0;
    end else begin
      if (cmd_valid && cmd_ready && !cmd_bias) stat_fetches <= stat_fetches + 1'b1;
      if (enc_valid && !enc_mask)              stat_skipped <= stat_skipped + 1'b1;
      if (haz_stall)                           stat_haz_stalls <= stat_haz_stalls + 1'b1;
    end
  end

  a_dump_not_during_compute: assert property (@(posedge clk) disable iff (!rst_n)
                                              !(dump_valid && sb_valid));

endmodule
