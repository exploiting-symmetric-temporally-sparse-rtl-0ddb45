// train_ctrl: sequencer of the three sparse matrix-vector products of Delta
// RNN training.
//
// For one run (start pulse, op selects the product) it walks the timesteps
// and, for every entry (j, dx_j) of the timestep's non-zero index list, asks
// the DRAM controller for weight column j. Zero elements of the delta vector
// cost nothing: their columns are never fetched. This is the computation flow
// of the paper:
//   OP_FP    t = 0 .. n_t-1. First the bias column is fetched into the
//            pre-activation memory (M_0 = b). After the last column of a
//            timestep the controller waits for the datapath to drain, then
//            reads M_t out of the PE array (cfg_beats read cycles).
//   OP_BP_DX t = n_t-1 .. 0 (backward through time). Each fetched column
//            yields one element of dC/ddx_t at the NZIL index j. As in the
//            forward pass, the datapath drains after each timestep: for the
//            recurrent weights dC/dM_{t-1} depends on the dC/ddh_{t-1} that
//            step t produces, so step t must be complete before t-1 starts.
//   OP_BP_DW t = n_t-1 .. 0, without a drain between timesteps (the sum
//            over t has no such dependency). The gradient column j is fetched, the outer
//            product term dC/dM_t * dx_j is added and the column is written
//            back. A column must not be fetched again while an earlier update
//            of it is still in flight (a read-after-write hazard across
//            timesteps); haz_busy from the datapath stalls the fetch.
// Interface to sram_ctrl: combinational table read (tbl_t -> start, count)
// and a 1-cycle synchronous list read (nz_rd_*). Interface to dram_ctrl: a
// valid/ready column command. done pulses once the last result has left the
// datapath (drained = nothing in flight).
//
// Own choices: one list entry is read and issued per two cycles at most (a
// column takes cfg_beats >= 2 cycles of DRAM bandwidth, so this does not
// limit throughput); the bias is stored as column n_in of the weight region.
module train_ctrl
  import drnn_pkg::*;
#(
  parameter int unsigned P     = 16,
  parameter int unsigned N_MAX = 256,
  parameter int unsigned T_MAX = 256,
  parameter int unsigned IDX_W = $clog2(N_MAX + 1),
  parameter int unsigned T_W   = $clog2(T_MAX),
  parameter int unsigned NZ_AW = $clog2(T_MAX * N_MAX),
  parameter int unsigned ROWS  = N_MAX / P,
  parameter int unsigned ROW_W = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  op_e              op,
  input  logic [T_W:0]     cfg_n_t,
  input  logic [IDX_W-1:0] cfg_n_in,
  input  logic [ROW_W:0]   cfg_beats,
  output logic             busy,
  output logic             done,
  // sram_ctrl
  output logic [T_W-1:0]   tbl_t,
  input  logic [NZ_AW:0]   tbl_start,
  input  logic [IDX_W-1:0] tbl_count,
  output logic             nz_rd_en,
  output logic [NZ_AW:0]   nz_rd_addr,
  input  logic [IDX_W-1:0] nz_rd_idx,
  input  data_t            nz_rd_val,
  // dram_ctrl
  output logic             cmd_valid,
  input  logic             cmd_ready,
  output logic [IDX_W-1:0] cmd_col,
  output logic             cmd_grad,
  output logic             cmd_bias,
  output logic [T_W-1:0]   cmd_t,
  output data_t            cmd_val,
  input  logic             haz_busy,   // column cmd_col still being updated
  input  logic             drained,    // nothing in flight in the datapath
  // M_t read-out
  output logic             dump_valid,
  output logic [ROW_W-1:0] dump_row,
  output logic [T_W-1:0]   dump_t,
  output logic             haz_stall   // a fetch waited on haz_busy this cycle
);

  typedef enum logic [3:0] {
    S_IDLE, S_BIAS, S_TLOAD, S_NZRD, S_ISSUE, S_DRAIN, S_DUMP, S_NEXT, S_FINISH
  } state_e;

  state_e           state;
  op_e              op_q;
  logic [T_W:0]     t;          // current timestep (one extra bit)
  logic [NZ_AW:0]   ptr;
  logic [IDX_W-1:0] remain;
  logic [ROW_W:0]   row;

  assign busy       = (state != S_IDLE);
  assign tbl_t      = t[T_W-1:0];
  assign nz_rd_en   = (state == S_NZRD);
  assign nz_rd_addr = ptr;
  assign cmd_grad   = (op_q == OP_BP_DW);
  assign cmd_t      = t[T_W-1:0];
  assign dump_valid = (state == S_DUMP);
  assign dump_row   = row[ROW_W-1:0];
  assign dump_t     = t[T_W-1:0];

  always_comb begin
    cmd_valid = 1'b0;
    cmd_col   = nz_rd_idx;
    cmd_val   = nz_rd_val;
    cmd_bias  = 1'b0;
    haz_stall = 1'b0;
    if (state == S_BIAS) begin
      cmd_valid = 1'b1;
      cmd_col   = cfg_n_in;
      cmd_val   = '0;
      cmd_bias  = 1'b1;
    end else if (state == S_ISSUE) begin
      if (op_q == OP_BP_DW && haz_busy) haz_stall = 1'b1;
      else                              cmd_valid = 1'b1;
    end
  end

  logic last_t;
  assign last_t = (op_q == OP_FP) ? (t + 1'b1 == cfg_n_t) : (t == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      op_q   <= OP_FP;
      t      <= '0;
      ptr    <= '0;
      remain <= '0;
      row    <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          op_q <= op;
          if (cfg_n_t == '0) begin
            state <= S_FINISH;
          end else if (op == OP_FP) begin
            t     <= '0;
            state <= S_BIAS;
          end else begin
            t     <= cfg_n_t - 1'b1;
            state <= S_TLOAD;
          end
        end
        S_BIAS: if (cmd_ready) state <= S_TLOAD;
        S_TLOAD: begin
          ptr    <= tbl_start;
          remain <= tbl_count;
          state  <= (tbl_count == '0) ? S_DRAIN : S_NZRD;
        end
        S_NZRD: state <= S_ISSUE;
        S_ISSUE: if (cmd_valid && cmd_ready) begin
          ptr    <= ptr + 1'b1;
          remain <= remain - 1'b1;
          state  <= (remain == IDX_W'(1)) ? S_DRAIN : S_NZRD;
        end
        S_DRAIN: begin
          // FP and BP_DX finish a timestep before the next one starts;
          // BP_DW sums over timesteps and streams straight on
          if (op_q == OP_BP_DW) state <= S_NEXT;
          else if (drained) begin
            row   <= '0;
            state <= (op_q == OP_FP) ? S_DUMP : S_NEXT;
          end
        end
        S_DUMP: begin
          row <= row + 1'b1;
          if (row + 1'b1 == cfg_beats) state <= S_NEXT;
        end
        S_NEXT: begin
          if (last_t) state <= S_FINISH;
          else begin
            t     <= (op_q == OP_FP) ? t + 1'b1 : t - 1'b1;
            state <= S_TLOAD;
          end
        end
        S_FINISH: if (drained) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_issue_only_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                           cmd_valid |-> busy);

endmodule
