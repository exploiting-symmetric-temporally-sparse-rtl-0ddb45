// sram_ctrl: the accelerator's on-chip SRAM and its controller.
//
// It keeps, for every timestep of the sequence being trained, the sparse
// delta vector in NZIL/NZVL form and the dense pre-activation gradient vector
// dC/dM_t, and it receives the results the PE array sends back. Five
// memories make it up:
//   * nz_mem  - one entry {index, delta} per activated neuron, all timesteps
//               packed back to back in arrival order;
//   * a per-timestep table of {first entry, entry count} into nz_mem;
//   * g_mem   - dC/dM_t, one row of P words per PE-array beat, addressed by
//               {t, row}, so a row lines up with one beat of a weight column;
//   * m_mem   - the forward results M_t (Q16.16), one row of P accumulators
//               per {t, row}, written as the PE array reads M_t out;
//   * dx_mem  - the input-gradient results dC/ddx_t (Q16.16), one word per
//               {t, neuron}. Only the neurons in the timestep's NZIL are
//               written; the gradient of any other neuron is zero by the
//               mask, and its word keeps whatever it held before.
// Keeping the non-zero list per timestep is what the paper describes, and
// its block diagram draws the PE array's result bus into this block; the
// packing, the table and the organisation of all five memories are this
// design's.
//
// Write side: nz_wr_valid appends an entry to the timestep being filled,
// eot_wr closes that timestep (its entry count is recorded and the next one
// opens). seq_clear empties the lists. g_wr_* writes one row of dC/dM_t.
// Read side: the table read is combinational (tbl_t -> tbl_start/tbl_count);
// nz_rd and g_rd are synchronous SRAM reads with one cycle of latency, their
// outputs holding until the next read. Results: m_wr_* and dx_wr_* write in
// the cycle they are valid; the host reads them back through m_rd_* and
// dx_rd_*, also with one cycle of latency.
module sram_ctrl
  import drnn_pkg::*;
#(
  parameter int unsigned P     = 16,                  // PE lanes per row
  parameter int unsigned N_MAX = 256,                 // longest vector
  parameter int unsigned T_MAX = 256,                 // longest sequence
  parameter int unsigned IDX_W = $clog2(N_MAX + 1),
  parameter int unsigned T_W   = $clog2(T_MAX),
  parameter int unsigned NZ_AW = $clog2(T_MAX * N_MAX),
  parameter int unsigned ROWS  = N_MAX / P,
  parameter int unsigned ROW_W = (ROWS > 1) ? $clog2(ROWS) : 1,
  parameter int unsigned NI_W  = $clog2(N_MAX)          // neuron index in dx_mem
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             seq_clear,
  // sparse-list write (from the delta encoder)
  input  logic             nz_wr_valid,
  input  logic [IDX_W-1:0] nz_wr_idx,
  input  data_t            nz_wr_val,
  input  logic             eot_wr,
  output logic [T_W:0]     n_steps,      // timesteps stored so far
  // dC/dM_t write
  input  logic             g_wr_valid,
  input  logic [T_W-1:0]   g_wr_t,
  input  logic [ROW_W-1:0] g_wr_row,
  input  data_t            g_wr_data [P],
  // per-timestep table read
  input  logic [T_W-1:0]   tbl_t,
  output logic [NZ_AW:0]   tbl_start,
  output logic [IDX_W-1:0] tbl_count,
  // sparse-list read
  input  logic             nz_rd_en,
  input  logic [NZ_AW:0]   nz_rd_addr,
  output logic [IDX_W-1:0] nz_rd_idx,
  output data_t            nz_rd_val,
  // dC/dM_t read
  input  logic             g_rd_en,
  input  logic [T_W-1:0]   g_rd_t,
  input  logic [ROW_W-1:0] g_rd_row,
  output data_t            g_rd_data [P],
  // results from the PE array
  input  logic             m_wr_valid,
  input  logic [T_W-1:0]   m_wr_t,
  input  logic [ROW_W-1:0] m_wr_row,
  input  acc_t             m_wr_data [P],
  input  logic             dx_wr_valid,
  input  logic [T_W-1:0]   dx_wr_t,
  input  logic [IDX_W-1:0] dx_wr_idx,
  input  acc_t             dx_wr_data,
  // result read-back (host)
  input  logic             m_rd_en,
  input  logic [T_W-1:0]   m_rd_t,
  input  logic [ROW_W-1:0] m_rd_row,
  output acc_t             m_rd_data [P],
  input  logic             dx_rd_en,
  input  logic [T_W-1:0]   dx_rd_t,
  input  logic [IDX_W-1:0] dx_rd_idx,
  output acc_t             dx_rd_data
);

  localparam int unsigned NZ_DEPTH = T_MAX * N_MAX;
  localparam int unsigned G_DEPTH  = T_MAX * ROWS;

  typedef struct packed {
    logic [IDX_W-1:0] idx;
    data_t            val;
  } nz_entry_t;

  typedef logic [P*DW-1:0] g_row_t;
  typedef logic [P*ACCW-1:0] m_row_t;

  nz_entry_t        nz_mem [NZ_DEPTH];
  g_row_t           g_mem  [G_DEPTH];
  m_row_t           m_mem  [G_DEPTH];
  acc_t             dx_mem [NZ_DEPTH];
  logic [NZ_AW:0]   start_tbl [T_MAX];
  logic [IDX_W-1:0] count_tbl [T_MAX];

  logic [NZ_AW:0]   wr_ptr;     // next free nz_mem entry
  logic [NZ_AW:0]   step_base;  // first entry of the open timestep
  logic [T_W:0]     wr_t;       // timestep being filled
  g_row_t           g_rd_q;
  nz_entry_t        nz_rd_q;

  assign n_steps = wr_t;

  // list bookkeeping
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr    <= '0;
      step_base <= '0;
      wr_t      <= '0;
    end else if (seq_clear) begin
      wr_ptr    <= '0;
      step_base <= '0;
      wr_t      <= '0;
    end else begin
      if (nz_wr_valid) wr_ptr <= wr_ptr + 1'b1;
      if (eot_wr) begin
        step_base <= wr_ptr + (NZ_AW+1)'(nz_wr_valid);
        wr_t      <= wr_t + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!seq_clear && eot_wr && wr_t < (T_W+1)'(T_MAX)) begin
      start_tbl[wr_t[T_W-1:0]] <= step_base;
      count_tbl[wr_t[T_W-1:0]] <= IDX_W'(wr_ptr - step_base + (NZ_AW+1)'(nz_wr_valid));
    end
  end

  assign tbl_start = start_tbl[tbl_t];
  assign tbl_count = count_tbl[tbl_t];

  // nz_mem: one write port, one synchronous read port
  always_ff @(posedge clk) begin
    if (!seq_clear && nz_wr_valid && wr_ptr < (NZ_AW+1)'(NZ_DEPTH))
      nz_mem[wr_ptr[NZ_AW-1:0]] <= '{idx: nz_wr_idx, val: nz_wr_val};
    if (nz_rd_en) nz_rd_q <= nz_mem[nz_rd_addr[NZ_AW-1:0]];
  end

  assign nz_rd_idx = nz_rd_q.idx;
  assign nz_rd_val = nz_rd_q.val;

  // g_mem: one write port, one synchronous read port
  g_row_t g_wr_row_bits;
  always_comb begin
    for (int p = 0; p < P; p++) g_wr_row_bits[p*DW +: DW] = g_wr_data[p];
  end

  always_ff @(posedge clk) begin
    if (g_wr_valid) g_mem[{g_wr_t, g_wr_row}] <= g_wr_row_bits;
    if (g_rd_en)    g_rd_q <= g_mem[{g_rd_t, g_rd_row}];
  end

  always_comb begin
    for (int p = 0; p < P; p++) g_rd_data[p] = data_t'(g_rd_q[p*DW +: DW]);
  end

  // m_mem and dx_mem: one write port (PE array), one synchronous read port
  m_row_t m_wr_row_bits, m_rd_q;
  acc_t   dx_rd_q;
  always_comb begin
    for (int p = 0; p < P; p++) m_wr_row_bits[p*ACCW +: ACCW] = m_wr_data[p];
  end

  always_ff @(posedge clk) begin
    if (m_wr_valid) m_mem[{m_wr_t, m_wr_row}] <= m_wr_row_bits;
    if (m_rd_en)    m_rd_q <= m_mem[{m_rd_t, m_rd_row}];
    if (dx_wr_valid) dx_mem[{dx_wr_t, dx_wr_idx[NI_W-1:0]}] <= dx_wr_data;
    if (dx_rd_en)    dx_rd_q <= dx_mem[{dx_rd_t, dx_rd_idx[NI_W-1:0]}];
  end

  always_comb begin
    for (int p = 0; p < P; p++) m_rd_data[p] = acc_t'(m_rd_q[p*ACCW +: ACCW]);
  end
  assign dx_rd_data = dx_rd_q;

endmodule
