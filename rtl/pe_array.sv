// pe_array: P MAC processing elements side by side plus an adder tree.
//
// One beat of a weight column (P consecutive rows) enters per cycle: lane p
// gets w[p], its own gradient g[p] and the delta value v shared by all lanes.
// All lanes execute the same command (see mac_pe). Lane outputs y[p] appear
// one cycle after the command with y_valid. For the input-gradient MxV the P
// lane partial sums of a finished column are added by the adder tree into one
// element of W^T dC/dM_t, delivered one cycle later on dx_valid/dx_sum.
// A META_W-bit side word travels with the data so the caller can tell which
// column, row and timestep a result belongs to (y_meta, dx_meta).
//
// The paper instantiates 16 PEs (P = 16); the lane-per-row mapping and the
// adder tree are this design's.
module pe_array
  import drnn_pkg::*;
#(
  parameter int unsigned P      = 16,
  parameter int unsigned ROWS   = 16,
  parameter int unsigned META_W = 32,
  parameter int unsigned ROW_W  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  pe_cmd_e           cmd,
  input  logic [ROW_W-1:0]  row,
  input  logic              last,
  input  data_t             w [P],
  input  data_t             g [P],
  input  data_t             v,
  input  logic [META_W-1:0] meta,
  output logic              y_valid,
  output acc_t              y [P],
  output logic [META_W-1:0] y_meta,
  output logic              dx_valid,
  output acc_t              dx_sum,
  output logic [META_W-1:0] dx_meta
);

  logic [P-1:0] lane_valid;
  logic         y_is_dx;
  acc_t         tree_sum;

  for (genvar p = 0; p < P; p++) begin : g_pe
    mac_pe #(.ROWS(ROWS)) u_pe (
      .clk, .rst_n, .en, .cmd, .row, .last,
      .w(w[p]), .v, .g(g[p]),
      .y_valid(lane_valid[p]), .y(y[p])
    );
  end

  assign y_valid = lane_valid[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_meta   <= '0;
      y_is_dx  <= 1'b0;
      dx_valid <= 1'b0;
      dx_sum   <= '0;
      dx_meta  <= '0;
    end else begin
      if (en) y_meta <= meta;
      y_is_dx  <= en && cmd == PE_DMAC && last;
      dx_valid <= y_valid && y_is_dx;
      if (y_valid && y_is_dx) begin
        dx_sum  <= tree_sum;
        dx_meta <= y_meta;
      end
    end
  end

  // adder tree over the P lane partial sums
  always_comb begin
    tree_sum = '0;
    for (int p = 0; p < P; p++) tree_sum = tree_sum + y[p];
  end

  // all lanes run in lock step
  a_lanes_in_step: assert property (@(posedge clk) disable iff (!rst_n)
                                    lane_valid == '0 || lane_valid == '1);

endmodule
