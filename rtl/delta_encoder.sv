// delta_encoder: applies the delta-network update rule to one vector per
// timestep and emits its non-zero index list (NZIL) and value list (NZVL).
//
// For every element i of the incoming vector x_t the encoder compares x_i
// with the last value it let through, xhat_i. If |x_i - xhat_i| > theta the
// element is "activated": xhat_i takes x_i, the mask bit is 1 and the pair
// (i, x_i - xhat_i) is one NZIL/NZVL entry. Otherwise the mask bit is 0 and
// xhat_i keeps its value. This is the rule of the delta network
// (x-hat, delta x and mask equations of the paper); the same block encodes
// hidden-state vectors h_t.
//
// Interface: one element per cycle on in_valid/in_idx/in_x; in_last marks
// the final element of a vector. clear forgets all stored xhat (they read as
// zero afterwards). Outputs follow the input by one cycle: out_valid for every
// element with its mask bit, index and delta (zero when the mask is 0), and
// out_last for the vector's end.
//
// Own choices: xhat starts at 0 after clear; the difference is saturated to
// 16 bits; theta is a run-time input compared strictly (greater than).
module delta_encoder
  import drnn_pkg::*;
#(
  parameter int unsigned N_MAX = 256,               // longest vector
  parameter int unsigned IDX_W = $clog2(N_MAX + 1)  // index width
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  data_t            theta,
  input  logic             in_valid,
  input  logic [IDX_W-1:0] in_idx,
  input  data_t            in_x,
  input  logic             in_last,
  output logic             out_valid,
  output logic             out_mask,
  output logic [IDX_W-1:0] out_idx,
  output data_t            out_delta,
  output logic             out_last
);

  data_t            xhat [N_MAX];
  logic [N_MAX-1:0] seen;       // xhat_i has been written since clear

  data_t xprev;
  acc_t  diff, mag;
  logic  fire;

  always_comb begin
    xprev = seen[in_idx[$clog2(N_MAX)-1:0]] ? xhat[in_idx[$clog2(N_MAX)-1:0]] : '0;
    diff  = acc_t'(in_x) - acc_t'(xprev);
    mag   = (diff < 0) ? -diff : diff;
    fire  = mag > acc_t'(theta);
  end

  always_ff @(posedge clk) begin
    if (in_valid && fire && !clear) xhat[in_idx[$clog2(N_MAX)-1:0]] <= in_x;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seen      <= '0;
      out_valid <= 1'b0;
      out_mask  <= 1'b0;
      out_idx   <= '0;
      out_delta <= '0;
      out_last  <= 1'b0;
    end else begin
      if (clear) seen <= '0;
      else if (in_valid && fire) seen[in_idx[$clog2(N_MAX)-1:0]] <= 1'b1;
      out_valid <= in_valid && !clear;
      out_mask  <= fire;
      out_idx   <= in_idx;
      out_delta <= fire ? sat_add(diff) : '0;
      out_last  <= in_valid && in_last && !clear;
    end
  end

endmodule
