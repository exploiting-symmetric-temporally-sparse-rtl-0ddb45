// drnn_pkg: number formats and command encodings shared by the Delta RNN
// training accelerator.
//
// Activations, deltas, weights, pre-activation gradients and weight gradients
// travel as 16-bit signed fixed point with 8 fraction bits (Q8.8). Products
// and running sums are kept as 32-bit Q16.16 accumulators. The paper does not
// give a number format; 16-bit data follows the 16-bit datapath common to
// delta-network accelerators and is this design's choice.
package drnn_pkg;

  localparam int unsigned DW   = 16;  // data word width (Q8.8)
  localparam int unsigned FRAC = 8;   // fraction bits of a data word
  localparam int unsigned ACCW = 32;  // accumulator width (Q16.16)

  typedef logic signed [DW-1:0]   data_t;
  typedef logic signed [ACCW-1:0] acc_t;

  // The three matrix-vector products of Delta RNN training.
  typedef enum logic [1:0] {
    OP_FP    = 2'd0,  // M_t  = W * dx_t + M_{t-1}            (forward)
    OP_BP_DX = 2'd1,  // dC/ddx_t = (W^T * dC/dM_t) .* m_t     (input gradient)
    OP_BP_DW = 2'd2   // dC/dW += dC/dM_t * dx_t^T             (weight gradient)
  } op_e;

  // What one processing element does in a cycle.
  typedef enum logic [2:0] {
    PE_NOP  = 3'd0,
    PE_BIAS = 3'd1,  // acc[row]  = w << FRAC   (M_0 = bias)
    PE_FMAC = 3'd2,  // acc[row] += w * v      (forward MAC)
    PE_DMAC = 3'd3,  // psum     += w * g      (input-gradient MAC, output on last)
    PE_WUPD = 3'd4,  // y = sat(w + (g*v >>> FRAC))  (weight-gradient update)
    PE_READ = 3'd5   // y = acc[row]
  } pe_cmd_e;

  // Saturate a Q16.16 accumulator shifted back to Q8.8 into a data word.
  function automatic data_t sat_data(input acc_t a);
    acc_t s;
    s = a >>> FRAC;
    if (s > acc_t'(32767))       return data_t'(16'sh7fff);
    else if (s < -acc_t'(32768)) return data_t'(16'sh8000);
    else                         return data_t'(s[DW-1:0]);
  endfunction

  // Saturate a wide sum (already in Q8.8) into a data word.
  function automatic data_t sat_add(input acc_t a);
    if (a > acc_t'(32767))       return data_t'(16'sh7fff);
    else if (a < -acc_t'(32768)) return data_t'(16'sh8000);
    else                         return data_t'(a[DW-1:0]);
  endfunction

endpackage
