// mac_pe: one processing element of the PE array - a 16x16 multiplier, an
// accumulator and the PE's slice of the pre-activation memory M.
//
// Each cycle the PE takes one weight w (one row of the weight column being
// streamed), the broadcast delta value v and its own pre-activation gradient
// g, and does one of (cmd, see drnn_pkg::pe_cmd_e):
//   PE_BIAS  acc[row]  = w << FRAC        load M_0 = bias
//   PE_FMAC  acc[row] += w * v            forward MxV, M_t = W dx_t + M_{t-1}
//   PE_DMAC  psum     += w * g            input-gradient MxV (W^T dC/dM_t);
//                                         on 'last' the column's partial sum
//                                         is output and psum restarts at 0
//   PE_WUPD  y = sat(w + (g*v >>> FRAC))  weight-gradient outer product,
//                                         added to the stored gradient w
//   PE_READ  y = acc[row]                 read M_t out
// acc[] holds ROWS entries: row r of this PE is neuron r*P + lane.
// One MAC per cycle, as the paper's PEs do; the operand routing and number
// formats are this design's. Output y/y_valid is registered: one cycle after
// the command.
module mac_pe
  import drnn_pkg::*;
#(
  parameter int unsigned ROWS  = 16,
  parameter int unsigned ROW_W = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  pe_cmd_e          cmd,
  input  logic [ROW_W-1:0] row,
  input  logic             last,
  input  data_t            w,
  input  data_t            v,
  input  data_t            g,
  output logic             y_valid,
  output acc_t             y
);

  acc_t acc [ROWS];
  acc_t psum;
  acc_t prod_wv, prod_wg, prod_gv;

  always_comb begin
    prod_wv = acc_t'(w) * acc_t'(v);
    prod_wg = acc_t'(w) * acc_t'(g);
    prod_gv = acc_t'(g) * acc_t'(v);
  end

  always_ff @(posedge clk) begin
    if (en) begin
      unique case (cmd)
        PE_BIAS: acc[row] <= acc_t'(w) <<< FRAC;
        PE_FMAC: acc[row] <= acc[row] + prod_wv;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      psum    <= '0;
      y       <= '0;
      y_valid <= 1'b0;
    end else begin
      y_valid <= 1'b0;
      if (en) begin
        unique case (cmd)
          PE_DMAC: begin
            if (last) begin
              psum    <= '0;
              y       <= psum + prod_wg;
              y_valid <= 1'b1;
            end else begin
              psum <= psum + prod_wg;
            end
          end
          PE_WUPD: begin
            y       <= acc_t'(sat_add(acc_t'(w) + (prod_gv >>> FRAC)));
            y_valid <= 1'b1;
          end
          PE_READ: begin
            y       <= acc[row];
            y_valid <= 1'b1;
          end
          default: ;
        endcase
      end
    end
  end

endmodule
