// edge_msg_dot - one output element of the EdgeConv message function.
//
// Computes, combinationally,
//   c    = concat(x_u, sat(x_v - x_u))                 (2*EMB_DIM values)
//   m_j  = sat( (b_j * 2^FRAC_W + sum_i W_ji * c_i) >> FRAC_W )
// i.e. row j of the linear layer phi(x_u, x_v - x_u) = W c + b. All
// 2*EMB_DIM products are formed in parallel and summed at full precision;
// one rounding (arithmetic shift, toward minus infinity) and one saturation
// happen at the end. The Enhanced MP Unit steps j over the EMB_DIM rows.
// Following the paper: difference, concatenation, matrix multiplication with
// bias addition, no activation. Own choices: one row per use (the paper
// unrolls across embedding dimensions without saying how far) and the
// rounding/saturation rules.
module edge_msg_dot
  import dgnnflow_pkg::*;
(
  input  emb_t                    xu,
  input  emb_t                    xv,
  input  fx_t [2*EMB_DIM-1:0]     wrow,
  input  fx_t                     bias,
  output fx_t                     m
);
  localparam int unsigned ACC_W = 2 * DATA_W + $clog2(2 * EMB_DIM) + 2;

  fx_t [2*EMB_DIM-1:0]      c;
  logic signed [ACC_W-1:0]  acc;
  logic signed [ACC_W-1:0]  shifted;

  always_comb begin
    for (int i = 0; i < EMB_DIM; i++) begin
      c[i]           = xu[i];
      c[EMB_DIM + i] = sat(48'($signed(xv[i])) - 48'($signed(xu[i])));
    end
    acc = ACC_W'($signed(bias)) <<< FRAC_W;
    for (int i = 0; i < 2 * EMB_DIM; i++)
      acc += ACC_W'($signed(wrow[i])) * ACC_W'($signed(c[i]));
    shifted = acc >>> FRAC_W;
    m = sat(48'(shifted));
  end
endmodule
