// nt_unit - Node Transformation unit (one of P_NODE).
//
// Finishes one GNN layer for the nodes n with n % P_NODE == UNIT:
//   out_n[d] = sat( x_n[d] + sat( ((m_n[d] * scale[d]) >> FRAC_W) + shift[d] ) )
// i.e. BatchNorm (in inference, folded to a per-dimension scale and shift)
// applied to the aggregated EdgeConv message m_n, plus the residual x_n read
// from the layer's Input NE buffer. It accepts one message per cycle (always
// ready), reads x_n asynchronously in the same cycle and writes the result
// to bank n % P_EDGE, row n / P_EDGE of the Output NE buffer in that cycle.
// Following the paper: message + copy of the input embeddings -> new node
// embedding, EdgeConv -> BatchNorm -> residual add as in the model figure.
// Own choices: the folding of BatchNorm, the number format and the timing.
module nt_unit
  import dgnnflow_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       msg_valid,
  output logic       msg_ready,
  input  msg_beat_t  msg_data,
  input  emb_t       bn_scale,
  input  emb_t       bn_shift,
  // residual read from the Input NE buffer
  output node_t      rd_node,
  input  emb_t       rd_data,
  // write into the Output NE buffer
  output logic       wr_en,
  output node_t      wr_node,
  output emb_t       wr_data,
  output logic [31:0] cnt_nodes
);
  assign msg_ready = 1'b1;
  assign rd_node   = msg_data.id;
  assign wr_en     = msg_valid;
  assign wr_node   = msg_data.id;

  always_comb begin
    for (int d = 0; d < EMB_DIM; d++) begin
      fx_t bn;
      bn = sat(fmul(msg_data.m[d], bn_scale[d]) + 48'($signed(bn_shift[d])));
      wr_data[d] = sat(48'($signed(rd_data[d])) + 48'($signed(bn)));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt_nodes <= '0;
    else if (msg_valid) cnt_nodes <= cnt_nodes + 1;
  end
endmodule
