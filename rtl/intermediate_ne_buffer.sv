// intermediate_ne_buffer - copy of the layer's input node embeddings.
//
// At the start of every layer the broadcast copies all node embeddings from
// the banked Input NE buffer into this single-bank memory (one row per
// node), then reads it back sequentially to broadcast each embedding to all
// MP units. Keeping a separate copy leaves the Input NE buffer banks free for
// the MP units' source reads. One write port, one asynchronous read port.
// Following the paper: the buffer and its role. Own choices: one row per
// node and the port arrangement.
module intermediate_ne_buffer
  import dgnnflow_pkg::*;
#(
  parameter int unsigned DEPTH = MAX_NODES
) (
  input  logic  clk,
  input  logic  we,
  input  node_t waddr,
  input  emb_t  wdata,
  input  node_t raddr,
  output emb_t  rdata
);
  emb_t mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end
  assign rdata = mem[raddr];
endmodule
