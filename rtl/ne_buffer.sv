// ne_buffer - banked node-embedding buffer (one half of the NE double buffer).
//
// The node embeddings of a layer are spread cyclically over P_EDGE banks:
// node n lives in bank n % P_EDGE at row n / P_EDGE, so Enhanced MP Unit b
// reads the source embeddings it owns from bank b alone. Each bank has one
// write port and two asynchronous read ports: port A serves the MP unit of
// that bank (and the copy into the Intermediate NE buffer), port B serves the
// NT unit that updates the bank and the final readout. Two instances form the
// Input/Output NE buffer pair whose roles swap after every layer.
//
// Paper: P_EDGE banks, read in parallel by the MP units, written by the node
// transformation units, swapped per layer. Own choices: the cyclic mapping,
// the three ports per bank and the asynchronous read.
module ne_buffer
  import dgnnflow_pkg::*;
#(
  parameter int unsigned NB    = P_EDGE,
  parameter int unsigned NROWS = ROWS
) (
  input  logic                      clk,
  input  logic [NB-1:0]             we,
  input  logic [NB-1:0][ROW_W-1:0]  waddr,
  input  emb_t [NB-1:0]             wdata,
  input  logic [NB-1:0][ROW_W-1:0]  raddr_a,
  output emb_t [NB-1:0]             rdata_a,
  input  logic [NB-1:0][ROW_W-1:0]  raddr_b,
  output emb_t [NB-1:0]             rdata_b
);
  for (genvar b = 0; b < NB; b++) begin : g_bank
    emb_t mem [NROWS];
    always_ff @(posedge clk) begin
      if (we[b]) mem[waddr[b]] <= wdata[b];
    end
    assign rdata_a[b] = mem[raddr_a[b]];
    assign rdata_b[b] = mem[raddr_b[b]];
  end
endmodule
