// load_node_embeddings - writes the host's node embeddings on chip.
//
// After start it accepts num_nodes beats, one node embedding per beat in
// node order (beat n carries x_n), one per cycle, and writes beat n to bank
// n % P_EDGE, row n / P_EDGE of the first Input NE buffer. done pulses after
// the last beat. The write data is the input beat wired straight through;
// only the bank enables and the row are computed. Following the paper: the
// "Load Node Embeddings" step that fills the banked Input NE buffer. Own
// choices: beat format and order.
module load_node_embeddings
  import dgnnflow_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [CNT_W-1:0]            num_nodes,
  output logic                        busy,
  output logic                        done,
  input  logic                        x_valid,
  output logic                        x_ready,
  input  emb_t                        x_data,
  output logic [P_EDGE-1:0]           we,
  output logic [ROW_W-1:0]            waddr,
  output emb_t                        wdata
);
  logic [CNT_W-1:0] n, nn;
  logic             active;

  assign busy    = active;
  assign x_ready = active && (n < nn);
  assign waddr   = ROW_W'(n / P_EDGE);
  assign wdata   = x_data;
  always_comb begin
    we = '0;
    if (x_valid && x_ready) we[int'(n) % P_EDGE] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n      <= '0;
      nn     <= '0;
      active <= 1'b0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!active) begin
        if (start) begin
          n      <= '0;
          nn     <= num_nodes;
          active <= 1'b1;
        end
      end else if (n >= nn) begin
        active <= 1'b0;
        done   <= 1'b1;
      end else if (x_valid) begin
        n <= n + 1'b1;
      end
    end
  end
endmodule
