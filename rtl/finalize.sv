// finalize - streams the result node embeddings back to the host.
//
// After start it reads node n = 0 .. num_nodes-1 from bank n % P_EDGE, row
// n / P_EDGE of the NE buffer that holds the last layer's output
// (asynchronous read) and presents {n, x_n} on a valid/ready stream, one
// node per cycle while the host is ready. done pulses after the last beat.
// Following the paper: the "Finalize" step returning output node
// embeddings. Own choices: beat format and order.
module finalize
  import dgnnflow_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [CNT_W-1:0]            num_nodes,
  output logic                        busy,
  output logic                        done,
  output logic [P_EDGE-1:0][ROW_W-1:0] raddr,
  input  emb_t [P_EDGE-1:0]           rdata,
  output logic                        y_valid,
  input  logic                        y_ready,
  output msg_beat_t                   y_data
);
  logic [CNT_W-1:0] n, nn;
  logic             active;

  assign busy      = active;
  assign y_valid   = active && (n < nn);
  assign y_data.id = node_t'(n);
  assign y_data.m  = rdata[int'(n) % P_EDGE];
  always_comb begin
    for (int b = 0; b < P_EDGE; b++) raddr[b] = ROW_W'(n / P_EDGE);
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
      end else if (y_ready) begin
        n <= n + 1'b1;
      end
    end
  end
endmodule
