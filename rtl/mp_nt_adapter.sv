// mp_nt_adapter - MP-to-NT adapter.
//
// Collects the messages of the P_EDGE Enhanced MP Units and delivers each
// node's message to the NT Unit that transforms it. After start it walks
// n = 0 .. num_nodes-1: it waits for node n's message at the head of MP
// stream n % P_EDGE (every edge of source n is processed by that unit, so
// its partial max-pool is already the complete aggregate) and forwards it
// to NT stream n % P_NODE. One message per cycle when the source is valid
// and the destination ready. done pulses after the last node.
// Following the paper: a crossbar-like adapter between MP and NT units fed
// by and feeding streaming FIFOs. Own choices: the in-order walk and the
// node-to-NT mapping n % P_NODE.
module mp_nt_adapter
  import dgnnflow_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [CNT_W-1:0]        num_nodes,
  output logic                    done,
  input  logic [P_EDGE-1:0]       in_valid,
  output logic [P_EDGE-1:0]       in_ready,
  input  msg_beat_t [P_EDGE-1:0]  in_data,
  output logic [P_NODE-1:0]       out_valid,
  input  logic [P_NODE-1:0]       out_ready,
  output msg_beat_t               out_data
);
  logic [CNT_W-1:0] n;
  logic             active;

  localparam int unsigned SW = (P_EDGE > 1) ? $clog2(P_EDGE) : 1;
  localparam int unsigned DW = (P_NODE > 1) ? $clog2(P_NODE) : 1;
  wire [SW-1:0] src = SW'(n % P_EDGE);
  wire [DW-1:0] dst = DW'(n % P_NODE);
  wire          go  = active && in_valid[src] && out_ready[dst];

  assign out_data = in_data[src];
  always_comb begin
    in_ready  = '0;
    out_valid = '0;
    if (active) begin
      in_ready[src]  = out_ready[dst];
      out_valid[dst] = in_valid[src];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n      <= '0;
      active <= 1'b0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        n      <= '0;
        active <= (num_nodes != '0);
        done   <= (num_nodes == '0);
      end else if (go) begin
        n <= n + 1'b1;
        if (n + 1'b1 >= num_nodes) begin
          active <= 1'b0;
          done   <= 1'b1;
        end
      end
    end
  end

  // The MP units emit their nodes in order, so the head must be node n.
  assert property (@(posedge clk) go |-> in_data[src].id == node_t'(n));
endmodule
