// mp_graph_table - degree and neighbour tables of one Enhanced MP Unit.
//
// Holds the part of the event graph that one MP unit processes: the edges
// (u, v) whose source u lives in this unit's bank. The tables are built from
// the edge list in three steps:
//   LOAD    : clear, then accept one edge per cycle (u given as the local
//             row u / P_EDGE); store it and count deg[v] += 1;
//   PREFIX  : on build, one target per cycle: off[v] = sum of deg[0..v-1];
//   SCATTER : one stored edge per cycle: nbr[off[v] + fill[v]++] = u_row.
// Afterwards, for every target node v, deg[v] is the number of this unit's
// edges that need x_v, and nbr[off[v] .. off[v]+deg[v]-1] lists the local
// source rows u of those edges (a CSR table keyed by target). Reads are
// asynchronous. MAX_EDGES must be a power of two. From the cycle in which
// build is seen to the done pulse takes num_nodes + (edges held) + 3
// cycles. An edge beyond MAX_EDGES is dropped and sets overflow.
// Following the paper: a per-unit degree table and neighbour table built from
// the host's edge list. Own choice: the count / prefix-sum / scatter method.
module mp_graph_table
  import dgnnflow_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              edge_valid,
  input  logic [ROW_W-1:0]  edge_urow,
  input  node_t             edge_v,
  input  logic              build,
  input  logic [CNT_W-1:0]  num_nodes,
  output logic              done,
  output logic              overflow,
  output logic [EDGE_W-1:0] num_edges,
  // lookups
  input  node_t             q_v,
  output logic [EDGE_W-1:0] q_deg,
  output logic [EDGE_W-1:0] q_off,
  input  logic [EDGE_W-1:0] q_k,
  output logic [ROW_W-1:0]  q_urow
);
  typedef enum logic [1:0] {S_LOAD, S_PREFIX, S_SCATTER} state_t;
  state_t state;

  logic [EDGE_W-1:0] deg  [MAX_NODES];
  logic [EDGE_W-1:0] off  [MAX_NODES];
  logic [EDGE_W-1:0] fill [MAX_NODES];
  logic [ROW_W-1:0]  e_u  [MAX_EDGES];
  node_t             e_v  [MAX_EDGES];
  logic [ROW_W-1:0]  nbr  [MAX_EDGES];

  logic [EDGE_W-1:0] cnt, idx, run;
  logic [CNT_W-1:0]  nn;

  assign num_edges = cnt;
  assign q_deg  = deg[q_v];
  assign q_off  = off[q_v];
  assign q_urow = nbr[q_k[EDGE_W-2:0]];

  wire node_t sv = e_v[idx[EDGE_W-2:0]];
  wire [EDGE_W-1:0] slot = off[sv] + fill[sv];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_LOAD;
      cnt      <= '0;
      idx      <= '0;
      run      <= '0;
      nn       <= '0;
      done     <= 1'b0;
      overflow <= 1'b0;
      for (int i = 0; i < MAX_NODES; i++) begin
        deg[i]  <= '0;
        off[i]  <= '0;
        fill[i] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_LOAD: begin
          if (clear) begin
            cnt      <= '0;
            overflow <= 1'b0;
            for (int i = 0; i < MAX_NODES; i++) deg[i] <= '0;
          end else if (edge_valid) begin
            if (cnt < EDGE_W'(MAX_EDGES)) begin
              e_u[cnt[EDGE_W-2:0]] <= edge_urow;
              e_v[cnt[EDGE_W-2:0]] <= edge_v;
              deg[edge_v]          <= deg[edge_v] + 1'b1;
              cnt                  <= cnt + 1'b1;
            end else overflow <= 1'b1;
          end else if (build) begin
            nn    <= num_nodes;
            idx   <= '0;
            run   <= '0;
            state <= S_PREFIX;
          end
        end
        S_PREFIX: begin
          if (idx < EDGE_W'(nn)) begin
            off[idx[NODE_W-1:0]]  <= run;
            fill[idx[NODE_W-1:0]] <= '0;
            run <= run + deg[idx[NODE_W-1:0]];
            idx <= idx + 1'b1;
          end else begin
            idx   <= '0;
            state <= S_SCATTER;
          end
        end
        S_SCATTER: begin
          if (idx < cnt) begin
            nbr[slot[EDGE_W-2:0]] <= e_u[idx[EDGE_W-2:0]];
            fill[sv] <= fill[sv] + 1'b1;
            idx      <= idx + 1'b1;
          end else begin
            state <= S_LOAD;
            done  <= 1'b1;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end
endmodule
