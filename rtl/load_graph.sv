// load_graph - edge-list loader ("Load Graph" / graph compute stage).
//
// Receives the event's edge list from the host, one directed edge (u, v) per
// valid/ready beat, and hands each edge to the graph table of Enhanced MP
// Unit u % P_EDGE - the unit whose bank holds x_u - as local row u / P_EDGE.
// Sequence after start: one cycle clears all tables, then num_edges beats are
// accepted (one per cycle), then build is raised for one cycle and the
// loader waits until every table reports done; done then pulses. An edge
// naming a node >= num_nodes is consumed but dropped and counted in
// bad_edges.
// Following the paper: the edge list is consumed on chip to build degree and
// neighbour tables. Own choices: the assignment of edges to units by source
// node and the beat format.
module load_graph
  import dgnnflow_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [CNT_W-1:0]            num_nodes,
  input  logic [EDGE_W-1:0]           num_edges,
  output logic                        busy,
  output logic                        done,
  output logic [EDGE_W-1:0]           bad_edges,
  // host edge stream
  input  logic                        e_valid,
  output logic                        e_ready,
  input  edge_t                       e_data,
  // to the graph tables of the MP units
  output logic                        tbl_clear,
  output logic [P_EDGE-1:0]           tbl_valid,
  output logic [ROW_W-1:0]            tbl_urow,
  output node_t                       tbl_v,
  output logic                        tbl_build,
  input  logic [P_EDGE-1:0]           tbl_done
);
  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_EDGES, S_BUILD, S_WAIT} state_t;
  state_t            state;
  logic [EDGE_W-1:0] ne, got;
  logic [CNT_W-1:0]  nn;
  logic [P_EDGE-1:0] seen;

  assign busy      = (state != S_IDLE);
  assign e_ready   = (state == S_EDGES) && (got < ne);
  assign tbl_clear = (state == S_CLEAR);
  assign tbl_build = (state == S_BUILD);
  assign tbl_urow  = ROW_W'(e_data.u / P_EDGE);
  assign tbl_v     = e_data.v;

  wire good = (CNT_W'(e_data.u) < nn) && (CNT_W'(e_data.v) < nn);
  always_comb begin
    tbl_valid = '0;
    if (e_valid && e_ready && good) tbl_valid[int'(e_data.u) % P_EDGE] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      ne        <= '0;
      got       <= '0;
      nn        <= '0;
      seen      <= '0;
      done      <= 1'b0;
      bad_edges <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          ne        <= num_edges;
          nn        <= num_nodes;
          got       <= '0;
          bad_edges <= '0;
          state     <= S_CLEAR;
        end
        S_CLEAR: state <= S_EDGES;
        S_EDGES: begin
          if (e_valid && e_ready) begin
            got <= got + 1'b1;
            if (!good) bad_edges <= bad_edges + 1'b1;
          end
          if (got >= ne) state <= S_BUILD;
        end
        S_BUILD: begin
          seen  <= '0;
          state <= S_WAIT;
        end
        S_WAIT: begin
          if (&(seen | tbl_done)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
          seen <= seen | tbl_done;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
