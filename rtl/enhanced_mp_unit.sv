// enhanced_mp_unit - Enhanced Message Passing unit (one of P_EDGE).
//
// Computes EdgeConv messages m_uv = W concat(x_u, x_v - x_u) + b for every
// edge (u, v) whose source u is held in this unit's bank (u % P_EDGE == UNIT)
// and max-pools them per source node u. It never fetches target embeddings
// from other banks: it listens to the broadcast stream of all node
// embeddings instead. Three tasks run concurrently, linked by a FIFO:
//   1. select : for each broadcast beat (v, x_v) look up deg[v], the number
//               of this unit's edges that need x_v. Non-zero: the beat, with
//               deg[v] and the CSR offset, enters the selection FIFO; zero:
//               the beat is dropped in the cycle it arrives. The end token
//               is always kept.
//   2. gather : for each selected target v and each source row u in its
//               neighbour list: read x_u from the own bank (1 cycle), then
//               one output element per cycle for EMB_DIM cycles, each
//               max-merged into the partial aggregate agg[u] (the first
//               message of u is stored as is). An edge costs 1 + EMB_DIM
//               cycles.
//   3. expand : on the end token, emit one message per node owned by the
//               unit, in node order (n = UNIT, UNIT+P_EDGE, ... < num_nodes):
//               agg[n / P_EDGE], or all zeros if n has no edge. The
//               aggregate is cleared as it is sent. One node per cycle when
//               msg_ready is high.
// The graph table (mp_graph_table) is built before the layers and shared by
// all layers of an event.
// Following the paper (Algorithm 1 and the three tasks of Sec. IV-B):
// selection by degree, difference, concatenation, linear layer, max pooling,
// expansion to the destination nodes. Own choices: cycle timing, one output
// element per cycle, zero message for isolated nodes.
module enhanced_mp_unit
  import dgnnflow_pkg::*;
#(
  parameter int unsigned UNIT = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [CNT_W-1:0]  num_nodes,
  // graph table construction
  input  logic              tbl_clear,
  input  logic              tbl_valid,
  input  logic [ROW_W-1:0]  tbl_urow,
  input  node_t             tbl_v,
  input  logic              tbl_build,
  output logic              tbl_done,
  output logic              tbl_overflow,
  // broadcast stream
  input  logic              bc_valid,
  output logic              bc_ready,
  input  bcast_beat_t       bc_data,
  // own bank of the Input NE buffer (port A)
  output logic [ROW_W-1:0]  src_raddr,
  input  emb_t              src_rdata,
  // weights of the current layer
  input  wmat_t             w,
  input  emb_t              b,
  // messages to the adapter
  output logic              msg_valid,
  input  logic              msg_ready,
  output msg_beat_t         msg_data,
  // activity counters (since reset)
  output logic [31:0]       cnt_selected,
  output logic [31:0]       cnt_dropped,
  output logic [31:0]       cnt_edges
);
  // ---------------------------------------------------------------- table
  node_t             q_v;
  logic [EDGE_W-1:0] q_deg, q_off, q_k;
  logic [ROW_W-1:0]  q_urow;
  logic [EDGE_W-1:0] tbl_edges;

  mp_graph_table u_tbl (
    .clk, .rst_n,
    .clear(tbl_clear), .edge_valid(tbl_valid), .edge_urow(tbl_urow), .edge_v(tbl_v),
    .build(tbl_build), .num_nodes, .done(tbl_done), .overflow(tbl_overflow),
    .num_edges(tbl_edges),
    .q_v, .q_deg, .q_off, .q_k, .q_urow
  );

  // ------------------------------------------------------- task 1: select
  typedef struct packed {
    logic              last;
    node_t             v;
    logic [EDGE_W-1:0] off;
    logic [EDGE_W-1:0] deg;
    emb_t              x;
  } sel_beat_t;

  logic      sel_in_valid, sel_in_ready, sel_out_valid, sel_out_ready;
  sel_beat_t sel_in, sel_out;

  assign q_v  = bc_data.id;
  wire keep   = bc_data.last || (q_deg != '0);

  always_comb begin
    sel_in      = '0;
    sel_in.last = bc_data.last;
    sel_in.v    = bc_data.id;
    sel_in.off  = q_off;
    sel_in.deg  = q_deg;
    sel_in.x    = bc_data.x;
  end
  assign sel_in_valid = bc_valid && keep;
  assign bc_ready     = keep ? sel_in_ready : 1'b1;

  stream_fifo #(.WIDTH($bits(sel_beat_t)), .DEPTH(2)) u_sel_fifo (
    .clk, .rst_n,
    .in_valid(sel_in_valid), .in_ready(sel_in_ready), .in_data(sel_in),
    .out_valid(sel_out_valid), .out_ready(sel_out_ready), .out_data(sel_out)
  );

  // --------------------------------------- task 2 and 3: gather, expand
  typedef enum logic [2:0] {G_IDLE, G_LOAD, G_ROW, G_EXPAND} gstate_t;
  gstate_t state;

  localparam int unsigned J_W = (EMB_DIM > 1) ? $clog2(EMB_DIM) : 1;

  emb_t              agg [ROWS];
  logic [ROWS-1:0]   agg_valid;
  emb_t              xv_r, xu_r;
  logic [EDGE_W-1:0] k, kend;
  logic [ROW_W-1:0]  urow_r;
  logic              first_r;
  logic [J_W-1:0]    j;
  logic [ROW_W:0]    er;         // expansion row

  fx_t m_j;
  edge_msg_dot u_dot (
    .xu(xu_r), .xv(xv_r), .wrow(w[j]), .bias(b[j]), .m(m_j)
  );

  assign q_k           = k;
  assign src_raddr     = q_urow;
  assign sel_out_ready = (state == G_IDLE);

  wire [CNT_W:0] exp_node = CNT_W'(er) * CNT_W'(P_EDGE) + CNT_W'(UNIT);
  wire           exp_more = (exp_node < {1'b0, num_nodes});

  assign msg_valid   = (state == G_EXPAND) && exp_more;
  assign msg_data.id = node_t'(exp_node);
  assign msg_data.m  = agg_valid[er[ROW_W-1:0]] ? agg[er[ROW_W-1:0]] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= G_IDLE;
      agg_valid    <= '0;
      k            <= '0;
      kend         <= '0;
      j            <= '0;
      er           <= '0;
      urow_r       <= '0;
      first_r      <= 1'b0;
      xv_r         <= '0;
      xu_r         <= '0;
      cnt_selected <= '0;
      cnt_dropped  <= '0;
      cnt_edges    <= '0;
    end else begin
      if (bc_valid && bc_ready && !bc_data.last) begin
        if (keep) cnt_selected <= cnt_selected + 1;
        else      cnt_dropped  <= cnt_dropped + 1;
      end
      unique case (state)
        G_IDLE: if (sel_out_valid) begin
          if (sel_out.last) begin
            er    <= '0;
            state <= G_EXPAND;
          end else begin
            xv_r  <= sel_out.x;
            k     <= sel_out.off;
            kend  <= sel_out.off + sel_out.deg;
            state <= G_LOAD;
          end
        end
        G_LOAD: begin
          xu_r    <= src_rdata;
          urow_r  <= q_urow;
          first_r <= !agg_valid[q_urow];
          j       <= '0;
          state   <= G_ROW;
        end
        G_ROW: begin
          if (first_r || $signed(m_j) > $signed(agg[urow_r][j]))
            agg[urow_r][j] <= m_j;
          if (j == J_W'(EMB_DIM - 1)) begin
            agg_valid[urow_r] <= 1'b1;
            cnt_edges         <= cnt_edges + 1;
            k                 <= k + 1'b1;
            state             <= (k + 1'b1 < kend) ? G_LOAD : G_IDLE;
          end else j <= j + 1'b1;
        end
        G_EXPAND: begin
          if (!exp_more) state <= G_IDLE;
          else if (msg_ready) begin
            agg_valid[er[ROW_W-1:0]] <= 1'b0;
            er <= er + 1'b1;
          end
        end
        default: state <= G_IDLE;
      endcase
    end
  end

  // A gather must never start past the unit's edge count.
  assert property (@(posedge clk) disable iff (!rst_n) (state == G_LOAD) |-> k < tbl_edges);
endmodule
