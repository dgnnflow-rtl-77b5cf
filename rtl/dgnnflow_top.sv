// dgnnflow_top - DGNNFlow EdgeConv inference kernel.
//
// Processes one collision event (a graph of particles) at a time:
//   1. start latches num_nodes / num_edges. The node embeddings (x_stream,
//      one node per beat, node order) and the edge list (e_stream, one
//      directed edge (u, v) per beat) are then accepted concurrently. The
//      edges are distributed to the MP units, whose degree / neighbour
//      tables are built once both streams are complete.
//   2. NUM_LAYERS EdgeConv layers run back to back in the layer engine; the
//      node-embedding double buffer swaps after every layer.
//   3. The final node embeddings are streamed out on y_stream ({n, x_n}, node
//      order); done pulses after the last beat. cycles holds the number of
//      cycles from start to done.
// Model weights are written through the w_* port while the kernel is idle;
// they persist across events, so they need to be written only when the
// model changes. An edge u -> v contributes the message
// W concat(x_u, x_v - x_u) + b to node u (max-pooled); every layer computes
// x_u' = x_u + BN(max_v message).
//
// Following the paper: the kernel stages (load weights, load node
// embeddings, load graph, GNN compute, finalize) and the layer engine. The
// host-side graph construction and the PCIe / HBM / AXI path are outside
// this module; plain valid/ready streams stand where the AXI ports would be.
// Own choices: the stream formats, the concurrent loading and the ordering of
// the stages' hand-offs.
module dgnnflow_top
  import dgnnflow_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // weights (write while idle)
  input  logic                  w_we,
  input  logic [WADDR_W-1:0]    w_addr,
  input  fx_t                   w_data,
  // event control
  input  logic                  start,
  input  logic [CNT_W-1:0]      num_nodes,
  input  logic [EDGE_W-1:0]     num_edges,
  output logic                  busy,
  output logic                  done,
  output logic [31:0]           cycles,
  // node embeddings in
  input  logic                  x_valid,
  output logic                  x_ready,
  input  emb_t                  x_data,
  // edge list in
  input  logic                  e_valid,
  output logic                  e_ready,
  input  edge_t                 e_data,
  // node embeddings out
  output logic                  y_valid,
  input  logic                  y_ready,
  output msg_beat_t             y_data,
  // status and activity counters
  output logic [EDGE_W-1:0]     bad_edges,
  output logic                  edge_overflow,
  output logic [31:0]           cnt_selected,
  output logic [31:0]           cnt_dropped,
  output logic [31:0]           cnt_edges,
  output logic [31:0]           cnt_bcast_stall,
  output logic [31:0]           cnt_swaps
);
  typedef enum logic [2:0] {K_IDLE, K_LOAD, K_LAYER, K_WAIT, K_FINAL} kstate_t;
  kstate_t state;

  localparam int unsigned LW = (NUM_LAYERS > 1) ? $clog2(NUM_LAYERS) : 1;

  logic [CNT_W-1:0]  nn;
  logic [LW-1:0]     layer;
  logic              ne_done_seen, g_done_seen;

  // ------------------------------------------------------------ weights
  wmat_t w;
  emb_t  b, bn_scale, bn_shift;
  weight_store u_weights (
    .clk, .we(w_we && state == K_IDLE), .waddr(w_addr), .wdata(w_data),
    .layer(layer), .w, .b, .bn_scale, .bn_shift
  );

  // ------------------------------------------------------ loaders
  logic                         ld_busy, ld_done;
  logic [P_EDGE-1:0]            ld_we;
  logic [ROW_W-1:0]             ld_waddr;
  emb_t                         ld_wdata;
  logic                         lg_busy, lg_done;
  logic                         tbl_clear, tbl_build;
  logic [P_EDGE-1:0]            tbl_valid, tbl_done, tbl_overflow;
  logic [ROW_W-1:0]             tbl_urow;
  node_t                        tbl_v;

  wire ev_start = start && (state == K_IDLE);

  load_node_embeddings u_load_ne (
    .clk, .rst_n, .start(ev_start), .num_nodes, .busy(ld_busy), .done(ld_done),
    .x_valid, .x_ready, .x_data, .we(ld_we), .waddr(ld_waddr), .wdata(ld_wdata)
  );

  load_graph u_load_graph (
    .clk, .rst_n, .start(ev_start), .num_nodes, .num_edges, .busy(lg_busy), .done(lg_done),
    .bad_edges, .e_valid, .e_ready, .e_data,
    .tbl_clear, .tbl_valid, .tbl_urow, .tbl_v, .tbl_build, .tbl_done
  );

  // ------------------------------------------------------ layer engine
  logic                         start_layer, layer_done, in_sel;
  logic [P_EDGE-1:0][ROW_W-1:0] fin_raddr;
  emb_t [P_EDGE-1:0]            fin_rdata;

  gnn_compute u_compute (
    .clk, .rst_n, .num_nodes(nn),
    .tbl_clear, .tbl_valid, .tbl_urow, .tbl_v, .tbl_build, .tbl_done, .tbl_overflow,
    .ld_we, .ld_waddr, .ld_wdata,
    .fin_raddr, .fin_rdata,
    .w, .b, .bn_scale, .bn_shift,
    .bufsel_reset(ev_start), .start_layer, .layer_done, .in_sel,
    .cnt_selected, .cnt_dropped, .cnt_edges, .cnt_bcast_stall
  );

  assign edge_overflow = |tbl_overflow;

  // ----------------------------------------------------------- finalize
  logic fin_start, fin_busy, fin_done;
  finalize u_finalize (
    .clk, .rst_n, .start(fin_start), .num_nodes(nn), .busy(fin_busy), .done(fin_done),
    .raddr(fin_raddr), .rdata(fin_rdata), .y_valid, .y_ready, .y_data
  );

  // ----------------------------------------------------- kernel control
  assign busy        = (state != K_IDLE);
  assign start_layer = (state == K_LAYER);
  assign fin_start   = (state == K_WAIT) && layer_done && (layer == LW'(NUM_LAYERS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= K_IDLE;
      nn           <= '0;
      layer        <= '0;
      ne_done_seen <= 1'b0;
      g_done_seen  <= 1'b0;
      done         <= 1'b0;
      cycles       <= '0;
      cnt_swaps    <= '0;
    end else begin
      done <= 1'b0;
      if (state != K_IDLE) cycles <= cycles + 1;
      if (layer_done) cnt_swaps <= cnt_swaps + 1;
      unique case (state)
        K_IDLE: if (start) begin
          nn           <= num_nodes;
          layer        <= '0;
          ne_done_seen <= 1'b0;
          g_done_seen  <= 1'b0;
          cycles       <= 32'd1;
          state        <= K_LOAD;
        end
        K_LOAD: begin
          if (ld_done) ne_done_seen <= 1'b1;
          if (lg_done) g_done_seen  <= 1'b1;
          if ((ne_done_seen || ld_done) && (g_done_seen || lg_done)) state <= K_LAYER;
        end
        K_LAYER: state <= K_WAIT;
        K_WAIT: if (layer_done) begin
          if (layer == LW'(NUM_LAYERS - 1)) state <= K_FINAL;
          else begin
            layer <= layer + 1'b1;
            state <= K_LAYER;
          end
        end
        K_FINAL: if (fin_done) begin
          state <= K_IDLE;
          done  <= 1'b1;
        end
        default: state <= K_IDLE;
      endcase
    end
  end

endmodule
