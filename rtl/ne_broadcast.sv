// ne_broadcast - Node Embedding Broadcast.
//
// Removes the MP units' need to fetch target-node embeddings from arbitrary
// banks. On start it runs two phases:
//   COPY  : for n = 0 .. num_nodes-1 read node n from the Input NE buffer
//           (bank n % P_EDGE, row n / P_EDGE, port A) and write it into the
//           Intermediate NE buffer, one node per cycle;
//   BCAST : for n = 0 .. num_nodes-1 read node n from the Intermediate NE
//           buffer and push {last=0, n, x_n} into all P_EDGE output FIFOs in
//           the same cycle; a beat is sent only when every FIFO is ready, so
//           every unit sees the identical, deterministic sequence. A final
//           beat {last=1} marks the end of the layer.
// done pulses for one cycle after the end beat is sent. copy_active tells the
// layer engine that this block drives the Input NE buffer's port A. The
// embedding field of a broadcast beat is the Intermediate NE buffer's read
// data wired straight through (the buffer reads asynchronously).
// Following the paper: the copy into the Intermediate NE buffer and the
// simultaneous broadcast to all units through parallel FIFOs. Own choices:
// the separate copy phase, the end token and the all-ready rule.
module ne_broadcast
  import dgnnflow_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [CNT_W-1:0]            num_nodes,
  output logic                        busy,
  output logic                        done,
  // Input NE buffer, port A (used during COPY only)
  output logic                        copy_active,
  output logic [P_EDGE-1:0][ROW_W-1:0] in_raddr,
  input  emb_t [P_EDGE-1:0]           in_rdata,
  // Intermediate NE buffer
  output logic                        im_we,
  output node_t                       im_waddr,
  output emb_t                        im_wdata,
  output node_t                       im_raddr,
  input  emb_t                        im_rdata,
  // broadcast FIFOs, one per Enhanced MP Unit
  output logic [P_EDGE-1:0]           bc_valid,
  input  logic [P_EDGE-1:0]           bc_ready,
  output bcast_beat_t                 bc_data
);
  typedef enum logic [1:0] {S_IDLE, S_COPY, S_BCAST, S_END} state_t;
  state_t           state;
  logic [CNT_W-1:0] n, nn;

  localparam int unsigned BSEL_W = (P_EDGE > 1) ? $clog2(P_EDGE) : 1;
  wire [BSEL_W-1:0] bank = BSEL_W'(n % P_EDGE);
  wire all_ready = &bc_ready;

  assign busy        = (state != S_IDLE);
  assign copy_active = (state == S_COPY);
  always_comb begin
    for (int b = 0; b < P_EDGE; b++) in_raddr[b] = ROW_W'(n / P_EDGE);
  end
  assign im_we    = (state == S_COPY) && (n < nn);
  assign im_waddr = node_t'(n);
  assign im_wdata = in_rdata[bank];
  assign im_raddr = node_t'(n);

  always_comb begin
    bc_data      = '0;
    bc_data.id   = node_t'(n);
    bc_data.x    = im_rdata;
    bc_data.last = (state == S_END);
    bc_valid     = (state == S_BCAST || state == S_END) ? {P_EDGE{all_ready}} : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      n     <= '0;
      nn    <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          nn    <= num_nodes;
          n     <= '0;
          state <= (num_nodes == '0) ? S_END : S_COPY;
        end
        S_COPY: begin
          if (n + 1'b1 >= nn) begin
            n     <= '0;
            state <= S_BCAST;
          end else n <= n + 1'b1;
        end
        S_BCAST: if (all_ready) begin
          if (n + 1'b1 >= nn) begin
            n     <= '0;
            state <= S_END;
          end else n <= n + 1'b1;
        end
        S_END: if (all_ready) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
