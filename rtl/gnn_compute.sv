// gnn_compute - the GNN layer engine ("GNN Compute").
//
// Runs one EdgeConv layer per start_layer pulse over the event held in the
// node-embedding double buffer and the MP units' graph tables:
//
//   Input NE buffer --(copy)--> Intermediate NE buffer --> Broadcast
//        |  bank b                                            | P_EDGE FIFOs
//        +------------> Enhanced MP Unit b  <-----------------+
//        |                   | message FIFO (one per unit)
//        |              MP-to-NT adapter
//        |                   | FIFO per NT unit
//        +------------> NT Unit j --> Output NE buffer (banks b, b%P_NODE==j)
//
// Two ne_buffer instances (A, B) alternate as Input and Output buffer: in_sel
// = 0 makes A the input. After every node of the layer has been written to the
// output buffer, layer_done pulses and in_sel toggles, so the next layer (and
// the final readout) sees the new embeddings. Port A of the input buffer is
// shared: the broadcast's copy phase uses it first, then the MP units read
// their source embeddings from it; port B serves the NT units' residual
// reads. Because bank b is only ever read and written by NT unit
// b % P_NODE (P_EDGE must be a multiple of P_NODE), NT units never collide.
// Outside a layer, port A of the buffer selected by in_sel is the readout
// port (fin_raddr / fin_rdata), and buffer A accepts the loader's writes.
// bufsel_reset returns in_sel to 0 at the start of an event.
//
// Following the paper: the units, their counts, the buffers, the FIFO links
// and the swap per layer. Own choices: FIFO depths (2 broadcast, 2 message,
// 4 NT, after the cell counts drawn in the architecture figure), port
// sharing, and completion by counting written nodes.
module gnn_compute
  import dgnnflow_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [CNT_W-1:0]             num_nodes,
  // graph table construction (from load_graph)
  input  logic                         tbl_clear,
  input  logic [P_EDGE-1:0]            tbl_valid,
  input  logic [ROW_W-1:0]             tbl_urow,
  input  node_t                        tbl_v,
  input  logic                         tbl_build,
  output logic [P_EDGE-1:0]            tbl_done,
  output logic [P_EDGE-1:0]            tbl_overflow,
  // node embedding loader (writes buffer A)
  input  logic [P_EDGE-1:0]            ld_we,
  input  logic [ROW_W-1:0]             ld_waddr,
  input  emb_t                         ld_wdata,
  // readout of the buffer selected by in_sel
  input  logic [P_EDGE-1:0][ROW_W-1:0] fin_raddr,
  output emb_t [P_EDGE-1:0]            fin_rdata,
  // weights of the running layer
  input  wmat_t                        w,
  input  emb_t                         b,
  input  emb_t                         bn_scale,
  input  emb_t                         bn_shift,
  // layer control
  input  logic                         bufsel_reset,
  input  logic                         start_layer,
  output logic                         layer_done,
  output logic                         in_sel,
  // activity counters (since reset)
  output logic [31:0]                  cnt_selected,
  output logic [31:0]                  cnt_dropped,
  output logic [31:0]                  cnt_edges,
  output logic [31:0]                  cnt_bcast_stall
);
  localparam int unsigned BCAST_DEPTH = 2;
  localparam int unsigned MSG_DEPTH   = 2;
  localparam int unsigned NT_DEPTH    = 4;

  // ------------------------------------------------------------ buffers
  logic [P_EDGE-1:0]            a_we, b_we;
  logic [P_EDGE-1:0][ROW_W-1:0] a_waddr, b_waddr, ra_addr, rb_addr;
  emb_t [P_EDGE-1:0]            a_wdata, b_wdata;
  emb_t [P_EDGE-1:0]            a_rdata_a, a_rdata_b, b_rdata_a, b_rdata_b;
  emb_t [P_EDGE-1:0]            in_rdata_a, in_rdata_b;

  ne_buffer u_buf_a (.clk, .we(a_we), .waddr(a_waddr), .wdata(a_wdata),
                     .raddr_a(ra_addr), .rdata_a(a_rdata_a),
                     .raddr_b(rb_addr), .rdata_b(a_rdata_b));
  ne_buffer u_buf_b (.clk, .we(b_we), .waddr(b_waddr), .wdata(b_wdata),
                     .raddr_a(ra_addr), .rdata_a(b_rdata_a),
                     .raddr_b(rb_addr), .rdata_b(b_rdata_b));

  assign in_rdata_a = in_sel ? b_rdata_a : a_rdata_a;
  assign in_rdata_b = in_sel ? b_rdata_b : a_rdata_b;
  assign fin_rdata  = in_rdata_a;

  // -------------------------------------------------------- broadcast
  logic                          running;
  logic                          bc_copy, bc_busy, bc_done;
  logic [P_EDGE-1:0][ROW_W-1:0]  bc_raddr;
  logic                          im_we;
  node_t                         im_waddr, im_raddr;
  emb_t                          im_wdata, im_rdata;
  logic [P_EDGE-1:0]             bc_valid, bc_ready;
  bcast_beat_t                   bc_data;

  intermediate_ne_buffer u_im (.clk, .we(im_we), .waddr(im_waddr), .wdata(im_wdata),
                               .raddr(im_raddr), .rdata(im_rdata));

  ne_broadcast u_bcast (
    .clk, .rst_n, .start(start_layer), .num_nodes, .busy(bc_busy), .done(bc_done),
    .copy_active(bc_copy), .in_raddr(bc_raddr), .in_rdata(in_rdata_a),
    .im_we, .im_waddr, .im_wdata, .im_raddr, .im_rdata,
    .bc_valid, .bc_ready, .bc_data
  );

  // --------------------------------------------------------- MP units
  logic [P_EDGE-1:0]             mq_valid, mq_ready;
  bcast_beat_t [P_EDGE-1:0]      mq_data;
  logic [P_EDGE-1:0][ROW_W-1:0]  mp_raddr;
  logic [P_EDGE-1:0]             mp_valid, mp_ready;
  msg_beat_t [P_EDGE-1:0]        mp_data;
  logic [P_EDGE-1:0]             ad_valid, ad_ready;
  msg_beat_t [P_EDGE-1:0]        ad_data;
  logic [P_EDGE-1:0][31:0]       u_sel, u_drop, u_edges;

  for (genvar u = 0; u < P_EDGE; u++) begin : g_mp
    stream_fifo #(.WIDTH($bits(bcast_beat_t)), .DEPTH(BCAST_DEPTH)) u_bq (
      .clk, .rst_n,
      .in_valid(bc_valid[u]), .in_ready(bc_ready[u]), .in_data(bc_data),
      .out_valid(mq_valid[u]), .out_ready(mq_ready[u]), .out_data(mq_data[u])
    );
    enhanced_mp_unit #(.UNIT(u)) u_mp (
      .clk, .rst_n, .num_nodes,
      .tbl_clear, .tbl_valid(tbl_valid[u]), .tbl_urow, .tbl_v, .tbl_build,
      .tbl_done(tbl_done[u]), .tbl_overflow(tbl_overflow[u]),
      .bc_valid(mq_valid[u]), .bc_ready(mq_ready[u]), .bc_data(mq_data[u]),
      .src_raddr(mp_raddr[u]), .src_rdata(in_rdata_a[u]),
      .w, .b,
      .msg_valid(mp_valid[u]), .msg_ready(mp_ready[u]), .msg_data(mp_data[u]),
      .cnt_selected(u_sel[u]), .cnt_dropped(u_drop[u]), .cnt_edges(u_edges[u])
    );
    stream_fifo #(.WIDTH($bits(msg_beat_t)), .DEPTH(MSG_DEPTH)) u_mq (
      .clk, .rst_n,
      .in_valid(mp_valid[u]), .in_ready(mp_ready[u]), .in_data(mp_data[u]),
      .out_valid(ad_valid[u]), .out_ready(ad_ready[u]), .out_data(ad_data[u])
    );
  end

  always_comb begin
    cnt_selected = '0;
    cnt_dropped  = '0;
    cnt_edges    = '0;
    for (int u = 0; u < P_EDGE; u++) begin
      cnt_selected += u_sel[u];
      cnt_dropped  += u_drop[u];
      cnt_edges    += u_edges[u];
    end
  end

  // ---------------------------------------------------------- adapter
  logic [P_NODE-1:0]      ao_valid, ao_ready;
  msg_beat_t              ao_data;
  logic                   ad_done;

  mp_nt_adapter u_adapter (
    .clk, .rst_n, .start(start_layer), .num_nodes, .done(ad_done),
    .in_valid(ad_valid), .in_ready(ad_ready), .in_data(ad_data),
    .out_valid(ao_valid), .out_ready(ao_ready), .out_data(ao_data)
  );

  // --------------------------------------------------------- NT units
  logic [P_NODE-1:0]      nq_valid, nq_ready, nt_we;
  msg_beat_t [P_NODE-1:0] nq_data;
  node_t [P_NODE-1:0]     nt_rnode, nt_wnode;
  emb_t [P_NODE-1:0]      nt_rdata, nt_wdata;
  logic [P_NODE-1:0][31:0] nt_cnt;

  for (genvar j = 0; j < P_NODE; j++) begin : g_nt
    stream_fifo #(.WIDTH($bits(msg_beat_t)), .DEPTH(NT_DEPTH)) u_nq (
      .clk, .rst_n,
      .in_valid(ao_valid[j]), .in_ready(ao_ready[j]), .in_data(ao_data),
      .out_valid(nq_valid[j]), .out_ready(nq_ready[j]), .out_data(nq_data[j])
    );
    nt_unit u_nt (
      .clk, .rst_n,
      .msg_valid(nq_valid[j]), .msg_ready(nq_ready[j]), .msg_data(nq_data[j]),
      .bn_scale, .bn_shift,
      .rd_node(nt_rnode[j]), .rd_data(nt_rdata[j]),
      .wr_en(nt_we[j]), .wr_node(nt_wnode[j]), .wr_data(nt_wdata[j]),
      .cnt_nodes(nt_cnt[j])
    );
    assign nt_rdata[j] = in_rdata_b[int'(nt_rnode[j]) % P_EDGE];
  end

  // ------------------------------------------------- buffer port muxes
  logic [P_EDGE-1:0]            o_we;
  logic [P_EDGE-1:0][ROW_W-1:0] o_waddr;
  emb_t [P_EDGE-1:0]            o_wdata;

  always_comb begin
    for (int bk = 0; bk < P_EDGE; bk++) begin
      // port A: copy phase, then MP source reads, readout when idle
      if (bc_copy)      ra_addr[bk] = bc_raddr[bk];
      else if (running) ra_addr[bk] = mp_raddr[bk];
      else              ra_addr[bk] = fin_raddr[bk];
      // port B: residual read of the NT unit owning this bank
      rb_addr[bk] = ROW_W'(nt_rnode[bk % P_NODE] / P_EDGE);
      // NT writes into the output buffer
      o_we[bk]    = nt_we[bk % P_NODE] && ((int'(nt_wnode[bk % P_NODE]) % P_EDGE) == bk);
      o_waddr[bk] = ROW_W'(nt_wnode[bk % P_NODE] / P_EDGE);
      o_wdata[bk] = nt_wdata[bk % P_NODE];
    end
    if (|ld_we) begin
      a_we    = ld_we;
      a_waddr = {P_EDGE{ld_waddr}};
      a_wdata = {P_EDGE{ld_wdata}};
    end else begin
      a_we    = in_sel ? o_we : '0;
      a_waddr = o_waddr;
      a_wdata = o_wdata;
    end
    b_we    = in_sel ? '0 : o_we;
    b_waddr = o_waddr;
    b_wdata = o_wdata;
  end

  // ------------------------------------------------------ layer control
  logic [CNT_W-1:0] written;
  logic [1:0]       nt_now;

  always_comb begin
    nt_now = '0;
    for (int j = 0; j < P_NODE; j++) nt_now += 2'(nt_we[j]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running         <= 1'b0;
      in_sel          <= 1'b0;
      written         <= '0;
      layer_done      <= 1'b0;
      cnt_bcast_stall <= '0;
    end else begin
      layer_done <= 1'b0;
      if (bufsel_reset) in_sel <= 1'b0;
      if (start_layer) begin
        running <= 1'b1;
        written <= '0;
      end else if (running) begin
        written <= written + CNT_W'(nt_now);
        if (written + CNT_W'(nt_now) >= num_nodes && !bc_busy) begin
          running    <= 1'b0;
          layer_done <= 1'b1;
          in_sel     <= ~in_sel;
        end
      end
      // broadcast beats held back because some MP unit's FIFO was full
      if (bc_busy && !bc_copy && !(&bc_ready)) cnt_bcast_stall <= cnt_bcast_stall + 1;
    end
  end

  // The loader and the NT units never write buffer A in the same cycle.
  assert property (@(posedge clk) disable iff (!rst_n) !(|ld_we && in_sel && |o_we));
endmodule
