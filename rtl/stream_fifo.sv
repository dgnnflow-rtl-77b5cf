// stream_fifo - synchronous streaming FIFO with valid/ready handshakes.
//
// Every "streaming FIFO" of the dataflow (broadcast -> MP units, MP unit
// internal task boundary, MP units -> adapter, adapter -> NT units) is one
// of these. A beat enters when in_valid && in_ready and leaves when
// out_valid && out_ready. in_ready is high while fewer than DEPTH beats are
// held; out_valid while at least one is held. Data written in a cycle can be
// read in the next cycle (one cycle of latency, no fall-through). The
// handshake and the depth are this design's choices; the paper only says
// the tasks are linked by streaming FIFOs.
module stream_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic [AW:0]      count;

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = (count < (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  // Handshake rules: never push when full, never pop when empty.
  assert property (@(posedge clk) disable iff (!rst_n) push |-> count <= (AW+1)'(DEPTH));
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> count != '0);
endmodule
