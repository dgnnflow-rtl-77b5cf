// weight_store - model weights of all GNN layers ("Load Weights").
//
// Holds, for each of the NUM_LAYERS EdgeConv layers, LAYER_WORDS fixed-point
// words at word address layer * LAYER_WORDS + offset:
//   offset 0                      : W, row-major, EMB_DIM rows x 2*EMB_DIM
//   offset 2*EMB_DIM^2            : bias b[EMB_DIM]
//   offset 2*EMB_DIM^2 + EMB_DIM  : BatchNorm scale[EMB_DIM]
//   offset 2*EMB_DIM^2 + 2*EMB_DIM: BatchNorm shift[EMB_DIM]
// The host writes one word per cycle (we, addr, data) and only needs to do so
// when the model changes; the weights stay across events. The words of the
// layer selected by `layer` are presented in parallel to the MP and NT units.
// Words are not reset. Following the paper: a weight load step that runs only
// for new weights. Own choices: the address map and the folded BatchNorm.
module weight_store
  import dgnnflow_pkg::*;
(
  input  logic                  clk,
  input  logic                  we,
  input  logic [WADDR_W-1:0]    waddr,
  input  fx_t                   wdata,
  input  logic [$clog2(NUM_LAYERS)-1:0] layer,
  output wmat_t                 w,
  output emb_t                  b,
  output emb_t                  bn_scale,
  output emb_t                  bn_shift
);
  localparam int unsigned WORDS = NUM_LAYERS * LAYER_WORDS;
  localparam int unsigned OFF_B = 2 * EMB_DIM * EMB_DIM;

  fx_t mem [WORDS];

  always_ff @(posedge clk) begin
    if (we && waddr < WADDR_W'(WORDS)) mem[waddr] <= wdata;
  end

  wire [WADDR_W-1:0] base = WADDR_W'(layer) * WADDR_W'(LAYER_WORDS);

  always_comb begin
    for (int r = 0; r < EMB_DIM; r++)
      for (int c = 0; c < 2 * EMB_DIM; c++)
        w[r][c] = mem[base + WADDR_W'(r * 2 * EMB_DIM + c)];
    for (int d = 0; d < EMB_DIM; d++) begin
      b[d]        = mem[base + WADDR_W'(OFF_B + d)];
      bn_scale[d] = mem[base + WADDR_W'(OFF_B + EMB_DIM + d)];
      bn_shift[d] = mem[base + WADDR_W'(OFF_B + 2 * EMB_DIM + d)];
    end
  end
endmodule
