// see_accel: sparse dataflow accelerator for the eye-tracking backbone.
//
// The accelerator turns one sparse event frame into one feature embedding.
// The frame arrives as a bitmap of its non-zero pixels and the packed
// features of those pixels. The tokenizer turns them into a raster-ordered
// stream of token-feature beats. The beats then flow through a chain of
// inverted-bottleneck blocks built from submanifold sparse convolutions,
// which keep exactly the input's non-zero positions. Global pooling reduces
// the last block's stream to one vector per frame. Every layer is its own
// pipeline stage, all layers work at once on different pixels, and all
// weights stay on chip. The recurrent layer and the regression head that
// turn embeddings into eye positions run on the host processor.
//
// Chain: tokenizer -> block 1 = stem (full 3x3 convolution, C_IN -> C1) ->
// NUM_MID inverted-bottleneck blocks (C1 -> C1, residual) -> block N
// (inverted bottleneck, C1 -> C2, no residual) -> global pooling.
// The tokenizer, the chain of sparse conv blocks and the global pooling are
// the architecture's. The stem as block 1, the number of blocks and the
// channel sizes are choices of this implementation: the architecture's
// models come from a model search and are not listed layer by layer.
//
// Configuration bus: cfg_layer 0 is the stem; cfg_layer = 1 + 3*b + l selects
// layer l (0 expansion, 1 depthwise, 2 projection) of bottleneck block b
// (0..NUM_MID-1 = middle blocks, NUM_MID = block N); cfg_addr/cfg_data as in
// that layer. Load the weights before the first frame.
//
// Interfaces: bitmap rows (bm_*), features (ft_*) and the embedding (emb_*)
// are valid/ready streams; the embedding carries per-channel sums and the
// number of non-zero pixels.
module see_accel
  import see_pkg::*;
#(
  parameter int unsigned W       = 80,
  parameter int unsigned H       = 60,
  parameter int unsigned C_IN    = 4,
  parameter int unsigned C1      = 16,
  parameter int unsigned C2      = 32,
  parameter int unsigned EXP     = 4,
  parameter int unsigned NUM_MID = 1,
  parameter int unsigned PI      = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       bm_valid,
  output logic                       bm_ready,
  input  logic [W-1:0]               bm_row,
  input  logic                       ft_valid,
  output logic                       ft_ready,
  input  s8_t [C_IN-1:0] ft_data,
  input  logic                       cfg_we,
  input  logic [7:0]                 cfg_layer,
  input  logic [15:0]                cfg_addr,
  input  logic [7:0]                 cfg_data,
  output logic                       emb_valid,
  input  logic                       emb_ready,
  output s32_t [C2-1:0] emb_sum,
  output logic [15:0]                emb_count
);
  localparam int unsigned NB = NUM_MID + 1;   // inverted-bottleneck blocks after the stem

  logic [7:0] cfg_blk;
  logic [1:0] cfg_sel;
  logic [7:0] cfg_rel;
  assign cfg_rel = cfg_layer - 8'd1;
  assign cfg_blk = cfg_rel / 8'd3;
  assign cfg_sel = 2'(cfg_rel % 8'd3);

  // tokenizer -> block 1
  logic                        tk_valid, tk_ready;
  token_t                      tk_tok;
  s8_t [C_IN-1:0] tk_feat;

  tokenizer #(.C(C_IN), .W(W), .H(H)) u_tok (
    .clk, .rst_n,
    .bm_valid, .bm_ready, .bm_row,
    .ft_valid, .ft_ready, .ft_data,
    .out_valid(tk_valid), .out_ready(tk_ready), .out_tok(tk_tok), .out_feat(tk_feat));

  // stream between consecutive C1-wide blocks: index 0 leaves the stem
  logic                      m_valid [NUM_MID+1];
  logic                      m_ready [NUM_MID+1];
  token_t                    m_tok   [NUM_MID+1];
  s8_t [C1-1:0] m_feat  [NUM_MID+1];

  sparse_stem #(.CIN(C_IN), .COUT(C1), .W(W), .PI(PI)) u_stem (
    .clk, .rst_n,
    .in_valid(tk_valid), .in_ready(tk_ready), .in_tok(tk_tok), .in_feat(tk_feat),
    .out_valid(m_valid[0]), .out_ready(m_ready[0]), .out_tok(m_tok[0]), .out_feat(m_feat[0]),
    .cfg_we(cfg_we && cfg_layer == 8'd0), .cfg_addr, .cfg_data);

  for (genvar b = 0; b < NUM_MID; b++) begin : g_mid
    sparse_conv_block #(.CIN(C1), .COUT(C1), .EXP(EXP), .W(W), .PI(PI), .RESIDUAL(1'b1)) u_blk (
      .clk, .rst_n,
      .in_valid(m_valid[b]), .in_ready(m_ready[b]), .in_tok(m_tok[b]), .in_feat(m_feat[b]),
      .out_valid(m_valid[b+1]), .out_ready(m_ready[b+1]), .out_tok(m_tok[b+1]), .out_feat(m_feat[b+1]),
      .cfg_we(cfg_we && cfg_layer != 8'd0 && cfg_blk == 8'(b)), .cfg_sel, .cfg_addr, .cfg_data);
  end

  // block N -> pooling
  logic                      n_valid, n_ready;
  token_t                    n_tok;
  s8_t [C2-1:0] n_feat;

  sparse_conv_block #(.CIN(C1), .COUT(C2), .EXP(EXP), .W(W), .PI(PI), .RESIDUAL(1'b0)) u_blk_last (
    .clk, .rst_n,
    .in_valid(m_valid[NUM_MID]), .in_ready(m_ready[NUM_MID]), .in_tok(m_tok[NUM_MID]), .in_feat(m_feat[NUM_MID]),
    .out_valid(n_valid), .out_ready(n_ready), .out_tok(n_tok), .out_feat(n_feat),
    .cfg_we(cfg_we && cfg_layer != 8'd0 && cfg_blk == 8'(NB - 1)), .cfg_sel, .cfg_addr, .cfg_data);

  global_pool #(.C(C2)) u_pool (
    .clk, .rst_n,
    .in_valid(n_valid), .in_ready(n_ready), .in_tok(n_tok), .in_feat(n_feat),
    .emb_valid, .emb_ready, .emb_sum, .emb_count);
endmodule
