// sparse_stem: first layer of the backbone, a submanifold full 3x3
// convolution.
//
// A sparse line buffer gathers the non-zero 3x3 neighbours of each input
// pixel and a conv3x3 engine mixes all CIN input channels into COUT output
// channels (ReLU), at the same non-zero pixels. This is the first sparse conv
// block of the chain, the usual MobileNetV2 stem, with stride 1 because the
// architecture describes no down-sampling. Using a full 3x3 convolution here
// is a choice of this implementation: the architecture names conv 3x3 among
// its dataflow layer types but does not show the first block's insides.
//
// Configuration: cfg_addr/cfg_data as in conv3x3.
//
// Timing: a pixel with n non-zero neighbours costs n*(1 + COUT*CIN/PI)
// cycles in the conv3x3 engine, which overlaps with the line buffer.
module sparse_stem
  import see_pkg::*;
#(
  parameter int unsigned CIN  = 4,
  parameter int unsigned COUT = 16,
  parameter int unsigned W    = 80,
  parameter int unsigned PI   = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  token_t              in_tok,
  input  s8_t [CIN-1:0]       in_feat,
  output logic                out_valid,
  input  logic                out_ready,
  output token_t              out_tok,
  output s8_t [COUT-1:0]      out_feat,
  input  logic                cfg_we,
  input  logic [15:0]         cfg_addr,
  input  logic [7:0]          cfg_data
);
  logic          sl_valid, sl_ready, sl_wlast;
  token_t        sl_tok;
  koff_t         sl_koff;
  s8_t [CIN-1:0] sl_feat;

  slb #(.C(CIN), .W(W)) u_slb (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_tok, .in_feat,
    .out_valid(sl_valid), .out_ready(sl_ready), .out_tok(sl_tok), .out_koff(sl_koff),
    .out_feat(sl_feat), .out_wlast(sl_wlast));

  conv3x3 #(.CIN(CIN), .COUT(COUT), .PI(PI), .RELU(1'b1)) u_conv (
    .clk, .rst_n,
    .in_valid(sl_valid), .in_ready(sl_ready), .in_tok(sl_tok), .in_koff(sl_koff),
    .in_feat(sl_feat), .in_wlast(sl_wlast),
    .out_valid, .out_ready, .out_tok, .out_feat,
    .cfg_we, .cfg_addr, .cfg_data);
endmodule
