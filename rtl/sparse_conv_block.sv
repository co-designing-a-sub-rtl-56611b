// sparse_conv_block: one inverted-bottleneck block of the sparse backbone.
//
// Dataflow: conv1x1 expansion (CIN -> CIN*EXP, ReLU), sparse line buffer,
// depthwise 3x3 (ReLU), conv1x1 projection (-> COUT, no ReLU). With RESIDUAL
// set (requires CIN == COUT) every input beat is also copied into a bypass
// FIFO; because all layers keep the same non-zero positions, the projection's
// outputs come out in the same token order, and the adder simply pairs each
// output with the FIFO head and adds them with int8 saturation. This
// structure (conv 1x1, SLB, DW conv 3x3, conv 1x1, bypass FIFO and adder) is
// the architecture's; the channel sizes, the saturating add at a shared scale
// and the FIFO depth are choices of this implementation.
//
// Configuration: cfg_sel picks the layer (0 expansion, 1 depthwise,
// 2 projection); cfg_addr/cfg_data are then as in that layer.
//
// Timing: the expansion and projection engines take 1 + COUT*CIN/PI cycles a
// pixel each and run concurrently with the line buffer and depthwise engine.
module sparse_conv_block
  import see_pkg::*;
#(
  parameter int unsigned CIN      = 16,
  parameter int unsigned COUT     = 16,
  parameter int unsigned EXP      = 4,
  parameter int unsigned W        = 80,
  parameter int unsigned PI       = 4,
  parameter bit          RESIDUAL = 1'b1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  token_t                      in_tok,
  input  s8_t [CIN-1:0]  in_feat,
  output logic                        out_valid,
  input  logic                        out_ready,
  output token_t                      out_tok,
  output s8_t [COUT-1:0] out_feat,
  input  logic                        cfg_we,
  input  logic [1:0]                  cfg_sel,
  input  logic [15:0]                 cfg_addr,
  input  logic [7:0]                  cfg_data
);
  localparam int unsigned CH = CIN * EXP;
  localparam int unsigned BYPASS_DEPTH = 2 * W + 8;

  initial begin
    assert (!RESIDUAL || CIN == COUT) else $error("sparse_conv_block: residual needs CIN == COUT");
  end

  // expansion input (fork with the bypass FIFO when residual)
  logic                      ex_in_valid, ex_in_ready;
  logic                      ex_valid, ex_ready;
  token_t                    ex_tok;
  s8_t [CH-1:0] ex_feat;
  logic                      sl_valid, sl_ready, sl_wlast;
  token_t                    sl_tok;
  koff_t                     sl_koff;
  s8_t [CH-1:0] sl_feat;
  logic                      dw_valid, dw_ready;
  token_t                    dw_tok;
  s8_t [CH-1:0] dw_feat;
  logic                      pj_valid, pj_ready;
  token_t                    pj_tok;
  s8_t [COUT-1:0] pj_feat;

  conv1x1 #(.CIN(CIN), .COUT(CH), .PI(PI), .RELU(1'b1)) u_expand (
    .clk, .rst_n,
    .in_valid(ex_in_valid), .in_ready(ex_in_ready), .in_tok(in_tok), .in_feat(in_feat),
    .out_valid(ex_valid), .out_ready(ex_ready), .out_tok(ex_tok), .out_feat(ex_feat),
    .cfg_we(cfg_we && cfg_sel == 2'd0), .cfg_addr, .cfg_data);

  slb #(.C(CH), .W(W)) u_slb (
    .clk, .rst_n,
    .in_valid(ex_valid), .in_ready(ex_ready), .in_tok(ex_tok), .in_feat(ex_feat),
    .out_valid(sl_valid), .out_ready(sl_ready), .out_tok(sl_tok), .out_koff(sl_koff),
    .out_feat(sl_feat), .out_wlast(sl_wlast));

  dwconv3x3 #(.C(CH), .RELU(1'b1)) u_dw (
    .clk, .rst_n,
    .in_valid(sl_valid), .in_ready(sl_ready), .in_tok(sl_tok), .in_koff(sl_koff),
    .in_feat(sl_feat), .in_wlast(sl_wlast),
    .out_valid(dw_valid), .out_ready(dw_ready), .out_tok(dw_tok), .out_feat(dw_feat),
    .cfg_we(cfg_we && cfg_sel == 2'd1), .cfg_addr, .cfg_data);

  conv1x1 #(.CIN(CH), .COUT(COUT), .PI(PI), .RELU(1'b0)) u_project (
    .clk, .rst_n,
    .in_valid(dw_valid), .in_ready(dw_ready), .in_tok(dw_tok), .in_feat(dw_feat),
    .out_valid(pj_valid), .out_ready(pj_ready), .out_tok(pj_tok), .out_feat(pj_feat),
    .cfg_we(cfg_we && cfg_sel == 2'd2), .cfg_addr, .cfg_data);

  if (RESIDUAL) begin : g_res
    localparam int unsigned BW = $bits(token_t) + CIN * 8;
    logic          by_in_ready, by_valid;
    logic [BW-1:0] by_data;
    token_t        by_tok;
    s8_t [CIN-1:0] by_feat;

    // fork: a beat enters only when both the expansion and the bypass take it
    assign ex_in_valid = in_valid && by_in_ready;
    assign in_ready    = ex_in_ready && by_in_ready;

    sync_fifo #(.WIDTH(BW), .DEPTH(BYPASS_DEPTH)) u_bypass (
      .clk, .rst_n,
      .in_valid(in_valid && ex_in_ready), .in_ready(by_in_ready), .in_data({in_tok, in_feat}),
      .out_valid(by_valid), .out_ready(out_valid && out_ready), .out_data(by_data));
    assign {by_tok, by_feat} = by_data;

    // the bypass and the main path must pair the same pixel
    a_res_order: assert property (@(posedge clk) disable iff (!rst_n)
                                  (out_valid && out_ready) |-> (by_tok == pj_tok))
      else $error("sparse_conv_block: residual token mismatch");

    // join and add
    always_comb begin
      out_valid = pj_valid && by_valid;
      pj_ready  = out_ready && by_valid;
      out_tok   = pj_tok;
      for (int c = 0; c < COUT; c++) begin
        automatic logic signed [8:0] s = 9'(pj_feat[c]) + 9'(by_feat[c]);
        if (pj_tok.eof)     out_feat[c] = '0;
        else if (s > 127)   out_feat[c] = 8'sd127;
        else if (s < -128)  out_feat[c] = -8'sd128;
        else                out_feat[c] = s[7:0];
      end
    end
  end else begin : g_plain
    assign ex_in_valid = in_valid;
    assign in_ready    = ex_in_ready;
    assign out_valid   = pj_valid;
    assign pj_ready    = out_ready;
    assign out_tok     = pj_tok;
    assign out_feat    = pj_feat;
  end
endmodule
