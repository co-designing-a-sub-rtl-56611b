// dwconv3x3: depthwise 3x3 convolution engine fed by the sparse line buffer.
//
// Input beats carry one non-zero neighbour of the current output pixel: its
// kernel offset, its feature vector and a flag for the window's last beat.
// The kernel offset selects one of nine static weight sets ("kernel 0" to
// "kernel 8"); every channel c then multiplies its feature by its weight and
// adds the product into its own accumulator, all C channels in parallel.
// On the last beat the C sums are requantized to int8 and sent out with the
// window's token. Zero neighbours never arrive, so their products are
// skipped. The offset-indexed weight selection and per-channel MAC lanes are
// the architecture's; full channel parallelism, the load port and the ReLU
// option are choices of this implementation. End beats pass through.
//
// Configuration (while idle): byte address c*9+k writes weight w[c][k];
// 9*C+0/1 write the 16-bit scale (low, high byte), 9*C+2 the shift.
//
// Timing: one beat per cycle; the output appears the cycle after the last
// beat of its window.
module dwconv3x3
  import see_pkg::*;
#(
  parameter int unsigned C    = 64,
  parameter bit          RELU = 1'b1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  token_t                   in_tok,
  input  koff_t                    in_koff,
  input  s8_t [C-1:0] in_feat,
  input  logic                     in_wlast,
  output logic                     out_valid,
  input  logic                     out_ready,
  output token_t                   out_tok,
  output s8_t [C-1:0] out_feat,
  input  logic                     cfg_we,
  input  logic [15:0]              cfg_addr,
  input  logic [7:0]               cfg_data
);
  localparam int unsigned NWT = 9 * C;

  logic signed [7:0] wmem [C][9];
  logic [15:0]       scale;
  logic [4:0]        shift;

  always_ff @(posedge clk) begin
    if (cfg_we && int'(cfg_addr) < NWT)
      wmem[int'(cfg_addr) / 9][int'(cfg_addr) % 9] <= cfg_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scale <= 16'd1;
      shift <= 5'd0;
    end else if (cfg_we) begin
      if (cfg_addr == 16'(NWT + CFG_SCALE_LO)) scale[7:0]  <= cfg_data;
      if (cfg_addr == 16'(NWT + CFG_SCALE_HI)) scale[15:8] <= cfg_data;
      if (cfg_addr == 16'(NWT + CFG_SHIFT))    shift       <= cfg_data[4:0];
    end
  end

  logic signed [31:0]      acc [C];
  logic signed [31:0]      sum [C];
  s8_t [C-1:0] q;
  logic [3:0]              ksel;

  assign ksel = (in_koff > 4'd8) ? 4'd4 : in_koff;

  for (genvar c = 0; c < C; c++) begin : g_lane
    always_comb sum[c] = acc[c] + s32_t'(wmem[c][ksel]) * s32_t'(in_feat[c]);
    requant u_rq (.acc(sum[c]), .scale(scale), .shift(shift), .relu(RELU), .q(q[c]));
  end

  logic out_free, in_fire;
  assign out_free = !out_valid || out_ready;
  assign in_ready = out_free || (!in_wlast && !in_tok.eof);
  assign in_fire  = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < C; c++) acc[c] <= '0;
      out_valid <= 1'b0;
      out_tok   <= '0;
      out_feat  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_fire) begin
        if (in_tok.eof) begin
          out_valid <= 1'b1;
          out_tok   <= in_tok;
          out_feat  <= '0;
          for (int c = 0; c < C; c++) acc[c] <= '0;
        end else if (in_wlast) begin
          out_valid <= 1'b1;
          out_tok   <= in_tok;
          out_feat  <= q;
          for (int c = 0; c < C; c++) acc[c] <= '0;
        end else begin
          for (int c = 0; c < C; c++) acc[c] <= sum[c];
        end
      end
    end
  end
endmodule
