// conv3x3: full (all-to-all channel) 3x3 convolution engine fed by the sparse
// line buffer.
//
// Each input beat carries one non-zero neighbour of the current output pixel:
// its kernel offset k, its CIN-channel feature and a last-beat flag. For
// each beat the engine walks the COUT output channels, and for each one the
// input channels PI at a time, multiplying by the static weights of offset k
// and adding into that output channel's accumulator. After the last beat of
// the window all COUT accumulators are requantized and sent out with the
// window's token. Absent neighbours never arrive, so their work is skipped.
// The offset-indexed weights and the multiplier row with adder tree and
// accumulator follow the architecture's conv 3x3 and conv 1x1 engines. The
// schedule, the load port and the ReLU option are choices of this
// implementation. End beats pass straight through.
//
// Configuration (while idle): byte address (k*COUT + o)*CIN + i writes
// w[k][o][i]; 9*COUT*CIN + 0/1 write the 16-bit scale (low, high byte),
// 9*COUT*CIN + 2 the shift.
//
// Timing: a beat occupies the engine for 1 + COUT*CIN/PI cycles, so a pixel
// with n present neighbours costs n*(1 + COUT*CIN/PI) cycles.
module conv3x3
  import see_pkg::*;
#(
  parameter int unsigned CIN  = 4,
  parameter int unsigned COUT = 16,
  parameter int unsigned PI   = 4,
  parameter bit          RELU = 1'b1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  token_t              in_tok,
  input  koff_t               in_koff,
  input  s8_t [CIN-1:0]       in_feat,
  input  logic                in_wlast,
  output logic                out_valid,
  input  logic                out_ready,
  output token_t              out_tok,
  output s8_t [COUT-1:0]      out_feat,
  input  logic                cfg_we,
  input  logic [15:0]         cfg_addr,
  input  logic [7:0]          cfg_data
);
  localparam int unsigned NG  = CIN / PI;            // input groups per output
  localparam int unsigned WD  = 9 * COUT * NG;       // weight words per lane
  localparam int unsigned NWT = 9 * COUT * CIN;      // weights in total
  localparam int unsigned GW  = (NG > 1) ? $clog2(NG) : 1;
  localparam int unsigned OW  = (COUT > 1) ? $clog2(COUT) : 1;
  localparam int unsigned AW  = (WD > 1) ? $clog2(WD) : 1;

  // static weights: lane p holds input channels i with i % PI == p
  logic signed [7:0] wmem [PI][WD];
  logic [15:0]       scale;
  logic [4:0]        shift;

  initial begin
    assert (CIN % PI == 0) else $error("conv3x3: CIN must be a multiple of PI");
  end

  always_ff @(posedge clk) begin
    if (cfg_we && int'(cfg_addr) < NWT)
      wmem[int'(cfg_addr) % PI][(int'(cfg_addr) / CIN) * NG + (int'(cfg_addr) % CIN) / PI] <= cfg_data;
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

  // beat registers
  token_t           tok_r;
  logic [3:0]       k_r;
  logic             last_r;
  s8_t [CIN-1:0]    fbuf;
  logic             busy;
  logic [OW-1:0]    o_cnt;
  logic [GW-1:0]    g_cnt;
  s32_t             acc [COUT];
  s32_t             part;        // running sum of the current output over groups
  s8_t [COUT-1:0]   res;

  s32_t             tree_sum, acc_next;
  s8_t              q;
  logic [AW-1:0]    waddr;

  always_comb begin
    waddr    = AW'((int'(k_r) * COUT + int'(o_cnt)) * NG + int'(g_cnt));
    tree_sum = '0;
    for (int p = 0; p < PI; p++)
      tree_sum += s32_t'(wmem[p][waddr]) * s32_t'(fbuf[g_cnt * PI + p]);
    acc_next = acc[o_cnt] + part + tree_sum;
  end

  requant u_rq (.acc(acc_next), .scale(scale), .shift(shift), .relu(RELU), .q(q));

  logic group_end, beat_end, out_free;
  assign group_end = (g_cnt == GW'(NG - 1));
  assign beat_end  = busy && !tok_r.eof && group_end && (o_cnt == OW'(COUT - 1));
  assign out_free  = !out_valid || out_ready;
  assign in_ready  = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      tok_r     <= '0;
      k_r       <= '0;
      last_r    <= 1'b0;
      fbuf      <= '0;
      o_cnt     <= '0;
      g_cnt     <= '0;
      part      <= '0;
      res       <= '0;
      for (int o = 0; o < COUT; o++) acc[o] <= '0;
      out_valid <= 1'b0;
      out_tok   <= '0;
      out_feat  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (!busy) begin
        if (in_valid) begin
          busy   <= 1'b1;
          tok_r  <= in_tok;
          k_r    <= (in_koff > 4'd8) ? 4'd4 : in_koff;
          last_r <= in_wlast;
          fbuf   <= in_feat;
          o_cnt  <= '0;
          g_cnt  <= '0;
          part   <= '0;
        end
      end else if (tok_r.eof) begin
        if (out_free) begin
          out_valid <= 1'b1;
          out_tok   <= tok_r;
          out_feat  <= '0;
          busy      <= 1'b0;
        end
      end else if (!(beat_end && last_r) || out_free) begin
        if (group_end) begin
          part  <= '0;
          g_cnt <= '0;
          o_cnt <= o_cnt + 1'b1;
          if (last_r) begin
            res[o_cnt] <= q;
            acc[o_cnt] <= '0;
          end else begin
            acc[o_cnt] <= acc_next;
          end
        end else begin
          part  <= part + tree_sum;
          g_cnt <= g_cnt + 1'b1;
        end
        if (beat_end) begin
          busy <= 1'b0;
          if (last_r) begin
            out_valid          <= 1'b1;
            out_tok            <= tok_r;
            out_feat           <= res;
            out_feat[COUT - 1] <= q;
          end
        end
      end
    end
  end
endmodule
