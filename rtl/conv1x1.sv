// conv1x1: pointwise convolution engine for one non-zero pixel at a time.
//
// An accepted beat is held in a token register and a feature buffer. The
// engine then computes the COUT outputs one after the other: for output o it
// walks the input channels PI at a time, multiplying PI features by PI static
// weights, summing them in an adder tree and adding the sum into an
// accumulator. After the last group the accumulator is requantized to int8.
// This token register / feature buffer / multiplier row / adder tree /
// accumulator structure is the one of the architecture; the PI=4 default,
// the one-output-at-a-time schedule and the weight-load port are choices of
// this implementation. End beats pass straight through.
//
// Configuration (cfg_we/cfg_addr/cfg_data, only while idle): byte address
// o*CIN+i writes weight w[o][i]; CIN*COUT+0/1 write the 16-bit scale (low,
// high byte), CIN*COUT+2 the shift.
//
// Timing: a pixel occupies the engine for 1 + COUT*CIN/PI cycles; the result
// register lets the next pixel start while the previous output waits.
module conv1x1
  import see_pkg::*;
#(
  parameter int unsigned CIN  = 16,
  parameter int unsigned COUT = 64,
  parameter int unsigned PI   = 4,     // input channels per cycle
  parameter bit          RELU = 1'b1
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
  input  logic [15:0]                 cfg_addr,
  input  logic [7:0]                  cfg_data
);
  localparam int unsigned NG = CIN / PI;          // input groups per output
  localparam int unsigned WD = COUT * NG;         // weight words per lane
  localparam int unsigned NWT = CIN * COUT;       // weights in total
  localparam int unsigned GW = (NG > 1) ? $clog2(NG) : 1;
  localparam int unsigned OW = (COUT > 1) ? $clog2(COUT) : 1;
  localparam int unsigned AW = (WD > 1) ? $clog2(WD) : 1;

  // static weights: lane p holds input channels i with i % PI == p
  logic signed [7:0] wmem [PI][WD];
  logic [15:0]       scale;
  logic [4:0]        shift;

  initial begin
    assert (CIN % PI == 0) else $error("conv1x1: CIN must be a multiple of PI");
  end

  always_ff @(posedge clk) begin
    if (cfg_we && int'(cfg_addr) < NWT) begin
      wmem[int'(cfg_addr) % PI][(int'(cfg_addr) / CIN) * NG + (int'(cfg_addr) % CIN) / PI] <= cfg_data;
    end
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

  // token register and feature buffer
  token_t                       tok_r;
  s8_t [CIN-1:0]   fbuf;
  logic                         busy;
  logic [OW-1:0]                o_cnt;
  logic [GW-1:0]                g_cnt;
  logic signed [31:0]           acc;
  s8_t [COUT-1:0]  res;

  // multiplier row and adder tree
  logic signed [31:0] tree_sum;
  logic signed [31:0] acc_next;
  logic signed [7:0]  q;
  logic [AW-1:0]      waddr;

  always_comb begin
    waddr    = AW'(o_cnt) * AW'(NG) + AW'(g_cnt);
    tree_sum = '0;
    for (int p = 0; p < PI; p++) begin
      tree_sum += s32_t'(wmem[p][waddr]) * s32_t'(fbuf[g_cnt * PI + p]);
    end
    acc_next = acc + tree_sum;
  end

  requant u_rq (.acc(acc_next), .scale(scale), .shift(shift), .relu(RELU), .q(q));

  logic last_step;
  logic out_free;
  assign last_step = busy && !tok_r.eof && (g_cnt == GW'(NG - 1)) && (o_cnt == OW'(COUT - 1));
  assign out_free  = !out_valid || out_ready;
  assign in_ready  = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      o_cnt     <= '0;
      g_cnt     <= '0;
      acc       <= '0;
      tok_r     <= '0;
      fbuf      <= '0;
      res       <= '0;
      out_valid <= 1'b0;
      out_tok   <= '0;
      out_feat  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (!busy) begin
        if (in_valid) begin
          busy  <= 1'b1;
          tok_r <= in_tok;
          fbuf  <= in_feat;
          o_cnt <= '0;
          g_cnt <= '0;
          acc   <= '0;
        end
      end else if (tok_r.eof) begin
        // end beat: forward without computing
        if (out_free) begin
          out_valid <= 1'b1;
          out_tok   <= tok_r;
          out_feat  <= '0;
          busy      <= 1'b0;
        end
      end else if (!last_step || out_free) begin
        if (g_cnt == GW'(NG - 1)) begin
          res[o_cnt] <= q;
          acc        <= '0;
          g_cnt      <= '0;
          o_cnt      <= o_cnt + 1'b1;
        end else begin
          acc   <= acc_next;
          g_cnt <= g_cnt + 1'b1;
        end
        if (last_step) begin
          out_valid          <= 1'b1;
          out_tok            <= tok_r;
          out_feat           <= res;
          out_feat[COUT - 1] <= q;
          busy               <= 1'b0;
        end
      end
    end
  end
endmodule
