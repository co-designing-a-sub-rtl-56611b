// slb: sparse line buffer in front of a depthwise 3x3 convolution.
//
// Because a submanifold convolution produces outputs exactly where its input
// is non-zero, the incoming tokens are simply kept in a token FIFO and later
// reused as the output tokens. The FIFO's tail is the newest token: its
// feature is written into a three-row feature buffer at [tail.x, tail.y % 3].
// The FIFO's head is the oldest token and the centre of the 3x3 window being
// read. Once nothing more can arrive inside the head's window, the buffer
// streams out, one per cycle, the kernel offset (0..8, row-major, 4 = centre)
// and feature of every non-zero neighbour of the head, the last one flagged
// with out_wlast, and pops the head. Zero neighbours cost no cycles.
// The FIFO, the head/tail control, the [tail.x, tail.y%3] addressing and the
// kernel-offset stream are the architecture's; the release rule, the row
// tags and the ascending offset order are choices of this implementation.
//
// Control rules:
//   * the head's window is complete when the newest known token (last one
//     written, or the one waiting at the input) lies after (head.y+1,
//     head.x+1) in raster order, or when the end token has arrived;
//   * an input token is held back while its row is below head.y+1, so the
//     three buffer rows always hold head.y-1 .. head.y+1;
//   * each buffer row carries a tag with the image row it holds and one
//     occupancy bit per pixel; a row is cleared when its slot takes a new row;
//   * after the end token leaves, all tags are invalidated for the next frame.
//
// Timing: a head with n non-zero neighbours (1..9) takes n output beats, plus
// one cycle to start the window; the end token takes one beat.
module slb
  import see_pkg::*;
#(
  parameter int unsigned C     = 64,
  parameter int unsigned W     = 80,
  parameter int unsigned DEPTH = 2 * W + 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  token_t                   in_tok,
  input  s8_t [C-1:0] in_feat,
  output logic                     out_valid,
  input  logic                     out_ready,
  output token_t                   out_tok,
  output koff_t                    out_koff,
  output s8_t [C-1:0] out_feat,
  output logic                     out_wlast
);
  localparam int unsigned PW = $clog2(DEPTH);
  localparam int unsigned MW = $clog2(3 * W);
  localparam int unsigned XI = (W > 1) ? $clog2(W) : 1;   // occupancy-bit index width

  // token FIFO
  token_t          tfifo [DEPTH];
  logic [PW-1:0]   rd_ptr, wr_ptr;
  logic [PW:0]     count;
  logic            eof_in;          // an end token sits in the FIFO

  // three-row feature buffer with row tags and occupancy bits
  logic [C*8-1:0]  fmem [3*W];
  logic [2:0][W-1:0] vbit;
  logic [2:0][YW-1:0] tag;
  logic [2:0]      tag_ok;

  // newest written position
  logic [YW-1:0]   last_y;
  logic [XW-1:0]   last_x;
  logic            last_ok;

  token_t          head;
  logic            head_present;
  assign head         = tfifo[rd_ptr];
  assign head_present = (count != '0);

  function automatic logic beyond(input logic [YW-1:0] py, input logic [XW-1:0] px,
                                  input logic [YW-1:0] hy, input logic [XW-1:0] hx);
    beyond = ({1'b0, py} > {1'b0, hy} + 1'b1) ||
             (({1'b0, py} == {1'b0, hy} + 1'b1) && ({1'b0, px} > {1'b0, hx} + 1'b1));
  endfunction

  // ---------------- tail side: accept and write ----------------
  logic in_fire;
  logic [1:0] in_slot;
  always_comb begin
    in_slot  = 2'(in_tok.y % 3);
    in_ready = (count < (PW+1)'(DEPTH)) && !eof_in &&
               (!head_present || in_tok.eof || ({1'b0, in_tok.y} <= {1'b0, head.y} + 1'b1));
  end
  assign in_fire = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (in_fire && !in_tok.eof) fmem[MW'(in_slot) * MW'(W) + MW'(in_tok.x)] <= in_feat;
  end

  // ---------------- head side: window release and neighbour scan ----------------
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_EOF} state_e;
  state_e state;
  logic [8:0] rem;
  logic       go;
  logic [8:0] mask;
  logic [1:0] hslot;

  always_comb begin
    go = eof_in ||
         (last_ok && beyond(last_y, last_x, head.y, head.x)) ||
         (in_valid && (in_tok.eof || beyond(in_tok.y, in_tok.x, head.y, head.x)));
    hslot = 2'(head.y % 3);
    mask  = '0;
    for (int k = 0; k < 9; k++) begin
      automatic int dy = k / 3;
      automatic int dx = k % 3;
      automatic logic [1:0] s = 2'((int'(hslot) + dy + 2) % 3);
      automatic logic [YW-1:0] ny = head.y + YW'(dy) - YW'(1);
      automatic logic [XW-1:0] nx = head.x + XW'(dx) - XW'(1);
      automatic logic in_win = !(dy == 0 && head.y == '0) && !(dx == 0 && head.x == '0) &&
                               !(dx == 2 && head.x == XW'(W - 1));
      mask[k] = in_win && tag_ok[s] && (tag[s] == ny) && vbit[s][nx[XI-1:0]];
    end
  end

  // current neighbour: lowest remaining offset
  logic [3:0] k_cur;
  logic [1:0] k_slot;
  logic [XW-1:0] k_x;
  always_comb begin
    k_cur = 4'd4;
    for (int k = 8; k >= 0; k--) if (rem[k]) k_cur = 4'(k);
    k_slot = 2'((int'(hslot) + int'(k_cur) / 3 + 2) % 3);
    k_x    = head.x + XW'(int'(k_cur) % 3) - XW'(1);
  end

  always_comb begin
    out_tok   = head;
    out_koff  = (state == S_EOF) ? 4'd4 : k_cur;
    out_feat  = (state == S_RUN) ? fmem[MW'(k_slot) * MW'(W) + MW'(k_x)] : '0;
    out_wlast = (state == S_EOF) || ((rem & (rem - 1'b1)) == '0);
    out_valid = (state != S_IDLE);
  end

  logic pop;
  assign pop = out_valid && out_ready && out_wlast;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr  <= '0;
      wr_ptr  <= '0;
      count   <= '0;
      eof_in  <= 1'b0;
      vbit    <= '0;
      tag     <= '0;
      tag_ok  <= '0;
      last_y  <= '0;
      last_x  <= '0;
      last_ok <= 1'b0;
      state   <= S_IDLE;
      rem     <= '0;
    end else begin
      // push
      if (in_fire) begin
        tfifo[wr_ptr] <= in_tok;
        wr_ptr <= (wr_ptr == PW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
        if (in_tok.eof) begin
          eof_in <= 1'b1;
        end else begin
          last_y  <= in_tok.y;
          last_x  <= in_tok.x;
          last_ok <= 1'b1;
          if (tag_ok[in_slot] && tag[in_slot] == in_tok.y) begin
            vbit[in_slot][in_tok.x[XI-1:0]] <= 1'b1;
          end else begin
            tag[in_slot]    <= in_tok.y;
            tag_ok[in_slot] <= 1'b1;
            vbit[in_slot]   <= W'(1) << in_tok.x;
          end
        end
      end
      // pop
      if (pop) rd_ptr <= (rd_ptr == PW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (PW+1)'(in_fire) - (PW+1)'(pop);

      unique case (state)
        S_IDLE: if (head_present && go) begin
          if (head.eof) state <= S_EOF;
          else begin
            state <= S_RUN;
            rem   <= mask;
          end
        end
        S_RUN: if (out_valid && out_ready) begin
          rem <= rem & (rem - 1'b1);
          if (out_wlast) state <= S_IDLE;
        end
        S_EOF: if (out_ready) begin
          state   <= S_IDLE;
          eof_in  <= 1'b0;
          tag_ok  <= '0;
          last_ok <= 1'b0;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
