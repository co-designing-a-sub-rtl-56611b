// tokenizer: builds the token-feature stream from a bitmap and packed features.
//
// The host sends each frame as two streams: a bitmap, one W-bit row per beat
// from row 0 to row H-1 (bit x set = pixel x of that row is non-zero), and the
// feature vectors of the non-zero pixels only, in raster order. The tokenizer
// scans each row's set bits from low x to high x with a priority encoder and
// pairs each with the next feature vector, emitting one beat {y, x, eof=0} +
// feature per non-zero pixel. After the last row it emits the end beat.
// Those two inputs are what the architecture specifies; the row-per-beat
// bitmap format is a choice of this implementation.
//
// Timing: one cycle to take a row, then one pixel per cycle while features and
// the consumer keep up, plus one cycle to retire each row; the end beat after
// row H-1. Frame cost = tokens + 2*H + 1 cycles at best.
module tokenizer
  import see_pkg::*;
#(
  parameter int unsigned C = 4,    // input feature channels
  parameter int unsigned W = 80,   // frame width
  parameter int unsigned H = 60    // frame height
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // bitmap rows
  input  logic                   bm_valid,
  output logic                   bm_ready,
  input  logic [W-1:0]           bm_row,
  // packed features of the non-zero pixels
  input  logic                   ft_valid,
  output logic                   ft_ready,
  input  s8_t [C-1:0] ft_data,
  // token-feature stream
  output logic                   out_valid,
  input  logic                   out_ready,
  output token_t                 out_tok,
  output s8_t [C-1:0] out_feat
);
  logic [W-1:0]  rowbits;
  logic          have_row;
  logic          send_eof;
  logic [YW-1:0] y;
  logic [XW-1:0] x_first;
  logic          any_bit;

  // lowest set bit of the current row
  always_comb begin
    x_first = '0;
    any_bit = 1'b0;
    for (int i = W - 1; i >= 0; i--) begin
      if (rowbits[i]) begin
        x_first = XW'(i);
        any_bit = 1'b1;
      end
    end
  end

  assign bm_ready = !have_row && !send_eof;

  always_comb begin
    out_tok  = '{y: y, x: x_first, eof: send_eof};
    out_feat = ft_data;
    if (send_eof) begin
      out_valid = 1'b1;
      out_feat  = '0;
    end else begin
      out_valid = have_row && any_bit && ft_valid;
    end
    ft_ready = !send_eof && have_row && any_bit && out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rowbits  <= '0;
      have_row <= 1'b0;
      send_eof <= 1'b0;
      y        <= '0;
    end else if (send_eof) begin
      if (out_ready) begin
        send_eof <= 1'b0;
        y        <= '0;
      end
    end else if (!have_row) begin
      if (bm_valid) begin
        rowbits  <= bm_row;
        have_row <= 1'b1;
      end
    end else if (!any_bit) begin
      // row done
      have_row <= 1'b0;
      if (y == YW'(H - 1)) send_eof <= 1'b1;
      else                 y        <= y + 1'b1;
    end else if (out_valid && out_ready) begin
      rowbits <= rowbits & (rowbits - 1'b1);   // clear the lowest set bit
    end
  end
endmodule
