// global_pool: global pooling of a sparse frame into one embedding vector.
//
// Each token-feature beat adds its C int8 features into C 32-bit channel
// sums and increments a pixel counter; zero pixels never arrive, so they add
// nothing, exactly as in a dense sum. The end beat latches the sums and the
// count into the output register as the frame's embedding and clears the
// accumulators. The host, which runs the floating-point recurrent layer,
// divides by the frame area to obtain the average. Global pooling at the end
// of the backbone is the architecture's; leaving the division to the host is
// a choice of this implementation.
//
// Timing: one beat per cycle; the embedding is valid the cycle after the
// end beat and is held until emb_ready.
module global_pool
  import see_pkg::*;
#(
  parameter int unsigned C = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  token_t                    in_tok,
  input  s8_t [C-1:0]  in_feat,
  output logic                      emb_valid,
  input  logic                      emb_ready,
  output s32_t [C-1:0] emb_sum,
  output logic [15:0]               emb_count
);
  s32_t [C-1:0] acc;
  logic [15:0]               cnt;
  logic                      in_fire;

  assign in_ready = !emb_valid || emb_ready || !in_tok.eof;
  assign in_fire  = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      cnt       <= '0;
      emb_valid <= 1'b0;
      emb_sum   <= '0;
      emb_count <= '0;
    end else begin
      if (emb_valid && emb_ready) emb_valid <= 1'b0;
      if (in_fire) begin
        if (in_tok.eof) begin
          emb_valid <= 1'b1;
          emb_sum   <= acc;
          emb_count <= cnt;
          acc       <= '0;
          cnt       <= '0;
        end else begin
          for (int c = 0; c < C; c++) acc[c] <= acc[c] + 32'(in_feat[c]);
          cnt <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
