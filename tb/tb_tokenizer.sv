// tb_tokenizer: checks the bitmap/feature to token-stream conversion.
//
// Random bitmaps (including an empty frame and a full row) are sent row by
// row with their packed features. The output must list exactly the set bits
// in raster order with the matching feature, then one end beat. The first
// frame runs with all streams always ready and must take tokens + 2*H + 1
// cycles; later frames add random stalls on all three streams.
module tb_tokenizer;
  import see_pkg::*;
  localparam int C = 3, W = 16, H = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic bm_valid, bm_ready, ft_valid, ft_ready, out_valid, out_ready;
  logic [W-1:0] bm_row;
  s8_t [C-1:0] ft_data, out_feat;
  token_t out_tok;

  tokenizer #(.C(C), .W(W), .H(H)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] bm [H];
  s8_t [C-1:0] feats [$];
  int exp_x [$], exp_y [$];
  int stall;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // bitmap driver
  task automatic drive_bitmap();
    for (int y = 0; y < H; y++) begin
      @(negedge clk);
      while (stall > 0 && $urandom_range(0, 3) == 0) @(negedge clk);
      bm_valid = 1; bm_row = bm[y];
      #1;
      while (!bm_ready) begin @(negedge clk); #1; end
      @(posedge clk); #1;
      bm_valid = 0;
    end
  endtask

  task automatic drive_feats();
    for (int i = 0; i < feats.size(); i++) begin
      @(negedge clk);
      while (stall > 0 && $urandom_range(0, 3) == 0) @(negedge clk);
      ft_valid = 1; ft_data = feats[i];
      #1;
      while (!ft_ready) begin @(negedge clk); #1; end
      @(posedge clk); #1;
      ft_valid = 0;
    end
  endtask

  task automatic monitor(output int cycles);
    int n = 0;
    cycles = 0;
    forever begin
      @(negedge clk);
      out_ready = (stall > 0) ? 1'($urandom_range(0, 2) != 0) : 1'b1;
      #1;
      cycles++;
      if (out_valid && out_ready) begin
        if (out_tok.eof) begin
          check(n == exp_x.size(), $sformatf("token count %0d vs %0d", n, exp_x.size()));
          break;
        end
        check(n < exp_x.size() && int'(out_tok.x) == exp_x[n] && int'(out_tok.y) == exp_y[n] &&
              out_feat == feats[n], $sformatf("token %0d at (%0d,%0d)", n, out_tok.x, out_tok.y));
        n++;
      end
    end
  endtask

  initial begin
    int cyc;
    bm_valid = 0; ft_valid = 0; out_ready = 0; bm_row = '0; ft_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 4; f++) begin
      stall = int'(f >= 2);
      feats.delete(); exp_x.delete(); exp_y.delete();
      for (int y = 0; y < H; y++) begin
        for (int x = 0; x < W; x++) bm[y][x] = (f == 1) ? 1'b0 : ($urandom_range(0, 3) == 0);
        if (f == 0 && y == 3) bm[y] = '1;
        for (int x = 0; x < W; x++) if (bm[y][x]) begin
          s8_t [C-1:0] v;
          for (int c = 0; c < C; c++) v[c] = 8'($urandom);
          feats.push_back(v); exp_x.push_back(x); exp_y.push_back(y);
        end
      end
      fork
        drive_bitmap();
        drive_feats();
        monitor(cyc);
      join
      if (f < 2)
        check(cyc <= exp_x.size() + 2 * H + 2,
              $sformatf("frame %0d took %0d cycles for %0d tokens", f, cyc, exp_x.size()));
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
