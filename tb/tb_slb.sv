// tb_slb: checks the sparse line buffer's window streams.
//
// Random sparse frames (one dense, one very sparse, one empty, one with
// skipped rows) are streamed in raster order with an end beat. For every
// input pixel, in order, the buffer must emit exactly its non-zero 3x3
// neighbours in ascending kernel offset with their features, the last beat
// flagged, and after all pixels a single end beat. Input gaps and output
// stalls are random in later frames. The test also confirms that the input
// hold (a token two rows ahead of the head) occurs, and that with no stalls
// once output has started each window costs its neighbour count plus one
// cycle, with at most three more cycles per row while the tail refills the
// row below the head.
module tb_slb;
  import see_pkg::*;
  import see_ref_pkg::*;
  localparam int C = 2, W = 8, H = 7;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, out_wlast;
  token_t in_tok, out_tok;
  koff_t out_koff;
  s8_t [C-1:0] in_feat, out_feat;

  slb #(.C(C), .W(W)) dut (.*);

  int checks = 0, failures = 0, holds = 0;
  bit nz[];
  int fin[];
  int stall;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && in_valid && !in_ready && !in_tok.eof &&
                            int'(in_tok.y) > int'(dut.head.y) + 1) holds++;

  task automatic send(token_t t, s8_t [C-1:0] f);
    @(negedge clk);
    while (stall > 0 && $urandom_range(0, 3) == 0) @(negedge clk);
    in_valid = 1; in_tok = t; in_feat = f; #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    in_valid = 0;
  endtask

  task automatic drive();
    for (int p = 0; p < H * W; p++) if (nz[p]) begin
      s8_t [C-1:0] f;
      for (int c = 0; c < C; c++) f[c] = 8'(fin[p * C + c]);
      send('{y: 8'(p / W), x: 8'(p % W), eof: 1'b0}, f);
    end
    send('{y: 8'd0, x: 8'd0, eof: 1'b1}, '0);
  endtask

  task automatic monitor(output int cycles);
    int p = 0, k = 0;
    cycles = 0;
    while (p < H * W && !nz[p]) p++;
    forever begin
      @(negedge clk);
      out_ready = (stall > 0) ? 1'($urandom_range(0, 2) != 0) : 1'b1;
      #1;
      if (cycles > 0 || out_valid) cycles++;   // counted from the first output beat
      if (out_valid && out_ready) begin
        if (p >= H * W) begin
          check(out_tok.eof && out_wlast, "end beat");
          break;
        end else begin
          int y = p / W, x = p % W, ny, nx, q;
          bit last;
          // next expected offset
          while (k < 9) begin
            ny = y + k / 3 - 1; nx = x + k % 3 - 1;
            if (ny >= 0 && ny < H && nx >= 0 && nx < W && nz[ny * W + nx]) break;
            k++;
          end
          q = (ny * W + nx) * C;
          last = 1;
          for (int j = k + 1; j < 9; j++) begin
            int my = y + j / 3 - 1, mx = x + j % 3 - 1;
            if (my >= 0 && my < H && mx >= 0 && mx < W && nz[my * W + mx]) last = 0;
          end
          check(!out_tok.eof && int'(out_tok.x) == x && int'(out_tok.y) == y && int'(out_koff) == k &&
                int'(out_feat[0]) == fin[q] && int'(out_feat[C-1]) == fin[q + C - 1] && out_wlast == last,
                $sformatf("pixel (%0d,%0d) offset got %0d exp %0d last %0d", x, y, out_koff, k, last));
          k++;
          if (out_wlast) begin
            k = 0; p++;
            while (p < H * W && !nz[p]) p++;
          end
        end
      end
    end
  endtask

  initial begin
    int cyc, beats, toks;
    in_valid = 0; out_ready = 0; in_tok = '0; in_feat = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 5; f++) begin
      stall = int'(f >= 3);
      nz = new[H * W]; fin = new[H * W * C];
      foreach (nz[p]) begin
        automatic int r = $urandom_range(0, 99);
        case (f)
          0: nz[p] = r < 70;
          1: nz[p] = r < 10;
          2: nz[p] = 0;
          3: nz[p] = (p / W == 1 || p / W == 5) && r < 60;   // rows skipped in between
          default: nz[p] = r < 40;
        endcase
      end
      foreach (fin[i]) fin[i] = $urandom_range(0, 255) - 128;
      beats = 0; toks = 0;
      for (int p = 0; p < H * W; p++) if (nz[p]) begin
        beats += neighbours(H, W, nz, p / W, p % W); toks++;
      end
      fork drive(); monitor(cyc); join
      if (f == 0)
        check(cyc <= beats + toks + 3 * H + 2, $sformatf("frame took %0d cycles for %0d beats", cyc, beats));
    end
    check(holds > 0, "input hold never happened");
    $display("input holds: %0d", holds);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
