// tb_global_pool: checks per-frame channel sums and pixel counts.
//
// Several frames of random features (one of them empty) are streamed, each
// closed by an end beat. The embedding of each frame must hold the exact
// channel sums and the number of pixels, and must stay valid while the
// consumer stalls.
module tb_global_pool;
  import see_pkg::*;
  localparam int C = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, emb_valid, emb_ready;
  token_t in_tok;
  s8_t [C-1:0] in_feat;
  s32_t [C-1:0] emb_sum;
  logic [15:0] emb_count;

  global_pool #(.C(C)) dut (.*);

  int checks = 0, failures = 0;
  int sums [$][C];
  int counts [$];
  localparam int F = 5;

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

  task automatic send(token_t t, s8_t [C-1:0] f);
    @(negedge clk);
    in_valid = 1; in_tok = t; in_feat = f; #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    in_valid = 0;
  endtask

  task automatic drive();
    for (int fr = 0; fr < F; fr++) begin
      int n = (fr == 2) ? 0 : $urandom_range(1, 300);
      int s [C];
      foreach (s[c]) s[c] = 0;
      for (int i = 0; i < n; i++) begin
        s8_t [C-1:0] f;
        for (int c = 0; c < C; c++) begin f[c] = 8'($urandom); s[c] += int'(f[c]); end
        send('{y: 8'(i / 16), x: 8'(i % 16), eof: 1'b0}, f);
      end
      sums.push_back(s); counts.push_back(n);
      send('{y: 8'd0, x: 8'd0, eof: 1'b1}, '0);
    end
  endtask

  task automatic monitor();
    for (int fr = 0; fr < F; fr++) begin
      do begin
        @(negedge clk);
        emb_ready = 1'($urandom_range(0, 3) == 0);
        #1;
      end while (!(emb_valid && emb_ready));
      for (int c = 0; c < C; c++)
        check(emb_sum[c] == sums[fr][c], $sformatf("frame %0d ch %0d sum %0d exp %0d", fr, c, emb_sum[c], sums[fr][c]));
      check(int'(emb_count) == counts[fr], $sformatf("frame %0d count", fr));
    end
  endtask

  initial begin
    in_valid = 0; emb_ready = 0; in_tok = '0; in_feat = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork drive(); monitor(); join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
