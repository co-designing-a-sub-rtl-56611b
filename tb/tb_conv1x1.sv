// tb_conv1x1: checks the pointwise convolution engine.
//
// Loads random weights, scale and shift through the configuration port,
// then streams random pixels (with an end beat) and compares every output
// with the reference convolution + requantization. A back-to-back burst with
// an always-ready consumer must sustain one pixel per 1 + COUT*CIN/PI
// cycles; a second burst adds random input gaps and output stalls.
module tb_conv1x1;
  import see_pkg::*;
  import see_ref_pkg::*;
  localparam int CIN = 8, COUT = 4, PI = 4, N = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, cfg_we;
  token_t in_tok, out_tok;
  s8_t [CIN-1:0] in_feat;
  s8_t [COUT-1:0] out_feat;
  logic [15:0] cfg_addr;
  logic [7:0] cfg_data;

  conv1x1 #(.CIN(CIN), .COUT(COUT), .PI(PI), .RELU(1'b1)) dut (.*);

  int checks = 0, failures = 0;
  int w[], scale, shift;
  int fin [N][CIN];
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

  task automatic cfg(int a, int d);
    @(negedge clk); cfg_we = 1; cfg_addr = 16'(a); cfg_data = 8'(d);
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic send(token_t t, s8_t [CIN-1:0] f);
    @(negedge clk);
    while (stall > 0 && $urandom_range(0, 2) == 0) @(negedge clk);
    in_valid = 1; in_tok = t; in_feat = f; #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    in_valid = 0;
  endtask

  task automatic drive();
    for (int n = 0; n < N; n++) begin
      s8_t [CIN-1:0] f;
      for (int i = 0; i < CIN; i++) f[i] = 8'(fin[n][i]);
      send('{y: 8'(n / 8), x: 8'(n % 8), eof: 1'b0}, f);
    end
    send('{y: 8'd0, x: 8'd0, eof: 1'b1}, '0);
  endtask

  task automatic monitor(output int first, output int last);
    int n = 0, cyc = 0;
    first = -1;
    forever begin
      @(negedge clk);
      out_ready = (stall > 0) ? 1'($urandom_range(0, 2) != 0) : 1'b1;
      #1; cyc++;
      if (in_valid && in_ready && first < 0) first = cyc;
      if (out_valid && out_ready) begin
        if (out_tok.eof) begin
          check(n == N, "end beat after all pixels");
          break;
        end
        last = cyc;
        check(int'(out_tok.x) == n % 8 && int'(out_tok.y) == n / 8, $sformatf("token %0d", n));
        for (int o = 0; o < COUT; o++) begin
          longint acc = 0;
          for (int i = 0; i < CIN; i++) acc += longint'(w[o * CIN + i]) * fin[n][i];
          check(int'(out_feat[o]) == rq(acc, scale, shift, 1'b1),
                $sformatf("pixel %0d out %0d: got %0d exp %0d", n, o, out_feat[o], rq(acc, scale, shift, 1'b1)));
        end
        n++;
      end
    end
  endtask

  initial begin
    int first, last;
    in_valid = 0; out_ready = 0; cfg_we = 0; cfg_addr = 0; cfg_data = 0; in_tok = '0; in_feat = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int rnd = 0; rnd < 2; rnd++) begin
      stall = rnd;
      w = new[CIN * COUT];
      foreach (w[k]) begin w[k] = $urandom_range(0, 63) - 32; cfg(k, w[k]); end
      scale = $urandom_range(64, 255); shift = $urandom_range(8, 12);
      cfg(CIN * COUT + 0, scale & 255); cfg(CIN * COUT + 1, scale >> 8); cfg(CIN * COUT + 2, shift);
      for (int n = 0; n < N; n++) for (int i = 0; i < CIN; i++) fin[n][i] = $urandom_range(0, 255) - 128;
      fork drive(); monitor(first, last); join
      if (rnd == 0)
        check(last - first == N * (1 + COUT * CIN / PI),
              $sformatf("burst of %0d pixels took %0d cycles", N, last - first));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
