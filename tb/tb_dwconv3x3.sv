// tb_dwconv3x3: checks the depthwise 3x3 engine on window beat streams.
//
// Random weights, scale and shift are loaded. Each test window is a random
// non-empty subset of the nine kernel offsets, sent one beat per offset with
// a random feature, the last beat flagged. Every output must equal the
// requantized sum of w[c][k]*f[c] over the window's beats. End beats must
// pass through. Without stalls the engine must take one beat per cycle.
module tb_dwconv3x3;
  import see_pkg::*;
  import see_ref_pkg::*;
  localparam int C = 4, N = 60;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, in_wlast, out_valid, out_ready, cfg_we;
  token_t in_tok, out_tok;
  koff_t in_koff;
  s8_t [C-1:0] in_feat, out_feat;
  logic [15:0] cfg_addr;
  logic [7:0] cfg_data;

  dwconv3x3 #(.C(C), .RELU(1'b0)) dut (.*);

  int checks = 0, failures = 0;
  int w[C * 9], scale, shift, stall;
  int expv [$][C];
  int total_beats;

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

  task automatic beat(token_t t, int k, s8_t [C-1:0] f, bit last);
    @(negedge clk);
    while (stall > 0 && $urandom_range(0, 3) == 0) @(negedge clk);
    in_valid = 1; in_tok = t; in_koff = 4'(k); in_feat = f; in_wlast = last; #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    in_valid = 0;
  endtask

  task automatic drive();
    for (int n = 0; n < N; n++) begin
      int mask = $urandom_range(1, 511);
      int lastk = 0;
      longint acc [C];
      int e [C];
      for (int k = 0; k < 9; k++) if (mask[k]) lastk = k;
      foreach (acc[c]) acc[c] = 0;
      for (int k = 0; k < 9; k++) if (mask[k]) begin
        s8_t [C-1:0] f;
        for (int c = 0; c < C; c++) begin
          f[c] = 8'($urandom);
          acc[c] += longint'(w[c * 9 + k]) * int'(f[c]);
        end
        total_beats++;
        beat('{y: 8'(n), x: 8'(n), eof: 1'b0}, k, f, k == lastk);
      end
      foreach (e[c]) e[c] = rq(acc[c], scale, shift, 1'b0);
      expv.push_back(e);
    end
    beat('{y: 8'd0, x: 8'd0, eof: 1'b1}, 4, '0, 1'b1);
  endtask

  task automatic monitor(output int cycles);
    int n = 0;
    cycles = 0;
    forever begin
      @(negedge clk);
      out_ready = (stall > 0) ? 1'($urandom_range(0, 2) != 0) : 1'b1;
      #1;
      if (cycles > 0 || (in_valid && in_ready)) cycles++;
      if (out_valid && out_ready) begin
        if (out_tok.eof) begin
          check(n == N, "end beat after all windows");
          break;
        end
        while (expv.size() == 0) #1;
        for (int c = 0; c < C; c++)
          check(int'(out_feat[c]) == expv[0][c] && int'(out_tok.x) == n,
                $sformatf("window %0d ch %0d got %0d exp %0d", n, c, out_feat[c], expv[0][c]));
        void'(expv.pop_front());
        n++;
      end
    end
  endtask

  initial begin
    int cyc;
    in_valid = 0; out_ready = 0; cfg_we = 0; cfg_addr = 0; cfg_data = 0;
    in_tok = '0; in_koff = '0; in_feat = '0; in_wlast = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 2; r++) begin
      stall = r; total_beats = 0;
      foreach (w[k]) begin w[k] = $urandom_range(0, 255) - 128; cfg(k, w[k]); end
      scale = $urandom_range(1, 65535); shift = $urandom_range(10, 20);
      cfg(C * 9, scale & 255); cfg(C * 9 + 1, scale >> 8); cfg(C * 9 + 2, shift);
      fork drive(); monitor(cyc); join
      if (r == 0) check(cyc <= total_beats + 3, $sformatf("%0d beats took %0d cycles", total_beats, cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
