// tb_sparse_stem: checks the stem layer (line buffer + full 3x3 convolution).
//
// Loads random weights and a scale, streams random sparse frames through the
// stem and compares every output pixel with the reference submanifold 3x3
// convolution (all input channels to all output channels, ReLU). Output
// stalls are random in later frames; an empty frame is included. The test
// also counts input stalls of the line buffer.
module tb_sparse_stem;
  import see_pkg::*;
  import see_ref_pkg::*;
  localparam int CIN = 4, COUT = 3, W = 8, H = 6, PI = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, cfg_we;
  token_t in_tok, out_tok;
  s8_t [CIN-1:0] in_feat;
  s8_t [COUT-1:0] out_feat;
  logic [15:0] cfg_addr;
  logic [7:0] cfg_data;

  sparse_stem #(.CIN(CIN), .COUT(COUT), .W(W), .PI(PI)) dut (.*);

  int checks = 0, failures = 0, stall, sat = 0, holds = 0;
  bit nz[];
  int fin[], fout[];
  int w[], sc, sh;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && dut.u_slb.in_valid && !dut.u_slb.in_ready) holds++;

  task automatic cfg(int a, int d);
    @(negedge clk); cfg_we = 1; cfg_addr = 16'(a); cfg_data = 8'(d);
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic load();
    w = new[9 * COUT * CIN];
    foreach (w[k]) begin w[k] = $urandom_range(0, 63) - 32; cfg(k, w[k]); end
    sc = $urandom_range(40, 120); sh = 12;
    cfg(9 * COUT * CIN, sc & 255); cfg(9 * COUT * CIN + 1, sc >> 8); cfg(9 * COUT * CIN + 2, sh);
  endtask

  task automatic send(token_t t, s8_t [CIN-1:0] f);
    @(negedge clk);
    in_valid = 1; in_tok = t; in_feat = f; #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1;
    in_valid = 0;
  endtask

  task automatic drive();
    for (int p = 0; p < H * W; p++) if (nz[p]) begin
      s8_t [CIN-1:0] f;
      for (int c = 0; c < CIN; c++) f[c] = 8'(fin[p * CIN + c]);
      send('{y: 8'(p / W), x: 8'(p % W), eof: 1'b0}, f);
    end
    send('{y: 8'd0, x: 8'd0, eof: 1'b1}, '0);
  endtask

  task automatic monitor();
    int p = 0;
    while (p < H * W && !nz[p]) p++;
    forever begin
      @(negedge clk);
      out_ready = (stall > 0) ? 1'($urandom_range(0, 2) != 0) : 1'b1;
      #1;
      if (out_valid && out_ready) begin
        if (out_tok.eof) begin
          check(p == H * W, "end beat after all pixels");
          break;
        end
        check(p < H * W && int'(out_tok.y) == p / W && int'(out_tok.x) == p % W, $sformatf("token order at %0d", p));
        for (int c = 0; c < COUT; c++) begin
          int e = (p < H * W) ? fout[p * COUT + c] : 0;
          check(int'(out_feat[c]) == e, $sformatf("pixel %0d ch %0d got %0d exp %0d", p, c, out_feat[c], e));
          if (e == 127 || e == -128) sat++;
        end
        p++;
        while (p < H * W && !nz[p]) p++;
      end
    end
  endtask

  initial begin
    out_ready = 0; in_valid = 0; cfg_we = 0; cfg_addr = 0; cfg_data = 0; in_tok = '0; in_feat = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 5; f++) begin
      stall = int'(f >= 2);
      if (f != 1) load();
      nz = new[H * W]; fin = new[H * W * CIN];
      foreach (nz[p]) nz[p] = ($urandom_range(0, 99) < ((f == 1) ? 15 : (f == 3) ? 0 : 45));
      foreach (fin[i]) fin[i] = $urandom_range(0, 255) - 128;
      conv3x3(H, W, CIN, COUT, nz, fin, w, sc, sh, 1'b1, fout);
      fork drive(); monitor(); join
    end
    check(holds > 0, "line buffer never stalled its input");
    $display("saturated outputs: %0d, line-buffer input stalls: %0d", sat, holds);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
