// tb_sparse_conv_block: checks one residual inverted-bottleneck block.
//
// Loads random weights and scales into the expansion, depthwise and
// projection layers, streams random sparse frames through the block and
// compares every output pixel with the reference block (expand + ReLU,
// submanifold depthwise 3x3 + ReLU, project, saturating residual add).
// Output stalls are random in later frames. The test also counts residual
// sums that saturate and input holds in the line buffer.
module tb_sparse_conv_block;
  import see_pkg::*;
  import see_ref_pkg::*;
  localparam int CIN = 4, COUT = 4, EXP = 2, W = 8, H = 6, PI = 2, CH = CIN * EXP;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, cfg_we;
  token_t in_tok, out_tok;
  s8_t [CIN-1:0] in_feat;
  s8_t [COUT-1:0] out_feat;
  logic [1:0] cfg_sel;
  logic [15:0] cfg_addr;
  logic [7:0] cfg_data;

  sparse_conv_block #(.CIN(CIN), .COUT(COUT), .EXP(EXP), .W(W), .PI(PI), .RESIDUAL(1'b1)) dut (.*);

  int checks = 0, failures = 0, stall, sat = 0, holds = 0;
  bit nz[];
  int fin[], fout[];
  int we[], wd[], wp[], sc[3], sh[3];

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

  task automatic cfg(int s, int a, int d);
    @(negedge clk); cfg_we = 1; cfg_sel = 2'(s); cfg_addr = 16'(a); cfg_data = 8'(d);
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic load();
    we = new[CIN * CH]; wd = new[CH * 9]; wp = new[CH * COUT];
    foreach (we[k]) begin we[k] = $urandom_range(0, 63) - 32; cfg(0, k, we[k]); end
    foreach (wd[k]) begin wd[k] = $urandom_range(0, 63) - 32; cfg(1, k, wd[k]); end
    foreach (wp[k]) begin wp[k] = $urandom_range(0, 63) - 32; cfg(2, k, wp[k]); end
    for (int l = 0; l < 3; l++) begin
      int nw = (l == 0) ? CIN * CH : (l == 1) ? CH * 9 : CH * COUT;
      sc[l] = $urandom_range(40, 120); sh[l] = 10;
      cfg(l, nw, sc[l] & 255); cfg(l, nw + 1, sc[l] >> 8); cfg(l, nw + 2, sh[l]);
    end
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
    out_ready = 0; in_valid = 0; cfg_we = 0; cfg_sel = 0; cfg_addr = 0; cfg_data = 0; in_tok = '0; in_feat = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 4; f++) begin
      stall = int'(f >= 2);
      if (f != 1) load();
      nz = new[H * W]; fin = new[H * W * CIN];
      foreach (nz[p]) nz[p] = ($urandom_range(0, 99) < ((f == 1) ? 15 : 45));
      foreach (fin[i]) fin[i] = $urandom_range(0, 255) - 128;
      block(H, W, CIN, COUT, EXP, 1'b1, nz, fin, we, wd, wp, sc, sh, fout);
      fork drive(); monitor(); join
    end
    check(holds > 0, "line buffer never held its input");
    $display("saturated outputs: %0d, line-buffer holds: %0d", sat, holds);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
