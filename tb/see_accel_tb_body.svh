// Body shared by the end-to-end testbenches of see_accel. The including
// module defines the localparams W, H, C_IN, C1, C2, EXP, NUM_MID, PI, NF
// (frames to run) and DENS[] (percentage of non-zero pixels per frame), and
// instantiates the accelerator as "dut" on the signals declared here.
//
// Flow: reset, load random weights and scales for every layer over the
// configuration bus, then for each frame drive the bitmap and packed
// features, collect the embedding and compare it with the reference model
// (stem, bottleneck blocks chained, then per-channel sums). Mechanisms that must occur at
// least once: line-buffer input hold, windows with missing neighbours,
// residual additions, back-pressure into the tokenizer, embedding stalls and
// an empty frame.

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic bm_valid, bm_ready, ft_valid, ft_ready, cfg_we, emb_valid, emb_ready;
  logic [W-1:0] bm_row;
  s8_t [C_IN-1:0] ft_data;
  logic [7:0] cfg_layer, cfg_data;
  logic [15:0] cfg_addr;
  s32_t [C2-1:0] emb_sum;
  logic [15:0] emb_count;

  localparam int NB = NUM_MID + 1;   // bottleneck blocks after the stem

  int checks = 0, failures = 0;
  int cin_b [NB], cout_b [NB];
  int wts [NB][3][];
  int sc [NB][3], sh [NB][3];
  int ws[], sc_s, sh_s;
  bit nz[];
  int fin[];
  longint frame_cycles;

  // mechanism counters
  int n_hold = 0, n_partial_win = 0, n_residual = 0, n_tok_bp = 0, n_emb_stall = 0, n_empty = 0;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  always @(negedge clk) if (rst_n) begin
    if (dut.u_stem.u_slb.in_valid && !dut.u_stem.u_slb.in_ready &&
        !dut.u_stem.u_slb.in_tok.eof &&
        int'(dut.u_stem.u_slb.in_tok.y) > int'(dut.u_stem.u_slb.head.y) + 1) n_hold++;
    if (dut.u_stem.u_slb.state == 1 && dut.u_stem.u_slb.out_ready &&
        dut.u_stem.u_slb.out_wlast && dut.u_stem.u_slb.out_koff != 4'd8) n_partial_win++;
    if (dut.g_mid[0].u_blk.out_valid && dut.g_mid[0].u_blk.out_ready && !dut.g_mid[0].u_blk.out_tok.eof) n_residual++;
    if (dut.tk_valid && !dut.tk_ready) n_tok_bp++;
    if (emb_valid && !emb_ready) n_emb_stall++;
  end

  task automatic cfg(int layer, int a, int d);
    @(negedge clk); cfg_we = 1; cfg_layer = 8'(layer); cfg_addr = 16'(a); cfg_data = 8'(d);
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic load_all();
    ws = new[9 * C1 * C_IN];
    foreach (ws[k]) begin ws[k] = $urandom_range(0, 31) - 16; cfg(0, k, ws[k]); end
    sh_s = 12; sc_s = 4096 * 4 / (9 * C_IN);
    cfg(0, 9 * C1 * C_IN, sc_s & 255); cfg(0, 9 * C1 * C_IN + 1, sc_s >> 8); cfg(0, 9 * C1 * C_IN + 2, sh_s);
    for (int b = 0; b < NB; b++) begin
      int ch = cin_b[b] * EXP;
      int nw [3];
      nw[0] = cin_b[b] * ch; nw[1] = ch * 9; nw[2] = ch * cout_b[b];
      for (int l = 0; l < 3; l++) begin
        wts[b][l] = new[nw[l]];
        foreach (wts[b][l][k]) begin
          wts[b][l][k] = $urandom_range(0, 31) - 16;
          cfg(1 + 3 * b + l, k, wts[b][l][k]);
        end
        // scale/2^shift chosen near 1/(typical |acc| / 40)
        sh[b][l] = 12;
        sc[b][l] = (l == 1) ? $urandom_range(120, 200) : 4096 * 4 / (cin_b[b] * ((l == 2) ? EXP : 1) + 8);
        cfg(1 + 3 * b + l, nw[l], sc[b][l] & 255);
        cfg(1 + 3 * b + l, nw[l] + 1, sc[b][l] >> 8);
        cfg(1 + 3 * b + l, nw[l] + 2, sh[b][l]);
      end
    end
  endtask

  task automatic drive_bitmap();
    for (int y = 0; y < H; y++) begin
      @(negedge clk);
      bm_valid = 1;
      for (int x = 0; x < W; x++) bm_row[x] = nz[y * W + x];
      #1;
      while (!bm_ready) begin @(negedge clk); #1; end
      @(posedge clk); #1;
      bm_valid = 0;
    end
  endtask

  task automatic drive_feats();
    for (int p = 0; p < H * W; p++) if (nz[p]) begin
      @(negedge clk);
      ft_valid = 1;
      for (int c = 0; c < C_IN; c++) ft_data[c] = 8'(fin[p * C_IN + c]);
      #1;
      while (!ft_ready) begin @(negedge clk); #1; end
      @(posedge clk); #1;
      ft_valid = 0;
    end
  endtask

  task automatic run_frame(int dens, bit stall_emb);
    int f[], g[], cnt = 0;
    longint exp_sum [C2];
    nz = new[H * W]; fin = new[H * W * C_IN];
    foreach (nz[p]) nz[p] = ($urandom_range(0, 99) < dens);
    foreach (fin[i]) fin[i] = $urandom_range(0, 255) - 128;
    foreach (nz[p]) cnt += nz[p];
    if (cnt == 0) n_empty++;
    // reference
    conv3x3(H, W, C_IN, C1, nz, fin, ws, sc_s, sh_s, 1'b1, f);
    for (int b = 0; b < NB; b++) begin
      block(H, W, cin_b[b], cout_b[b], EXP, (b != NB - 1), nz, f,
            wts[b][0], wts[b][1], wts[b][2], sc[b], sh[b], g);
      f = g;
    end
    foreach (exp_sum[c]) exp_sum[c] = 0;
    for (int p = 0; p < H * W; p++) if (nz[p]) for (int c = 0; c < C2; c++) exp_sum[c] += longint'(f[p * C2 + c]);
    // run
    frame_cycles = 0;
    fork
      drive_bitmap();
      drive_feats();
      begin
        do begin
          @(negedge clk);
          emb_ready = stall_emb ? 1'($urandom_range(0, 3) == 0) : 1'b1;
          #1;
          frame_cycles++;
        end while (!(emb_valid && emb_ready));
      end
    join
    check(int'(emb_count) == cnt, $sformatf("pixel count %0d exp %0d", emb_count, cnt));
    for (int c = 0; c < C2; c++)
      check(longint'(emb_sum[c]) == exp_sum[c], $sformatf("channel %0d sum %0d exp %0d", c, emb_sum[c], exp_sum[c]));
    $display("frame: %0d non-zero pixels of %0d, %0d cycles, embedding[0..1] = %0d %0d", cnt, H * W, frame_cycles, emb_sum[0], emb_sum[1]);
    @(negedge clk); emb_ready = 0;
  endtask

  initial begin
    bm_valid = 0; ft_valid = 0; cfg_we = 0; emb_ready = 0; bm_row = '0; ft_data = '0;
    cfg_layer = 0; cfg_addr = 0; cfg_data = 0;
    for (int b = 0; b < NB; b++) begin
      cin_b[b]  = C1;
      cout_b[b] = (b == NB - 1) ? C2 : C1;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_all();
    for (int fr = 0; fr < NF; fr++) run_frame(DENS[fr], fr % 2 == 1);
    check(n_hold > 0, "line-buffer input hold never happened");
    check(n_partial_win > 0, "no window skipped a zero neighbour");
    check(n_residual > 0, "no residual addition");
    check(n_tok_bp > 0, "tokenizer never back-pressured");
    check(n_emb_stall > 0, "embedding never stalled");
    if (NF > 1) check(n_empty > 0, "no empty frame");
    $display("holds %0d, partial windows %0d, residual adds %0d, tokenizer stalls %0d, embedding stalls %0d, empty frames %0d",
             n_hold, n_partial_win, n_residual, n_tok_bp, n_emb_stall, n_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
