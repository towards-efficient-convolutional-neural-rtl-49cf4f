// tb_turf_accel_top: end-to-end test of the single-layer accelerator at its
// default sizes (Pc = Pf = 4, 10x10 tiles, 8 channels).
//
// Runs a sequence of layers covering every layer type (Winograd 3x3, depthwise,
// pointwise, FC), both computation sequences, several channel groups, and each
// post-processing switch (NORM, ReLU, residual addition, max and average
// pooling). The reference is direct convolution (Eq. 1 of the usual definition,
// no Winograd) followed by the same integer post-processing formulas, computed
// here from the stimulus only. The input stream has random gaps, the output
// consumer random stalls and the residual stream random holes, so the drain
// stalls on both. The compute phase must take passes * (H*W + 6) cycles.
// Each mechanism is counted; one that never happened counts as a failure.
module tb_turf_accel_top;
  import turf_pkg::*;

  localparam int PC = 4, PF = 4, HM = 10, WM_ = 10, CM = 8, FM = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  layer_cfg_t cfg_in;
  logic busy, done, in_valid, in_ready, res_valid, res_ready, out_valid, out_ready;
  logic signed [DW-1:0] in_data, res_data, out_data;
  logic [31:0] compute_cycles;
  logic [15:0] passes;

  turf_accel_top dut (.*);

  int checks = 0, failures = 0;

  // stimulus and reference storage
  int din [CM][HM][WM_];
  int wt  [FM][CM][TK2];
  int gam [FM], bet [FM];
  int res [FM][HM][WM_];
  int word_q[$];
  int res_q[$];
  int exp_q[$];

  // mechanism counters
  int n_wino, n_dw, n_pw, n_fc, n_fm, n_cm, n_multi_cg, n_out_stall, n_res_stall,
      n_pool_max, n_pool_avg, n_relu_clip, n_norm, n_add, n_in_gap;

  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom_range(hi - lo));
  endfunction

  task automatic run_layer(layer_cfg_t c, input int in_gap_pct, int out_stall_pct, int res_hole_pct);
    int fout, oh, ow, kk, nfw, np;
    longint acc;
    int post [FM][HM][WM_];
    int got, nexp, t0, watch;
    fout = (c.mode == MODE_DW) ? c.c : c.f;
    kk   = (c.mode == MODE_PW) ? 1 : (c.mode == MODE_FC) ? 36 : 9;
    nfw  = (c.mode == MODE_DW) ? 1 : c.f;
    oh   = (c.mode == MODE_PW) ? c.h : (c.mode == MODE_FC) ? 1 : c.h - 2;
    ow   = (c.mode == MODE_PW) ? c.w : (c.mode == MODE_FC) ? 1 : c.w - 2;

    // random stimulus
    foreach (din[i, j, k]) din[i][j][k] = rnd(-120, 120);
    foreach (wt[i, j, k])  wt[i][j][k]  = rnd(-60, 60);
    foreach (gam[i]) begin gam[i] = rnd(-40, 90); bet[i] = rnd(-300, 300); end
    foreach (res[i, j, k]) res[i][j][k] = rnd(-2000, 2000);

    // stream words: weights, gamma, beta, input
    word_q.delete();
    for (int f = 0; f < nfw; f++)
      for (int ci = 0; ci < c.c; ci++)
        for (int k = 0; k < kk; k++)
          word_q.push_back(wt[(c.mode == MODE_DW) ? ci : f][ci][k]);
    for (int f = 0; f < fout; f++) word_q.push_back(gam[f]);
    for (int f = 0; f < fout; f++) word_q.push_back(bet[f]);
    for (int ci = 0; ci < c.c; ci++)
      for (int y = 0; y < c.h; y++)
        for (int x = 0; x < c.w; x++) word_q.push_back(din[ci][y][x]);

    // reference: direct convolution and post-processing
    for (int f = 0; f < fout; f++)
      for (int y = 0; y < oh; y++)
        for (int x = 0; x < ow; x++) begin
          longint t;
          acc = 0;
          case (c.mode)
            MODE_WINO: for (int ci = 0; ci < c.c; ci++)
                         for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++)
                           acc += longint'(din[ci][y+i][x+j]) * wt[f][ci][i*3+j];
            MODE_DW:   for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++)
                         acc += longint'(din[f][y+i][x+j]) * wt[f][f][i*3+j];
            MODE_PW:   for (int ci = 0; ci < c.c; ci++)
                         acc += longint'(din[ci][y][x]) * wt[f][ci][0];
            default:   for (int ci = 0; ci < c.c; ci++)
                         for (int k = 0; k < 36; k++)
                           acc += longint'(din[ci][k/6][k%6]) * wt[f][ci][k];
          endcase
          if (c.norm_en) t = ((acc * gam[f]) >>> c.shift) + bet[f];
          else           t = acc >>> c.shift;
          post[f][y][x] = sat16(t);
          if (c.relu_en && post[f][y][x] < 0) begin post[f][y][x] = 0; n_relu_clip++; end
          if (c.add_en) post[f][y][x] = sat16(longint'(post[f][y][x]) + res[f][y][x]);
        end
    exp_q.delete(); res_q.delete();
    for (int f = 0; f < fout; f++)
      for (int y = 0; y < oh; y++)
        for (int x = 0; x < ow; x++) res_q.push_back(res[f][y][x]);
    for (int f = 0; f < fout; f++)
      if (c.pool_en) begin
        for (int y = 0; y + 1 < oh; y += 2)
          for (int x = 0; x + 1 < ow; x += 2) begin
            int a0, a1, a2, a3, m;
            a0 = post[f][y][x]; a1 = post[f][y][x+1]; a2 = post[f][y+1][x]; a3 = post[f][y+1][x+1];
            if (c.pool_avg) exp_q.push_back((a0 + a1 + a2 + a3) >>> 2);
            else begin
              m = a0; if (a1 > m) m = a1; if (a2 > m) m = a2; if (a3 > m) m = a3;
              exp_q.push_back(m);
            end
          end
      end else
        for (int y = 0; y < oh; y++) for (int x = 0; x < ow; x++) exp_q.push_back(post[f][y][x]);
    nexp = exp_q.size();

    // launch
    cfg_in = c;
    @(posedge clk); start <= 1;
    @(posedge clk); start <= 0;
    got = 0; watch = 0;
    fork
      begin : drive_in
        while (word_q.size() > 0) begin
          if (rnd(0, 99) < in_gap_pct) begin
            in_valid <= 0; n_in_gap++;
            @(posedge clk);
          end else begin
            in_valid <= 1; in_data <= 16'(word_q[0]);
            @(posedge clk);
            if (in_ready) void'(word_q.pop_front());
          end
        end
        in_valid <= 0;
      end
      begin : drive_res
        while (c.add_en && res_q.size() > 0) begin
          if (rnd(0, 99) < res_hole_pct) begin
            res_valid <= 0;
            @(posedge clk);
            if (dut.u_ctrl.drain_valid) n_res_stall++;
          end else begin
            res_valid <= 1; res_data <= 16'(res_q[0]);
            @(posedge clk);
            if (res_ready) void'(res_q.pop_front());
          end
        end
        res_valid <= 0;
      end
      begin : collect
        while (got < nexp) begin
          out_ready <= (rnd(0, 99) >= out_stall_pct);
          @(posedge clk);
          if (out_valid && !out_ready) n_out_stall++;
          if (out_valid && out_ready) begin
            checks++;
            if (int'(out_data) != exp_q[got]) begin
              failures++;
              if (failures < 10)
                $display("MISMATCH mode=%0d idx=%0d got=%0d exp=%0d", c.mode, got, out_data, exp_q[got]);
            end
            got++;
          end
        end
        out_ready <= 1;
      end
    join
    // done follows once the last result is in the output register
    while (busy) @(posedge clk);
    @(posedge clk);
    checks++;
    if (out_valid) begin failures++; $display("extra output after layer"); end

    // pass count and compute cycle count
    np = (c.mode == MODE_DW) ? (c.c + PC - 1) / PC
                             : ((c.c + PC - 1) / PC) * ((c.f + PF - 1) / PF);
    checks++;
    if (passes != 16'(np) || compute_cycles != 32'(np * (c.h * c.w + 6))) begin
      failures++;
      $display("CYCLES mode=%0d passes=%0d exp %0d, compute_cycles=%0d exp %0d",
               c.mode, passes, np, compute_cycles, np * (c.h * c.w + 6));
    end
    if (np > 1 && c.mode != MODE_DW) n_multi_cg++;
    case (c.mode)
      MODE_WINO: n_wino++;
      MODE_DW:   n_dw++;
      MODE_PW:   n_pw++;
      default:   n_fc++;
    endcase
    if (c.seq == SEQ_FM) n_fm++; else n_cm++;
    if (c.pool_en && c.pool_avg) n_pool_avg++;
    if (c.pool_en && !c.pool_avg) n_pool_max++;
    if (c.norm_en) n_norm++;
    if (c.add_en) n_add++;
  endtask

  function automatic layer_cfg_t mk(layer_mode_e m, seq_e s, int h, int w, int c, int f,
                                    bit norm, int sh, bit relu, bit add, bit pool, bit avg);
    layer_cfg_t r;
    r = '0;
    r.mode = m; r.seq = s; r.h = 8'(h); r.w = 8'(w); r.c = 8'(c); r.f = 8'(f);
    r.norm_en = norm; r.shift = 6'(sh); r.relu_en = relu; r.add_en = add;
    r.pool_en = pool; r.pool_avg = avg;
    return r;
  endfunction

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_data = 0; res_valid = 0; res_data = 0; out_ready = 1; cfg_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    //                 mode       seq     h   w   c  f  norm sh relu add pool avg
    run_layer(mk(MODE_WINO, SEQ_FM, 10, 10, 6, 6, 1, 6, 1, 0, 1, 0), 20, 30, 0);
    run_layer(mk(MODE_WINO, SEQ_CM, 10, 10, 8, 8, 0, 4, 0, 1, 1, 1), 10, 40, 30);
    run_layer(mk(MODE_WINO, SEQ_FM,  6,  6, 3, 2, 1, 5, 0, 0, 0, 0),  0,  0, 0);
    run_layer(mk(MODE_DW,   SEQ_FM, 10,  6, 6, 0, 1, 3, 1, 0, 0, 0), 10, 20, 0);
    run_layer(mk(MODE_PW,   SEQ_CM,  5,  7, 8, 5, 1, 2, 1, 1, 0, 0), 10, 20, 20);
    run_layer(mk(MODE_FC,   SEQ_FM,  6,  6, 5, 7, 0, 3, 0, 0, 0, 0),  0, 10, 0);
    run_layer(mk(MODE_PW,   SEQ_FM,  6,  8, 4, 8, 0, 0, 1, 0, 1, 0),  5,  5, 0);

    // every mechanism must have happened
    begin
      int cnt [15];
      string nm [15];
      cnt = '{n_wino, n_dw, n_pw, n_fc, n_fm, n_cm, n_multi_cg, n_out_stall, n_res_stall,
              n_pool_max, n_pool_avg, n_relu_clip, n_norm, n_add, n_in_gap};
      nm  = '{"winograd", "depthwise", "pointwise", "fc", "filter-major", "channel-major",
              "multi-group accumulation", "output stall", "residual stall", "max pool",
              "average pool", "relu clip", "norm", "residual add", "input gap"};
      for (int i = 0; i < 15; i++) begin
        checks++;
        $display("mechanism %-26s : %0d", nm[i], cnt[i]);
        if (cnt[i] == 0) begin failures++; $display("mechanism never exercised: %s", nm[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
