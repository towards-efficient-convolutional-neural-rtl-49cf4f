// tb_fused_block_single: the fused-block end-to-end bench run with a single
// intermediate buffer (DOUBLE = 0).
//
// Same two fused blocks, stimulus and layer-by-layer direct-convolution
// reference as tb_fused_block (see there), against a fused_block whose
// intermediate buffer has one bank. Layer 1 must now stall whenever it
// finishes a tile before layer 2 has taken the previous one: that producer
// stall is a required mechanism here, along with tiles, engine overlap,
// residual addition and output stalls.
module tb_fused_block_single;
  import turf_pkg::*;

  localparam bit DOUBLE = 1'b0;

  localparam int HM = 10, WM_ = 10, CM = 8, FM = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  logic [15:0] n_tiles;
  layer_cfg_t cfg1, cfg2;
  logic busy, done, in1_valid, in1_ready, w2_valid, w2_ready, res_valid, res_ready,
        out_valid, out_ready;
  logic signed [DW-1:0] in1_data, w2_data, res_data, out_data;
  logic [31:0] overlap_cycles, stall_cycles;

  fused_block #(.DOUBLE(DOUBLE)) dut (.*);

  int checks = 0, failures = 0;
  int n_tile = 0, n_overlap = 0, n_stall = 0, n_add = 0, n_out_stall = 0;

  int in1_q[$], w2_q[$], res_q[$], exp_q[$];

  typedef int fmap_t [CM][HM][WM_];

  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom_range(hi - lo));
  endfunction

  function automatic layer_cfg_t mk(layer_mode_e m, int h, int w, int c, int f,
                                    bit norm, int sh, bit relu, bit add, bit pool);
    layer_cfg_t r;
    r = '0;
    r.mode = m; r.seq = SEQ_CM; r.h = 8'(h); r.w = 8'(w); r.c = 8'(c); r.f = 8'(f);
    r.norm_en = norm; r.shift = 6'(sh); r.relu_en = relu; r.add_en = add; r.pool_en = pool;
    return r;
  endfunction

  // Gather words of one layer (weights, gamma, beta; input appended by caller).
  task automatic push_params(layer_cfg_t c, ref int wt[FM][CM][9], ref int gam[FM],
                             ref int bet[FM], ref int q[$]);
    int kk, nfw, fout;
    kk   = (c.mode == MODE_PW) ? 1 : 9;
    nfw  = (c.mode == MODE_DW) ? 1 : c.f;
    fout = (c.mode == MODE_DW) ? c.c : c.f;
    for (int f = 0; f < nfw; f++)
      for (int ci = 0; ci < c.c; ci++)
        for (int k = 0; k < kk; k++) q.push_back(wt[(c.mode == MODE_DW) ? ci : f][ci][k]);
    for (int f = 0; f < fout; f++) q.push_back(gam[f]);
    for (int f = 0; f < fout; f++) q.push_back(bet[f]);
  endtask

  // Reference layer: direct convolution, post-processing, optional 2x2 max
  // pooling. Output map and its shape are returned.
  task automatic ref_layer(layer_cfg_t c, ref fmap_t din, ref int wt[FM][CM][9],
                           ref int gam[FM], ref int bet[FM], ref fmap_t res,
                           ref fmap_t dout, output int fo, output int ho, output int wo);
    int oh, ow;
    fmap_t post;
    fo = (c.mode == MODE_DW) ? c.c : c.f;
    oh = (c.mode == MODE_PW) ? c.h : c.h - 2;
    ow = (c.mode == MODE_PW) ? c.w : c.w - 2;
    for (int f = 0; f < fo; f++)
      for (int y = 0; y < oh; y++)
        for (int x = 0; x < ow; x++) begin
          longint acc, t;
          acc = 0;
          case (c.mode)
            MODE_WINO: for (int ci = 0; ci < c.c; ci++)
                         for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++)
                           acc += longint'(din[ci][y+i][x+j]) * wt[f][ci][i*3+j];
            MODE_DW:   for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++)
                         acc += longint'(din[f][y+i][x+j]) * wt[f][f][i*3+j];
            default:   for (int ci = 0; ci < c.c; ci++)
                         acc += longint'(din[ci][y][x]) * wt[f][ci][0];
          endcase
          if (c.norm_en) t = ((acc * gam[f]) >>> c.shift) + bet[f];
          else           t = acc >>> c.shift;
          post[f][y][x] = sat16(t);
          if (c.relu_en && post[f][y][x] < 0) post[f][y][x] = 0;
          if (c.add_en) post[f][y][x] = sat16(longint'(post[f][y][x]) + res[f][y][x]);
        end
    if (c.pool_en) begin
      ho = oh / 2; wo = ow / 2;
      for (int f = 0; f < fo; f++)
        for (int y = 0; y < ho; y++)
          for (int x = 0; x < wo; x++) begin
            int m;
            m = post[f][2*y][2*x];
            if (post[f][2*y][2*x+1] > m) m = post[f][2*y][2*x+1];
            if (post[f][2*y+1][2*x] > m) m = post[f][2*y+1][2*x];
            if (post[f][2*y+1][2*x+1] > m) m = post[f][2*y+1][2*x+1];
            dout[f][y][x] = m;
          end
    end else begin
      ho = oh; wo = ow;
      for (int f = 0; f < fo; f++)
        for (int y = 0; y < ho; y++) for (int x = 0; x < wo; x++) dout[f][y][x] = post[f][y][x];
    end
  endtask

  task automatic run_block(layer_cfg_t c1, layer_cfg_t c2, int nt, int out_stall_pct,
                           int gap_pct);
    int wt1[FM][CM][9], wt2[FM][CM][9], g1[FM], b1[FM], g2[FM], b2[FM];
    fmap_t din, mid, dout, res, nores;
    int f1, h1, w1, f2, h2, w2, got, nexp;
    foreach (wt1[i, j, k]) begin wt1[i][j][k] = rnd(-40, 40); wt2[i][j][k] = rnd(-40, 40); end
    foreach (g1[i]) begin g1[i] = rnd(1, 60); b1[i] = rnd(-200, 200);
                          g2[i] = rnd(-40, 60); b2[i] = rnd(-200, 200); end
    in1_q.delete(); w2_q.delete(); res_q.delete(); exp_q.delete();
    foreach (nores[i, j, k]) nores[i][j][k] = 0;
    for (int t = 0; t < nt; t++) begin
      foreach (din[i, j, k]) din[i][j][k] = rnd(-100, 100);
      foreach (res[i, j, k]) res[i][j][k] = rnd(-1000, 1000);
      push_params(c1, wt1, g1, b1, in1_q);
      for (int ci = 0; ci < c1.c; ci++)
        for (int y = 0; y < c1.h; y++) for (int x = 0; x < c1.w; x++) in1_q.push_back(din[ci][y][x]);
      push_params(c2, wt2, g2, b2, w2_q);
      ref_layer(c1, din, wt1, g1, b1, nores, mid, f1, h1, w1);
      ref_layer(c2, mid, wt2, g2, b2, res, dout, f2, h2, w2);
      for (int f = 0; f < f2; f++)
        for (int y = 0; y < h2; y++)
          for (int x = 0; x < w2; x++) begin
            exp_q.push_back(dout[f][y][x]);
            if (c2.add_en) res_q.push_back(res[f][y][x]);
          end
    end
    nexp = exp_q.size();
    n_tiles = 16'(nt); cfg1 = c1; cfg2 = c2;
    @(posedge clk); start <= 1;
    @(posedge clk); start <= 0;
    got = 0;
    fork
      begin : drive_in1
        while (in1_q.size() > 0) begin
          in1_valid <= 1; in1_data <= 16'(in1_q[0]);
          @(posedge clk);
          if (in1_ready) void'(in1_q.pop_front());
        end
        in1_valid <= 0;
      end
      begin : drive_w2
        while (w2_q.size() > 0) begin
          if (rnd(0, 99) < gap_pct) begin w2_valid <= 0; @(posedge clk); end
          else begin
            w2_valid <= 1; w2_data <= 16'(w2_q[0]);
            @(posedge clk);
            if (w2_ready) void'(w2_q.pop_front());
          end
        end
        w2_valid <= 0;
      end
      begin : drive_res
        while (res_q.size() > 0) begin
          if (rnd(0, 99) < gap_pct) begin res_valid <= 0; @(posedge clk); end
          else begin
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
                $display("MISMATCH idx=%0d got=%0d exp=%0d", got, out_data, exp_q[got]);
            end
            got++;
          end
        end
        out_ready <= 1;
      end
    join
    while (busy) @(posedge clk);
    checks++;
    if (out_valid) begin failures++; $display("extra output after block"); end
    $display("block: %0d tiles, overlap_cycles=%0d stall_cycles=%0d", nt, overlap_cycles,
             stall_cycles);
    n_tile += nt;
    n_overlap += overlap_cycles;
    n_stall = stall_cycles;  // the buffer counts since reset
    if (c2.add_en) n_add++;
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in1_valid = 0; in1_data = 0; w2_valid = 0; w2_data = 0; res_valid = 0; res_data = 0;
    out_ready = 1; cfg1 = '0; cfg2 = '0; n_tiles = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    //            mode      h   w  c  f  norm sh relu add pool
    run_block(mk(MODE_DW,  10, 10, 8, 0, 1, 4, 1, 0, 0),
              mk(MODE_PW,   8,  8, 8, 8, 1, 6, 0, 1, 0), 3, 60, 20);
    run_block(mk(MODE_WINO,10, 10, 4, 4, 0, 5, 1, 0, 1),
              mk(MODE_PW,   4,  4, 4, 8, 0, 3, 0, 0, 0), 3, 30, 10);

    begin
      int cnt [5];
      string nm [5];
      cnt = '{n_tile, n_overlap, DOUBLE ? 1 : n_stall, n_add, n_out_stall};
      nm  = '{"tiles", "engine overlap", "single-buffer stall", "residual add", "output stall"};
      for (int i = 0; i < 5; i++) begin
        checks++;
        $display("mechanism %-20s : %0d", nm[i], cnt[i]);
        if (cnt[i] == 0) begin failures++; $display("mechanism never exercised: %s", nm[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
