// tb_data_manager: gathers the words of a 3x3 layer and a depthwise layer from
// a stream with random gaps, recording every write strobe, and checks that each
// word reaches the right store (weight (f,c,k), gamma/beta index, input-buffer
// address and lane) in the documented order, that in_ready drops when the load
// is complete and that load_done pulses once. Then it checks the scatter
// register: results offered when can_accept is high leave in order under
// random out_ready stalls, and are held while stalled.
module tb_data_manager;
  import turf_pkg::*;
  localparam int PC = 2, HM = 4, WMX = 4, CM = 4;
  localparam int IB_AW = $clog2(((CM + PC - 1) / PC) * HM * WMX);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  layer_cfg_t cfg;
  logic load_start = 0, load = 0, load_done;
  logic in_valid = 0, in_ready;
  logic signed [DW-1:0] in_data;
  logic w_wr_en, bn_wr_en, bn_wr_beta, ib_wr_en;
  logic [7:0] w_wr_f, w_wr_c, bn_wr_idx;
  logic [5:0] w_wr_k;
  logic [IB_AW-1:0] ib_wr_addr;
  logic [PC-1:0] ib_wr_lane;
  logic signed [DW-1:0] wr_data;
  logic res_valid = 0, can_accept, out_valid, out_ready = 1;
  logic signed [DW-1:0] res_data, out_data;
  data_manager #(.PC(PC), .H_MAX(HM), .W_MAX(WMX), .C_MAX(CM)) dut (.*);
  int checks = 0, failures = 0, ndone = 0;
  string log_q[$];
  string exp_q[$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (w_wr_en)  log_q.push_back($sformatf("W %0d %0d %0d %0d", w_wr_f, w_wr_c, w_wr_k, wr_data));
    if (bn_wr_en) log_q.push_back($sformatf("%s %0d %0d", bn_wr_beta ? "B" : "G", bn_wr_idx, wr_data));
    if (ib_wr_en) log_q.push_back($sformatf("I %0d %0d %0d", ib_wr_addr, ib_wr_lane, wr_data));
    if (load_done) ndone++;
  end

  task automatic gather(layer_mode_e m, int c, int f, int h, int w);
    int kk, nfw, fo, n;
    int words[$];
    cfg = '0; cfg.mode = m; cfg.c = 8'(c); cfg.f = 8'(f); cfg.h = 8'(h); cfg.w = 8'(w);
    kk = (m == MODE_PW) ? 1 : (m == MODE_FC) ? 36 : 9;
    nfw = (m == MODE_DW) ? 1 : f; fo = (m == MODE_DW) ? c : f;
    exp_q.delete(); log_q.delete(); ndone = 0; n = 0;
    for (int fi = 0; fi < nfw; fi++) for (int ci = 0; ci < c; ci++) for (int k = 0; k < kk; k++) begin
      exp_q.push_back($sformatf("W %0d %0d %0d %0d", (m == MODE_DW) ? ci : fi, ci, k, n)); words.push_back(n++); end
    for (int i = 0; i < fo; i++) begin exp_q.push_back($sformatf("G %0d %0d", i, n)); words.push_back(n++); end
    for (int i = 0; i < fo; i++) begin exp_q.push_back($sformatf("B %0d %0d", i, n)); words.push_back(n++); end
    for (int ci = 0; ci < c; ci++) for (int y = 0; y < h; y++) for (int x = 0; x < w; x++) begin
      exp_q.push_back($sformatf("I %0d %0d %0d", (ci / PC) * HM * WMX + y * WMX + x, 1 << (ci % PC), n));
      words.push_back(n++);
    end
    @(negedge clk); load_start = 1; load = 1;
    @(negedge clk); load_start = 0;
    while (words.size() > 0) begin
      in_valid = $urandom_range(3) != 0; in_data = 16'(words[0]);
      @(posedge clk);
      if (in_valid && in_ready) void'(words.pop_front());
      @(negedge clk);
    end
    in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (in_ready) begin failures++; $display("in_ready after load"); end
    load = 0;
    checks++;
    if (ndone != 1) begin failures++; $display("load_done count %0d", ndone); end
    checks++;
    if (log_q.size() != exp_q.size()) begin failures++; $display("writes %0d exp %0d", log_q.size(), exp_q.size()); end
    for (int i = 0; i < exp_q.size() && i < log_q.size(); i++) begin
      checks++;
      if (log_q[i] != exp_q[i]) begin failures++; if (failures < 5) $display("%s  vs  %s", log_q[i], exp_q[i]); end
    end
  endtask

  initial begin
    in_data = 0; res_data = 0; cfg = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    gather(MODE_WINO, 3, 2, 4, 3);
    gather(MODE_DW, 4, 0, 3, 4);
    gather(MODE_FC, 2, 2, 2, 2);
    // scatter
    begin
      int sent, got;
      sent = 0; got = 0;
      while (got < 50) begin
        @(negedge clk);
        out_ready = $urandom_range(2) != 0;
        #1;
        res_valid = can_accept && sent < 50 && $urandom_range(3) != 0;
        res_data = 16'(sent * 7 - 100);
        @(posedge clk);
        if (res_valid) sent++;
        if (out_valid && out_ready) begin
          checks++;
          if (int'(out_data) != got * 7 - 100) failures++;
          got++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
