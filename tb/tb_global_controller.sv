// tb_global_controller: runs the controller through three layers (3x3 filter-
// major, 3x3 channel-major, depthwise) with a stand-in load_done and a random
// drain_fire. Checks: the order of (fbase, cbase) pairs over the passes for
// each computation sequence, the input-buffer addresses streamed in each pass,
// one line-buffer clear per pass, the compute cycle count NP*(H*W+6), the
// drain order (f, y, x) over the output size, and the done pulse.
module tb_global_controller;
  import turf_pkg::*;
  localparam int PC = 2, PF = 2, HM = 6, WMX = 6, CM = 4;
  localparam int IB_AW = $clog2(((CM + PC - 1) / PC) * HM * WMX);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, load_done = 0, drain_fire = 0;
  layer_cfg_t cfg_in, cfg;
  logic busy, done, load_start, load, ob_clear, ib_rd_en, lb_clear, drain_valid;
  logic [IB_AW-1:0] ib_rd_addr;
  logic [7:0] fbase, cbase, fout, oh, ow, dr_f, dr_y, dr_x;
  logic [31:0] compute_cycles;
  logic [15:0] passes;
  global_controller #(.PC(PC), .PF(PF), .H_MAX(HM), .W_MAX(WMX), .C_MAX(CM)) dut (.*);
  int checks = 0, failures = 0;
  string pass_q[$];
  int addr_q[$];
  int nclear, ndone;
  string drain_q[$];
  logic prev_rd;

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n) begin
    prev_rd <= ib_rd_en;
    if (ib_rd_en && !prev_rd) pass_q.push_back($sformatf("%0d,%0d", fbase, cbase));
    if (ib_rd_en) addr_q.push_back(int'(ib_rd_addr));
    if (lb_clear) nclear++;
    if (drain_fire) drain_q.push_back($sformatf("%0d,%0d,%0d", dr_f, dr_y, dr_x));
    if (done) ndone++;
  end

  task automatic run(layer_mode_e m, seq_e s, int c, int f, int h, int w);
    string ep[$];
    int ea[$];
    string ed[$];
    int nf, nc, np, fo, ohh, oww;
    cfg_in = '0; cfg_in.mode = m; cfg_in.seq = s; cfg_in.c = 8'(c); cfg_in.f = 8'(f);
    cfg_in.h = 8'(h); cfg_in.w = 8'(w);
    nf = (f + PF - 1) / PF; nc = (c + PC - 1) / PC;
    fo = (m == MODE_DW) ? c : f; ohh = h - 2; oww = w - 2;
    if (m == MODE_DW) for (int g = 0; g < nc; g++) ep.push_back($sformatf("%0d,%0d", g * PF, g * PC));
    else if (s == SEQ_FM) for (int a = 0; a < nf; a++) for (int b = 0; b < nc; b++) ep.push_back($sformatf("%0d,%0d", a * PF, b * PC));
    else for (int b = 0; b < nc; b++) for (int a = 0; a < nf; a++) ep.push_back($sformatf("%0d,%0d", a * PF, b * PC));
    np = ep.size();
    foreach (ep[i]) begin
      int cb, dummy;
      void'($sscanf(ep[i], "%d,%d", dummy, cb));
      for (int y = 0; y < h; y++) for (int x = 0; x < w; x++) ea.push_back((cb / PC) * HM * WMX + y * WMX + x);
    end
    for (int fi = 0; fi < fo; fi++) for (int y = 0; y < ohh; y++) for (int x = 0; x < oww; x++)
      ed.push_back($sformatf("%0d,%0d,%0d", fi, y, x));
    pass_q.delete(); addr_q.delete(); drain_q.delete(); nclear = 0; ndone = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    checks++; if (!load) failures++;
    repeat (5) @(negedge clk);
    load_done = 1; @(negedge clk); load_done = 0;
    while (!done) begin
      drain_fire = drain_valid && ($urandom_range(2) != 0);
      @(negedge clk);
    end
    drain_fire = 0;
    @(negedge clk);
    checks++; if (ndone != 1) failures++;
    checks++; if (pass_q != ep) begin failures++; $display("pass order wrong (%0d passes)", pass_q.size()); end
    checks++; if (addr_q != ea) begin failures++; $display("read addresses wrong (%0d)", addr_q.size()); end
    checks++; if (nclear != np + 1) begin failures++; $display("clears %0d", nclear); end
    checks++; if (drain_q != ed) begin failures++; $display("drain order wrong (%0d)", drain_q.size()); end
    checks++; if (compute_cycles != 32'(np * (h * w + 6)) || passes != 16'(np)) begin
      failures++; $display("cycles %0d passes %0d", compute_cycles, passes);
    end
  endtask

  initial begin
    cfg_in = '0; prev_rd = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    run(MODE_WINO, SEQ_FM, 4, 3, 6, 6);
    run(MODE_WINO, SEQ_CM, 4, 3, 6, 6);
    run(MODE_DW, SEQ_FM, 3, 0, 6, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
