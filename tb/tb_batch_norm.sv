// tb_batch_norm: loads random per-channel gamma and beta, then applies random
// 48-bit accumulator values with random channels and shifts, with the
// normalisation on and off; checks the scaled, shifted, biased and saturated
// 16-bit result computed here.
module tb_batch_norm;
  import turf_pkg::*;
  localparam int FMX = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, wr_beta = 0, en;
  logic [7:0] wr_idx, ch;
  logic signed [DW-1:0] wr_data, y;
  logic [5:0] shift;
  logic signed [ACCW-1:0] x;
  batch_norm #(.F_MAX(FMX)) dut (.*);
  int checks = 0, failures = 0;
  int gm [FMX], bt [FMX];
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < FMX; i++) begin
      gm[i] = $urandom_range(65535) - 32768; bt[i] = $urandom_range(65535) - 32768;
      @(negedge clk); wr_en = 1; wr_beta = 0; wr_idx = 8'(i); wr_data = 16'(gm[i]);
      @(negedge clk); wr_beta = 1; wr_data = 16'(bt[i]);
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 400; t++) begin
      longint vx, e;
      int c, s;
      c = $urandom_range(FMX - 1); s = $urandom_range(30);
      vx = (t % 3 == 0) ? longint'($urandom_range(2000000)) - 1000000
                        : (longint'($urandom) <<< 15) - (longint'(1) <<< 46);
      en = t[0]; ch = 8'(c); shift = 6'(s); x = ACCW'(vx);
      #1;
      e = en ? ((vx * gm[c]) >>> s) + bt[c] : vx >>> s;
      if (e > 32767) e = 32767;
      if (e < -32768) e = -32768;
      checks++;
      if (longint'(y) != e) begin failures++; if (failures < 5) $display("x=%0d got %0d exp %0d", vx, y, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
