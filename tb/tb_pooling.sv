// tb_pooling: streams two 4x6 channel planes (random values, random gaps)
// through the pooling block in max mode, average mode and bypass, and checks
// each emitted value and its position in the output sequence against 2x2
// stride-2 pooling computed here.
module tb_pooling;
  localparam int DW = 16, WMX = 8, H = 4, W = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en, avg, in_valid = 0;
  logic [7:0] in_row, in_col;
  logic signed [DW-1:0] in_data;
  logic out_valid;
  logic signed [DW-1:0] out_data;
  pooling #(.DW(DW), .W_MAX(WMX)) dut (.*);
  int checks = 0, failures = 0;
  int img [2][H][W];
  int exp_q[$];
  int nout;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (out_valid) begin
    checks++;
    if (exp_q.size() == 0 || int'(out_data) != exp_q[0]) begin
      failures++; $display("got %0d", out_data);
    end
    if (exp_q.size() > 0) void'(exp_q.pop_front());
    nout++;
  end

  task automatic run(bit e, bit a);
    en = e; avg = a; nout = 0;
    foreach (img[p, y, x]) img[p][y][x] = $urandom_range(65535) - 32768;
    exp_q.delete();
    for (int p = 0; p < 2; p++)
      if (!e) begin
        for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) exp_q.push_back(img[p][y][x]);
      end else
        for (int y = 0; y < H; y += 2)
          for (int x = 0; x < W; x += 2) begin
            int s, m;
            s = img[p][y][x] + img[p][y][x+1] + img[p][y+1][x] + img[p][y+1][x+1];
            m = img[p][y][x];
            if (img[p][y][x+1] > m) m = img[p][y][x+1];
            if (img[p][y+1][x] > m) m = img[p][y+1][x];
            if (img[p][y+1][x+1] > m) m = img[p][y+1][x+1];
            exp_q.push_back(a ? (s >>> 2) : m);
          end
    for (int p = 0; p < 2; p++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          @(negedge clk);
          in_valid = 0;
          while ($urandom_range(2) == 0) @(negedge clk);
          in_valid = 1; in_row = 8'(y); in_col = 8'(x); in_data = 16'(img[p][y][x]);
        end
    @(negedge clk); in_valid = 0; @(negedge clk);
    checks++;
    if (nout != (e ? 2 * (H / 2) * (W / 2) : 2 * H * W) || exp_q.size() != 0) begin
      failures++; $display("count %0d", nout);
    end
  endtask

  initial begin
    in_row = 0; in_col = 0; in_data = 0; en = 0; avg = 0;
    run(1, 0);
    run(1, 1);
    run(0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
