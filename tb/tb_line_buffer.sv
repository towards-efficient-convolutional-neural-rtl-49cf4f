// tb_line_buffer: streams images of two widths through a 3-row, 2-lane line
// buffer and checks every complete window element against the pixel it must
// hold (pixel value encodes lane, row and column), the reported row/column, and
// the one-cycle latency from in_valid to win_valid. A random gap pattern on
// in_valid checks that only accepted pixels shift.
module tb_line_buffer;
  localparam int DW = 16, L = 2, KP = 3, WMX = 8;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  logic [7:0] w = 8'd5;
  logic signed [DW-1:0] in_data [L];
  logic win_valid;
  logic [7:0] win_row, win_col;
  logic signed [DW-1:0] window [L][KP][KP];
  always #5 clk = ~clk;
  line_buffer #(.DW(DW), .LANES(L), .KP(KP), .W_MAX(WMX)) dut (.*);
  int checks = 0, failures = 0, nwin = 0;
  logic prev_acc = 0;
  int prow, pcol, lrow, lcol;
  always @(posedge clk) begin lrow <= prow; lcol <= pcol; end

  function automatic int pix(int l, int r, int c); return l * 1000 + r * 10 + c; endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // checker
  int erow = 0, ecol = 0;
  always @(posedge clk) if (rst_n) begin
    prev_acc <= in_valid && !clear;
    if (clear) begin erow = 0; ecol = 0; end
    else if (in_valid) begin
      prow = erow; pcol = ecol;
      if (ecol == int'(w) - 1) begin ecol = 0; erow++; end else ecol++;
    end
    checks++;
    if (win_valid !== prev_acc) begin failures++; $display("latency mismatch"); end
    if (win_valid) begin
      checks++;
      if (win_row != 8'(lrow) || win_col != 8'(lcol)) failures++;
      if (win_row >= KP - 1 && win_col >= KP - 1) begin
        nwin++;
        for (int l = 0; l < L; l++)
          for (int r = 0; r < KP; r++)
            for (int c = 0; c < KP; c++) begin
              checks++;
              if (window[l][r][c] != 16'(pix(l, win_row - (KP-1-r), win_col - (KP-1-c)))) begin
                failures++;
                if (failures < 5) $display("win (%0d,%0d) l%0d r%0d c%0d = %0d", win_row, win_col, l, r, c, window[l][r][c]);
              end
            end
      end
    end
  end

  task automatic run(int width, int height);
    w = 8'(width);
    clear <= 1; @(posedge clk); clear <= 0;
    for (int r = 0; r < height; r++)
      for (int c = 0; c < width; c++) begin
        while ($urandom_range(3) == 0) begin in_valid <= 0; @(posedge clk); end
        in_valid <= 1;
        for (int l = 0; l < L; l++) in_data[l] <= 16'(pix(l, r, c));
        @(posedge clk);
      end
    in_valid <= 0; @(posedge clk); @(posedge clk);
  endtask

  initial begin
    for (int l = 0; l < L; l++) in_data[l] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    run(5, 4);
    run(8, 5);
    checks++;
    if (nwin != 3 * 2 + 6 * 3) begin failures++; $display("window count %0d", nwin); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
