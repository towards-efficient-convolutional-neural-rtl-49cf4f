// tb_output_buffer: clears the buffer, then applies random block accumulations
// (full 4x4 blocks, single-element updates, masked lanes, blocks reaching past
// the edge) and compares every location with a reference array kept here.
// Also checks that a second clear zeroes everything.
module tb_output_buffer;
  import turf_pkg::*;
  localparam int PF = 2, BLK = 4, FMX = 4, HM = 6, WMX = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic clear = 0, acc_en = 0, acc_one = 0;
  logic [PF-1:0] acc_lane;
  logic [7:0] acc_f, acc_y, acc_x, rd_f, rd_y, rd_x;
  logic signed [ACCW-1:0] acc_data [PF][BLK][BLK];
  logic signed [ACCW-1:0] rd_data;
  output_buffer #(.PF(PF), .BLK(BLK), .F_MAX(FMX), .H_MAX(HM), .W_MAX(WMX)) dut (.*);
  int checks = 0, failures = 0;
  longint ref_m [FMX][HM][WMX];

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check_all();
    for (int f = 0; f < FMX; f++)
      for (int y = 0; y < HM; y++)
        for (int x = 0; x < WMX; x++) begin
          rd_f = 8'(f); rd_y = 8'(y); rd_x = 8'(x); #1;
          checks++;
          if (rd_data != ACCW'(ref_m[f][y][x])) begin
            failures++;
            if (failures < 5) $display("(%0d,%0d,%0d) got %0d exp %0d", f, y, x, rd_data, ref_m[f][y][x]);
          end
        end
  endtask

  initial begin
    rd_f = 0; rd_y = 0; rd_x = 0; acc_lane = '1; acc_f = 0; acc_y = 0; acc_x = 0;
    foreach (acc_data[i, j, k]) acc_data[i][j][k] = 0;
    clear <= 1; @(posedge clk); clear <= 0;
    foreach (ref_m[i, j, k]) ref_m[i][j][k] = 0;
    check_all();
    repeat (60) begin
      int f0, y0, x0; bit one; logic [PF-1:0] ln;
      f0 = $urandom_range(FMX - 1); y0 = $urandom_range(HM - 1); x0 = $urandom_range(WMX - 1);
      one = $urandom_range(3) == 0; ln = PF'($urandom_range((1 << PF) - 1));
      @(negedge clk);
      acc_en = 1; acc_one = one; acc_lane = ln; acc_f = 8'(f0); acc_y = 8'(y0); acc_x = 8'(x0);
      for (int l = 0; l < PF; l++)
        for (int i = 0; i < BLK; i++)
          for (int j = 0; j < BLK; j++) begin
            longint v;
            v = longint'($urandom_range(2000000)) - 1000000;
            acc_data[l][i][j] = ACCW'(v);
            if (ln[l] && (!one || (i == 0 && j == 0)) && f0 + l < FMX && y0 + i < HM && x0 + j < WMX)
              ref_m[f0 + l][y0 + i][x0 + j] += v;
          end
      @(posedge clk); #1 acc_en = 0;
    end
    check_all();
    clear <= 1; @(posedge clk); clear <= 0; @(posedge clk);
    foreach (ref_m[i, j, k]) ref_m[i][j][k] = 0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
