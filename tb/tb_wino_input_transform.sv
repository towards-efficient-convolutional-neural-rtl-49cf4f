// tb_wino_input_transform: random 6x6 tiles (including the extreme values
// -32768 and 32767) on two lanes; the reference B^T d B is computed here with
// the F(4x4,3x3) matrix written out independently of the design's package.
module tb_wino_input_transform;
  import turf_pkg::*;
  localparam int L = 2;
  logic signed [DW-1:0] d [L][TK][TK];
  logic signed [VW-1:0] v [L][TK][TK];
  wino_input_transform #(.LANES(L)) dut (.*);
  int checks = 0, failures = 0;
  // B^T of F(4x4,3x3), row by row
  int bt [6][6] = '{'{4,0,-5,0,1,0}, '{0,-4,-4,1,1,0}, '{0,4,-4,-1,1,0},
                    '{0,-2,-1,2,1,0}, '{0,2,-1,-2,1,0}, '{0,4,0,-5,0,1}};
  logic clk = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 200; t++) begin
      longint ref_t [6][6], ref_v;
      for (int l = 0; l < L; l++)
        for (int i = 0; i < 6; i++)
          for (int j = 0; j < 6; j++)
            d[l][i][j] = (t == 0) ? ((i + j) % 2 ? 16'sh8000 : 16'sh7fff)
                       : (t == 1) ? 16'sh8000 : 16'($urandom_range(65535));
      #1;
      for (int l = 0; l < L; l++) begin
        for (int i = 0; i < 6; i++)
          for (int j = 0; j < 6; j++) begin
            ref_t[i][j] = 0;
            for (int k = 0; k < 6; k++) ref_t[i][j] += bt[i][k] * longint'(d[l][k][j]);
          end
        for (int i = 0; i < 6; i++)
          for (int j = 0; j < 6; j++) begin
            ref_v = 0;
            for (int k = 0; k < 6; k++) ref_v += ref_t[i][k] * bt[j][k];
            checks++;
            if (longint'(v[l][i][j]) != ref_v) begin
              failures++;
              if (failures < 5) $display("t%0d l%0d (%0d,%0d) got %0d exp %0d", t, l, i, j, v[l][i][j], ref_v);
            end
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
