// tb_weight_register: writes every weight with a value that encodes (f, c, k),
// then reads every (f, c) group origin and checks all PC x PF x 36 outputs,
// including lanes past the stored range, which must read zero.
module tb_weight_register;
  import turf_pkg::*;
  localparam int PC = 2, PF = 2, CM = 4, FMX = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0;
  logic [7:0] wr_f, wr_c, rd_f, rd_c;
  logic [5:0] wr_k;
  logic signed [DW-1:0] wr_data;
  logic signed [DW-1:0] rd_w [PC][PF][TK2];
  weight_register #(.PC(PC), .PF(PF), .C_MAX(CM), .F_MAX(FMX)) dut (.*);
  int checks = 0, failures = 0;
  function automatic int enc(int f, int c, int k); return f * 1000 + c * 100 + k - 2000; endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int f = 0; f < FMX; f++)
      for (int c = 0; c < CM; c++)
        for (int k = 0; k < TK2; k++) begin
          wr_en <= 1; wr_f <= 8'(f); wr_c <= 8'(c); wr_k <= 6'(k); wr_data <= 16'(enc(f, c, k));
          @(posedge clk);
        end
    wr_en <= 0; @(posedge clk);
    for (int f0 = 0; f0 < FMX; f0++)
      for (int c0 = 0; c0 < CM; c0++) begin
        rd_f = 8'(f0); rd_c = 8'(c0); #1;
        for (int c = 0; c < PC; c++)
          for (int f = 0; f < PF; f++)
            for (int k = 0; k < TK2; k++) begin
              int e;
              e = (f0 + f < FMX && c0 + c < CM) ? enc(f0 + f, c0 + c, k) : 0;
              checks++;
              if (rd_w[c][f][k] != 16'(e)) failures++;
            end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
