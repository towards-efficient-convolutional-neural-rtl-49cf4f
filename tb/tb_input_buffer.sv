// tb_input_buffer: writes random words lane by lane at random addresses,
// keeps a reference copy, and reads every written address back, checking the
// data one cycle after rd_en (synchronous read) and that unwritten lanes keep
// their earlier value.
module tb_input_buffer;
  localparam int DW = 16, PC = 4, CM = 8, HM = 4, WMX = 4;
  localparam int DEPTH = ((CM + PC - 1) / PC) * HM * WMX, AW = $clog2(DEPTH);
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [PC-1:0] wr_lane;
  logic signed [DW-1:0] wr_data;
  logic signed [DW-1:0] rd_data [PC];
  input_buffer #(.DW(DW), .PC(PC), .C_MAX(CM), .H_MAX(HM), .W_MAX(WMX)) dut (.*);
  int checks = 0, failures = 0;
  int ref_m [DEPTH][PC];

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    // fill everything once
    for (int a = 0; a < DEPTH; a++)
      for (int l = 0; l < PC; l++) begin
        ref_m[a][l] = $urandom_range(65535) - 32768;
        wr_en <= 1; wr_addr <= AW'(a); wr_lane <= PC'(1) << l; wr_data <= 16'(ref_m[a][l]);
        @(posedge clk);
      end
    // random overwrites of single lanes
    repeat (100) begin
      int a, l;
      a = $urandom_range(DEPTH - 1); l = $urandom_range(PC - 1);
      ref_m[a][l] = $urandom_range(65535) - 32768;
      wr_en <= 1; wr_addr <= AW'(a); wr_lane <= PC'(1) << l; wr_data <= 16'(ref_m[a][l]);
      @(posedge clk);
    end
    wr_en <= 0;
    for (int a = 0; a < DEPTH; a++) begin
      rd_en <= 1; rd_addr <= AW'(a);
      @(posedge clk);
      rd_en <= 0;
      #1;
      for (int l = 0; l < PC; l++) begin
        checks++;
        if (rd_data[l] != 16'(ref_m[a][l])) begin failures++; $display("addr %0d lane %0d", a, l); end
      end
      // hold: without rd_en the output keeps its value
      @(posedge clk); #1;
      checks++;
      if (rd_data[0] != 16'(ref_m[a][0])) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
