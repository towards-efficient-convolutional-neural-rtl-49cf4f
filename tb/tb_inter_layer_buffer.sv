// tb_inter_layer_buffer: self-checking test of the intermediate tile buffer.
//
// Two instances run side by side on the same random producer stream: one at
// the defaults (DEPTH 800, double buffer) and one with DOUBLE = 0. Tiles of
// several sizes (1 word up to the full 800) pass through each with random
// producer gaps and random consumer stalls. Checks: every word comes out in
// order and unchanged; the consumer never sees a word of a tile before that
// tile's last word was written (tile-granular hand-over); the single buffer
// never accepts a word while a tile is waiting; stall_cycles matches the
// refused-offer count seen here. Counted mechanisms: concurrent write and read
// in the double buffer, producer stalls in the single buffer, a full-depth
// tile, and a one-word tile.
module tb_inter_layer_buffer;
  localparam int DW = 16, DEPTH = 800, AW = $clog2(DEPTH);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [AW:0] tile_words;
  logic wv [2], wr [2], rv [2], rr [2];
  logic signed [DW-1:0] wd [2], rd [2];
  logic [31:0] sc [2];

  inter_layer_buffer u_dbl (.clk, .rst_n, .tile_words, .wr_valid(wv[0]), .wr_data(wd[0]),
    .wr_ready(wr[0]), .rd_valid(rv[0]), .rd_data(rd[0]), .rd_ready(rr[0]), .stall_cycles(sc[0]));
  inter_layer_buffer #(.DOUBLE(1'b0)) u_sgl (.clk, .rst_n, .tile_words, .wr_valid(wv[1]),
    .wr_data(wd[1]), .wr_ready(wr[1]), .rd_valid(rv[1]), .rd_data(rd[1]), .rd_ready(rr[1]),
    .stall_cycles(sc[1]));

  int checks = 0, failures = 0;
  int n_concurrent = 0, n_stall = 0, n_full_tile = 0, n_one_tile = 0;
  int refused [2];

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom_range(hi - lo));
  endfunction

  task automatic run_tiles(int tw, int nt, int gap_pct, int stall_pct);
    int total;
    total = tw * nt;
    tile_words = (AW+1)'(tw);
    wcount = '{0, 0}; rcount = '{0, 0};
    if (tw == DEPTH) n_full_tile++;
    if (tw == 1) n_one_tile++;
    fork
      for (int i = 0; i < 2; i++) begin
        automatic int k = i;
        fork
          begin : prod
            int n;
            n = 0;
            while (n < total) begin
              if (rnd(0, 99) < gap_pct) begin wv[k] <= 0; @(posedge clk); end
              else begin
                wv[k] <= 1; wd[k] <= DW'(n * 7 + tw);
                @(posedge clk);
                if (!wr[k]) refused[k]++;
                if (wr[k]) n++;
              end
            end
            wv[k] <= 0;
          end
          begin : cons
            int n, written;
            n = 0;
            while (n < total) begin
              rr[k] <= (rnd(0, 99) >= stall_pct);
              @(posedge clk);
              if (k == 0 && wv[0] && wr[0] && rv[0] && rr[0]) n_concurrent++;
              if (rv[k] && rr[k]) begin
                checks++;
                if (rd[k] != DW'(n * 7 + tw)) begin
                  failures++;
                  if (failures < 10) $display("DATA inst=%0d n=%0d got=%0d", k, n, rd[k]);
                end
                n++;
              end
            end
            rr[k] <= 0;
          end
        join
      end
    join
    repeat (2) @(posedge clk);
  endtask

  // tile-granular hand-over and single-buffer exclusivity, checked every cycle
  int wcount [2], rcount [2];
  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < 2; k++) begin
      if (rv[k] && rr[k]) begin
        checks++;
        if (wcount[k] < (rcount[k] / int'(tile_words) + 1) * int'(tile_words)) begin
          failures++; $display("inst %0d read before its tile was complete", k);
        end
        rcount[k]++;
      end
      if (wv[k] && wr[k]) wcount[k]++;
    end
    if (wv[1] && wr[1] && rv[1]) begin
      failures++; $display("single buffer accepted a word while a tile was waiting");
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wv = '{0, 0}; wd = '{0, 0}; rr = '{0, 0}; tile_words = 10;
    refused = '{0, 0}; wcount = '{0, 0}; rcount = '{0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run_tiles(37, 6, 10, 30);
    run_tiles(1, 20, 30, 30);
    run_tiles(DEPTH, 3, 5, 10);
    run_tiles(200, 4, 40, 60);
    for (int k = 0; k < 2; k++) begin
      checks++;
      if (sc[k] != 32'(refused[k])) begin
        failures++; $display("inst %0d stall_cycles=%0d, refused offers %0d", k, sc[k], refused[k]);
      end
    end
    n_stall = refused[1];
    begin
      int cnt [4];
      string nm [4];
      cnt = '{n_concurrent, n_stall, n_full_tile, n_one_tile};
      nm  = '{"double-buffer overlap", "single-buffer stall", "full-depth tile", "one-word tile"};
      for (int i = 0; i < 4; i++) begin
        checks++;
        $display("mechanism %-22s : %0d", nm[i], cnt[i]);
        if (cnt[i] == 0) begin failures++; $display("mechanism never exercised: %s", nm[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
