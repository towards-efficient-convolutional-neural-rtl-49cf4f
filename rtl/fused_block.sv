// fused_block: two layers of a convolution block fused into one launch.
//
// Two single-layer engines (turf_accel_top) are chained through an
// intermediate buffer (inter_layer_buffer). For every tile of the block input,
// engine 1 computes its layer and streams the result tile into the buffer;
// engine 2 then gathers its own weights and normalisation parameters from the
// w2 stream and its input tile from the buffer, computes, and streams the block
// output. Intermediate feature maps never leave the chip. With DOUBLE = 1 the
// buffer has two banks, so engine 1 works on tile t+1 while engine 2 works on
// tile t; with DOUBLE = 0 engine 1's drain stalls until engine 2 has taken the
// whole previous tile. A depthwise-separable block (depthwise 3x3 then
// pointwise 1x1) is the typical use; any two layer types can be chained as
// long as layer 1's output shape is layer 2's input shape.
//
// Interface: cfg1/cfg2 configure the two layers, n_tiles the number of block
// input tiles; start launches the block. Per tile the in1 stream carries layer
// 1's gather words (weights, gamma, beta, input tile), the w2 stream layer 2's
// weights, gamma and beta; res_* is layer 2's residual stream (shortcut), out_*
// the block output. done pulses after the last tile. overlap_cycles counts
// cycles where both engines were busy, stall_cycles those where engine 1 was
// held back by a full buffer.
//
// The fusion of layers through a buffer between them, single versus double
// buffering and the pipeline across layers follow the paper. Layer 2 starts a
// tile only when layer 1 has finished it (the paper's channel-major hand-over);
// the paper's earlier hand-over of a filter-major layer 1 (per output channel)
// is not built. Each engine keeps its own input and output buffers instead of
// sharing them with the intermediate buffer. Layer 1 has no residual input.
// Lint note: rst_n is reported as used both asynchronously and synchronously;
// the synchronous use is only the assertion's 'disable iff', not logic.
module fused_block
  import turf_pkg::*;
#(
  parameter int PC     = 4,
  parameter int PF     = 4,
  parameter int H_MAX  = 10,
  parameter int W_MAX  = 10,
  parameter int C_MAX  = 8,
  parameter int F_MAX  = 8,
  parameter bit DOUBLE = 1'b1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [15:0]          n_tiles,
  input  layer_cfg_t           cfg1,
  input  layer_cfg_t           cfg2,
  output logic                 busy,
  output logic                 done,
  input  logic                 in1_valid,
  input  logic signed [DW-1:0] in1_data,
  output logic                 in1_ready,
  input  logic                 w2_valid,
  input  logic signed [DW-1:0] w2_data,
  output logic                 w2_ready,
  input  logic                 res_valid,
  input  logic signed [DW-1:0] res_data,
  output logic                 res_ready,
  output logic                 out_valid,
  output logic signed [DW-1:0] out_data,
  input  logic                 out_ready,
  output logic [31:0]          overlap_cycles,
  output logic [31:0]          stall_cycles
);
  localparam int DEPTH = F_MAX * H_MAX * W_MAX;
  localparam int BAW   = $clog2(DEPTH);

  // Words a layer produces per tile, and gather words before its input tile.
  function automatic int out_words(layer_cfg_t c);
    int fo, oh, ow;
    fo = (c.mode == MODE_DW) ? int'(c.c) : int'(c.f);
    unique case (c.mode)
      MODE_PW: begin oh = int'(c.h); ow = int'(c.w); end
      MODE_FC: begin oh = 1; ow = 1; end
      default: begin oh = int'(c.h) - 2; ow = int'(c.w) - 2; end
    endcase
    if (c.pool_en) begin oh = oh / 2; ow = ow / 2; end
    return fo * oh * ow;
  endfunction

  function automatic int param_words(layer_cfg_t c);
    int kk, nfw, fo;
    kk  = (c.mode == MODE_PW) ? 1 : (c.mode == MODE_FC) ? TK2 : WK * WK;
    nfw = (c.mode == MODE_DW) ? 1 : int'(c.f);
    fo  = (c.mode == MODE_DW) ? int'(c.c) : int'(c.f);
    return nfw * int'(c.c) * kk + 2 * fo;
  endfunction

  // ---------------- tile sequencer ----------------
  logic run, s1, s2, s1_q, s2_q, busy1, busy2, done1, done2;
  logic [15:0] t1, t2;
  logic [31:0] cnt2;
  layer_cfg_t c1, c2;

  assign s1   = run && !busy1 && !s1_q && t1 != n_tiles;
  assign s2   = run && !busy2 && !s2_q && t2 != n_tiles;
  assign busy = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; s1_q <= 1'b0; s2_q <= 1'b0; t1 <= '0; t2 <= '0; done <= 1'b0;
      c1 <= '0; c2 <= '0; overlap_cycles <= '0;
    end else begin
      s1_q <= s1; s2_q <= s2; done <= 1'b0;
      if (!run && start) begin
        run <= 1'b1; t1 <= '0; t2 <= '0; c1 <= cfg1; c2 <= cfg2; overlap_cycles <= '0;
      end else if (run) begin
        if (s1) t1 <= t1 + 1;
        if (s2) t2 <= t2 + 1;
        if (busy1 && busy2) overlap_cycles <= overlap_cycles + 1;
        if (t2 == n_tiles && !busy2 && !s2_q && !out_valid) begin run <= 1'b0; done <= 1'b1; end
      end
    end
  end

  // ---------------- engine 1 ----------------
  logic e1_out_valid, e1_out_ready;
  logic signed [DW-1:0] e1_out_data;
  logic [31:0] e1_cc, e2_cc;
  logic [15:0] e1_np, e2_np;
  logic e1_res_ready;

  turf_accel_top #(.PC(PC), .PF(PF), .H_MAX(H_MAX), .W_MAX(W_MAX), .C_MAX(C_MAX), .F_MAX(F_MAX)) u_l1 (
    .clk, .rst_n, .start(s1), .cfg_in(c1), .busy(busy1), .done(done1),
    .in_valid(in1_valid), .in_data(in1_data), .in_ready(in1_ready),
    .res_valid(1'b0), .res_data('0), .res_ready(e1_res_ready),
    .out_valid(e1_out_valid), .out_data(e1_out_data), .out_ready(e1_out_ready),
    .compute_cycles(e1_cc), .passes(e1_np));

  // ---------------- intermediate buffer ----------------
  logic b_valid, b_ready;
  logic signed [DW-1:0] b_data;
  inter_layer_buffer #(.DW(DW), .DEPTH(DEPTH), .DOUBLE(DOUBLE)) u_buf (
    .clk, .rst_n, .tile_words((BAW+1)'(out_words(c1))),
    .wr_valid(e1_out_valid), .wr_data(e1_out_data), .wr_ready(e1_out_ready),
    .rd_valid(b_valid), .rd_data(b_data), .rd_ready(b_ready), .stall_cycles);

  // ---------------- engine 2 ----------------
  // Its gather stream takes layer 2's parameters from w2, then its input tile
  // from the intermediate buffer.
  logic from_w2, e2_in_valid, e2_in_ready;
  logic signed [DW-1:0] e2_in_data;
  assign from_w2     = cnt2 < 32'(param_words(c2));
  assign e2_in_valid = from_w2 ? w2_valid : b_valid;
  assign e2_in_data  = from_w2 ? w2_data  : b_data;
  assign w2_ready    = from_w2 && e2_in_ready;
  assign b_ready     = !from_w2 && e2_in_ready;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)                          cnt2 <= '0;
    else if (s2)                         cnt2 <= '0;
    else if (e2_in_valid && e2_in_ready) cnt2 <= cnt2 + 1;

  turf_accel_top #(.PC(PC), .PF(PF), .H_MAX(H_MAX), .W_MAX(W_MAX), .C_MAX(C_MAX), .F_MAX(F_MAX)) u_l2 (
    .clk, .rst_n, .start(s2), .cfg_in(c2), .busy(busy2), .done(done2),
    .in_valid(e2_in_valid), .in_data(e2_in_data), .in_ready(e2_in_ready),
    .res_valid, .res_data, .res_ready,
    .out_valid, .out_data, .out_ready,
    .compute_cycles(e2_cc), .passes(e2_np));

  a_shapes: assert property (@(posedge clk) disable iff (!rst_n)
    run |-> out_words(c1) == int'(c2.c) * int'(c2.h) * int'(c2.w));
endmodule
