// turf_accel_top: configurable single-layer CNN accelerator.
//
// The building modules are arranged as columns, left to right: weight register,
// line buffer and input buffer; Winograd weight and input transforms; the
// shared multiplier array; Winograd output transform; CONV and FC adder trees;
// pooling, ReLU, normalisation and element-wise addition; output buffer. A
// global controller sequences one layer at a time and a data manager moves data
// between the external stream and the on-chip stores. Multiplexers between the
// columns select the data path of the layer type:
//   MODE_WINO  3x3 convolution, F(4x4,3x3) Winograd: every 6x6 window on a
//              stride of 4 -> B^T d B, times G g G^T, summed over channels,
//              A^T X A -> a 4x4 output tile per output channel.
//   MODE_DW    3x3 depthwise convolution on the same Winograd path, only the
//              diagonal (input lane = output lane) multipliers enabled.
//   MODE_PW    1x1 convolution: one pixel per cycle, tap 0 of the array.
//   MODE_FC    fully connected over a 6x6xC input: raw window times raw weights,
//              summed by the FC adder tree.
// Partial sums of successive input-channel groups accumulate in the output
// buffer. Draining applies normalisation (scale, bias, requantise to 16 bits),
// ReLU, the residual addition and 2x2 pooling, each switchable per layer.
//
// Interface: cfg_in + start launch a layer; then the input stream must deliver
// weights, gamma, beta and the input tile (see data_manager); results leave on
// out_* (channel by channel, row-major); with cfg.add_en the residual map is
// read on res_* in the same order as the results before pooling. done pulses
// after the last result has entered the output register. out_ready low stalls
// the drain, as does a missing residual word.
//
// Timing (from start): loading takes one cycle per accepted input word; the
// compute phase takes passes * (H*W + 6) cycles; draining one cycle per result.
// The datapath pipeline is ibuf read (1) -> line buffer (1) -> multipliers (1)
// -> accumulate register (1) -> output buffer.
//
// The column structure, the shared arithmetic module, the filter-/channel-major
// sequences, 16-bit fixed point and F(4x4,3x3) follow the paper. Sizes, one
// pixel per cycle (Ph = Pw = 1), tile shape limits (input H, W = 4t+2 for
// Winograd, no padding), the word order, and the post-processing order
// NORM -> ReLU -> add -> pool are this design's choices.
module turf_accel_top
  import turf_pkg::*;
#(
  parameter int PC    = 4,    // Pc, input channels in parallel
  parameter int PF    = 4,    // Pf, output channels in parallel
  parameter int H_MAX = 10,   // largest input tile height
  parameter int W_MAX = 10,   // largest input tile width
  parameter int C_MAX = 8,    // largest number of input channels
  parameter int F_MAX = 8     // largest number of output channels
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  layer_cfg_t           cfg_in,
  output logic                 busy,
  output logic                 done,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_data,
  output logic                 in_ready,
  input  logic                 res_valid,
  input  logic signed [DW-1:0] res_data,
  output logic                 res_ready,
  output logic                 out_valid,
  output logic signed [DW-1:0] out_data,
  input  logic                 out_ready,
  output logic [31:0]          compute_cycles,
  output logic [15:0]          passes
);
  localparam int IB_DEPTH = ((C_MAX + PC - 1) / PC) * H_MAX * W_MAX;
  localparam int IB_AW    = $clog2(IB_DEPTH);
  localparam int XW       = PRW + $clog2(PC) + 1;
  localparam int FCW      = PRW + $clog2(PC * TK2);

  layer_cfg_t cfg;

  // ---------------- controller and data manager ----------------
  logic load_start, load, load_done, ob_clear, ib_rd_en, lb_clear;
  logic [IB_AW-1:0] ib_rd_addr, ib_wr_addr;
  logic [7:0] fbase, cbase, fout, oh, ow, dr_f, dr_y, dr_x;
  logic drain_valid, drain_fire, can_accept;

  global_controller #(.PC(PC), .PF(PF), .H_MAX(H_MAX), .W_MAX(W_MAX), .C_MAX(C_MAX)) u_ctrl (
    .clk, .rst_n, .start, .cfg_in, .cfg, .busy, .done,
    .load_start, .load, .load_done, .ob_clear, .ib_rd_en, .ib_rd_addr, .lb_clear,
    .fbase, .cbase, .fout, .oh, .ow, .drain_valid, .drain_fire, .dr_f, .dr_y, .dr_x,
    .compute_cycles, .passes);

  logic w_wr_en, bn_wr_en, bn_wr_beta, ib_wr_en, pool_valid;
  logic [7:0] w_wr_f, w_wr_c, bn_wr_idx;
  logic [5:0] w_wr_k;
  logic [PC-1:0] ib_wr_lane;
  logic signed [DW-1:0] wr_data, pool_data;

  data_manager #(.PC(PC), .H_MAX(H_MAX), .W_MAX(W_MAX), .C_MAX(C_MAX)) u_dm (
    .clk, .rst_n, .cfg, .load_start, .load, .load_done,
    .in_valid, .in_data, .in_ready,
    .w_wr_en, .w_wr_f, .w_wr_c, .w_wr_k,
    .bn_wr_en, .bn_wr_beta, .bn_wr_idx,
    .ib_wr_en, .ib_wr_addr, .ib_wr_lane, .wr_data,
    .res_valid(pool_valid), .res_data(pool_data), .can_accept,
    .out_valid, .out_data, .out_ready);

  // ---------------- storage ----------------
  logic signed [DW-1:0] ib_rd_data [PC];
  input_buffer #(.DW(DW), .PC(PC), .C_MAX(C_MAX), .H_MAX(H_MAX), .W_MAX(W_MAX)) u_ibuf (
    .clk, .wr_en(ib_wr_en), .wr_addr(ib_wr_addr), .wr_lane(ib_wr_lane), .wr_data,
    .rd_en(ib_rd_en), .rd_addr(ib_rd_addr), .rd_data(ib_rd_data));

  logic signed [DW-1:0] wreg [PC][PF][TK2];
  weight_register #(.PC(PC), .PF(PF), .C_MAX(C_MAX), .F_MAX(F_MAX)) u_wreg (
    .clk, .wr_en(w_wr_en), .wr_f(w_wr_f), .wr_c(w_wr_c), .wr_k(w_wr_k), .wr_data,
    .rd_f(fbase), .rd_c(cbase), .rd_w(wreg));

  // ---------------- line buffer ----------------
  logic ib_valid;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) ib_valid <= 1'b0;
    else        ib_valid <= ib_rd_en;

  logic win_valid;
  logic [7:0] win_row, win_col;
  logic signed [DW-1:0] window [PC][TK][TK];
  line_buffer #(.DW(DW), .LANES(PC), .KP(TK), .W_MAX(W_MAX)) u_lbuf (
    .clk, .rst_n, .clear(lb_clear), .w(cfg.w), .in_valid(ib_valid), .in_data(ib_rd_data),
    .win_valid, .win_row, .win_col, .window);

  // Window selection: Winograd tiles on a stride of m, the single FC window,
  // or every pixel for pointwise layers.
  logic sel;
  always_comb begin
    unique case (cfg.mode)
      MODE_PW: sel = 1'b1;
      MODE_FC: sel = win_row == 8'(TK - 1) && win_col == 8'(TK - 1);
      default: sel = win_row >= 8'(TK - 1) && win_col >= 8'(TK - 1) &&
                     win_row[1:0] == 2'(TK - 1) && win_col[1:0] == 2'(TK - 1);
    endcase
  end

  // ---------------- Winograd transforms ----------------
  logic signed [VW-1:0] v [PC][TK][TK];
  wino_input_transform #(.LANES(PC)) u_itrans (.d(window), .v(v));

  logic signed [DW-1:0] g [PC][PF][WK][WK];
  logic signed [UW-1:0] u [PC][PF][TK][TK];
  always_comb
    for (int c = 0; c < PC; c++)
      for (int f = 0; f < PF; f++)
        for (int i = 0; i < WK; i++)
          for (int j = 0; j < WK; j++) g[c][f][i][j] = wreg[c][f][i*WK + j];
  wino_weight_transform #(.PC(PC), .PF(PF)) u_wtrans (.g(g), .u(u));

  // Operand multiplexers in front of the multiplier array. The weight operand
  // only changes at the start of a pass, so it is registered.
  logic signed [VW-1:0] a_op [PC][TK2];
  logic signed [UW-1:0] b_op [PC][PF][TK2];
  logic lane_en [PC][PF];
  always_comb
    for (int c = 0; c < PC; c++)
      for (int k = 0; k < TK2; k++)
        unique case (cfg.mode)
          MODE_PW: a_op[c][k] = (k == 0) ? VW'(window[c][TK-1][TK-1]) : '0;
          MODE_FC: a_op[c][k] = VW'(window[c][k / TK][k % TK]);
          default: a_op[c][k] = v[c][k / TK][k % TK];
        endcase

  always_ff @(posedge clk)
    for (int c = 0; c < PC; c++)
      for (int f = 0; f < PF; f++) begin
        lane_en[c][f] <= (int'(cbase) + c < int'(cfg.c)) && (int'(fbase) + f < int'(fout)) &&
                         (cfg.mode != MODE_DW || c == f);
        for (int k = 0; k < TK2; k++)
          unique case (cfg.mode)
            MODE_PW: b_op[c][f][k] <= (k == 0) ? UW'(wreg[c][f][0]) : '0;
            MODE_FC: b_op[c][f][k] <= UW'(wreg[c][f][k]);
            default: b_op[c][f][k] <= u[c][f][k / TK][k % TK];
          endcase
      end

  // ---------------- arithmetic module and adder trees ----------------
  logic p_valid;
  logic signed [PRW-1:0] p [PC][PF][TK2];
  arith_module #(.PC(PC), .PF(PF)) u_arith (
    .clk, .rst_n, .in_valid(win_valid && sel), .a(a_op), .b(b_op), .lane_en,
    .out_valid(p_valid), .p);

  logic [7:0] p_row, p_col;
  always_ff @(posedge clk)
    if (win_valid && sel) begin p_row <= win_row; p_col <= win_col; end

  logic signed [XW-1:0] xs [PF][TK][TK];
  adder_tree_conv #(.PC(PC), .PF(PF), .XW(XW)) u_tree_conv (.p(p), .x(xs));

  logic signed [FCW-1:0] yfc [PF];
  adder_tree_fc #(.PC(PC), .PF(PF), .OW(FCW)) u_tree_fc (.p(p), .y(yfc));

  logic signed [ACCW-1:0] yw [PF][WM][WM];
  wino_output_transform #(.PF(PF), .XW(XW)) u_otrans (.x(xs), .y(yw));

  // ---------------- accumulate stage ----------------
  logic acc_en, acc_one;
  logic [PF-1:0] acc_lane;
  logic [7:0] acc_f, acc_y, acc_x;
  logic signed [ACCW-1:0] acc_data [PF][WM][WM];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) acc_en <= 1'b0;
    else        acc_en <= p_valid;

  always_ff @(posedge clk)
    if (p_valid) begin
      acc_one <= cfg.mode == MODE_PW || cfg.mode == MODE_FC;
      acc_f   <= fbase;
      for (int f = 0; f < PF; f++) acc_lane[f] <= int'(fbase) + f < int'(fout);
      unique case (cfg.mode)
        MODE_PW: begin acc_y <= p_row; acc_x <= p_col; end
        MODE_FC: begin acc_y <= '0;    acc_x <= '0;    end
        default: begin acc_y <= p_row - 8'(TK - 1); acc_x <= p_col - 8'(TK - 1); end
      endcase
      for (int f = 0; f < PF; f++)
        for (int i = 0; i < WM; i++)
          for (int j = 0; j < WM; j++)
            unique case (cfg.mode)
              MODE_PW: acc_data[f][i][j] <= (i == 0 && j == 0) ? ACCW'(xs[f][0][0]) : '0;
              MODE_FC: acc_data[f][i][j] <= (i == 0 && j == 0) ? ACCW'(yfc[f]) : '0;
              default: acc_data[f][i][j] <= yw[f][i][j];
            endcase
    end

  logic signed [ACCW-1:0] ob_rd;
  output_buffer #(.PF(PF), .BLK(WM), .F_MAX(F_MAX), .H_MAX(H_MAX), .W_MAX(W_MAX)) u_obuf (
    .clk, .clear(ob_clear), .acc_en, .acc_one, .acc_lane, .acc_f, .acc_y, .acc_x, .acc_data,
    .rd_f(dr_f), .rd_y(dr_y), .rd_x(dr_x), .rd_data(ob_rd));

  // ---------------- drain: NORM -> ReLU -> add -> pool ----------------
  logic signed [DW-1:0] bn_y, relu_y, add_y;
  batch_norm #(.F_MAX(F_MAX)) u_bn (
    .clk, .wr_en(bn_wr_en), .wr_beta(bn_wr_beta), .wr_idx(bn_wr_idx), .wr_data,
    .en(cfg.norm_en), .shift(cfg.shift), .ch(dr_f), .x(ob_rd), .y(bn_y));
  relu #(.DW(DW)) u_relu (.en(cfg.relu_en), .x(bn_y), .y(relu_y));
  eltwise_add u_add (.en(cfg.add_en), .a(relu_y), .b(res_data), .y(add_y));

  assign drain_fire = drain_valid && can_accept && (!cfg.add_en || res_valid);
  assign res_ready  = drain_fire && cfg.add_en;

  pooling #(.DW(DW), .W_MAX(W_MAX)) u_pool (
    .clk, .en(cfg.pool_en), .avg(cfg.pool_avg), .in_valid(drain_fire),
    .in_row(dr_y), .in_col(dr_x), .in_data(add_y), .out_valid(pool_valid), .out_data(pool_data));
endmodule
