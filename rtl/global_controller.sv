// global_controller: the global state controller (counters and signals).
//
// One layer runs as LOAD -> CLEAR -> passes -> DRAIN -> DONE:
//   LOAD   the data manager gathers weights, normalisation parameters and the
//          input tile (load high until load_done).
//   CLEAR  the output buffer is zeroed (one cycle).
//   passes one pass per (output-channel group, input-channel group) pair. A pass
//          streams the H x W tile of one input-channel group out of the input
//          buffer, one pixel (PC channels) per cycle, then waits GAP cycles so
//          that the datapath empties, clearing the line buffer on the last one.
//          The order of the pairs is the computation sequence: filter-major
//          (f, c, i) runs every input group for one output group before moving
//          to the next, channel-major (c, f, i) the reverse. A depthwise layer
//          has one pass per channel group (its output group is its input group).
//   DRAIN  every output element (f, y, x) is read once, row-major per channel,
//          advancing on drain_fire (the downstream chain accepted it).
// Timing: a layer of NP passes spends NP * (H*W + GAP) cycles in its passes;
// compute_cycles counts them. done pulses once at the end. The paper gives the
// controller's role and the two sequences; states and counters are this design's.
// Lint note: rst_n is reported as used both asynchronously and synchronously;
// the synchronous use is only the assertion's 'disable iff', not logic.
module global_controller
  import turf_pkg::*;
#(
  parameter int PC    = 4,
  parameter int PF    = 4,
  parameter int H_MAX = 10,
  parameter int W_MAX = 10,
  parameter int C_MAX = 8,
  parameter int GAP   = 6,
  localparam int IB_DEPTH = ((C_MAX + PC - 1) / PC) * H_MAX * W_MAX,
  localparam int IB_AW    = $clog2(IB_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  layer_cfg_t       cfg_in,
  output layer_cfg_t       cfg,          // configuration latched at start
  output logic             busy,
  output logic             done,
  // load phase
  output logic             load_start,
  output logic             load,
  input  logic             load_done,
  // compute phase
  output logic             ob_clear,
  output logic             ib_rd_en,
  output logic [IB_AW-1:0] ib_rd_addr,
  output logic             lb_clear,
  output logic [7:0]       fbase,
  output logic [7:0]       cbase,
  output logic [7:0]       fout,         // output channels of the layer
  output logic [7:0]       oh,           // output height / width before pooling
  output logic [7:0]       ow,
  // drain phase
  output logic             drain_valid,
  input  logic             drain_fire,
  output logic [7:0]       dr_f,
  output logic [7:0]       dr_y,
  output logic [7:0]       dr_x,
  // statistics
  output logic [31:0]      compute_cycles,
  output logic [15:0]      passes
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_CLEAR, S_STREAM, S_GAP, S_DRAIN, S_DONE} state_e;
  state_e state;

  logic [7:0] og, ig;            // outer and inner group counters
  logic [7:0] nfg, ncg, nog, nig;
  logic [7:0] fg, cg;
  logic [7:0] py, px;            // pixel counters of the current pass
  logic [7:0] gap_cnt;

  always_comb begin
    nfg  = 8'((int'(cfg.f) + PF - 1) / PF);
    ncg  = 8'((int'(cfg.c) + PC - 1) / PC);
    fout = (cfg.mode == MODE_DW) ? cfg.c : cfg.f;
    if (cfg.mode == MODE_DW)   begin nog = ncg; nig = 8'd1; end
    else if (cfg.seq == SEQ_FM) begin nog = nfg; nig = ncg; end
    else                        begin nog = ncg; nig = nfg; end
    if (cfg.mode == MODE_DW)    begin cg = og; fg = og; end
    else if (cfg.seq == SEQ_FM) begin fg = og; cg = ig; end
    else                        begin cg = og; fg = ig; end
    fbase = 8'(int'(fg) * PF);
    cbase = 8'(int'(cg) * PC);
    unique case (cfg.mode)
      MODE_PW: begin oh = cfg.h;         ow = cfg.w;         end
      MODE_FC: begin oh = 8'd1;          ow = 8'd1;          end
      default: begin oh = cfg.h - 8'd2;  ow = cfg.w - 8'd2;  end
    endcase
  end

  assign busy        = state != S_IDLE;
  assign load        = state == S_LOAD;
  assign ob_clear    = state == S_CLEAR;
  assign ib_rd_en    = state == S_STREAM;
  assign ib_rd_addr  = IB_AW'(int'(cg) * H_MAX * W_MAX + int'(py) * W_MAX + int'(px));
  assign lb_clear    = state == S_CLEAR || (state == S_GAP && gap_cnt == 8'(GAP - 1));
  assign drain_valid = state == S_DRAIN;
  assign done        = state == S_DONE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cfg <= '0; load_start <= 1'b0;
      og <= '0; ig <= '0; py <= '0; px <= '0; gap_cnt <= '0;
      dr_f <= '0; dr_y <= '0; dr_x <= '0;
      compute_cycles <= '0; passes <= '0;
    end else begin
      load_start <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          cfg <= cfg_in; state <= S_LOAD; load_start <= 1'b1;
          compute_cycles <= '0; passes <= '0;
        end
        S_LOAD: if (load_done) state <= S_CLEAR;
        S_CLEAR: begin
          og <= '0; ig <= '0; py <= '0; px <= '0; state <= S_STREAM;
        end
        S_STREAM: begin
          compute_cycles <= compute_cycles + 1;
          if (px != cfg.w - 1) px <= px + 1;
          else begin
            px <= '0;
            if (py != cfg.h - 1) py <= py + 1;
            else begin py <= '0; gap_cnt <= '0; state <= S_GAP; end
          end
        end
        S_GAP: begin
          compute_cycles <= compute_cycles + 1;
          if (gap_cnt != 8'(GAP - 1)) gap_cnt <= gap_cnt + 1;
          else begin
            passes <= passes + 1;
            if (ig != nig - 1) begin ig <= ig + 1; state <= S_STREAM; end
            else begin
              ig <= '0;
              if (og != nog - 1) begin og <= og + 1; state <= S_STREAM; end
              else begin
                og <= '0; dr_f <= '0; dr_y <= '0; dr_x <= '0; state <= S_DRAIN;
              end
            end
          end
        end
        S_DRAIN: if (drain_fire) begin
          if (dr_x != ow - 1) dr_x <= dr_x + 1;
          else begin
            dr_x <= '0;
            if (dr_y != oh - 1) dr_y <= dr_y + 1;
            else begin
              dr_y <= '0;
              if (dr_f != fout - 1) dr_f <= dr_f + 1;
              else state <= S_DONE;
            end
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_fire_in_drain: assert property (@(posedge clk) disable iff (!rst_n) drain_fire |-> state == S_DRAIN);
endmodule
