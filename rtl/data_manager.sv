// data_manager: gather/scatter logic between the external system and the
// accelerator's on-chip stores.
//
// Gather: while load is high the module accepts one 16-bit word per cycle on a
// valid/ready stream and routes it, in this fixed order, to
//   1. the weight register: for f, for c, for k  (k < 9 for 3x3 layers, 1 for
//      pointwise, 36 for FC; a depthwise layer sends one kernel per channel),
//   2. the normalisation scales gamma[f], then the biases beta[f],
//   3. the input buffer: for c, for y, for x of the H x W x C input tile.
// load_done pulses after the last word. load_start restarts the counters.
// Scatter: results from the post-processing chain enter through res_valid /
// res_data and leave on the out_valid/out_ready stream through a one-entry
// output register; can_accept tells the drain sequencer it may produce the
// next result (the register is empty or being emptied this cycle).
// The paper names this block only; the word order, the stream handshake and
// the one-entry output register are this design's choices.
// Lint note: rst_n is reported as used both asynchronously and synchronously;
// the synchronous use is only the assertion's 'disable iff', not logic.
module data_manager
  import turf_pkg::*;
#(
  parameter int PC    = 4,
  parameter int H_MAX = 10,
  parameter int W_MAX = 10,
  parameter int C_MAX = 8,
  localparam int IB_DEPTH = ((C_MAX + PC - 1) / PC) * H_MAX * W_MAX,
  localparam int IB_AW    = $clog2(IB_DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  layer_cfg_t           cfg,
  input  logic                 load_start,
  input  logic                 load,
  output logic                 load_done,
  // external input stream
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_data,
  output logic                 in_ready,
  // weight register write
  output logic                 w_wr_en,
  output logic [7:0]           w_wr_f,
  output logic [7:0]           w_wr_c,
  output logic [5:0]           w_wr_k,
  // normalisation parameter write
  output logic                 bn_wr_en,
  output logic                 bn_wr_beta,
  output logic [7:0]           bn_wr_idx,
  // input buffer write
  output logic                 ib_wr_en,
  output logic [IB_AW-1:0]     ib_wr_addr,
  output logic [PC-1:0]        ib_wr_lane,
  output logic signed [DW-1:0] wr_data,
  // scatter
  input  logic                 res_valid,
  input  logic signed [DW-1:0] res_data,
  output logic                 can_accept,
  output logic                 out_valid,
  output logic signed [DW-1:0] out_data,
  input  logic                 out_ready
);
  typedef enum logic [2:0] {PH_W, PH_G, PH_B, PH_I, PH_DONE} phase_e;
  phase_e     phase;
  logic [7:0] i0, i1, i2;       // nested counters of the current phase
  logic [7:0] kk, nfw, fout;
  logic       take;

  always_comb begin
    unique case (cfg.mode)
      MODE_PW: kk = 8'd1;
      MODE_FC: kk = 8'(TK2);
      default: kk = 8'(WK * WK);
    endcase
    nfw  = (cfg.mode == MODE_DW) ? 8'd1 : cfg.f;
    fout = (cfg.mode == MODE_DW) ? cfg.c : cfg.f;
  end

  assign in_ready = load && phase != PH_DONE && !load_start;
  assign take     = in_valid && in_ready;
  assign wr_data  = in_data;

  // Routing of the current word.
  always_comb begin
    w_wr_en    = take && phase == PH_W;
    w_wr_f     = (cfg.mode == MODE_DW) ? i1 : i0;
    w_wr_c     = i1;
    w_wr_k     = i2[5:0];
    bn_wr_en   = take && (phase == PH_G || phase == PH_B);
    bn_wr_beta = phase == PH_B;
    bn_wr_idx  = i0;
    ib_wr_en   = take && phase == PH_I;
    ib_wr_addr = IB_AW'((int'(i0) / PC) * H_MAX * W_MAX + int'(i1) * W_MAX + int'(i2));
    ib_wr_lane = PC'(1) << (int'(i0) % PC);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= PH_DONE; i0 <= '0; i1 <= '0; i2 <= '0; load_done <= 1'b0;
    end else begin
      load_done <= 1'b0;
      if (load_start) begin
        phase <= PH_W; i0 <= '0; i1 <= '0; i2 <= '0;
      end else if (take) begin
        unique case (phase)
          PH_W: begin   // i0 = f, i1 = c, i2 = k
            if (i2 != kk - 1) i2 <= i2 + 1;
            else begin
              i2 <= '0;
              if (i1 != cfg.c - 1) i1 <= i1 + 1;
              else begin
                i1 <= '0;
                if (i0 != nfw - 1) i0 <= i0 + 1;
                else begin i0 <= '0; phase <= PH_G; end
              end
            end
          end
          PH_G, PH_B: begin   // i0 = output channel
            if (i0 != fout - 1) i0 <= i0 + 1;
            else begin i0 <= '0; phase <= (phase == PH_G) ? PH_B : PH_I; end
          end
          PH_I: begin   // i0 = c, i1 = y, i2 = x
            if (i2 != cfg.w - 1) i2 <= i2 + 1;
            else begin
              i2 <= '0;
              if (i1 != cfg.h - 1) i1 <= i1 + 1;
              else begin
                i1 <= '0;
                if (i0 != cfg.c - 1) i0 <= i0 + 1;
                else begin i0 <= '0; phase <= PH_DONE; load_done <= 1'b1; end
              end
            end
          end
          default: ;
        endcase
      end
    end
  end

  // Scatter: one-entry output register.
  assign can_accept = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_data <= '0;
    end else if (can_accept) begin
      out_valid <= res_valid;
      if (res_valid) out_data <= res_data;
    end
  end

  // The result producer must not offer a result the register cannot take.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) res_valid |-> can_accept);
  // Output data is held while the consumer stalls.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
