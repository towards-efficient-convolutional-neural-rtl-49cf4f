// turf_pkg: types and constants shared by the configurable CNN layer accelerator.
//
// The accelerator computes convolution with the Winograd minimal filtering
// algorithm F(m x m, r x r) in its F(4x4, 3x3) form: a 6x6 input tile d and a
// 3x3 kernel g give a 4x4 output tile Y = A^T [ (G g G^T) .* (B^T d B) ] A.
// The matrices below are the standard F(4x4,3x3) ones (Lavin and Gray). G holds
// the fractions 1/4, 1/6, 1/12 and 1/24, so this design stores G scaled by 24
// (GS = 24*G) to keep every transform integer and exact; the output transform
// then divides by 24*24 = 576. Data is 16-bit two's complement fixed point,
// as in the evaluated designs. The layer configuration (layer type, computation
// sequence, tile shape and post-processing switches) is a packed struct.
package turf_pkg;

  // ---- Data format and Winograd shape ------------------------------------
  localparam int DW    = 16;             // feature map / weight width
  localparam int WM    = 4;              // Winograd output tile m
  localparam int WK    = 3;              // kernel size K (r)
  localparam int TK    = WM + WK - 1;    // Winograd input tile Tk = 6
  localparam int TK2   = TK * TK;        // 36 Winograd-domain positions
  localparam int VW    = DW + 7;         // |B^T d B| <= 100 * 2^15
  localparam int UW    = DW + 10;        // |GS g GS^T| <= 576 * 2^15
  localparam int PRW   = VW + UW;        // product width
  localparam int ACCW  = 48;             // output-buffer accumulator width
  localparam int WSCALE = 576;           // (24)^2, the scale of GS g GS^T

  // 9^-1 modulo 2^48: an exact multiple of 9 times this, modulo 2^48, is the
  // quotient. Used to divide the (exactly divisible) output tile by 9.
  localparam logic [ACCW-1:0] INV9 = 48'hE38E_38E3_8E39;

  // B^T (6x6)
  localparam int BT [TK][TK] = '{
    '{ 4,  0, -5,  0, 1, 0},
    '{ 0, -4, -4,  1, 1, 0},
    '{ 0,  4, -4, -1, 1, 0},
    '{ 0, -2, -1,  2, 1, 0},
    '{ 0,  2, -1, -2, 1, 0},
    '{ 0,  4,  0, -5, 0, 1}};

  // GS = 24 * G (6x3)
  localparam int GS [TK][WK] = '{
    '{ 6,  0,  0},
    '{-4, -4, -4},
    '{-4,  4, -4},
    '{ 1,  2,  4},
    '{ 1, -2,  4},
    '{ 0,  0, 24}};

  // A^T (4x6)
  localparam int AT [WM][TK] = '{
    '{1, 1,  1, 1,  1, 0},
    '{0, 1, -1, 2, -2, 0},
    '{0, 1,  1, 4,  4, 0},
    '{0, 1, -1, 8, -8, 1}};

  // ---- Layer configuration -------------------------------------------------
  typedef enum logic [1:0] {
    MODE_WINO = 2'd0,   // standard 3x3 convolution through Winograd
    MODE_DW   = 2'd1,   // depthwise 3x3 convolution through Winograd
    MODE_PW   = 2'd2,   // pointwise (1x1) convolution
    MODE_FC   = 2'd3    // fully connected over a 6x6xC input
  } layer_mode_e;

  typedef enum logic {
    SEQ_FM = 1'b0,      // filter-major  (f, c, i)
    SEQ_CM = 1'b1       // channel-major (c, f, i)
  } seq_e;

  typedef struct packed {
    layer_mode_e mode;
    seq_e        seq;
    logic [7:0]  h;          // input tile height
    logic [7:0]  w;          // input tile width
    logic [7:0]  c;          // input channels
    logic [7:0]  f;          // output channels (ignored in MODE_DW)
    logic        norm_en;    // apply per-channel scale and bias
    logic [5:0]  shift;      // requantisation right shift
    logic        relu_en;
    logic        add_en;     // element-wise addition of the residual stream
    logic        pool_en;    // 2x2, stride-2 pooling
    logic        pool_avg;   // 1: average, 0: max
  } layer_cfg_t;

  function automatic logic signed [DW-1:0] sat_dw(input logic signed [63:0] v);
    if (v > 64'sd32767)       return 16'sh7fff;
    else if (v < -64'sd32768) return 16'sh8000;
    else                      return v[DW-1:0];
  endfunction

endpackage
