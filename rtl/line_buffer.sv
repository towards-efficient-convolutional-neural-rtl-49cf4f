// line_buffer: sliding-window generator over a row-major pixel stream.
//
// Each accepted pixel carries LANES channels (Pc). The buffer is one shift
// register per lane, (KP-1) rows of W_MAX pixels plus KP pixels long, so it
// holds the last KP rows of the image as KP rows of shift registers. After every
// accepted pixel the module presents the KP x KP window whose bottom-right
// corner is that pixel, together with the pixel's row and column. Whether a
// window is complete (row >= KP-1, col >= KP-1) and whether it lies on the
// stride the consumer wants is left to the consumer, so the same buffer serves
// Winograd tiles (stride m), FC windows and pointwise pixels.
//
// Timing: window, win_row, win_col and win_valid are registered, one cycle after
// in_valid. clear restarts the row/column count for a new image of width w
// (runtime, at most W_MAX). Only Ph = Pw = 1 is built: one pixel per cycle.
// Built from the paper: shift registers organised into K' rows. Own choices:
// runtime width, row/column outputs, no padding logic.
module line_buffer #(
  parameter int DW    = 16,
  parameter int LANES = 4,
  parameter int KP    = 6,
  parameter int W_MAX = 10
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic [7:0]           w,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_data [LANES],
  output logic                 win_valid,
  output logic [7:0]           win_row,
  output logic [7:0]           win_col,
  output logic signed [DW-1:0] window  [LANES][KP][KP]
);
  localparam int LEN = (KP - 1) * W_MAX + KP;

  logic signed [DW-1:0] sr [LANES][LEN];
  logic [7:0] row, col;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row <= '0; col <= '0;
      win_valid <= 1'b0; win_row <= '0; win_col <= '0;
    end else begin
      win_valid <= 1'b0;
      if (clear) begin
        row <= '0; col <= '0;
      end else if (in_valid) begin
        win_valid <= 1'b1;
        win_row   <= row;
        win_col   <= col;
        if (col == w - 8'd1) begin
          col <= '0;
          row <= row + 8'd1;
        end else begin
          col <= col + 8'd1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && !clear) begin
      for (int l = 0; l < LANES; l++) begin
        sr[l][0] <= in_data[l];
        for (int i = 1; i < LEN; i++) sr[l][i] <= sr[l][i-1];
      end
    end
  end

  // Window element (r, c), r = 0 top row: the pixel (KP-1-r) rows and (KP-1-c)
  // columns before the newest one, i.e. (KP-1-r)*w + (KP-1-c) positions back.
  always_comb begin
    for (int l = 0; l < LANES; l++)
      for (int r = 0; r < KP; r++)
        for (int c = 0; c < KP; c++) begin
          int unsigned idx;
          idx = (KP - 1 - r) * int'(w) + (KP - 1 - c);
          window[l][r][c] = (idx < LEN) ? sr[l][idx] : '0;
        end
  end

endmodule
