// inter_layer_buffer: the intermediate buffer B_i between two fused layers.
//
// Holds whole tiles of the producing layer's output (tile_words words each,
// set at runtime, at most DEPTH) and hands them to the consuming layer as a
// stream. With DOUBLE = 1 there are two banks used in ping-pong fashion: the
// producer fills one bank while the consumer reads the other, so neither waits
// as long as their tile times match. With DOUBLE = 0 there is a single bank:
// the producer can only write the next tile once the consumer has read the
// whole current one, so the producer stalls (wr_ready low) in the meantime.
// A bank becomes readable when its last word is written and writable again
// when its last word is read. Both sides use valid/ready handshakes; rd_data is
// a combinational read of the current bank. stall_cycles counts
// cycles where the producer offered a word that was refused.
// The single/double choice and the stall it removes follow the paper's Table II
// and Sec. IV-A; the bank handshake and tile-granular hand-over are this
// design's.
// Lint note: rst_n is reported as used both asynchronously and synchronously;
// the synchronous use is only the assertion's 'disable iff', not logic.
module inter_layer_buffer #(
  parameter int DW     = 16,
  parameter int DEPTH  = 800,
  parameter bit DOUBLE = 1'b1,
  localparam int NB = DOUBLE ? 2 : 1,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [AW:0]          tile_words,
  input  logic                 wr_valid,
  input  logic signed [DW-1:0] wr_data,
  output logic                 wr_ready,
  output logic                 rd_valid,
  output logic signed [DW-1:0] rd_data,
  input  logic                 rd_ready,
  output logic [31:0]          stall_cycles
);
  logic signed [DW-1:0] mem [NB][DEPTH];
  logic [NB-1:0] full;
  logic wb, rb;                     // bank written / read
  logic [AW:0] wcnt, rcnt;

  assign wr_ready = !full[NB > 1 ? wb : 0];
  assign rd_valid = full[NB > 1 ? rb : 0];
  assign rd_data  = mem[NB > 1 ? rb : 0][rcnt[AW-1:0]];

  always_ff @(posedge clk)
    if (wr_valid && wr_ready) mem[NB > 1 ? wb : 0][wcnt[AW-1:0]] <= wr_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; wb <= 1'b0; rb <= 1'b0; wcnt <= '0; rcnt <= '0; stall_cycles <= '0;
    end else begin
      logic [NB-1:0] nfull;
      nfull = full;
      if (wr_valid && !wr_ready) stall_cycles <= stall_cycles + 1;
      if (wr_valid && wr_ready) begin
        if (wcnt == tile_words - 1) begin
          wcnt <= '0;
          nfull[NB > 1 ? wb : 0] = 1'b1;
          if (NB > 1) wb <= !wb;
        end else wcnt <= wcnt + 1;
      end
      if (rd_valid && rd_ready) begin
        if (rcnt == tile_words - 1) begin
          rcnt <= '0;
          nfull[NB > 1 ? rb : 0] = 1'b0;
          if (NB > 1) rb <= !rb;
        end else rcnt <= rcnt + 1;
      end
      full <= nfull;
    end
  end

  a_tile_fits: assert property (@(posedge clk) disable iff (!rst_n) wr_valid |-> tile_words <= (AW+1)'(DEPTH) && tile_words != 0);
endmodule
