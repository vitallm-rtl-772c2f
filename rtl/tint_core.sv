// tint_core: multiplier-free ternary x INT8 array (8 rows x 8 columns).
//
// Every cycle with in_valid high, eight INT8 activations are broadcast down
// the eight columns and each of the 64 PEs receives one 2-bit ternary weight.
// A PE's decoder turns (w, a) into 0, +a or -a; the eight PE outputs of a row
// are summed along the row's adder chain, and the chain's head input is a mux
// that selects 0 (first chunk of a tile) or the row's own output register
// (accumulate). The row registers therefore hold eight output-stationary dot
// products; with `last` they are flagged as a finished 8-element output tile.
//
// Interface: act[c] is the activation of column c, w[r][c] the ternary code
// of PE (r,c) (2'b01 = +1, 2'b00 = 0, 2'b11 = -1). Timing: one chunk per
// cycle (64 select-accumulates per cycle); acc is updated one cycle after the
// chunk is presented, and out_valid pulses in that same cycle for a `last`
// chunk. The array shape, decoder, row adder chain, zero mux and row DFFs
// follow Fig. 2 of the paper; the valid/first/last handshake is this
// design's own.
module tint_core
  import vita_pkg::*;
#(
  parameter int unsigned R = ROWS,
  parameter int unsigned C = COLS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic                      first,     // start a new output tile
  input  logic                      last,      // final reduction chunk of the tile
  input  logic [C-1:0][7:0]         act,
  input  tcode_t [R-1:0][C-1:0]     w,
  output logic [R-1:0][ACC_W-1:0]   acc,
  output logic                      out_valid
);

  logic signed [ACC_W-1:0] row_sum [R];

  always_comb begin
    for (int r = 0; r < R; r++) begin
      // head mux of the row: 0 for a new tile, else the row register
      row_sum[r] = first ? '0 : $signed(acc[r]);
      for (int c = 0; c < C; c++)
        row_sum[r] += ACC_W'(tern_sel(w[r][c], $signed(act[c])));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && last;
      if (in_valid)
        for (int r = 0; r < R; r++) acc[r] <= row_sum[r];
    end
  end

endmodule
