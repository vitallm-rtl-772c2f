// boothflex_core: radix-4 Booth array shared by INT8 x INT8 and ternary x INT8.
//
// An operand chunk is an 8x8 block of multipliers y[r][c] (the "Multiplier
// Buffer") and eight multiplicands m[c] (the "Multiplicand Buffer"), both
// captured when the chunk is accepted. The array then runs N Booth
// iterations, most significant window first. In iteration i every PE recodes
// its 3-bit window {y[2i+1], y[2i], y[2i-1]} (y[-1] = 0) to a digit
// r in {-2,-1,0,+1,+2} and produces r*m[c] by shift/negate; the row adder chain
// sums the eight partial products (PP_i) and the row register is updated as
// PS_i = (PS_{i-1} << 2) + PP_i, the head mux selecting 0 in the first
// iteration. After the last iteration a second per-row stage adds PS into the
// output-stationary accumulator, which can be cleared to 0 (Fig. 3).
//
// INT8 mode: N = ceil((8+1)/2) = 5 iterations over the sign-extended 8-bit
// multiplier. Ternary mode: the 2-bit code in y[1:0] is zero-padded to the one
// window {code, 0} (-1: 110, 0: 000, +1: 010), N = 1. The fourth code 2'b10
// is illegal here (it would pad to 100, digit -2) and an assertion flags it.
//
// Timing: in_ready is high when idle or in the last iteration, so chunks
// stream at one per N cycles (ternary: one per cycle). acc is updated two
// cycles after the last iteration's chunk is accepted for N = 1, in general
// N+1 cycles after acceptance; out_valid pulses with that update when the
// chunk was flagged `last`. `first` clears the accumulator before the add.
// Array shape, recoding, iteration counts and the two register stages follow
// the paper; the handshake is this design's own.
module boothflex_core
  import vita_pkg::*;
#(
  parameter int unsigned R = ROWS,
  parameter int unsigned C = COLS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  bf_mode_e                  mode,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic                      first,
  input  logic                      last,
  input  logic [C-1:0][7:0]         mcand,     // multiplicand per column
  input  logic [R-1:0][C-1:0][7:0]  mult,      // multiplier per PE (ternary: code in [1:0])
  output logic [R-1:0][ACC_W-1:0]   acc,
  output logic                      out_valid,
  output logic                      busy
);

  // operand buffers
  logic [C-1:0][7:0]        mc_q;
  logic [R-1:0][C-1:0][9:0] ml_q;       // sign-extended multiplier with y[-1]=0 appended as bit 0
  bf_mode_e                 mode_q;
  logic                     first_q, last_q;
  logic [2:0]               iter;       // remaining iterations, 0 = idle
  logic [R-1:0][ACC_W-1:0]  ps;         // first-stage row registers
  logic                     ps_done, ps_first, ps_last;

  logic [2:0] n_iter;
  assign n_iter   = (mode == BF_INT8) ? 3'd5 : 3'd1;
  assign in_ready = (iter <= 3'd1);
  assign busy     = (iter != 0) || ps_done;

  logic signed [ACC_W-1:0] pp [R];

  always_comb begin
    for (int r = 0; r < R; r++) begin
      pp[r] = '0;
      for (int c = 0; c < C; c++) begin
        logic [2:0]  win;
        logic [10:0] yy;
        logic [2:0]  wi;
        wi  = (iter == 0) ? 3'd0 : iter - 3'd1;         // window index, MSB first
        yy  = {ml_q[r][c], 1'b0};                       // y[9:0], y[-1]
        win = yy[2*wi +: 3];
        pp[r] += ACC_W'(booth_pp(booth_digit(win), $signed(mc_q[c])));
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mc_q <= '0; ml_q <= '0; mode_q <= BF_TERNARY; first_q <= 1'b0; last_q <= 1'b0;
      iter <= '0; ps <= '0; ps_done <= 1'b0; ps_first <= 1'b0; ps_last <= 1'b0;
      acc <= '0; out_valid <= 1'b0;
    end else begin
      // ---- stage 1: Booth iterations
      ps_done <= 1'b0;
      if (iter != 0) begin
        for (int r = 0; r < R; r++)
          ps[r] <= ((mode_q == BF_INT8 && iter != 3'd5) ? (ps[r] << 2) : '0) + pp[r];
        if (iter == 3'd1) begin
          ps_done  <= 1'b1;
          ps_first <= first_q;
          ps_last  <= last_q;
        end
        iter <= iter - 3'd1;
      end
      if (in_valid && in_ready) begin
        mc_q    <= mcand;
        mode_q  <= mode;
        first_q <= first;
        last_q  <= last;
        iter    <= n_iter;
        for (int r = 0; r < R; r++)
          for (int c = 0; c < C; c++)
            ml_q[r][c] <= (mode == BF_INT8) ? {{2{mult[r][c][7]}}, mult[r][c]}
                                            : {8'd0, mult[r][c][1:0]};
      end
      // ---- stage 2: output-stationary accumulator
      out_valid <= ps_done && ps_last;
      if (ps_done)
        for (int r = 0; r < R; r++)
          acc[r] <= (ps_first ? '0 : acc[r]) + ps[r];
    end
  end

  // the unused ternary code 2'b10 would zero-pad to window 100 (digit -2)
  for (genvar r = 0; r < R; r++) begin : g_chk
    for (genvar c = 0; c < C; c++) begin : g_chk_c
      a_legal_code: assert property (@(posedge clk) disable iff (!rst_n)
        (in_valid && in_ready && mode == BF_TERNARY) |-> mult[r][c][1:0] != 2'b10);
    end
  end

endmodule
