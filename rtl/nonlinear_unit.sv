// nonlinear_unit: scaling unit, pipelined reductions (PipeRed), raw buffer
// and the absmax quantization barrier.
//
// A vector is announced with v_start (mode, number of 8-element tiles,
// element count, dequantization scale, output address). Its integer output
// tiles then arrive from the cores in any order (t_idx places them). Each
// tile is
//   1. dequantized by the scaling unit: raw = acc * scale (raw values carry
//      RAW_F = 8 fractional bits, scale carries 16), and
//   2. written to the raw buffer while the reductions are updated in the same
//      cycle: absmax |x| always, sum of squares for RMSNorm, and running max
//      with rescaled sum of exponentials (online softmax) for softmax.
// When the last tile has arrived the reductions are complete (the barrier).
// The unit then computes one per-vector scale and one reciprocal with a
// sequential divider (and, for RMSNorm, an integer square root), and streams
// the raw buffer once more, quantizing each tile to INT8 and writing it to
// the data buffer. Output: (INT8 vector, single scale), where
//   absmax : q = round(127 x / a),            scale = a / 127
//   rmsnorm: q = round(127 x / a),            scale = a / (127 rms)
//   softmax: q = round(127 exp(x - max)),     scale = 1 / (127 sum exp)
// so x/rms and softmax probabilities are represented exactly as q * scale
// without a per-element division. The reciprocal 127/a carries RECIP_F = 40
// fractional bits so that round(127 x / a) is exact to one LSB for any a.
//
// Timing: one tile per cycle in, two-cycle input pipeline; after the last
// tile about 70-170 cycles of scale computation, then one tile per cycle
// out; v_done pulses with v_out_scale valid. Only one vector is open at a
// time (the reduction hardware is time-multiplexed between operators).
// The decoupling of reductions from scaling, absmax per vector and the
// (vector, scale) interface follow the paper; the number formats, the
// base-2 exponential approximation and the division/sqrt hardware are this
// design's own. RMSNorm has no learned gain here.
module nonlinear_unit
  import vita_pkg::*;
#(
  parameter int unsigned RAW_TILES = 1080,   // longest vector / 8 (FFN width 8640)
  parameter int unsigned AW        = 12,     // data-buffer word address width
  localparam int unsigned TW       = $clog2(RAW_TILES + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // vector context
  input  logic                          v_start,
  input  nl_mode_e                      v_mode,
  input  logic [TW-1:0]                 v_tiles,
  input  logic [TW+2:0]                 v_elems,
  input  logic [SCALE_W-1:0]            v_scale,
  input  logic [AW-1:0]                 v_out_base,
  output logic                          v_busy,
  output logic                          v_done,
  output logic [SCALE_W-1:0]            v_out_scale,
  // tiles from the cores
  input  logic                          t_valid,
  output logic                          t_ready,
  input  logic [TW-1:0]                 t_idx,
  input  logic [LANES-1:0]              t_mask,
  input  logic [LANES-1:0][ACC_W-1:0]   t_acc,
  // quantized output to the data buffer
  output logic                          q_valid,
  output logic [AW-1:0]                 q_addr,
  output logic [LANES-1:0][7:0]         q_data
);

  typedef enum logic [2:0] {S_IDLE, S_RUN, S_DIV_R, S_DIV_N, S_SQRT, S_DIV_S, S_QUANT, S_DONE} state_e;
  state_e state;

  nl_mode_e            mode;
  logic [TW-1:0]       n_tiles, n_seen, rd_ptr;
  logic [TW+2:0]       n_elems;
  logic [SCALE_W-1:0]  in_scale;
  logic [AW-1:0]       out_base;

  // ---------------------------------------------------------------- raw buffer
  logic [LANES-1:0][31:0] raw_mem  [RAW_TILES];
  logic [LANES-1:0]       mask_mem [RAW_TILES];

  // ---------------------------------------------------------- stage A: scaling
  logic                   a_v;
  logic [TW-1:0]          a_idx;
  logic [LANES-1:0]       a_mask;
  logic [LANES-1:0][31:0] a_raw;

  function automatic logic [31:0] dequant(input logic signed [31:0] acc, input logic [SCALE_W-1:0] sc);
    logic signed [63:0] p;
    p = (64'(acc) * $signed({32'd0, sc})) >>> (SCALE_F - RAW_F);
    if (p > 64'sh7fffffff)       return 32'h7fffffff;
    else if (p < -64'sh80000000) return 32'h80000000;
    else                         return p[31:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_v <= 1'b0; a_idx <= '0; a_mask <= '0; a_raw <= '0;
    end else begin
      a_v <= t_valid && t_ready;
      if (t_valid && t_ready) begin
        a_idx  <= t_idx;
        a_mask <= t_mask;
        for (int l = 0; l < LANES; l++) a_raw[l] <= dequant($signed(t_acc[l]), in_scale);
      end
    end
  end

  // --------------------------------------------------- stage B: reductions
  logic [31:0]        amax;       // absmax of raw values
  logic [63:0]        sumsq;      // sum of squares of raw (saturated to 24 bits)
  logic signed [31:0] rmax;       // running max (softmax)
  logic               rmax_ok;
  logic [47:0]        sexp;       // running sum of exp(x - rmax), EXP_F fraction

  logic [31:0]        t_amax;
  logic [63:0]        t_sq;
  logic signed [31:0] t_max, m_new;
  logic               t_any;
  logic [47:0]        t_sexp, s_resc;

  always_comb begin
    logic [31:0]        mag;
    logic signed [23:0] sat;
    logic signed [31:0] x;
    t_amax = '0; t_sq = '0; t_max = 32'sh80000000; t_any = 1'b0;
    mag = '0; sat = '0; x = '0;
    for (int l = 0; l < LANES; l++) begin
      if (a_mask[l]) begin
        x   = $signed(a_raw[l]);
        mag = x[31] ? 32'(-x) : 32'(x);
        if (mag > t_amax) t_amax = mag;
        sat = (x > 32'sh7fffff) ? 24'sh7fffff : (x < -32'sh7fffff) ? -24'sh7fffff : x[23:0];
        t_sq += 64'(48'(sat * sat));
        if (x > t_max) t_max = x;
        t_any = 1'b1;
      end
    end
    m_new  = (!rmax_ok || (t_any && t_max > rmax)) ? t_max : rmax;
    s_resc = rmax_ok ? 48'((64'(sexp) * 64'(exp_neg(rmax - m_new))) >> EXP_F) : '0;
    t_sexp = '0;
    for (int l = 0; l < LANES; l++)
      if (a_mask[l]) t_sexp += 48'(exp_neg($signed(a_raw[l]) - m_new));
  end

  // ------------------------------------------------------ scale computation
  logic              div_start, div_done, sq_start, sq_done;
  logic [63:0]       div_a, div_b, div_q;
  logic [31:0]       sq_root;
  logic [63:0]       recip;      // 127 * 2^RECIP_F / absmax
  logic [63:0]       meansq;
  logic              div_busy;

  seq_divider #(.W(64)) u_div (
    .clk, .rst_n, .start(div_start), .dividend(div_a), .divisor(div_b),
    .quotient(div_q), .done(div_done)
  );
  seq_isqrt #(.W(64)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .x(meansq), .root(sq_root), .done(sq_done)
  );

  always_comb begin
    div_a = '0; div_b = '0;
    unique case (state)
      S_DIV_R: begin div_a = 64'd127 << RECIP_F; div_b = 64'(amax); end
      S_DIV_N: begin div_a = sumsq;              div_b = 64'(n_elems); end
      S_DIV_S: unique case (mode)
        NL_SOFTMAX: begin div_a = 64'd1 << (SCALE_F + EXP_F); div_b = 64'd127 * 64'(sexp); end
        NL_RMSNORM: begin div_a = 64'(amax) << SCALE_F;       div_b = 64'd127 * 64'(sq_root); end
        default:    begin div_a = 64'(amax) << (SCALE_F - RAW_F); div_b = 64'd127; end
      endcase
      default: ;
    endcase
  end

  // -------------------------------------------------------------- quantizer
  logic                   qr_v;          // raw-buffer read in flight
  logic [TW-1:0]          qr_idx;
  logic [LANES-1:0][31:0] qr_raw;
  logic [LANES-1:0]       qr_mask;

  function automatic logic [7:0] quant(input logic signed [31:0] x, input nl_mode_e md,
                                       input logic signed [31:0] mx, input logic [63:0] rc);
    logic [63:0] mag, qm;
    if (md == NL_SOFTMAX) begin
      qm = (64'(exp_neg(x - mx)) * 64'd127 + (64'd1 << (EXP_F - 1))) >> EXP_F;
      return (qm > 127) ? 8'd127 : qm[7:0];
    end
    mag = x[31] ? 64'(-x) : 64'(x);
    qm  = (mag * rc + (64'd1 << (RECIP_F - 1))) >> RECIP_F;
    if (qm > 127) qm = 127;
    return x[31] ? 8'(-qm[7:0]) : qm[7:0];
  endfunction

  // ------------------------------------------------------------ control FSM
  assign t_ready = (state == S_RUN);
  assign v_busy  = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (a_v) begin
      raw_mem[a_idx]  <= a_raw;
      mask_mem[a_idx] <= a_mask;
    end
    qr_raw  <= raw_mem[rd_ptr];
    qr_mask <= mask_mem[rd_ptr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; mode <= NL_ABSMAX; n_tiles <= '0; n_seen <= '0; rd_ptr <= '0;
      n_elems <= '0; in_scale <= '0; out_base <= '0;
      amax <= '0; sumsq <= '0; rmax <= '0; rmax_ok <= 1'b0; sexp <= '0;
      div_start <= 1'b0; sq_start <= 1'b0; recip <= '0; meansq <= '0; div_busy <= 1'b0;
      qr_v <= 1'b0; qr_idx <= '0;
      q_valid <= 1'b0; q_addr <= '0; q_data <= '0; v_done <= 1'b0; v_out_scale <= '0;
    end else begin
      div_start <= 1'b0;
      sq_start  <= 1'b0;
      q_valid   <= 1'b0;
      v_done    <= 1'b0;
      qr_v      <= 1'b0;
      // reductions run whenever a scaled tile leaves stage A
      if (a_v) begin
        if (t_amax > amax) amax <= t_amax;
        sumsq   <= sumsq + t_sq;
        if (t_any) begin
          rmax    <= m_new;
          rmax_ok <= 1'b1;
          sexp    <= s_resc + t_sexp;
        end
        n_seen <= n_seen + 1'b1;
      end
      unique case (state)
        S_IDLE: if (v_start) begin
          state    <= S_RUN;
          mode     <= v_mode;
          n_tiles  <= v_tiles;
          n_elems  <= v_elems;
          in_scale <= v_scale;
          out_base <= v_out_base;
          n_seen   <= '0;
          amax <= '0; sumsq <= '0; rmax <= '0; rmax_ok <= 1'b0; sexp <= '0;
        end
        S_RUN: if (!a_v && !(t_valid && t_ready) && n_seen == n_tiles) begin
          // barrier: every tile has been reduced
          state     <= (mode == NL_SOFTMAX) ? S_DIV_S : S_DIV_R;
          div_busy  <= 1'b0;
        end
        S_DIV_R, S_DIV_N, S_DIV_S: begin
          if (!div_busy) begin
            div_start <= 1'b1;
            div_busy  <= 1'b1;
          end else if (div_done) begin
            div_busy <= 1'b0;
            unique case (state)
              S_DIV_R: begin
                recip <= div_q;
                state <= (mode == NL_RMSNORM) ? S_DIV_N : S_DIV_S;
              end
              S_DIV_N: begin
                meansq   <= div_q;
                sq_start <= 1'b1;
                state    <= S_SQRT;
              end
              default: begin
                v_out_scale <= (div_q > 64'(32'hffffffff)) ? 32'hffffffff : div_q[31:0];
                rd_ptr      <= '0;
                state       <= S_QUANT;
              end
            endcase
          end
        end
        S_SQRT: if (sq_done) state <= S_DIV_S;
        S_QUANT: begin
          // read tile rd_ptr this cycle, quantize it the next
          if (rd_ptr < n_tiles) begin
            qr_v   <= 1'b1;
            qr_idx <= rd_ptr;
            rd_ptr <= rd_ptr + 1'b1;
          end else if (!qr_v) begin
            state  <= S_DONE;
          end
        end
        S_DONE: begin
          v_done <= 1'b1;
          state  <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
      if (qr_v) begin
        q_valid <= 1'b1;
        q_addr  <= out_base + AW'(qr_idx);
        for (int l = 0; l < LANES; l++)
          q_data[l] <= qr_mask[l] ? quant($signed(qr_raw[l]), mode, rmax, recip) : 8'd0;
      end
    end
  end

endmodule
