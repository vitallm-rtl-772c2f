// attention_engine: one head of decode attention with predictive sparsity.
//
// For head h the engine
//   1. reads the INT8 query (hc words) from data-buffer port B into a local
//      multiplicand store and, through the leading-one detector, into the
//      LOP array;
//   2. streams the key features of all n_tok cached tokens from the K_LO
//      cache through the LOP array (8 tokens x 8 dimensions per cycle) and
//      hands each group of 8 surrogate scores to the top-K selector;
//   3. collects the kept token indices (set C, |C| = min(K, n_tok));
//   4. QK^T: for each group of 8 kept tokens and each dimension chunk it
//      requests only that 8x8 key block from the off-chip KV cache and runs
//      it on BoothFlex in INT8 mode (multiplier = keys, multiplicand = q);
//      the score tiles go to the nonlinear unit as one softmax vector;
//   5. reads the quantized probabilities back, and for SV requests the value
//      blocks of the kept tokens (multiplier = V transposed, multiplicand =
//      probabilities) producing the head output, re-quantized by absmax.
// Each vector of the nonlinear unit is requested with nl_req and owned from
// nl_gnt until nl_done. BoothFlex tiles start only with an output credit.
//
// KV interface: a request names 8 token indices, a dimension chunk and K or
// V; responses return in request order as an 8x8 INT8 block,
// rsp[token][dim]. Timing: LOP runs at one block per cycle, BoothFlex at one
// block per 5 cycles. The order of operations and the use of LOP indices to
// gate KV fetches follow the paper; the request format, local stores and
// the phase sequencing are this design's own.
module attention_engine
  import vita_pkg::*;
#(
  parameter int unsigned MAX_TOKENS = 2048,
  parameter int unsigned K_MAX      = 32,
  parameter int unsigned MAX_HC     = 16,
  parameter int unsigned DAW        = 12,
  parameter int unsigned TW         = 11,
  localparam int unsigned IW        = $clog2(MAX_TOKENS),
  localparam int unsigned HW        = $clog2(MAX_HC),
  localparam int unsigned KT        = K_MAX / LANES        // kept-token tiles
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // command
  input  logic                          start,
  input  logic [DAW-1:0]                q_base,
  input  logic [DAW-1:0]                p_base,
  input  logic [DAW-1:0]                o_base,
  input  logic [HW:0]                   hc,          // head dim / 8
  input  logic [IW:0]                   n_tok,       // cached tokens M
  input  logic [IW:0]                   k_sel,       // K
  input  logic [SCALE_W-1:0]            s_qk,        // dequant scale of QK scores
  input  logic [SCALE_W-1:0]            s_sv,        // dequant scale of SV outputs
  output logic                          busy,
  output logic                          done,
  output logic [IW:0]                   n_keep,
  // data buffer port B
  output logic                          b_en,
  output logic [DAW-1:0]                b_addr,
  input  logic [7:0][7:0]               b_data,
  // LOP array
  output logic                          lop_q_wr,
  output logic [HW-1:0]                 lop_q_idx,
  output logic [7:0][7:0]               lop_q_chunk,
  output logic                          lop_k_valid,
  output logic                          lop_k_first,
  output logic                          lop_k_last,
  output logic [HW-1:0]                 lop_k_idx,
  input  logic                          lop_score_valid,
  // K_LO cache read side
  input  logic                          klo_valid,
  output logic                          klo_ready,
  // top-K selector
  output logic                          tk_start,
  output logic [IW:0]                   tk_k_sel,
  output logic                          tk_in_valid,
  output logic                          tk_in_last,
  output logic [LANES-1:0]              tk_in_mask,
  input  logic                          tk_out_valid,
  input  logic [$clog2(LANES):0]        tk_out_count,
  input  logic [LANES-1:0][IW-1:0]      tk_out_idx,
  input  logic                          tk_done,
  // KV cache (off chip)
  output logic                          kv_req_valid,
  input  logic                          kv_req_ready,
  output logic                          kv_req_is_v,
  output logic [LANES-1:0][IW-1:0]      kv_req_tok,
  output logic [HW-1:0]                 kv_req_chunk,
  input  logic                          kv_rsp_valid,
  output logic                          kv_rsp_ready,
  input  logic [7:0][7:0][7:0]          kv_rsp_data,
  // BoothFlex (INT8 mode)
  output logic                          bf_valid,
  input  logic                          bf_ready,
  output logic                          bf_first,
  output logic                          bf_last,
  output logic [7:0][7:0]               bf_mcand,
  output logic [7:0][7:0][7:0]          bf_mult,
  input  logic                          bf_out_valid,
  output logic [TW-1:0]                 bf_out_idx,
  output logic [LANES-1:0]              bf_out_mask,
  input  logic                          bf_avail,
  output logic                          bf_take,
  // nonlinear unit ownership
  output logic                          nl_req,
  output nl_mode_e                      nl_mode,
  output logic [TW-1:0]                 nl_tiles,
  output logic [TW+2:0]                 nl_elems,
  output logic [SCALE_W-1:0]            nl_scale,
  output logic [DAW-1:0]                nl_base,
  input  logic                          nl_gnt,
  input  logic                          nl_done
);

  typedef enum logic [3:0] {
    A_IDLE, A_QLOAD, A_LOP, A_SEL, A_QK_REQ, A_QK, A_QK_WAIT, A_PLOAD, A_SV_REQ, A_SV, A_SV_WAIT
  } state_e;
  state_e state;

  logic [DAW-1:0]    qb, pb, ob;
  logic [HW:0]       nhc;
  logic [IW:0]       ntok, ksel, nkeep;
  logic [SCALE_W-1:0] sqk, ssv;

  logic [7:0][7:0]   q_reg [MAX_HC];
  logic [7:0][7:0]   p_reg [KT];
  logic [IW-1:0]     keep  [K_MAX];

  // generic counters
  logic [IW:0]       cnt_a;      // read / group / request outer counter
  logic [HW:0]       cnt_b;      // inner chunk counter
  logic [IW:0]       rsp_o;      // response outer
  logic [HW:0]       rsp_i;      // response inner
  logic [TW-1:0]     out_n;      // output tiles seen
  logic              rd_v;
  logic [IW:0]       rd_i;
  logic              sc_last;
  logic [LANES-1:0]  sc_mask;
  logic [IW:0]       n_groups, n_ktile;

  assign n_groups = (ntok + (IW+1)'(LANES - 1)) >> 3;
  assign n_ktile  = (nkeep + (IW+1)'(LANES - 1)) >> 3;
  assign busy     = (state != A_IDLE);
  assign n_keep   = nkeep;

  // ---------------------------------------------------------- combinational
  logic req_outer_last, req_inner_last;
  always_comb begin
    // requests: QK -> outer = kept tile, inner = dim chunk;
    //           SV -> outer = output dim chunk, inner = kept tile
    if (state == A_QK) begin
      req_inner_last = (cnt_b == nhc - 1'b1);
      req_outer_last = (cnt_a == n_ktile - 1'b1);
    end else begin
      req_inner_last = (cnt_b == (HW+1)'(n_ktile) - 1'b1);
      req_outer_last = (cnt_a == (IW+1)'(nhc) - 1'b1);
    end
  end

  logic [IW:0] tile_of_req;
  assign tile_of_req = (state == A_QK) ? cnt_a : (IW+1)'(cnt_b);

  always_comb begin
    kv_req_valid = (state == A_QK || state == A_SV) && (cnt_a != '1) &&
                   (cnt_b != 0 || bf_avail);
    kv_req_is_v  = (state == A_SV);
    kv_req_chunk = (state == A_QK) ? HW'(cnt_b) : HW'(cnt_a);
    for (int r = 0; r < LANES; r++) begin
      logic [IW:0] k;
      k = (tile_of_req << 3) + (IW+1)'(r);
      kv_req_tok[r] = (k < nkeep) ? keep[k[$clog2(K_MAX)-1:0]] : keep[0];
    end
    bf_take = kv_req_valid && kv_req_ready && cnt_b == 0;
  end

  // responses feed BoothFlex
  logic rsp_inner_last;
  assign rsp_inner_last = (state == A_QK) ? (rsp_i == nhc - 1'b1)
                                          : (rsp_i == (HW+1)'(n_ktile) - 1'b1);
  assign bf_valid     = kv_rsp_valid && (state == A_QK || state == A_SV);
  assign kv_rsp_ready = bf_ready && (state == A_QK || state == A_SV);
  assign bf_first     = (rsp_i == 0);
  assign bf_last      = rsp_inner_last;
  always_comb begin
    if (state == A_QK) begin
      bf_mcand = q_reg[rsp_i[HW-1:0]];
      bf_mult  = kv_rsp_data;                           // row = token, col = dim
    end else begin
      bf_mcand = p_reg[rsp_i[$clog2(KT)-1:0]];
      for (int r = 0; r < 8; r++)
        for (int c = 0; c < 8; c++) bf_mult[r][c] = kv_rsp_data[c][r];   // row = dim, col = token
    end
  end

  assign bf_out_idx = out_n;
  always_comb
    for (int l = 0; l < LANES; l++)
      bf_out_mask[l] = (state == A_SV) ? 1'b1 : (((IW+1)'(out_n) << 3) + (IW+1)'(l) < nkeep);

  // LOP / top-K wiring
  assign klo_ready   = (state == A_LOP);
  assign lop_k_valid = (state == A_LOP) && klo_valid;
  assign lop_k_first = (cnt_b == 0);
  assign lop_k_last  = (cnt_b == nhc - 1'b1);
  assign lop_k_idx   = HW'(cnt_b);
  assign tk_k_sel    = ksel;
  assign tk_in_valid = lop_score_valid;
  assign tk_in_last  = sc_last;
  assign tk_in_mask  = sc_mask;
  assign lop_q_chunk = b_data;
  assign lop_q_wr    = rd_v && (state == A_QLOAD);
  assign lop_q_idx   = HW'(rd_i);

  // nonlinear requests
  always_comb begin
    nl_req = (state == A_QK_REQ) || (state == A_SV_REQ);
    if (state == A_SV_REQ) begin
      nl_mode = NL_ABSMAX; nl_tiles = TW'(nhc); nl_elems = (TW+3)'(nhc) << 3;
      nl_scale = ssv; nl_base = ob;
    end else begin
      nl_mode = NL_SOFTMAX; nl_tiles = TW'(n_ktile); nl_elems = (TW+3)'(nkeep);
      nl_scale = sqk; nl_base = pb;
    end
  end

  always_ff @(posedge clk) begin
    if (rd_v && state == A_QLOAD) q_reg[rd_i[HW-1:0]] <= b_data;
    if (rd_v && state == A_PLOAD) p_reg[rd_i[$clog2(KT)-1:0]] <= b_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= A_IDLE; qb <= '0; pb <= '0; ob <= '0; nhc <= '0; ntok <= '0; ksel <= '0;
      nkeep <= '0; sqk <= '0; ssv <= '0; cnt_a <= '0; cnt_b <= '0; rsp_o <= '0; rsp_i <= '0;
      out_n <= '0; rd_v <= 1'b0; rd_i <= '0; sc_last <= 1'b0; sc_mask <= '0;
      b_en <= 1'b0; b_addr <= '0; tk_start <= 1'b0; done <= 1'b0;
      for (int i = 0; i < K_MAX; i++) keep[i] <= '0;
    end else begin
      done     <= 1'b0;
      tk_start <= 1'b0;
      b_en     <= 1'b0;
      rd_v     <= b_en;
      rd_i     <= cnt_a - 1'b1;
      unique case (state)
        A_IDLE: if (start) begin
          qb <= q_base; pb <= p_base; ob <= o_base; nhc <= hc; ntok <= n_tok;
          ksel <= (k_sel > (IW+1)'(K_MAX)) ? (IW+1)'(K_MAX) : k_sel;
          sqk <= s_qk; ssv <= s_sv; nkeep <= '0;
          cnt_a <= '0; cnt_b <= '0;
          tk_start <= 1'b1;
          state <= A_QLOAD;
        end
        A_QLOAD: begin
          if (cnt_a < (IW+1)'(nhc)) begin
            b_en   <= 1'b1;
            b_addr <= qb + DAW'(cnt_a);
            cnt_a  <= cnt_a + 1'b1;
          end
          if (cnt_a == (IW+1)'(nhc) && !b_en && !rd_v) begin
            cnt_a <= '0; cnt_b <= '0;
            state <= A_LOP;
          end
        end
        A_LOP: if (klo_valid) begin
          sc_last <= (cnt_a == n_groups - 1'b1);
          for (int l = 0; l < LANES; l++)
            sc_mask[l] <= ((cnt_a << 3) + (IW+1)'(l)) < ntok;
          if (cnt_b == nhc - 1'b1) begin
            cnt_b <= '0;
            cnt_a <= cnt_a + 1'b1;
            if (cnt_a == n_groups - 1'b1) state <= A_SEL;
          end else cnt_b <= cnt_b + 1'b1;
        end
        A_SEL: begin
          if (tk_out_valid)
            for (int j = 0; j < LANES; j++)
              if (j < int'(tk_out_count) && (nkeep + (IW+1)'(j)) < (IW+1)'(K_MAX))
                keep[$clog2(K_MAX)'(nkeep + (IW+1)'(j))] <= tk_out_idx[j];
          if (tk_out_valid) nkeep <= nkeep + (IW+1)'(tk_out_count);
          if (tk_done) state <= A_QK_REQ;
        end
        A_QK_REQ, A_SV_REQ: if (nl_gnt) begin
          cnt_a <= '0; cnt_b <= '0; rsp_o <= '0; rsp_i <= '0; out_n <= '0;
          state <= (state == A_QK_REQ) ? A_QK : A_SV;
        end
        A_QK, A_SV: begin
          if (kv_req_valid && kv_req_ready) begin
            if (req_inner_last) begin
              cnt_b <= '0;
              cnt_a <= req_outer_last ? '1 : cnt_a + 1'b1;   // all ones: all issued
            end else cnt_b <= cnt_b + 1'b1;
          end
          if (kv_rsp_valid && kv_rsp_ready) begin
            if (rsp_inner_last) begin
              rsp_i <= '0;
              rsp_o <= rsp_o + 1'b1;
            end else rsp_i <= rsp_i + 1'b1;
          end
          if (bf_out_valid) begin
            out_n <= out_n + 1'b1;
            if ((state == A_QK && (IW+1)'(out_n) == n_ktile - 1'b1) ||
                (state == A_SV && (HW+1)'(out_n) == nhc - 1'b1))
              state <= (state == A_QK) ? A_QK_WAIT : A_SV_WAIT;
          end
        end
        A_QK_WAIT: if (nl_done) begin
          cnt_a <= '0;
          state <= A_PLOAD;
        end
        A_PLOAD: begin
          if (cnt_a < n_ktile) begin
            b_en   <= 1'b1;
            b_addr <= pb + DAW'(cnt_a);
            cnt_a  <= cnt_a + 1'b1;
          end
          if (cnt_a == n_ktile && !b_en && !rd_v) state <= A_SV_REQ;
        end
        A_SV_WAIT: if (nl_done) begin
          done  <= 1'b1;
          state <= A_IDLE;
        end
        default: state <= A_IDLE;
      endcase
    end
  end

endmodule
