// vitallm_top: VitaLLM accelerator, one decoder layer of a ternary-weight LLM
// for one token (decode), with three TINT cores, one BoothFlex core, the
// LOP array with its top-K selector, the nonlinear unit and on-chip buffers.
//
// Dataflow: the head scheduler runs Q/K/V projections head by head on the
// TINT group (tile dispatcher, data-buffer port A, weight banks 0-2) while
// the attention engine runs the previous head's LOP screening, QK^T, softmax
// and SV on BoothFlex in INT8 mode (port B, key/value blocks from the
// off-chip KV cache, requested only for the top-K tokens). After the last
// head the O, gate/up and down projections run on all four cores, BoothFlex
// now in ternary mode (weight bank 3). Every finished 8-element tile enters
// a per-core two-slot queue guarded by a credit counter; an arbiter forwards
// tiles of the vector that currently owns the nonlinear unit, which
// dequantizes, reduces, and after the last tile quantizes the vector once and
// writes it back to the data buffer with one scale.
//
// External interfaces (DRAM side, the DMA itself is not part of this RTL):
// data-buffer and weight-bank write ports, a K_LO feature stream, the KV
// request/response port, and q_out_* mirroring every quantized vector word
// (the host takes the new K/V of each head from there). perf_* counters
// report mechanism activity. The block set and its connections follow Fig. 7
// of the paper; buffer sizes, port widths, the job schedule encoding and the
// arbitration are this design's own.
module vitallm_top
  import vita_pkg::*;
#(
  parameter int unsigned DB_DEPTH   = 4096,   // data buffer words (8 B each)
  parameter int unsigned WB_DEPTH   = 512,    // weight words (8x8 codes) per bank
  parameter int unsigned RAW_TILES  = 1080,   // nonlinear raw buffer, 8-element tiles
  parameter int unsigned MAX_TOKENS = 2048,   // cached tokens M
  parameter int unsigned K_MAX      = 32,     // largest K of the top-K selector
  parameter int unsigned MAX_HC     = 16,     // largest head dim / 8
  parameter int unsigned KLO_DEPTH  = 64,     // K_LO staging blocks
  parameter int unsigned CREDITS    = 2,      // output slots per core
  localparam int unsigned DAW = $clog2(DB_DEPTH),
  localparam int unsigned WAW = $clog2(WB_DEPTH),
  localparam int unsigned TW  = $clog2(RAW_TILES + 1),
  localparam int unsigned KCW = 11,
  localparam int unsigned IW  = $clog2(MAX_TOKENS),
  localparam int unsigned HW  = $clog2(MAX_HC)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // layer command and configuration
  input  logic                          start,
  input  logic [5:0]                    n_heads,
  input  logic [HW:0]                   hc,
  input  logic [KCW-1:0]                dc,
  input  logic [KCW-1:0]                fc,
  input  logic [IW:0]                   n_tok,
  input  logic [IW:0]                   k_sel,
  input  logic [SCALE_W-1:0]            x_scale,
  input  logic [SCALE_W-1:0]            w_scale,
  input  logic [SCALE_W-1:0]            s_qk,
  input  logic [SCALE_W-1:0]            s_sv,
  input  logic [9:0][DAW-1:0]           bases,     // x,q,k,v,p,o,h,g,u,y
  output logic                          busy,
  output logic                          done,
  output logic [SCALE_W-1:0]            y_scale,
  // data buffer load
  input  logic                          db_wr,
  output logic                          db_wr_ready,
  input  logic [DAW-1:0]                db_wr_addr,
  input  logic [7:0][7:0]               db_wr_data,
  // weight buffer load
  input  logic                          wb_wr,
  input  logic [1:0]                    wb_wr_bank,
  input  logic [WAW-1:0]                wb_wr_addr,
  input  tcode_t [ROWS-1:0][COLS-1:0]   wb_wr_data,
  // key leading-one feature stream
  input  logic                          klo_in_valid,
  output logic                          klo_in_ready,
  input  lo_feat_t [ROWS-1:0][COLS-1:0] klo_in_data,
  // KV cache
  output logic                          kv_req_valid,
  input  logic                          kv_req_ready,
  output logic                          kv_req_is_v,
  output logic [LANES-1:0][IW-1:0]      kv_req_tok,
  output logic [HW-1:0]                 kv_req_chunk,
  input  logic                          kv_rsp_valid,
  output logic                          kv_rsp_ready,
  input  logic [7:0][7:0][7:0]          kv_rsp_data,
  // quantized vector words as they are written
  output logic                          q_out_valid,
  output logic [DAW-1:0]                q_out_addr,
  output logic [7:0][7:0]               q_out_data,
  // activity counters
  output logic [31:0]                   perf_overlap,   // TINT and BoothFlex-INT8 busy together
  output logic [31:0]                   perf_stall,     // dispatcher waited for a credit
  output logic [31:0]                   perf_bf_int8,   // BoothFlex INT8 chunks
  output logic [31:0]                   perf_bf_tern,   // BoothFlex ternary chunks
  output logic [31:0]                   perf_kv_req,    // KV blocks requested
  output logic [31:0]                   perf_mode_sw    // BoothFlex mode switches
);

  localparam int unsigned FW = TW + LANES + LANES * ACC_W;   // queue entry

  // ------------------------------------------------------------------ buffers
  logic            a_en, db_b_en;
  logic [DAW-1:0]  a_addr, db_b_addr;
  logic [7:0][7:0] a_data, b_data;
  logic            nl_q_valid;
  logic [DAW-1:0]  nl_q_addr;
  logic [7:0][7:0] nl_q_data;

  data_buffer #(.DEPTH(DB_DEPTH)) u_db (
    .clk, .a_en, .a_addr, .a_data, .b_en(db_b_en), .b_addr(db_b_addr), .b_data,
    .q_wr(nl_q_valid), .q_addr(nl_q_addr), .q_data(nl_q_data),
    .dma_wr(db_wr), .dma_ready(db_wr_ready), .dma_addr(db_wr_addr), .dma_data(db_wr_data)
  );

  logic [3:0]                          w_en;
  logic [3:0][WAW-1:0]                 w_addr;
  tcode_t [3:0][ROWS-1:0][COLS-1:0]    w_data;

  weight_buffer #(.NB(4), .DEPTH(WB_DEPTH)) u_wb (
    .clk, .wr_en(wb_wr), .wr_bank(wb_wr_bank), .wr_addr(wb_wr_addr), .wr_data(wb_wr_data),
    .rd_en(w_en), .rd_addr(w_addr), .rd_data(w_data)
  );

  logic     klo_valid, klo_ready;
  lo_feat_t [ROWS-1:0][COLS-1:0] klo_data;

  klo_cache #(.DEPTH(KLO_DEPTH)) u_klo (
    .clk, .rst_n, .clear(1'b0),
    .in_valid(klo_in_valid), .in_ready(klo_in_ready), .in_data(klo_in_data),
    .out_valid(klo_valid), .out_ready(klo_ready), .out_data(klo_data)
  );

  // ------------------------------------------------------------- controllers
  logic            a_start, a_busy, a_done;
  logic [DAW-1:0]  a_q_base, a_o_base;
  logic            d_start, d_dual, d_done, d_busy, d_stall;
  logic [DAW-1:0]  d_act_base;
  logic [KCW-1:0]  d_kc;
  logic [TW-1:0]   d_tiles;
  logic [WAW-1:0]  d_w_base, d_w_used;
  logic [3:0]      avail, d_take, take, give;
  logic [2:0]      t_valid;
  logic            t_first, t_last;
  logic [2:0][TW-1:0] t_out_idx;
  logic            dbf_valid, dbf_first, dbf_last, d_b_en;
  logic [DAW-1:0]  d_b_addr;
  logic [TW-1:0]   dbf_out_idx;

  logic            bf_ready, bf_out_valid, bf_busy;

  tile_dispatcher #(.DAW(DAW), .WAW(WAW), .KCW(KCW), .TW(TW)) u_disp (
    .clk, .rst_n, .start(d_start), .act_base(d_act_base), .kc(d_kc), .n_tiles(d_tiles),
    .w_base(d_w_base), .dual(d_dual), .busy(d_busy), .done(d_done), .stall(d_stall),
    .w_used(d_w_used), .avail, .take(d_take),
    .a_en, .a_addr, .b_en(d_b_en), .b_addr(d_b_addr), .w_en, .w_addr,
    .t_valid, .t_first, .t_last, .t_out_idx,
    .bf_valid(dbf_valid), .bf_first(dbf_first), .bf_last(dbf_last), .bf_ready,
    .bf_out_valid(bf_out_valid && !a_busy), .bf_out_idx(dbf_out_idx)
  );

  // nonlinear arbitration signals
  logic            s_nl_req, a_nl_req, s_nl_gnt, a_nl_gnt, nl_done, nl_busy, nl_start;
  nl_mode_e        s_nl_mode, a_nl_mode, nl_mode;
  logic [TW-1:0]   s_nl_tiles, a_nl_tiles, nl_tiles;
  logic [TW+2:0]   s_nl_elems, a_nl_elems, nl_elems;
  logic [SCALE_W-1:0] s_nl_scale, a_nl_scale, nl_scale, nl_out_scale;
  logic [DAW-1:0]  s_nl_base, a_nl_base, nl_base;
  logic            nl_owner_attn;
  logic [3:0]      sched_phase;


  head_scheduler #(.DAW(DAW), .WAW(WAW), .KCW(KCW), .TW(TW), .HW(HW), .NHW(6)) u_sched (
    .clk, .rst_n, .start, .n_heads, .hc, .dc, .fc, .x_scale, .w_scale,
    .x_base(bases[0]), .q_base(bases[1]), .k_base(bases[2]), .v_base(bases[3]),
    .o_base(bases[5]), .h_base(bases[6]), .g_base(bases[7]), .u_base(bases[8]), .y_base(bases[9]),
    .busy, .done, .y_scale, .phase(sched_phase),
    .d_start, .d_act_base, .d_kc, .d_tiles, .d_w_base, .d_dual, .d_done, .d_w_used,
    .nl_req(s_nl_req), .nl_mode(s_nl_mode), .nl_tiles(s_nl_tiles), .nl_elems(s_nl_elems),
    .nl_scale(s_nl_scale), .nl_base(s_nl_base), .nl_gnt(s_nl_gnt), .nl_done, .nl_out_scale,
    .a_start, .a_q_base, .a_o_base, .a_busy, .a_done
  );

  // ------------------------------------------------------ LOP and top-K
  logic            lop_q_wr, lop_k_valid, lop_k_first, lop_k_last, lop_score_valid;
  logic [HW-1:0]   lop_q_idx, lop_k_idx;
  logic [7:0][7:0] lop_q_chunk;
  logic [ROWS-1:0][SCORE_W-1:0] lop_score;

  lop_core #(.MAX_HC(MAX_HC)) u_lop (
    .clk, .rst_n, .q_wr(lop_q_wr), .q_chunk_idx(lop_q_idx), .q_chunk(lop_q_chunk),
    .k_valid(lop_k_valid), .k_first(lop_k_first), .k_last(lop_k_last), .k_chunk_idx(lop_k_idx),
    .k_feat(klo_data), .score(lop_score), .score_valid(lop_score_valid)
  );

  logic            tk_start, tk_in_valid, tk_in_last, tk_out_valid, tk_done, tk_busy;
  logic [IW:0]     tk_k_sel;
  logic [LANES-1:0] tk_in_mask;
  logic [$clog2(LANES):0] tk_out_count;
  logic [LANES-1:0][IW-1:0] tk_out_idx;

  topk_selector #(.MAX_TOKENS(MAX_TOKENS)) u_topk (
    .clk, .rst_n, .start(tk_start), .k_sel(tk_k_sel), .in_valid(tk_in_valid), .in_last(tk_in_last),
    .in_mask(tk_in_mask), .in_score(lop_score), .out_valid(tk_out_valid), .out_count(tk_out_count),
    .out_idx(tk_out_idx), .done(tk_done), .busy(tk_busy)
  );

  // ------------------------------------------------------- attention engine
  logic            abf_valid, abf_first, abf_last, a_b_en, a_bf_take;
  logic [DAW-1:0]  a_b_addr;
  logic [7:0][7:0] abf_mcand;
  logic [7:0][7:0][7:0] abf_mult;
  logic [TW-1:0]   abf_out_idx;
  logic [LANES-1:0] abf_out_mask;
  logic [IW:0]     a_n_keep;

  attention_engine #(.MAX_TOKENS(MAX_TOKENS), .K_MAX(K_MAX), .MAX_HC(MAX_HC), .DAW(DAW), .TW(TW)) u_attn (
    .clk, .rst_n, .start(a_start), .q_base(a_q_base), .p_base(bases[4]), .o_base(a_o_base),
    .hc, .n_tok, .k_sel, .s_qk, .s_sv, .busy(a_busy), .done(a_done), .n_keep(a_n_keep),
    .b_en(a_b_en), .b_addr(a_b_addr), .b_data,
    .lop_q_wr, .lop_q_idx, .lop_q_chunk, .lop_k_valid, .lop_k_first, .lop_k_last, .lop_k_idx,
    .lop_score_valid, .klo_valid, .klo_ready,
    .tk_start, .tk_k_sel, .tk_in_valid, .tk_in_last, .tk_in_mask, .tk_out_valid, .tk_out_count,
    .tk_out_idx, .tk_done,
    .kv_req_valid, .kv_req_ready, .kv_req_is_v, .kv_req_tok, .kv_req_chunk,
    .kv_rsp_valid, .kv_rsp_ready, .kv_rsp_data,
    .bf_valid(abf_valid), .bf_ready, .bf_first(abf_first), .bf_last(abf_last),
    .bf_mcand(abf_mcand), .bf_mult(abf_mult), .bf_out_valid(bf_out_valid && a_busy),
    .bf_out_idx(abf_out_idx), .bf_out_mask(abf_out_mask), .bf_avail(avail[3]), .bf_take(a_bf_take),
    .nl_req(a_nl_req), .nl_mode(a_nl_mode), .nl_tiles(a_nl_tiles), .nl_elems(a_nl_elems),
    .nl_scale(a_nl_scale), .nl_base(a_nl_base), .nl_gnt(a_nl_gnt), .nl_done
  );

  assign db_b_en   = a_busy ? a_b_en   : d_b_en;
  assign db_b_addr = a_busy ? a_b_addr : d_b_addr;

  // ------------------------------------------------------------ TINT cores
  logic [2:0][ROWS-1:0][ACC_W-1:0] t_acc;
  logic [2:0]                      t_out_valid;

  for (genvar j = 0; j < 3; j++) begin : g_tint
    tint_core u_tint (
      .clk, .rst_n, .in_valid(t_valid[j]), .first(t_first), .last(t_last),
      .act(a_data), .w(w_data[j]), .acc(t_acc[j]), .out_valid(t_out_valid[j])
    );
  end

  // ---------------------------------------------------------- BoothFlex core
  bf_mode_e                     bf_mode;
  logic                         bf_valid, bf_first, bf_last;
  logic [7:0][7:0]              bf_mcand;
  logic [7:0][7:0][7:0]         bf_mult;
  logic [ROWS-1:0][ACC_W-1:0]   bf_acc;

  always_comb begin
    bf_mode  = a_busy ? BF_INT8 : BF_TERNARY;
    bf_valid = a_busy ? abf_valid : dbf_valid;
    bf_first = a_busy ? abf_first : dbf_first;
    bf_last  = a_busy ? abf_last  : dbf_last;
    bf_mcand = a_busy ? abf_mcand : b_data;
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < 8; c++)
        bf_mult[r][c] = a_busy ? abf_mult[r][c] : {6'd0, w_data[3][r][c]};
  end

  boothflex_core u_bf (
    .clk, .rst_n, .mode(bf_mode), .in_valid(bf_valid), .in_ready(bf_ready),
    .first(bf_first), .last(bf_last), .mcand(bf_mcand), .mult(bf_mult),
    .acc(bf_acc), .out_valid(bf_out_valid), .busy(bf_busy)
  );

  // --------------------------------------------- output queues and credits
  logic [3:0]          q_push, q_ne, q_pop;
  logic [3:0][FW-1:0]  q_in, q_head;

  logic [3:0][$clog2(CREDITS+1)-1:0] credit_cnt;   // observation only

  assign take = d_take | {a_bf_take, 3'b000};
  assign give = q_pop;

  always_comb begin
    for (int j = 0; j < 3; j++) begin
      q_push[j] = t_out_valid[j];
      q_in[j]   = {t_out_idx[j], {LANES{1'b1}}, t_acc[j]};
    end
    q_push[3] = bf_out_valid;
    q_in[3]   = a_busy ? {abf_out_idx, abf_out_mask, bf_acc} : {dbf_out_idx, {LANES{1'b1}}, bf_acc};
  end

  for (genvar j = 0; j < 4; j++) begin : g_q
    credit_counter #(.CREDITS(CREDITS)) u_cc (
      .clk, .rst_n, .take(take[j]), .give(give[j]), .avail(avail[j]), .count(credit_cnt[j])
    );
    tile_fifo #(.W(FW), .DEPTH(CREDITS)) u_fifo (
      .clk, .rst_n, .push(q_push[j]), .push_data(q_in[j]), .pop(q_pop[j]),
      .not_empty(q_ne[j]), .head(q_head[j])
    );
  end

  // ---------------------------------------------- nonlinear unit and arbiter
  logic          t_ready, nl_tv;
  logic [3:0]    elig;
  logic [1:0]    pick;
  logic [FW-1:0] pick_data;
  logic          gnt_q;

  assign elig = nl_owner_attn ? (q_ne & 4'b1000) : q_ne;
  always_comb begin
    pick = '0;
    for (int j = 3; j >= 0; j--) if (elig[j]) pick = 2'(j);
    pick_data = q_head[pick];
    nl_tv     = nl_busy && (elig != 0);
    q_pop     = (nl_tv && t_ready) ? (4'b0001 << pick) : 4'b0000;
  end

  // vector ownership: attention first, one grant per idle period
  assign nl_start = !nl_busy && !gnt_q && (a_nl_req || s_nl_req);
  assign a_nl_gnt = nl_start && a_nl_req;
  assign s_nl_gnt = nl_start && !a_nl_req;
  always_comb begin
    nl_mode  = a_nl_req ? a_nl_mode  : s_nl_mode;
    nl_tiles = a_nl_req ? a_nl_tiles : s_nl_tiles;
    nl_elems = a_nl_req ? a_nl_elems : s_nl_elems;
    nl_scale = a_nl_req ? a_nl_scale : s_nl_scale;
    nl_base  = a_nl_req ? a_nl_base  : s_nl_base;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gnt_q <= 1'b0; nl_owner_attn <= 1'b0;
    end else begin
      gnt_q <= nl_start;
      if (nl_start) nl_owner_attn <= a_nl_req;
    end
  end

  nonlinear_unit #(.RAW_TILES(RAW_TILES), .AW(DAW)) u_nl (
    .clk, .rst_n, .v_start(nl_start), .v_mode(nl_mode), .v_tiles(nl_tiles), .v_elems(nl_elems),
    .v_scale(nl_scale), .v_out_base(nl_base), .v_busy(nl_busy), .v_done(nl_done),
    .v_out_scale(nl_out_scale),
    .t_valid(nl_tv), .t_ready, .t_idx(pick_data[FW-1 -: TW]),
    .t_mask(pick_data[LANES*ACC_W +: LANES]), .t_acc(pick_data[LANES*ACC_W-1:0]),
    .q_valid(nl_q_valid), .q_addr(nl_q_addr), .q_data(nl_q_data)
  );

  assign q_out_valid = nl_q_valid;
  assign q_out_addr  = nl_q_addr;
  assign q_out_data  = nl_q_data;

  // ------------------------------------------------------------ counters
  bf_mode_e bf_mode_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      perf_overlap <= '0; perf_stall <= '0; perf_bf_int8 <= '0; perf_bf_tern <= '0;
      perf_kv_req <= '0; perf_mode_sw <= '0; bf_mode_q <= BF_TERNARY;
    end else begin
      if (t_valid != 0 && a_busy && bf_busy)        perf_overlap <= perf_overlap + 1;
      if (d_stall)                                  perf_stall   <= perf_stall + 1;
      if (bf_valid && bf_ready && bf_mode == BF_INT8)    perf_bf_int8 <= perf_bf_int8 + 1;
      if (bf_valid && bf_ready && bf_mode == BF_TERNARY) perf_bf_tern <= perf_bf_tern + 1;
      if (kv_req_valid && kv_req_ready)             perf_kv_req  <= perf_kv_req + 1;
      if (bf_valid && bf_ready) begin
        bf_mode_q <= bf_mode;
        if (bf_mode != bf_mode_q) perf_mode_sw <= perf_mode_sw + 1;
      end
    end
  end

endmodule
