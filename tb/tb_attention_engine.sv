// tb_attention_engine: one decode-attention head with LOP screening,
// top-K selection, QK^T and SV on BoothFlex (INT8) and softmax / absmax in
// the nonlinear unit.
// The engine is connected to the real lop_core, topk_selector,
// boothflex_core, nonlinear_unit and a credit counter; the testbench models
// the data buffer (port B reads, quantizer writes), the K_LO stream and a
// hash-defined KV cache answering block requests after 7 cycles.
// Per head (two heads, 100 and 64 cached tokens, K = 12 and 16, head dim 32):
//  * the tokens whose keys/values are fetched equal the reference top-K of
//    the LOP scores sum sgn(q)sgn(k)2^(LO(q)+LO(k)) (ties: lower index);
//  * exactly 2 * ceil(K/8) * hc KV blocks are requested (pruning);
//  * the INT8 head output agrees with floating-point softmax attention over
//    the kept tokens within 6 LSB;
//  * the LOP phase consumes one K_LO block per cycle (ceil(M/8)*hc cycles
//    with klo_ready high) and every BoothFlex INT8 chunk takes 5 cycles.
module tb_attention_engine;
  import vita_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int MT = 256, KM = 32, MHC = 16, DAW = 12, TW = 11, IW = 8, HW = 4;
  localparam int QB = 10, PB = 40, OB = 60;

  logic start = 0, busy, done;
  logic [HW:0] hc;
  logic [IW:0] n_tok, k_sel, n_keep;
  logic [31:0] s_qk, s_sv;
  logic b_en;
  logic [DAW-1:0] b_addr;
  logic [7:0][7:0] b_data;
  logic lop_q_wr, lop_k_valid, lop_k_first, lop_k_last, lop_score_valid;
  logic [HW-1:0] lop_q_idx, lop_k_idx;
  logic [7:0][7:0] lop_q_chunk;
  logic klo_valid, klo_ready;
  lo_feat_t [7:0][7:0] klo_data;
  logic [7:0][SCORE_W-1:0] lop_score;
  logic tk_start, tk_in_valid, tk_in_last, tk_out_valid, tk_done, tk_busy;
  logic [IW:0] tk_k_sel;
  logic [7:0] tk_in_mask;
  logic [3:0] tk_out_count;
  logic [7:0][IW-1:0] tk_out_idx;
  logic kv_req_valid, kv_req_ready, kv_req_is_v, kv_rsp_valid, kv_rsp_ready;
  logic [7:0][IW-1:0] kv_req_tok;
  logic [HW-1:0] kv_req_chunk;
  logic [7:0][7:0][7:0] kv_rsp_data;
  logic bf_valid, bf_ready, bf_first, bf_last, bf_out_valid, bf_avail, bf_take, bf_busy;
  logic [7:0][7:0] bf_mcand;
  logic [7:0][7:0][7:0] bf_mult;
  logic [7:0][31:0] bf_acc;
  logic [TW-1:0] bf_out_idx;
  logic [7:0] bf_out_mask;
  logic nl_req, nl_gnt, nl_done, nl_busy, q_valid, t_ready;
  nl_mode_e nl_mode;
  logic [TW-1:0] nl_tiles;
  logic [TW+2:0] nl_elems;
  logic [31:0] nl_scale, nl_out_scale;
  logic [DAW-1:0] nl_base, q_addr;
  logic [7:0][7:0] q_data;
  int checks = 0, failures = 0;

  attention_engine #(.MAX_TOKENS(MT), .K_MAX(KM), .MAX_HC(MHC), .DAW(DAW), .TW(TW)) dut (
    .clk, .rst_n, .start, .q_base(DAW'(QB)), .p_base(DAW'(PB)), .o_base(DAW'(OB)), .hc, .n_tok, .k_sel,
    .s_qk, .s_sv, .busy, .done, .n_keep, .b_en, .b_addr, .b_data,
    .lop_q_wr, .lop_q_idx, .lop_q_chunk, .lop_k_valid, .lop_k_first, .lop_k_last, .lop_k_idx,
    .lop_score_valid, .klo_valid, .klo_ready,
    .tk_start, .tk_k_sel, .tk_in_valid, .tk_in_last, .tk_in_mask, .tk_out_valid, .tk_out_count,
    .tk_out_idx, .tk_done,
    .kv_req_valid, .kv_req_ready, .kv_req_is_v, .kv_req_tok, .kv_req_chunk,
    .kv_rsp_valid, .kv_rsp_ready, .kv_rsp_data,
    .bf_valid, .bf_ready, .bf_first, .bf_last, .bf_mcand, .bf_mult, .bf_out_valid,
    .bf_out_idx, .bf_out_mask, .bf_avail, .bf_take,
    .nl_req, .nl_mode, .nl_tiles, .nl_elems, .nl_scale, .nl_base, .nl_gnt, .nl_done
  );
  lop_core #(.MAX_HC(MHC)) u_lop (
    .clk, .rst_n, .q_wr(lop_q_wr), .q_chunk_idx(lop_q_idx), .q_chunk(lop_q_chunk),
    .k_valid(lop_k_valid), .k_first(lop_k_first), .k_last(lop_k_last), .k_chunk_idx(lop_k_idx),
    .k_feat(klo_data), .score(lop_score), .score_valid(lop_score_valid)
  );
  topk_selector #(.MAX_TOKENS(MT)) u_tk (
    .clk, .rst_n, .start(tk_start), .k_sel(tk_k_sel), .in_valid(tk_in_valid), .in_last(tk_in_last),
    .in_mask(tk_in_mask), .in_score(lop_score), .out_valid(tk_out_valid), .out_count(tk_out_count),
    .out_idx(tk_out_idx), .done(tk_done), .busy(tk_busy)
  );
  boothflex_core u_bf (
    .clk, .rst_n, .mode(BF_INT8), .in_valid(bf_valid), .in_ready(bf_ready), .first(bf_first),
    .last(bf_last), .mcand(bf_mcand), .mult(bf_mult), .acc(bf_acc), .out_valid(bf_out_valid), .busy(bf_busy)
  );
  credit_counter #(.CREDITS(2)) u_cc (
    .clk, .rst_n, .take(bf_take), .give(bf_out_valid), .avail(bf_avail), .count()
  );
  assign nl_gnt = nl_req && !nl_busy;
  nonlinear_unit #(.RAW_TILES(64), .AW(DAW)) u_nl (
    .clk, .rst_n, .v_start(nl_gnt), .v_mode(nl_mode), .v_tiles(7'(nl_tiles)), .v_elems(10'(nl_elems)),
    .v_scale(nl_scale), .v_out_base(nl_base), .v_busy(nl_busy), .v_done(nl_done), .v_out_scale(nl_out_scale),
    .t_valid(bf_out_valid), .t_ready, .t_idx(7'(bf_out_idx)), .t_mask(bf_out_mask), .t_acc(bf_acc),
    .q_valid, .q_addr, .q_data
  );

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // data buffer model
  logic [63:0] mem [256];
  always_ff @(posedge clk) begin
    if (b_en) b_data <= mem[b_addr];
    if (q_valid) mem[q_addr] <= q_data;
  end

  int HCV, NT, KS, head;
  function automatic int kvval(int h, int t, int d, int isv);
    logic [31:0] x;
    x = 32'(h * 7919 + t * 104729 + d * 1299709 + isv * 15485863 + 5);
    x = x ^ (x >> 13); x = x * 32'h5bd1e995; x = x ^ (x >> 15); x = x * 32'h2c1b3c6d; x = x ^ (x >> 12);
    return int'($signed(x[7:0]));
  endfunction
  function automatic int lo_of(int v);
    int m, p;
    m = (v < 0) ? -v : v; p = 0;
    while (m > 1) begin m = m >> 1; p++; end
    return p;
  endfunction
  function automatic int bucket_ref(int s);
    int p;
    if (s <= 0) return 0;
    p = lo_of(s);
    return 1 + 2 * p + ((p > 0) ? ((s >> (p - 1)) & 1) : 0);
  endfunction

  // K_LO stream
  int kg, kc;
  bit klo_on;
  assign klo_valid = klo_on;
  always_comb begin
    klo_data = '0;
    for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++) begin
      int t, v;
      t = kg * 8 + r;
      v = (t < NT) ? kvval(head, t, kc * 8 + c, 0) : 0;
      klo_data[r][c].nz = (v != 0); klo_data[r][c].neg = (v < 0); klo_data[r][c].lo = 3'(lo_of(v));
    end
  end
  int lop_cycles;
  always @(posedge clk) if (rst_n && klo_valid && klo_ready) begin
    lop_cycles++;
    if (kc == HCV - 1) begin kc = 0; kg++; end else kc++;
  end

  // KV model
  int qt [$][8];
  int qc [$], qv [$], qtime [$], kept [$], nreq, cyc;
  always @(posedge clk) cyc++;
  assign kv_req_ready = 1'b1;
  always_comb begin
    kv_rsp_valid = (qtime.size() > 0) && (qtime[0] <= cyc);
    kv_rsp_data = '0;
    if (kv_rsp_valid)
      for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++)
        kv_rsp_data[r][c] = 8'(kvval(head, qt[0][r], qc[0] * 8 + c, qv[0]));
  end
  always @(posedge clk) if (rst_n) begin
    if (kv_rsp_valid && kv_rsp_ready) begin
      void'(qt.pop_front()); void'(qc.pop_front()); void'(qv.pop_front()); void'(qtime.pop_front());
    end
    if (kv_req_valid && kv_req_ready) begin
      int tk [8];
      for (int r = 0; r < 8; r++) tk[r] = int'(kv_req_tok[r]);
      qt.push_back(tk); qc.push_back(int'(kv_req_chunk)); qv.push_back(int'(kv_req_is_v));
      qtime.push_back(cyc + 7);
      nreq++;
      if (!kv_req_is_v && kv_req_chunk == 0)
        for (int r = 0; r < 8; r++) kept.push_back(int'(kv_req_tok[r]));
    end
  end
  // BoothFlex rate: INT8 chunks accepted at most every 5 cycles
  int last_acc;
  always @(posedge clk) if (rst_n && bf_valid && bf_ready) begin
    if (last_acc >= 0) begin
      checks++;
      if (cyc - last_acc < 5) begin failures++; $display("BoothFlex chunk after %0d cycles", cyc - last_acc); end
    end
    last_acc = cyc;
  end

  task automatic run(int h, int ntk, int ks, int nhc);
    int q [64], sc [MT], used [MT], ref_set [$], got [$], ktile;
    real s [32], mx, se, o [64], amax;
    head = h; NT = ntk; KS = ks; HCV = nhc;
    kg = 0; kc = 0; lop_cycles = 0; nreq = 0; kept.delete(); last_acc = -1;
    for (int i = 0; i < nhc; i++) begin
      logic [63:0] w;
      w = {$urandom, $urandom};
      mem[QB + i] = w;
      for (int e = 0; e < 8; e++) q[i*8+e] = int'($signed(w[e*8 +: 8]));
    end
    hc = (HW+1)'(nhc); n_tok = (IW+1)'(ntk); k_sel = (IW+1)'(ks);
    klo_on = 1;
    start = 1; @(posedge clk); #1; start = 0;
    while (!(kg * 8 >= ntk)) @(posedge clk);
    #1; klo_on = 0;
    while (!done) @(posedge clk);
    @(posedge clk); #1;
    // top-K reference
    for (int t = 0; t < ntk; t++) begin
      sc[t] = 0; used[t] = 0;
      for (int d = 0; d < nhc * 8; d++) begin
        int kv;
        kv = kvval(h, t, d, 0);
        if (q[d] != 0 && kv != 0) sc[t] += (((q[d] < 0) != (kv < 0)) ? -1 : 1) * (1 << (lo_of(q[d]) + lo_of(kv)));
      end
    end
    for (int j = 0; j < ks; j++) begin
      int best, bb;
      best = -1; bb = -1;
      for (int t = 0; t < ntk; t++) if (!used[t] && bucket_ref(sc[t]) > bb) begin bb = bucket_ref(sc[t]); best = t; end
      used[best] = 1; ref_set.push_back(best);
    end
    ref_set.sort();
    for (int i = 0; i < ks; i++) got.push_back(kept[i]);     // slots past K are padding
    got.sort();
    checks++;
    if (got != ref_set) begin failures++; $display("head %0d: kept set differs from LOP top-K reference", h); end
    checks++;
    if (int'(n_keep) != ks) begin failures++; $display("n_keep %0d", n_keep); end
    ktile = (ks + 7) / 8;
    checks++;
    if (nreq != 2 * ktile * nhc) begin failures++; $display("%0d KV blocks requested, expected %0d", nreq, 2 * ktile * nhc); end
    checks++;
    if (lop_cycles != ((ntk + 7) / 8) * nhc) begin failures++; $display("LOP consumed %0d blocks", lop_cycles); end
    // attention reference
    mx = -1e30;
    for (int i = 0; i < ks; i++) begin
      int d0;
      d0 = 0;
      for (int d = 0; d < nhc * 8; d++) d0 += q[d] * kvval(h, kept[i], d, 0);
      s[i] = real'(d0) * real'(s_qk) / 65536.0;
      if (s[i] > mx) mx = s[i];
    end
    se = 0;
    for (int i = 0; i < ks; i++) se += $exp(s[i] - mx);
    amax = 0;
    for (int d = 0; d < nhc * 8; d++) begin
      o[d] = 0;
      for (int i = 0; i < ks; i++) o[d] += $exp(s[i] - mx) / se * real'(kvval(h, kept[i], d, 1));
      if ((o[d] < 0 ? -o[d] : o[d]) > amax) amax = (o[d] < 0 ? -o[d] : o[d]);
    end
    for (int d = 0; d < nhc * 8; d++) begin
      real qr;
      logic [63:0] w;
      int g;
      w = mem[OB + d / 8];
      g = int'($signed(w[(d % 8) * 8 +: 8]));
      qr = 127.0 * o[d] / amax;
      checks++;
      if (real'(g) - qr > 6.0 || qr - real'(g) > 6.0) begin failures++; $display("head %0d dim %0d: %0d vs %f", h, d, g, qr); end
    end
  endtask

  initial begin
    s_qk = 32'd8; s_sv = 32'd512; hc = '0; n_tok = '0; k_sel = '0; klo_on = 0; head = 0; NT = 0; HCV = 1;
    for (int i = 0; i < 256; i++) mem[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    run(0, 100, 12, 4);
    run(1, 64, 16, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
