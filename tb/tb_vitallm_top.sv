// tb_vitallm_top: end-to-end test of one BitNet b1.58 3B decoder layer for
// one decode token, with the top at its default (full-size) parameters.
//
// Layer shape: 32 heads, head dim 100 padded to 104 (hc = 13 chunks), model
// dim 3200 (dc = 400), FFN dim 8640 (fc = 1080), 2048 cached tokens, K = 32.
// The testbench plays the DRAM side: it loads the input vector into the data
// buffer and random ternary weights into the four weight banks (the layer
// reuses the 512 words per bank cyclically, modulo addressing, since the
// weight DMA is outside this RTL), streams the leading-one features of every
// cached key (head by head, backpressured by the K_LO cache) and answers KV
// block requests from a hash-defined KV cache after a fixed latency.
//
// Checks:
//  * every projection vector (Q, K, V of each head, O, gate, up, down) is
//    compared, once all its words are written, with round(127 y / max|y|) of
//    the integer matrix-vector product of the INT8 vector actually held in
//    the buffer and the weight blocks the schedule uses (tolerance 1 LSB);
//  * per head, the tokens whose keys are requested equal the reference top-K
//    of the leading-one (LOP) scores (ties by lower index);
//  * per head, the attention output agrees with floating-point softmax
//    attention over the kept tokens within 6 LSB of the INT8 scale;
//  * mechanisms: TINT/BoothFlex overlap cycles, credit stalls, BoothFlex
//    mode switches, KV blocks requested (must equal 32 heads x 104 and be
//    below the dense count), completed quantization barriers (164 vectors);
//    a mechanism that never occurs is a failure;
//  * layer time: the paper's 72.46 tokens/s at 1 GHz over 26 layers gives
//    530.8k cycles per layer; the measured count must lie within 25 %.
module tb_vitallm_top;
  import vita_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;

  localparam int HM = 32, HCM = 13, NTM = 2048;       // array bounds (full size)
  int H, HC, HD, DC, FC, NTOK, KSEL;                   // shape of the current run
  localparam int WBD = 512;
  localparam int XB = 0, QB = 400, KB = 426, VB = 439, PB = 452, OB = 456,
                 HB = 872, GB = 1272, UB = 2352, YB = 3432;

  logic start = 0, busy, done;
  logic [5:0] n_heads;
  logic [4:0] hc;
  logic [10:0] dc, fc;
  logic [11:0] n_tok, k_sel;
  logic [31:0] x_scale, w_scale, s_qk, s_sv, y_scale;
  logic [9:0][11:0] bases;
  logic db_wr = 0, db_wr_ready;
  logic [11:0] db_wr_addr;
  logic [7:0][7:0] db_wr_data;
  logic wb_wr = 0;
  logic [1:0] wb_wr_bank;
  logic [8:0] wb_wr_addr;
  tcode_t [7:0][7:0] wb_wr_data;
  logic klo_in_valid = 0, klo_in_ready;
  lo_feat_t [7:0][7:0] klo_in_data;
  logic kv_req_valid, kv_req_ready, kv_req_is_v, kv_rsp_valid, kv_rsp_ready;
  logic [7:0][10:0] kv_req_tok;
  logic [3:0] kv_req_chunk;
  logic [7:0][7:0][7:0] kv_rsp_data;
  logic q_out_valid;
  logic [11:0] q_out_addr;
  logic [7:0][7:0] q_out_data;
  logic [31:0] perf_overlap, perf_stall, perf_bf_int8, perf_bf_tern, perf_kv_req, perf_mode_sw;
  int checks = 0, failures = 0;

  vitallm_top dut (.*);

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog: layer did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- models
  function automatic int kvval(int h, int t, int d, int isv);
    logic [31:0] x;
    x = 32'(h * 7919 + t * 104729 + d * 1299709 + isv * 15485863 + 17);
    x = x ^ (x >> 13); x = x * 32'h5bd1e995; x = x ^ (x >> 15); x = x * 32'h2c1b3c6d; x = x ^ (x >> 12);
    if (d >= HD) return 0;                  // padding dims of the 104-wide head
    return int'($signed(x[7:0]));
  endfunction

  function automatic int lo_of(int v);
    int m, p;
    m = (v < 0) ? -v : v;
    p = 0;
    while (m > 1) begin m = m >> 1; p++; end
    return p;
  endfunction

  function automatic int bucket_ref(int s);
    int p;
    if (s <= 0) return 0;
    p = lo_of(s);
    return 1 + 2 * p + ((p > 0) ? ((s >> (p - 1)) & 1) : 0);
  endfunction

  function automatic int tval(tcode_t c);
    return (c == 2'b01) ? 1 : (c == 2'b11) ? -1 : 0;
  endfunction

  logic [63:0] mem [4096];                  // mirror of the data buffer
  tcode_t [7:0][7:0] wmem [4][WBD];

  function automatic int b8(int addr, int e);
    logic [63:0] w;
    w = mem[addr];
    return int'($signed(w[e*8 +: 8]));
  endfunction

  // ------------------------------------------------------- job bookkeeping
  int wptr_of [3*HM+4];
  function automatic int used_of(int j);
    if (j < 3 * H) return ((HC + 2) / 3) * DC;
    if (j == 3 * H) return ((DC + 3) / 4) * (H * HC);
    if (j < 3 * H + 3) return ((FC + 3) / 4) * DC;
    return ((DC + 3) / 4) * FC;
  endfunction

  // reference check of one projection vector
  task automatic check_proj(string name, int j, int in_base, int kc, int ntiles, bit dual, int out_base);
    int nc, wp, y [], amax, bad;
    nc = dual ? 4 : 3;
    wp = wptr_of[j];
    y = new[ntiles * 8];
    amax = 0;
    for (int t = 0; t < ntiles; t++) begin
      int core, rnd;
      core = t % nc; rnd = t / nc;
      for (int r = 0; r < 8; r++) begin
        int s;
        s = 0;
        for (int c = 0; c < kc; c++) begin
          tcode_t [7:0][7:0] wb;
          wb = wmem[core][(wp + rnd * kc + c) % WBD];
          for (int e = 0; e < 8; e++) begin
            int tv;
            tv = tval(wb[r][e]);
            if (tv != 0) s += tv * b8(in_base + c, e);
          end
        end
        y[t*8+r] = s;
        if ((s < 0 ? -s : s) > amax) amax = (s < 0 ? -s : s);
      end
    end
    bad = 0;
    for (int i = 0; i < ntiles * 8; i++) begin
      real qr;
      int got;
      qr = (amax == 0) ? 0.0 : 127.0 * real'(y[i]) / real'(amax);
      got = b8(out_base + i / 8, i % 8);
      checks++;
      if (real'(got) - qr > 1.01 || qr - real'(got) > 1.01) begin
        failures++; bad++;
        if (bad < 4) $display("%s: element %0d got %0d ref %f", name, i, got, qr);
      end
    end
    nproj++;
  endtask

  // ------------------------------------------------------------ KV cache
  int kv_q_tok [$][8];
  int kv_q_chunk [$], kv_q_isv [$], kv_q_head [$], kv_q_time [$];
  int cyc;
  int req_head, last_isv;
  int kept [HM][$];
  always @(posedge clk) cyc++;

  assign kv_req_ready = 1'b1;
  always_comb begin
    kv_rsp_valid = (kv_q_time.size() > 0) && (kv_q_time[0] <= cyc);
    kv_rsp_data = '0;
    if (kv_rsp_valid)
      for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++)
        kv_rsp_data[r][c] = 8'(kvval(kv_q_head[0], kv_q_tok[0][r], kv_q_chunk[0] * 8 + c, kv_q_isv[0]));
  end

  always @(posedge clk) if (rst_n) begin
    if (kv_rsp_valid && kv_rsp_ready) begin
      void'(kv_q_tok.pop_front()); void'(kv_q_chunk.pop_front()); void'(kv_q_isv.pop_front());
      void'(kv_q_head.pop_front()); void'(kv_q_time.pop_front());
    end
    if (kv_req_valid && kv_req_ready) begin
      int tk [8];
      if (!kv_req_is_v && last_isv == 1) req_head++;
      last_isv = int'(kv_req_is_v);
      for (int r = 0; r < 8; r++) tk[r] = int'(kv_req_tok[r]);
      kv_q_tok.push_back(tk);
      kv_q_chunk.push_back(int'(kv_req_chunk));
      kv_q_isv.push_back(int'(kv_req_is_v));
      kv_q_head.push_back(req_head);
      kv_q_time.push_back(cyc + 20);
      if (!kv_req_is_v && kv_req_chunk == 0)
        for (int r = 0; r < 8; r++) kept[req_head].push_back(int'(kv_req_tok[r]));
    end
  end

  // --------------------------------------------------- K_LO feature stream
  int klo_h, klo_g, klo_c;
  always_comb begin
    klo_in_data = '0;
    for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++) begin
      int t, v;
      t = klo_g * 8 + r;
      v = (t < NTOK) ? kvval(klo_h, t, klo_c * 8 + c, 0) : 0;
      klo_in_data[r][c].nz  = (v != 0);
      klo_in_data[r][c].neg = (v < 0);
      klo_in_data[r][c].lo  = 3'(lo_of(v));
    end
  end
  always @(posedge clk) if (rst_n && klo_in_valid && klo_in_ready) begin
    if (klo_c == HC - 1) begin
      klo_c = 0;
      if (klo_g == NTOK / 8 - 1) begin klo_g = 0; klo_h++; end else klo_g++;
    end else klo_c++;
    if (klo_h == H) klo_in_valid <= 1'b0;
  end

  // ------------------------------------------------ output vector tracking
  int cnt_q [2], cnt_k, cnt_v, cnt_o [HM], cnt_h, cnt_g, cnt_u, cnt_y, cnt_p;
  int nq, nk, nv, nproj, natt;
  int qsave [HM][HCM*8];

  task automatic check_attn(int h);
    real sc [32], mx, se, o [HCM*8], amax;
    int tk, bad;
    if (kept[h].size() != KSEL) begin
      failures++; $display("head %0d: %0d kept tokens requested", h, kept[h].size());
      return;
    end
    mx = -1e30;
    for (int i = 0; i < KSEL; i++) begin
      int s;
      s = 0;
      for (int d = 0; d < HC * 8; d++) s += qsave[h][d] * kvval(h, kept[h][i], d, 0);
      sc[i] = real'(s) * real'(s_qk) / 65536.0;
      if (sc[i] > mx) mx = sc[i];
    end
    se = 0;
    for (int i = 0; i < KSEL; i++) se += $exp(sc[i] - mx);
    amax = 0;
    for (int d = 0; d < HC * 8; d++) begin
      o[d] = 0;
      for (int i = 0; i < KSEL; i++) o[d] += $exp(sc[i] - mx) / se * real'(kvval(h, kept[h][i], d, 1));
      if ((o[d] < 0 ? -o[d] : o[d]) > amax) amax = (o[d] < 0 ? -o[d] : o[d]);
    end
    bad = 0;
    for (int d = 0; d < HC * 8; d++) begin
      real qr;
      int got;
      qr = 127.0 * o[d] / amax;
      got = b8(OB + h * HC + d / 8, d % 8);
      checks++;
      if (real'(got) - qr > 6.0 || qr - real'(got) > 6.0) begin
        failures++; bad++;
        if (bad < 4) $display("attn head %0d dim %0d: got %0d ref %f", h, d, got, qr);
      end
    end
    natt++;
  endtask

  task automatic check_topk(int h);
    int sc [NTM], used [NTM], ref_set [$], got [$];
    for (int t = 0; t < NTOK; t++) begin
      sc[t] = 0;
      used[t] = 0;
      for (int d = 0; d < HC * 8; d++) begin
        int qv, kv;
        qv = qsave[h][d]; kv = kvval(h, t, d, 0);
        if (qv != 0 && kv != 0)
          sc[t] += (((qv < 0) != (kv < 0)) ? -1 : 1) * (1 << (lo_of(qv) + lo_of(kv)));
      end
    end
    for (int j = 0; j < KSEL; j++) begin
      int best, bb;
      best = -1; bb = -1;
      for (int t = 0; t < NTOK; t++)
        if (!used[t]) begin
          int b;
          b = bucket_ref(sc[t]);
          if (b > bb) begin bb = b; best = t; end
        end
      used[best] = 1;
      ref_set.push_back(best);
    end
    ref_set.sort();
    got = kept[h];
    got.sort();
    checks++;
    if (got != ref_set) begin
      failures++;
      $display("head %0d: kept set differs from the LOP top-K reference (first %0d vs %0d)", h, got[0], ref_set[0]);
    end
  endtask

  always @(posedge clk) if (rst_n && q_out_valid) begin
    int a;
    a = int'(q_out_addr);
    mem[a] = q_out_data;
    if (a >= QB && a < QB + 2 * HC) begin
      int s;
      s = (a - QB) / HC;
      if (++cnt_q[s] == HC) begin
        cnt_q[s] = 0;
        check_proj($sformatf("Q%0d", nq), 3 * nq, XB, DC, HC, 0, QB + s * HC);
        for (int d = 0; d < HC * 8; d++) qsave[nq][d] = b8(QB + s * HC + d / 8, d % 8);
        nq++;
      end
    end else if (a >= KB && a < KB + HC) begin
      if (++cnt_k == HC) begin cnt_k = 0; check_proj($sformatf("K%0d", nk), 3 * nk + 1, XB, DC, HC, 0, KB); nk++; end
    end else if (a >= VB && a < VB + HC) begin
      if (++cnt_v == HC) begin cnt_v = 0; check_proj($sformatf("V%0d", nv), 3 * nv + 2, XB, DC, HC, 0, VB); nv++; end
    end else if (a >= PB && a < PB + KSEL / 8) begin
      cnt_p++;
    end else if (a >= OB && a < OB + H * HC) begin
      int h;
      h = (a - OB) / HC;
      if (++cnt_o[h] == HC) begin check_topk(h); check_attn(h); end
    end else if (a >= HB && a < HB + DC) begin
      if (++cnt_h == DC) check_proj("O", 3 * H, OB, H * HC, DC, 1, HB);
    end else if (a >= GB && a < GB + FC) begin
      if (++cnt_g == FC) check_proj("G", 3 * H + 1, HB, DC, FC, 1, GB);
    end else if (a >= UB && a < UB + FC) begin
      if (++cnt_u == FC) check_proj("U", 3 * H + 2, HB, DC, FC, 1, UB);
    end else if (a >= YB && a < YB + DC) begin
      if (++cnt_y == DC) check_proj("D", 3 * H + 3, UB, FC, DC, 1, YB);
    end else begin
      failures++; $display("write outside every vector region: %0d", a);
    end
  end

  int nbarrier, nstall_seen;
  always @(posedge clk) if (rst_n && dut.nl_done) nbarrier++;

  // ---------------------------------------------------------------- stimulus
  task automatic run_layer(int nh, int nhc, int hd, int ndc, int nfc, int nt, int ks, bit timed);
    int t0, cycles, acc_w, dense;
    int ov0, st0, sw0, kv0, i80, tr0, nb0;
    H = nh; HC = nhc; HD = hd; DC = ndc; FC = nfc; NTOK = nt; KSEL = ks;
    n_heads = 6'(H); hc = 5'(HC); dc = 11'(DC); fc = 11'(FC); n_tok = 12'(NTOK); k_sel = 12'(KSEL);
    klo_h = 0; klo_g = 0; klo_c = 0; req_head = 0; last_isv = 0;
    nq = 0; nk = 0; nv = 0; nproj = 0; natt = 0;
    cnt_q[0] = 0; cnt_q[1] = 0; cnt_k = 0; cnt_v = 0; cnt_h = 0; cnt_g = 0; cnt_u = 0; cnt_y = 0; cnt_p = 0;
    for (int h = 0; h < HM; h++) begin cnt_o[h] = 0; kept[h].delete(); end
    acc_w = 0;
    for (int j = 0; j < 3 * H + 4; j++) begin wptr_of[j] = acc_w % WBD; acc_w += used_of(j); end
    ov0 = perf_overlap; st0 = perf_stall; sw0 = perf_mode_sw; kv0 = perf_kv_req;
    i80 = perf_bf_int8; tr0 = perf_bf_tern; nb0 = nbarrier;
    // input vector
    for (int i = 0; i < DC; i++) begin
      logic [63:0] w;
      w = {$urandom, $urandom};
      db_wr = 1; db_wr_addr = 12'(XB + i); db_wr_data = w;
      #0.3;
      while (!db_wr_ready) begin @(posedge clk); #0.3; end
      @(posedge clk); #0.1;
      mem[XB + i] = w;
    end
    db_wr = 0;
    klo_in_valid = 1;
    start = 1; @(posedge clk); #0.1; start = 0;
    t0 = cyc;
    while (!done) @(posedge clk);
    cycles = cyc - t0;
    repeat (5) @(posedge clk);
    #0.1;
    $display("layer H=%0d hd=%0d d=%0d ffn=%0d M=%0d K=%0d: %0d cycles; overlap %0d, stall %0d, BF int8 %0d, BF ternary %0d, KV blocks %0d, mode switches %0d, barriers %0d",
             H, HD, DC * 8, FC * 8, NTOK, KSEL, cycles, perf_overlap - ov0, perf_stall - st0, perf_bf_int8 - i80,
             perf_bf_tern - tr0, perf_kv_req - kv0, perf_mode_sw - sw0, nbarrier - nb0);
    $display("checked: %0d projection vectors, %0d attention heads", nproj, natt);
    checks++; if (nproj != 3 * H + 4) begin failures++; $display("only %0d projection vectors seen", nproj); end
    checks++; if (natt != H) begin failures++; $display("only %0d attention heads seen", natt); end
    checks++; if (perf_bf_tern == tr0 || perf_bf_int8 == i80) begin failures++; $display("BoothFlex unused in a mode"); end
    dense = H * 2 * (NTOK / 8) * HC;
    checks++; if (perf_kv_req - kv0 != H * 2 * (KSEL / 8) * HC || perf_kv_req - kv0 >= dense) begin
      failures++; $display("top-K pruning: %0d KV blocks, dense %0d", perf_kv_req - kv0, dense);
    end
    checks++; if (nbarrier - nb0 != 5 * H + 4) begin failures++; $display("%0d quantization barriers", nbarrier - nb0); end
    if (timed) begin
      checks++;
      if (real'(cycles) < 0.75 * 530783.0 || real'(cycles) > 1.25 * 530783.0) begin
        failures++; $display("layer time %0d cycles outside 25 %% of 530783", cycles);
      end
    end
  endtask

  initial begin
    x_scale = 32'd65536; w_scale = 32'd65536; s_qk = 32'd2; s_sv = 32'd512;
    bases[0] = 12'(XB); bases[1] = 12'(QB); bases[2] = 12'(KB); bases[3] = 12'(VB); bases[4] = 12'(PB);
    bases[5] = 12'(OB); bases[6] = 12'(HB); bases[7] = 12'(GB); bases[8] = 12'(UB); bases[9] = 12'(YB);
    db_wr_addr = '0; db_wr_data = '0; wb_wr_bank = '0; wb_wr_addr = '0; wb_wr_data = '0;
    nbarrier = 0; H = HM; HC = HCM; NTOK = NTM;
    for (int i = 0; i < 4096; i++) mem[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #0.1;
    // weights (reused cyclically by every run)
    for (int b = 0; b < 4; b++)
      for (int a = 0; a < WBD; a++) begin
        tcode_t [7:0][7:0] w;
        for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++)
          case ($urandom_range(0, 2)) 0: w[r][c] = 2'b00; 1: w[r][c] = 2'b01; default: w[r][c] = 2'b11; endcase
        wb_wr = 1; wb_wr_bank = 2'(b); wb_wr_addr = 9'(a); wb_wr_data = w;
        wmem[b][a] = w;
        @(posedge clk); #0.1;
      end
    wb_wr = 0;
    // 1) full BitNet b1.58 3B layer, decode with 2048 cached tokens
    run_layer(32, 13, 100, 400, 1080, 2048, 32, 1);
    // 2) short-reduction layer (model dim 32): tiles leave the cores every
    //    few cycles, so the cores run out of output credits while the
    //    nonlinear unit serves attention - exercises the credit stall
    run_layer(2, 8, 64, 4, 6, 64, 16, 0);
    checks++; if (perf_overlap == 0) begin failures++; $display("mechanism missing: TINT/BoothFlex overlap"); end
    checks++; if (perf_stall == 0) begin failures++; $display("mechanism missing: credit stall"); end
    checks++; if (perf_mode_sw == 0) begin failures++; $display("mechanism missing: BoothFlex mode switch"); end
    checks++; if (perf_kv_req == 0) begin failures++; $display("mechanism missing: top-K pruned KV fetch"); end
    checks++; if (nbarrier == 0) begin failures++; $display("mechanism missing: quantization barrier"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
