// lop_core: Leading-One Prediction array (surrogate attention scores).
//
// The query of one head is loaded chunk by chunk (eight INT8 elements per
// chunk) through the leading-one detector, which keeps for each element the
// feature (nz, sgn, LO) with LO = floor(log2|q|); these features form the
// array's activation buffer. Key features of the same form are streamed from
// the K_LO cache, one block of 8 tokens x 8 dimensions per cycle. PE (r,c) is an
// ExpAdd unit: it adds LO(q_c) + LO(k_rc) and turns the sum into a barrel-
// shifted one, signed by sgn(q)sgn(k); a zero operand gives no term. The row
// adder chain with its zero/feedback head mux and the row register accumulate
// over the dimension chunks, so after the last chunk row r holds
//   s(q,k_r) = sum_i sgn(q_i) sgn(k_ri) 2^(LO(q_i)+LO(k_ri))
// (Eq. 1 of the paper) for eight tokens, which go to the top-K selector.
//
// Interface: q_wr writes query chunk q_chunk_idx; k_valid presents key block
// k_chunk_idx (k_first/k_last mark the first/last dimension chunk of a token
// group). Timing: one key block per cycle; scores and score_valid appear one
// cycle after the k_last block. The array shape, the LO adder and "1 << x"
// inside ExpAdd and the row DFFs follow Fig. 4; zero handling and the
// handshake are this design's own.
module lop_core
  import vita_pkg::*;
#(
  parameter int unsigned R      = ROWS,
  parameter int unsigned C      = COLS,
  parameter int unsigned MAX_HC = 16     // query chunks held (head dim up to 128)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // query load through the leading-one detector
  input  logic                            q_wr,
  input  logic [$clog2(MAX_HC)-1:0]       q_chunk_idx,
  input  logic [C-1:0][7:0]               q_chunk,
  // key feature stream
  input  logic                            k_valid,
  input  logic                            k_first,
  input  logic                            k_last,
  input  logic [$clog2(MAX_HC)-1:0]       k_chunk_idx,
  input  lo_feat_t [R-1:0][C-1:0]         k_feat,
  output logic [R-1:0][SCORE_W-1:0]       score,
  output logic                            score_valid
);

  lo_feat_t [C-1:0] q_feat [MAX_HC];      // activation buffer (query features)

  always_ff @(posedge clk) begin
    if (q_wr)
      for (int c = 0; c < C; c++) q_feat[q_chunk_idx][c] <= lod8($signed(q_chunk[c]));
  end

  logic signed [SCORE_W-1:0] row_sum [R];

  always_comb begin
    for (int r = 0; r < R; r++) begin
      row_sum[r] = k_first ? '0 : $signed(score[r]);
      for (int c = 0; c < C; c++) begin
        lo_feat_t qf, kf;
        logic [LO_W:0] ex;
        logic signed [SCORE_W-1:0] term;
        qf   = q_feat[k_chunk_idx][c];
        kf   = k_feat[r][c];
        ex   = (LO_W+1)'(qf.lo) + (LO_W+1)'(kf.lo);     // ExpAdd: LO(q) + LO(k)
        term = SCORE_W'(1) << ex;                        // 1 << x
        if (!(qf.nz && kf.nz)) term = '0;
        else if (qf.neg ^ kf.neg) term = -term;
        row_sum[r] += term;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      score       <= '0;
      score_valid <= 1'b0;
    end else begin
      score_valid <= k_valid && k_last;
      if (k_valid)
        for (int r = 0; r < R; r++) score[r] <= row_sum[r];
    end
  end

endmodule
