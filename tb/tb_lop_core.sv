// tb_lop_core: leading-one surrogate scores.
// Random INT8 queries and keys (including zeros and -128) are generated; the
// query goes through the core's leading-one detector, the key features are
// formed here with an independent floor(log2|x|) routine. For each group of
// 8 tokens the eight scores are compared with Eq. 1,
//   s = sum_i sgn(q_i) sgn(k_i) 2^(LO(q_i)+LO(k_i))   (zero operands add 0),
// and the score must appear one cycle after the group's last key block.
module tb_lop_core;
  import vita_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int HC = 4, NG = 5;
  logic q_wr = 0, k_valid = 0, k_first = 0, k_last = 0, score_valid;
  logic [3:0] q_chunk_idx, k_chunk_idx;
  logic [7:0][7:0] q_chunk;
  lo_feat_t [7:0][7:0] k_feat;
  logic [7:0][23:0] score;
  int checks = 0, failures = 0;

  lop_core dut (.*);

  function automatic int lo_ref(int x);
    int m, p;
    m = (x < 0) ? -x : x;
    p = 0;
    while (m > 1) begin m = m / 2; p++; end
    return p;
  endfunction

  logic signed [7:0] q [HC*8];
  logic signed [7:0] k [8][HC*8];
  int exp_s [NG][8];

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [7:0] rnd8();
    int u;
    u = $urandom_range(0, 9);
    if (u == 0) return 0;
    if (u == 1) return -128;
    return 8'($urandom);
  endfunction

  int g_out = 0;
  always @(posedge clk) if (rst_n && score_valid) begin
    for (int r = 0; r < 8; r++) begin
      int got;
      got = int'($signed(score[r]));
      checks++;
      if (got != exp_s[g_out][r]) begin
        failures++;
        $display("group %0d row %0d got %0d exp %0d", g_out, r, got, exp_s[g_out][r]);
      end
    end
    g_out <= g_out + 1;
  end

  initial begin
    q_chunk = '0; k_feat = '0; q_chunk_idx = '0; k_chunk_idx = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int i = 0; i < HC*8; i++) q[i] = rnd8();
    for (int c = 0; c < HC; c++) begin
      for (int l = 0; l < 8; l++) q_chunk[l] = q[c*8+l];
      q_wr = 1; q_chunk_idx = 4'(c);
      @(posedge clk); #1;
    end
    q_wr = 0;
    for (int g = 0; g < NG; g++) begin
      for (int r = 0; r < 8; r++) begin
        exp_s[g][r] = 0;
        for (int i = 0; i < HC*8; i++) begin
          k[r][i] = rnd8();
          if (q[i] != 0 && k[r][i] != 0)
            exp_s[g][r] += ((q[i] < 0) != (k[r][i] < 0) ? -1 : 1) * (1 << (lo_ref(q[i]) + lo_ref(k[r][i])));
        end
      end
      for (int c = 0; c < HC; c++) begin
        for (int r = 0; r < 8; r++)
          for (int l = 0; l < 8; l++) begin
            k_feat[r][l].nz  = (k[r][c*8+l] != 0);
            k_feat[r][l].neg = k[r][c*8+l] < 0;
            k_feat[r][l].lo  = 3'(lo_ref(k[r][c*8+l]));
          end
        k_valid = 1; k_first = (c == 0); k_last = (c == HC - 1); k_chunk_idx = 4'(c);
        @(posedge clk); #1;
        checks++;
        if (score_valid != (c == HC - 1)) begin failures++; $display("score_valid timing"); end
      end
    end
    k_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (g_out != NG) begin failures++; $display("groups %0d", g_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
