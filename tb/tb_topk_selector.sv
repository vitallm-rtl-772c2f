// tb_topk_selector: bucketized top-K against a sort-based reference.
// Random signed scores (wide spread, with many ties) are offered eight per
// cycle, the last group partly masked. The reference ranks tokens by
// (bucket descending, index ascending) with a plain selection sort and keeps
// the first K; the selector's emitted index list must equal that set. Also
// checked: out_count never exceeds 8 per cycle, the list is emitted in
// n_groups cycles after one scan cycle (done seen n_groups+2 edges after the
// last input), and the keep-all case (fewer tokens
// than K). Bucket: 0 for s <= 0, else 1 + 2*floor(log2 s) + next bit.
module tb_topk_selector;
  import vita_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int MAXT = 256;
  logic start = 0, in_valid = 0, in_last = 0, out_valid, done, busy;
  logic [8:0] k_sel;
  logic [7:0] in_mask;
  logic [7:0][23:0] in_score;
  logic [3:0] out_count;
  logic [7:0][7:0] out_idx;
  int checks = 0, failures = 0;

  topk_selector #(.MAX_TOKENS(MAXT)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int bucket_ref(int s);
    int p, v;
    if (s <= 0) return 0;
    p = 0; v = s;
    while (v > 1) begin v = v >> 1; p++; end
    return 1 + 2 * p + ((p > 0) ? ((s >> (p - 1)) & 1) : 0);
  endfunction

  int sc [MAXT];
  int got [$];
  int emit_cycles, cyc, t_last, t_done;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && in_valid && in_last) t_last = cyc;
    if (rst_n && done) t_done = cyc;
  end
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (out_count > 8 || out_count == 0) failures++;
    for (int j = 0; j < int'(out_count); j++) got.push_back(int'(out_idx[j]));
  end

  task automatic run(int n, int k);
    int order [MAXT];
    int used [MAXT];
    int exp_set [$];
    int ng;
    got.delete();
    emit_cycles = 0;
    for (int i = 0; i < n; i++) begin
      case ($urandom_range(0, 3))
        0: sc[i] = -int'($urandom_range(0, 5000));
        1: sc[i] = int'($urandom_range(0, 40));
        default: sc[i] = int'($urandom_range(0, 1 << $urandom_range(1, 20)));
      endcase
    end
    // reference: selection sort by (bucket desc, index asc)
    for (int i = 0; i < n; i++) used[i] = 0;
    for (int j = 0; j < ((k < n) ? k : n); j++) begin
      int best;
      best = -1;
      for (int i = 0; i < n; i++)
        if (!used[i] && (best < 0 || bucket_ref(sc[i]) > bucket_ref(sc[best]))) best = i;
      used[best] = 1;
      exp_set.push_back(best);
    end
    exp_set.sort();
    k_sel = 9'(k);
    start = 1; @(posedge clk); #1; start = 0;
    ng = (n + 7) / 8;
    for (int g = 0; g < ng; g++) begin
      for (int l = 0; l < 8; l++) begin
        in_mask[l]  = (g * 8 + l) < n;
        in_score[l] = in_mask[l] ? 24'(sc[g*8+l]) : 24'($urandom);
      end
      in_valid = 1; in_last = (g == ng - 1);
      @(posedge clk); #1;
    end
    in_valid = 0; in_last = 0;
    while (!done) @(posedge clk);
    @(posedge clk);
    emit_cycles = t_done - t_last;
    @(posedge clk); #1;
    got.sort();
    checks++;
    if (got.size() != exp_set.size()) begin
      failures++;
      $display("n=%0d k=%0d: kept %0d, expected %0d", n, k, got.size(), exp_set.size());
    end else
      for (int j = 0; j < got.size(); j++) begin
        checks++;
        if (got[j] != exp_set[j]) begin failures++; $display("n=%0d k=%0d: idx %0d vs %0d", n, k, got[j], exp_set[j]); end
      end
    checks++;
    if (emit_cycles != ng + 2) begin failures++; $display("scan+emit took %0d cycles for %0d groups", emit_cycles, ng); end
  endtask

  initial begin
    in_mask = '0; in_score = '0; k_sel = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    run(45, 12);
    run(200, 32);
    run(64, 8);
    run(10, 32);      // fewer tokens than K: keep all
    run(256, 40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
