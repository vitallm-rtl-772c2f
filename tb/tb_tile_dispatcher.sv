// tb_tile_dispatcher: ternary matrix-vector jobs dealt to three real TINT
// cores and one BoothFlex core (ternary mode).
// The testbench holds behavioural activation and weight memories (registered
// reads, weight bank j laid out as base + round*kc + chunk), four real credit
// counters and a consumer that returns a core's credit a random 0..D cycles
// after the core's tile came out. Every output tile is compared with a
// reference matrix-vector product and must appear exactly once with the
// index reported by t_out_idx / bf_out_idx.
// Timing checks: with immediate credit return a job must finish within
// ceil(n_tiles / cores) * kc + 8 cycles (one chunk per cycle per core; the
// dual job uses 4 cores; checked for kc >= 3 - with kc = 1 the two-credit
// window and the four-cycle credit round trip limit the rate, as designed);
// with slow credit return the stall output must
// fire and results must still be exact.
module tb_tile_dispatcher;
  import vita_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int DAW = 8, WAW = 8, KCW = 6, TW = 7;
  logic start = 0, dual = 0, busy, done, stall;
  logic [DAW-1:0] act_base;
  logic [KCW-1:0] kc;
  logic [TW-1:0] n_tiles;
  logic [WAW-1:0] w_base, w_used;
  logic [3:0] avail, take, w_en, give;
  logic a_en, b_en;
  logic [DAW-1:0] a_addr, b_addr;
  logic [3:0][WAW-1:0] w_addr;
  logic [2:0] t_valid;
  logic t_first, t_last, bf_valid, bf_first, bf_last, bf_ready, bf_out_valid, bf_busy;
  logic [2:0][TW-1:0] t_out_idx;
  logic [TW-1:0] bf_out_idx;
  int checks = 0, failures = 0;

  tile_dispatcher #(.DAW(DAW), .WAW(WAW), .KCW(KCW), .TW(TW)) dut (.*);

  for (genvar j = 0; j < 4; j++) begin : g_cr
    credit_counter #(.CREDITS(2)) u_cr (.clk, .rst_n, .take(take[j]), .give(give[j]), .avail(avail[j]), .count());
  end

  // behavioural memories
  logic [7:0][7:0] act_mem [1 << DAW];
  tcode_t [7:0][7:0] w_mem [4][1 << WAW];
  logic [7:0][7:0] a_q, b_q;
  tcode_t [3:0][7:0][7:0] w_q;
  always_ff @(posedge clk) begin
    if (a_en) a_q <= act_mem[a_addr];
    if (b_en) b_q <= act_mem[b_addr];
    for (int j = 0; j < 4; j++) if (w_en[j]) w_q[j] <= w_mem[j][w_addr[j]];
  end

  logic [2:0][7:0][31:0] t_acc;
  logic [2:0] t_ov;
  for (genvar j = 0; j < 3; j++) begin : g_t
    tint_core u_t (.clk, .rst_n, .in_valid(t_valid[j]), .first(t_first), .last(t_last),
                   .act(a_q), .w(w_q[j]), .acc(t_acc[j]), .out_valid(t_ov[j]));
  end
  logic [7:0][7:0][7:0] bf_mult;
  logic [7:0][31:0] bf_acc;
  always_comb
    for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++) bf_mult[r][c] = {6'd0, w_q[3][r][c]};
  boothflex_core u_bf (.clk, .rst_n, .mode(BF_TERNARY), .in_valid(bf_valid), .in_ready(bf_ready),
                       .first(bf_first), .last(bf_last), .mcand(b_q), .mult(bf_mult),
                       .acc(bf_acc), .out_valid(bf_out_valid), .busy(bf_busy));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // consumer: returns each credit after a random delay
  int max_delay;
  int rel [4][$];
  int cyc;
  always @(posedge clk) cyc++;
  always_comb begin
    give = '0;
    for (int j = 0; j < 4; j++) if (rel[j].size() > 0 && rel[j][0] <= cyc) give[j] = 1'b1;
  end

  int ref_y [128][8];
  int seen [128];
  int nstall;
  always @(posedge clk) if (rst_n) begin
    for (int j = 0; j < 4; j++) if (give[j]) void'(rel[j].pop_front());
    for (int j = 0; j < 4; j++) begin
      bit v;
      int idx;
      v = (j < 3) ? t_ov[j] : bf_out_valid;
      idx = (j < 3) ? int'(t_out_idx[j]) : int'(bf_out_idx);
      if (v) begin
        rel[j].push_back(cyc + 1 + $urandom_range(0, max_delay));
        seen[idx]++;
        for (int r = 0; r < 8; r++) begin
          int got;
          got = (j < 3) ? int'($signed(t_acc[j][r])) : int'($signed(bf_acc[r]));
          checks++;
          if (got != ref_y[idx][r]) begin
            failures++; $display("core %0d tile %0d row %0d: %0d vs %0d", j, idx, r, got, ref_y[idx][r]);
          end
        end
      end
    end
    if (stall) nstall++;
  end

  function automatic int tval(tcode_t c);
    return (c == 2'b01) ? 1 : (c == 2'b11) ? -1 : 0;
  endfunction

  task automatic job(int nt, int k, bit d, int dly, int ab, int wb);
    int nc, t0, cycles, bound;
    nc = d ? 4 : 3;
    max_delay = dly;
    for (int c = 0; c < k; c++) for (int e = 0; e < 8; e++) act_mem[ab + c][e] = 8'($urandom);
    for (int t = 0; t < nt; t++) begin
      int core, rnd;
      core = t % nc; rnd = t / nc;
      for (int c = 0; c < k; c++)
        for (int r = 0; r < 8; r++) for (int e = 0; e < 8; e++) begin
          tcode_t code;
          case ($urandom_range(0, 2)) 0: code = 2'b00; 1: code = 2'b01; default: code = 2'b11; endcase
          w_mem[core][wb + rnd * k + c][r][e] = code;
        end
      for (int r = 0; r < 8; r++) begin
        ref_y[t][r] = 0;
        for (int c = 0; c < k; c++) for (int e = 0; e < 8; e++)
          ref_y[t][r] += tval(w_mem[core][wb + rnd * k + c][r][e]) * int'($signed(act_mem[ab + c][e]));
      end
      seen[t] = 0;
    end
    act_base = DAW'(ab); kc = KCW'(k); n_tiles = TW'(nt); w_base = WAW'(wb); dual = d;
    nstall = 0;
    start = 1; @(posedge clk); #1; start = 0;
    t0 = cyc;
    while (!done) @(posedge clk);
    cycles = cyc - t0;
    #1;
    for (int t = 0; t < nt; t++) begin
      checks++;
      if (seen[t] != 1) begin failures++; $display("tile %0d seen %0d times", t, seen[t]); end
    end
    checks++;
    if (int'(w_used) != ((nt + nc - 1) / nc) * k) begin failures++; $display("w_used %0d", w_used); end
    bound = ((nt + nc - 1) / nc) * k + 8;
    checks++;
    if (dly == 0 && k >= 3 && cycles > bound) begin failures++; $display("job %0dx%0d took %0d cycles > %0d", nt, k, cycles, bound); end
    if (dly >= 6) begin
      checks++;
      if (nstall == 0) begin failures++; $display("no stall seen with slow credits"); end
    end
    $display("job tiles=%0d kc=%0d dual=%0d delay=%0d: %0d cycles, %0d stall cycles", nt, k, d, dly, cycles, nstall);
    repeat (10) @(posedge clk); #1;
  endtask

  initial begin
    act_base = '0; kc = '0; n_tiles = '0; w_base = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    job(12, 5, 0, 0, 0, 0);
    job(13, 4, 1, 0, 10, 7);
    job(29, 3, 1, 12, 30, 0);
    job(2, 6, 1, 0, 0, 3);
    job(40, 1, 1, 0, 50, 0);
    job(21, 2, 0, 9, 5, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
