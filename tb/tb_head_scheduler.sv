// tb_head_scheduler: layer job sequencing with head-level pipelining.
// Behavioural responders stand in for the tile dispatcher (done after a
// time proportional to the job's rounds x kc, reporting w_used), the
// nonlinear unit (grant when idle, done a fixed time later, output scale =
// job number) and the attention engine (busy for a configurable time).
// Checked against an expected job list for H heads:
//  * issue order Q0 K0 V0 Q1 K1 V1 ... O G U D, with kc, tile count, dual
//    flag, activation base, output base, nonlinear mode and weight base
//    (advancing by w_used) of every job;
//  * attention of head h starts after V_h, with the head's Q slot (parity
//    double buffer) and its own output slot, never while the previous head
//    is still in attention, and Q_{h+1} is issued while head h is in
//    attention (overlap);
//  * with a long attention time the scheduler waits (one-head offset);
//  * scales: each job's dequantization scale = input scale x w_scale, the
//    O projection takes the attention output scale, y_scale = last scale.
module tb_head_scheduler;
  import vita_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int DAW = 12, WAW = 9, KCW = 11, TW = 11;
  localparam int XB = 0, QB = 100, KB = 120, VB = 130, OB = 140, HB = 200, GB = 300, UB = 400, YB = 500;

  logic start = 0, busy, done;
  logic [5:0] n_heads;
  logic [4:0] hc;
  logic [KCW-1:0] dc, fc;
  logic [31:0] x_scale, w_scale, y_scale;
  logic [3:0] phase;
  logic d_start, d_dual, d_done;
  logic [DAW-1:0] d_act_base;
  logic [KCW-1:0] d_kc;
  logic [TW-1:0] d_tiles;
  logic [WAW-1:0] d_w_base, d_w_used;
  logic nl_req, nl_gnt, nl_done;
  nl_mode_e nl_mode;
  logic [TW-1:0] nl_tiles;
  logic [TW+2:0] nl_elems;
  logic [31:0] nl_scale, nl_out_scale;
  logic [DAW-1:0] nl_base, a_q_base, a_o_base;
  logic a_start, a_busy, a_done;
  int checks = 0, failures = 0;

  head_scheduler #(.DAW(DAW), .WAW(WAW), .KCW(KCW), .TW(TW), .HW(4), .NHW(6)) dut (
    .clk, .rst_n, .start, .n_heads, .hc, .dc, .fc, .x_scale, .w_scale,
    .x_base(DAW'(XB)), .q_base(DAW'(QB)), .k_base(DAW'(KB)), .v_base(DAW'(VB)), .o_base(DAW'(OB)),
    .h_base(DAW'(HB)), .g_base(DAW'(GB)), .u_base(DAW'(UB)), .y_base(DAW'(YB)),
    .busy, .done, .y_scale, .phase, .d_start, .d_act_base, .d_kc, .d_tiles, .d_w_base, .d_dual,
    .d_done, .d_w_used, .nl_req, .nl_mode, .nl_tiles, .nl_elems, .nl_scale, .nl_base, .nl_gnt,
    .nl_done, .nl_out_scale, .a_start, .a_q_base, .a_o_base, .a_busy, .a_done
  );

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc;
  always @(posedge clk) cyc++;

  // dispatcher model
  int d_left;
  logic [WAW-1:0] used_q;
  always @(posedge clk or negedge rst_n)
    if (!rst_n) begin d_left <= 0; d_done <= 0; used_q <= '0; end
    else begin
      d_done <= 0;
      if (d_start) begin
        int nc;
        nc = d_dual ? 4 : 3;
        d_left <= ((int'(d_tiles) + nc - 1) / nc) * int'(d_kc) + 3;
        used_q <= WAW'(((int'(d_tiles) + nc - 1) / nc) * int'(d_kc));
      end else if (d_left > 0) begin
        d_left <= d_left - 1;
        if (d_left == 1) d_done <= 1;
      end
    end
  assign d_w_used = used_q;

  // nonlinear model: the attention engine model also takes it
  int nl_left, njob;
  logic nl_busy;
  assign nl_gnt = nl_req && !nl_busy;
  always @(posedge clk or negedge rst_n)
    if (!rst_n) begin nl_left <= 0; nl_busy <= 0; nl_done <= 0; nl_out_scale <= '0; end
    else begin
      nl_done <= 0;
      if (nl_gnt) begin nl_busy <= 1; nl_left <= 30; end
      else if (nl_busy) begin
        nl_left <= nl_left - 1;
        if (nl_left == 1) begin nl_busy <= 0; nl_done <= 1; nl_out_scale <= 32'(1000 + njob); end
      end
    end

  // attention model
  int a_left, attn_time, a_count;
  always @(posedge clk or negedge rst_n)
    if (!rst_n) begin a_left <= 0; a_busy <= 0; a_done <= 0; end
    else begin
      a_done <= 0;
      if (a_start) begin a_busy <= 1; a_left <= attn_time; end
      else if (a_busy) begin
        a_left <= a_left - 1;
        if (a_left == 1) begin a_busy <= 0; a_done <= 1; end
      end
    end

  // expected job list
  typedef struct { int kind; int head; } job_t;   // kind 0..6 = Q K V O G U D
  job_t exp_jobs [$];
  int HN, HCN, DCN, FCN, wexp, nissue, overlap, nattn;
  int last_scale;
  always @(posedge clk) if (rst_n && d_start) begin
    job_t j;
    int ekc, etl, eab, eob, nc;
    bit edual;
    nl_mode_e em;
    if (exp_jobs.size() == 0) begin failures++; $display("unexpected job"); end
    else begin
      j = exp_jobs.pop_front();
      edual = (j.kind >= 3);
      nc = edual ? 4 : 3;
      em = (j.kind == 3) ? NL_RMSNORM : NL_ABSMAX;
      case (j.kind)
        0: begin ekc = DCN; etl = HCN; eab = XB; eob = QB + (j.head % 2) * HCN; end
        1: begin ekc = DCN; etl = HCN; eab = XB; eob = KB; end
        2: begin ekc = DCN; etl = HCN; eab = XB; eob = VB; end
        3: begin ekc = HN * HCN; etl = DCN; eab = OB; eob = HB; end
        4: begin ekc = DCN; etl = FCN; eab = HB; eob = GB; end
        5: begin ekc = DCN; etl = FCN; eab = HB; eob = UB; end
        default: begin ekc = FCN; etl = DCN; eab = UB; eob = YB; end
      endcase
      checks++;
      if (int'(d_kc) != ekc || int'(d_tiles) != etl || d_dual != edual || int'(d_act_base) != eab ||
          int'(nl_base) != eob || nl_mode != em || int'(d_w_base) != wexp % 512 || int'(nl_tiles) != etl ||
          int'(nl_elems) != etl * 8) begin
        failures++;
        $display("job kind %0d head %0d: kc %0d/%0d tiles %0d/%0d dual %0b act %0d/%0d out %0d/%0d w %0d/%0d",
                 j.kind, j.head, d_kc, ekc, d_tiles, etl, d_dual, d_act_base, eab, nl_base, eob, d_w_base, wexp % 512);
      end
      // scale chain: Q/K/V from x_scale, O from the attention scale, G/U from O, D from U
      checks++;
      if (j.kind < 3 && nl_scale != 32'((64'(x_scale) * 64'(w_scale)) >> 16)) begin failures++; $display("scale of job %0d", j.kind); end
      if (j.kind >= 3 && nl_scale != 32'((64'(last_scale) * 64'(w_scale)) >> 16) && j.kind != 5) begin
        failures++; $display("scale of job %0d: %0d", j.kind, nl_scale);
      end
      wexp += ((etl + nc - 1) / nc) * ekc;
      if (a_busy) overlap++;
      njob++;
    end
  end
  // remember the scale each consumer should see
  always @(posedge clk) if (rst_n && nl_done) begin
    if (exp_jobs.size() > 0 && exp_jobs[0].kind != 5) last_scale = 1000 + njob;
  end
  always @(posedge clk) if (rst_n && a_start) begin
    checks++;
    if (a_busy) begin failures++; $display("attention started while busy"); end
    checks++;
    if (int'(a_q_base) != QB + (nattn % 2) * HCN || int'(a_o_base) != OB + nattn * HCN) begin
      failures++; $display("attention %0d: q base %0d o base %0d", nattn, a_q_base, a_o_base);
    end
    nattn++;
  end

  task automatic run(int h, int nhc, int ndc, int nfc, int at);
    job_t j;
    int t0;
    HN = h; HCN = nhc; DCN = ndc; FCN = nfc; attn_time = at;
    n_heads = 6'(h); hc = 5'(nhc); dc = KCW'(ndc); fc = KCW'(nfc);
    x_scale = 32'd70000; w_scale = 32'd50000;
    exp_jobs.delete();
    for (int i = 0; i < h; i++) for (int k = 0; k < 3; k++) begin j.kind = k; j.head = i; exp_jobs.push_back(j); end
    for (int k = 3; k < 7; k++) begin j.kind = k; j.head = 0; exp_jobs.push_back(j); end
    wexp = 0; overlap = 0; nattn = 0; njob = 0;
    start = 1; @(posedge clk); #1; start = 0;
    t0 = cyc;
    while (!done) @(posedge clk);
    #1;
    checks++;
    if (exp_jobs.size() != 0) begin failures++; $display("%0d jobs never issued", exp_jobs.size()); end
    checks++;
    if (nattn != h) begin failures++; $display("%0d attention starts", nattn); end
    checks++;
    if (overlap < h - 1) begin failures++; $display("only %0d projections overlapped attention", overlap); end
    checks++;
    if (y_scale != 32'(1000 + njob)) begin failures++; $display("y_scale %0d", y_scale); end
    $display("H=%0d attention %0d cycles: %0d cycles, %0d jobs issued during attention", h, at, cyc - t0, overlap);
    repeat (5) @(posedge clk); #1;
  endtask

  initial begin
    n_heads = '0; hc = '0; dc = '0; fc = '0; x_scale = '0; w_scale = '0; last_scale = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    run(4, 3, 10, 20, 20);     // attention shorter than a projection
    run(5, 2, 4, 6, 400);      // attention much longer: the scheduler waits
    run(1, 13, 40, 108, 50);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
