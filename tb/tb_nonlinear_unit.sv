// tb_nonlinear_unit: absmax / RMSNorm / softmax quantization barrier against
// real-valued reference math.
// For each mode a vector of random 32-bit accumulator tiles is sent in a
// shuffled order with random idle gaps (the last tile partly masked). The
// reference dequantizes with the same scale in real arithmetic and checks
//   absmax : |q - round(127 x / a)| <= 1,  scale within 1 % of a/127
//   rmsnorm: |q*scale - x/rms| <= 1.5 quantization steps
//   softmax: |q*scale - p| <= 1.5 steps + 7 % of p (base-2 linear exp),
//            and sum(q*scale) within 8 % of 1
// Timing: t_ready must stay high while the vector is open (one tile per
// cycle in), and the quantized tiles must leave on consecutive cycles (one
// tile per cycle out) to consecutive addresses starting at v_out_base.
module tb_nonlinear_unit;
  import vita_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int RT = 64;
  localparam int TW = $clog2(RT + 1);
  logic v_start = 0, v_busy, v_done, t_valid = 0, t_ready, q_valid;
  nl_mode_e v_mode;
  logic [TW-1:0] v_tiles, t_idx;
  logic [TW+2:0] v_elems;
  logic [31:0] v_scale, v_out_scale;
  logic [11:0] v_out_base, q_addr;
  logic [7:0] t_mask;
  logic [7:0][31:0] t_acc;
  logic [7:0][7:0] q_data;
  int checks = 0, failures = 0;

  nonlinear_unit #(.RAW_TILES(RT)) dut (.*);

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int acc [RT*8];
  int qo [RT*8];
  int seen [RT];
  int last_q_cycle, runs, cyc;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n && q_valid) begin
    int t;
    t = int'(q_addr) - int'(v_out_base);
    if (t < 0 || t >= RT) begin failures++; $display("q_addr out of range %0d", q_addr); end
    else begin
      seen[t]++;
      for (int l = 0; l < 8; l++) qo[t*8+l] = int'($signed(q_data[l]));
    end
    if (last_q_cycle >= 0 && cyc != last_q_cycle + 1) runs++;
    last_q_cycle = cyc;
  end

  task automatic run(nl_mode_e md, int ntiles, int nel, int amp, int sc_int);
    int order [RT];
    real x [RT*8];
    real a, ss, rms, mx, se, osc, qs, p, tol, psum;
    runs = 0; last_q_cycle = -1;
    for (int t = 0; t < RT; t++) seen[t] = 0;
    for (int i = 0; i < ntiles * 8; i++) acc[i] = $signed($urandom_range(0, 2 * amp)) - amp;
    for (int t = 0; t < ntiles; t++) order[t] = t;
    for (int t = ntiles - 1; t > 0; t--) begin
      int j, tmp;
      j = $urandom_range(0, t); tmp = order[t]; order[t] = order[j]; order[j] = tmp;
    end
    v_mode = md; v_tiles = TW'(ntiles); v_elems = (TW+3)'(nel); v_scale = 32'(sc_int);
    v_out_base = 12'(100 + ntiles);
    v_start = 1; @(posedge clk); #1; v_start = 0;
    for (int k = 0; k < ntiles; k++) begin
      int t;
      t = order[k];
      while ($urandom_range(0, 3) == 0) begin t_valid = 0; @(posedge clk); #1; end
      t_valid = 1; t_idx = TW'(t);
      for (int l = 0; l < 8; l++) begin
        t_mask[l] = (t * 8 + l) < nel;
        t_acc[l]  = 32'(acc[t*8+l]);
      end
      checks++;
      if (!t_ready) begin failures++; $display("t_ready low while vector open"); end
      @(posedge clk); #1;
    end
    t_valid = 0;
    while (!v_done) @(posedge clk);
    #1;
    // reference
    a = 0; ss = 0; mx = -1e30;
    for (int i = 0; i < nel; i++) begin
      x[i] = real'(acc[i]) * real'(sc_int) / 65536.0;
      if ((x[i] < 0 ? -x[i] : x[i]) > a) a = (x[i] < 0 ? -x[i] : x[i]);
      ss += x[i] * x[i];
      if (x[i] > mx) mx = x[i];
    end
    rms = $sqrt(ss / nel);
    se = 0;
    for (int i = 0; i < nel; i++) se += $exp(x[i] - mx);
    osc = real'(v_out_scale) / 65536.0;
    for (int t = 0; t < ntiles; t++) begin
      checks++;
      if (seen[t] != 1) begin failures++; $display("mode %0d tile %0d written %0d times", md, t, seen[t]); end
    end
    checks++;
    if (runs != 0) begin failures++; $display("mode %0d: output not one tile per cycle (%0d breaks)", md, runs); end
    psum = 0;
    for (int i = 0; i < nel; i++) begin
      checks++;
      case (md)
        NL_ABSMAX: begin
          qs = 127.0 * x[i] / a;
          if (qo[i] - qs > 1.0 || qs - qo[i] > 1.0) begin
            failures++; $display("absmax %0d: q=%0d ref=%f", i, qo[i], qs);
          end
        end
        NL_RMSNORM: begin
          qs = real'(qo[i]) * osc; p = x[i] / rms;
          if (qs - p > 1.5 * osc || p - qs > 1.5 * osc) begin
            failures++; $display("rmsnorm %0d: got %f ref %f", i, qs, p);
          end
        end
        default: begin
          qs = real'(qo[i]) * osc; p = $exp(x[i] - mx) / se;
          tol = 1.5 * osc + 0.07 * p;
          psum += qs;
          if (qs - p > tol || p - qs > tol) begin
            failures++; $display("softmax %0d: got %f ref %f", i, qs, p);
          end
        end
      endcase
    end
    checks++;
    case (md)
      NL_ABSMAX: if (osc - a / 127.0 > 0.01 * a / 127.0 || a / 127.0 - osc > 0.01 * a / 127.0) begin
        failures++; $display("absmax scale %f vs %f", osc, a / 127.0);
      end
      NL_RMSNORM: if (osc - a / rms / 127.0 > 0.01 * a / rms / 127.0 || a / rms / 127.0 - osc > 0.01 * a / rms / 127.0) begin
        failures++; $display("rms scale %f vs %f", osc, a / rms / 127.0);
      end
      default: if (psum > 1.08 || psum < 0.92) begin
        failures++; $display("softmax sum %f", psum);
      end
    endcase
    @(posedge clk); #1;
  endtask

  initial begin
    t_mask = '0; t_acc = '0; t_idx = '0; v_mode = NL_ABSMAX; v_tiles = '0; v_elems = '0;
    v_scale = '0; v_out_base = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    run(NL_ABSMAX, 13, 100, 30000, 900);
    run(NL_RMSNORM, 13, 100, 30000, 900);
    run(NL_SOFTMAX, 4, 29, 3000, 197);
    run(NL_ABSMAX, 64, 512, 2000000, 65536);
    run(NL_RMSNORM, 40, 317, 500, 20000);
    run(NL_SOFTMAX, 40, 320, 2000, 197);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
