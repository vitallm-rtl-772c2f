// tb_tint_core: random ternary x INT8 tiles through the TINT array.
// Streams several output tiles back to back (one chunk per cycle), compares
// every row accumulator with a dot product computed here from the same
// operands, and checks that out_valid comes exactly one cycle after each
// tile's last chunk (64 select-accumulates per cycle, no bubbles).
module tb_tint_core;
  import vita_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, first = 0, last = 0;
  logic [7:0][7:0] act;
  tcode_t [7:0][7:0] w;
  logic [7:0][31:0] acc;
  logic out_valid;
  int checks = 0, failures = 0;

  tint_core dut (.*);

  localparam int NT = 6, KC = 5;
  int exp_acc [NT][8];
  int tern;

  function automatic int tv(tcode_t c);
    return (c == 2'b01) ? 1 : (c == 2'b11) ? -1 : 0;
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor
  int seen = 0, cyc = 0, last_cyc [NT];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      for (int r = 0; r < 8; r++) begin
        checks++;
        if ($signed(acc[r]) != exp_acc[seen][r]) begin
          failures++;
          $display("tile %0d row %0d: got %0d exp %0d", seen, r, $signed(acc[r]), exp_acc[seen][r]);
        end
      end
      checks++;
      if (cyc != last_cyc[seen] + 1) begin
        failures++;
        $display("latency: out at %0d, last chunk at %0d", cyc, last_cyc[seen]);
      end
      seen <= seen + 1;
    end
  end

  initial begin
    act = '0; w = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int t = 0; t < NT; t++) begin
      for (int r = 0; r < 8; r++) exp_acc[t][r] = 0;
      for (int k = 0; k < KC; k++) begin
        for (int c = 0; c < 8; c++) begin
          act[c] = 8'($urandom);
          if (t == 0 && k == 0) act[c] = 8'h80;           // -128 corner case
          for (int r = 0; r < 8; r++) begin
            tern = $urandom_range(0, 3);
            w[r][c] = tcode_t'(tern);
            exp_acc[t][r] += tv(w[r][c]) * $signed(act[c]);
          end
        end
        in_valid = 1; first = (k == 0); last = (k == KC - 1);
        if (last) last_cyc[t] = cyc;
        @(posedge clk);
        #1;
      end
    end
    in_valid = 0; first = 0; last = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (seen != NT) begin failures++; $display("saw %0d tiles", seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
