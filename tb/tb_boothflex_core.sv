// tb_boothflex_core: BoothFlex in both modes.
// INT8 mode: random signed 8x8 multiplier blocks and multiplicands, several
// chunks per tile; every row accumulator is compared with an integer dot
// product and the chunk rate must be one per 5 cycles. Ternary mode: random
// 2-bit codes, one chunk per cycle. A tile in each mode follows the other,
// so the mode switch is exercised as well.
module tb_boothflex_core;
  import vita_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  bf_mode_e mode;
  logic in_valid = 0, in_ready, first = 0, last = 0, out_valid, busy;
  logic [7:0][7:0] mcand;
  logic [7:0][7:0][7:0] mult;
  logic [7:0][31:0] acc;
  int checks = 0, failures = 0;

  boothflex_core dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int exp_acc [8];
  int got_tiles = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    for (int r = 0; r < 8; r++) begin
      checks++;
      if ($signed(acc[r]) != exp_acc[r]) begin
        failures++;
        $display("mode %0d row %0d: got %0d exp %0d", mode, r, $signed(acc[r]), exp_acc[r]);
      end
    end
    got_tiles <= got_tiles + 1;
  end

  task automatic run_tile(bf_mode_e m, int kc, output int cycles);
    int t0, tv;
    for (int r = 0; r < 8; r++) exp_acc[r] = 0;
    mode = m;
    t0 = cyc;
    for (int k = 0; k < kc; k++) begin
      for (int c = 0; c < 8; c++) begin
        mcand[c] = 8'($urandom);
        for (int r = 0; r < 8; r++) begin
          if (m == BF_INT8) begin
            mult[r][c] = 8'($urandom);
            if (k == 0 && r == 0) mult[r][c] = 8'h80;       // -128
            tv = $signed(mult[r][c]);
          end else begin
            case ($urandom_range(0, 2))                      // the three legal codes
              0: mult[r][c] = {6'($urandom), 2'b01};
              1: mult[r][c] = {6'($urandom), 2'b11};
              default: mult[r][c] = {6'($urandom), 2'b00};
            endcase
            tv = (mult[r][c][1:0] == 2'b01) ? 1 : (mult[r][c][1:0] == 2'b11) ? -1 : 0;
          end
          exp_acc[r] += tv * $signed(mcand[c]);
        end
      end
      in_valid = 1; first = (k == 0); last = (k == kc - 1);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1;
    end
    in_valid = 0; first = 0; last = 0;
    cycles = cyc - t0;
    while (busy) @(posedge clk);
    @(posedge clk);
    #1;
  endtask

  int cyc_i8, cyc_t;
  initial begin
    mode = BF_INT8; mcand = '0; mult = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int rep = 0; rep < 3; rep++) begin
      run_tile(BF_INT8, 6, cyc_i8);
      checks++;
      // six chunks accepted: the first immediately, then one per 5 cycles
      if (cyc_i8 != 5 * 5 + 1) begin failures++; $display("INT8 chunk rate: %0d cycles", cyc_i8); end
      run_tile(BF_TERNARY, 6, cyc_t);
      checks++;
      if (cyc_t != 6) begin failures++; $display("ternary chunk rate: %0d cycles", cyc_t); end
    end
    checks++;
    if (got_tiles != 6) begin failures++; $display("tiles %0d", got_tiles); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
