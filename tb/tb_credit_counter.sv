// tb_credit_counter: per-bank credit counter of the shared buffers.
// Random take/give traffic (take only when avail, give only when a credit is
// outstanding) against a reference count; avail must equal (count > 0) and
// count must never exceed CREDITS. Simultaneous take and give keep the count.
module tb_credit_counter;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int CR = 2;
  logic take = 0, give = 0, avail;
  logic [$clog2(CR+1)-1:0] count;
  int checks = 0, failures = 0;

  credit_counter #(.CREDITS(CR)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ref_c;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    ref_c = CR;
    for (int i = 0; i < 1000; i++) begin
      take = (ref_c > 0) && $urandom_range(0, 1);
      give = (ref_c < CR) && $urandom_range(0, 1);
      if (ref_c == 0 && i % 7 == 0) give = 1;
      #1;
      checks++;
      if (int'(count) != ref_c || avail != (ref_c > 0)) begin
        failures++; $display("count=%0d avail=%0b ref=%0d", count, avail, ref_c);
      end
      @(posedge clk); #1;
      ref_c = ref_c - int'(take) + int'(give);
    end
    take = 0; give = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
