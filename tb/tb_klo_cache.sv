// tb_klo_cache: FIFO of K_LO feature blocks between the key stream and the
// LOP core.
// Random push/pop traffic with a queue reference checks order and data,
// in_ready low exactly when DEPTH blocks are held, out_valid low when empty,
// full-rate streaming (one block per cycle with simultaneous push and pop
// keeps the occupancy constant) and that clear empties the FIFO.
module tb_klo_cache;
  import vita_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int DEPTH = 8;
  logic clear = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  lo_feat_t [7:0][7:0] in_data, out_data;
  int checks = 0, failures = 0;

  klo_cache #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [$bits(in_data)-1:0] q [$];

  task automatic cycle(bit push, bit pop);
    logic [$bits(in_data)-1:0] d;
    for (int w = 0; w < $bits(in_data) / 32; w++) d[w*32 +: 32] = $urandom;
    in_valid = push; in_data = d; out_ready = pop;
    #1;
    checks++;
    if (in_ready != (q.size() < DEPTH)) begin failures++; $display("in_ready %0b at occupancy %0d", in_ready, q.size()); end
    checks++;
    if (out_valid != (q.size() > 0)) begin failures++; $display("out_valid %0b at occupancy %0d", out_valid, q.size()); end
    if (pop && out_valid) begin
      checks++;
      if (out_data != q[0]) begin failures++; $display("data mismatch at head"); end
    end
    begin
      bit acc_in;
      acc_in = push && (q.size() < DEPTH);
      @(posedge clk); #1;
      if (pop && q.size() > 0) void'(q.pop_front());
      if (acc_in) q.push_back(d);
    end
  endtask

  initial begin
    in_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int i = 0; i < 400; i++) cycle($urandom_range(0, 1), $urandom_range(0, 2) == 0);
    for (int i = 0; i < 400; i++) cycle($urandom_range(0, 2) == 0, $urandom_range(0, 1));
    for (int i = 0; i < 4; i++) cycle(1, 0);
    for (int i = 0; i < 50; i++) begin
      int occ;
      occ = q.size();
      cycle(1, 1);
      checks++;
      if (q.size() != occ) failures++;
    end
    clear = 1; @(posedge clk); #1; clear = 0;
    q.delete();
    cycle(0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
