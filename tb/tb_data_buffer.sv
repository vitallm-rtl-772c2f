// tb_data_buffer: activation buffer with read ports A (TINT side) and B
// (BoothFlex / attention side) and two write sources (quantizer, DMA).
// Checks against a shadow memory: synchronous read data one cycle after
// a_en/b_en on both ports in the same cycle; the quantizer write wins when
// both writers are active, and dma_ready is low exactly then (the DMA word
// must be re-offered, and the testbench does so); a DMA word is only
// committed when dma_ready is high.
module tb_data_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  localparam int DEPTH = 128, AW = 7;
  logic a_en = 0, b_en = 0, q_wr = 0, dma_wr = 0, dma_ready;
  logic [AW-1:0] a_addr, b_addr, q_addr, dma_addr;
  logic [7:0][7:0] a_data, b_data, q_data, dma_data;
  int checks = 0, failures = 0;

  data_buffer #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] shadow [DEPTH];
  bit written [DEPTH];

  initial begin
    int pend_a;
    logic [63:0] pend_d;
    bit pend;
    a_addr = '0; b_addr = '0; q_addr = '0; dma_addr = '0; q_data = '0; dma_data = '0;
    for (int i = 0; i < DEPTH; i++) written[i] = 0;
    pend = 0;
    @(posedge clk); #1;
    for (int i = 0; i < 600; i++) begin
      int ra, rb;
      bit re_a, re_b;
      // writers
      q_wr = ($urandom_range(0, 2) == 0);
      q_addr = AW'($urandom_range(0, DEPTH - 1));
      q_data = {$urandom, $urandom};
      if (!pend && $urandom_range(0, 1)) begin
        pend = 1; pend_a = $urandom_range(0, DEPTH - 1); pend_d = {$urandom, $urandom};
      end
      dma_wr = pend; dma_addr = AW'(pend_a); dma_data = pend_d;
      // readers: only addresses not written this cycle
      ra = $urandom_range(0, DEPTH - 1); rb = $urandom_range(0, DEPTH - 1);
      re_a = written[ra] && !(q_wr && q_addr == AW'(ra)) && !(pend && pend_a == ra);
      re_b = written[rb] && !(q_wr && q_addr == AW'(rb)) && !(pend && pend_a == rb);
      a_en = re_a; a_addr = AW'(ra); b_en = re_b; b_addr = AW'(rb);
      #1;
      checks++;
      if (dma_ready != !q_wr) begin failures++; $display("dma_ready=%0b with q_wr=%0b", dma_ready, q_wr); end
      @(posedge clk); #1;
      if (q_wr) begin shadow[q_addr] = q_data; written[q_addr] = 1; end
      if (pend && !q_wr) begin
        // DMA committed this cycle
        if (!(q_wr && q_addr == AW'(pend_a))) begin shadow[pend_a] = pend_d; written[pend_a] = 1; end
        pend = 0;
      end
      if (re_a) begin checks++; if (a_data != shadow[ra]) begin failures++; $display("port A addr %0d", ra); end end
      if (re_b) begin checks++; if (b_data != shadow[rb]) begin failures++; $display("port B addr %0d", rb); end end
    end
    q_wr = 0; dma_wr = 0; a_en = 0; b_en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
