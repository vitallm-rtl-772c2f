// tb_weight_buffer: banked ternary weight buffer with one write port and one
// synchronous read port per bank.
// Random tiles are written to random (bank, address) pairs with a shadow
// model in the testbench; then all four banks are read in the same cycle
// (the banks are independent, so one tile per bank per cycle must be
// sustained), and the data seen one cycle after rd_en is compared with the
// shadow. Interleaved write/read to different banks in the same cycle is
// also exercised. Only written addresses are read.
module tb_weight_buffer;
  import vita_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  localparam int NB = 4, DEPTH = 64, AW = 6;
  logic wr_en = 0;
  logic [1:0] wr_bank;
  logic [AW-1:0] wr_addr;
  tcode_t [7:0][7:0] wr_data;
  logic [NB-1:0] rd_en = '0;
  logic [NB-1:0][AW-1:0] rd_addr;
  tcode_t [NB-1:0][7:0][7:0] rd_data;
  int checks = 0, failures = 0;

  weight_buffer #(.NB(NB), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [127:0] shadow [NB][DEPTH];
  bit written [NB][DEPTH];

  task automatic write_one(int b, int a);
    logic [127:0] d;
    d = {$urandom, $urandom, $urandom, $urandom};
    wr_en = 1; wr_bank = 2'(b); wr_addr = AW'(a); wr_data = d;
    shadow[b][a] = d; written[b][a] = 1;
  endtask

  initial begin
    wr_bank = '0; wr_addr = '0; wr_data = '0; rd_addr = '0;
    for (int b = 0; b < NB; b++) for (int a = 0; a < DEPTH; a++) written[b][a] = 0;
    @(posedge clk); #1;
    for (int i = 0; i < 150; i++) begin
      write_one($urandom_range(0, NB - 1), $urandom_range(0, DEPTH - 1));
      @(posedge clk); #1;
    end
    wr_en = 0;
    // full-rate parallel reads of all banks
    for (int i = 0; i < 200; i++) begin
      logic [NB-1:0][AW-1:0] ra;
      logic [NB-1:0] re;
      for (int b = 0; b < NB; b++) begin
        int a;
        a = $urandom_range(0, DEPTH - 1);
        ra[b] = AW'(a);
        re[b] = written[b][a];
      end
      // same-cycle write to a bank that is not being read
      if (re != '1) begin
        int wb;
        wb = 0; while (re[wb]) wb++;
        write_one(wb, $urandom_range(0, DEPTH - 1));
      end else wr_en = 0;
      rd_en = re; rd_addr = ra;
      @(posedge clk); #1;
      wr_en = 0;
      for (int b = 0; b < NB; b++) if (re[b]) begin
        checks++;
        if (rd_data[b] != shadow[b][ra[b]]) begin
          failures++; $display("bank %0d addr %0d mismatch", b, ra[b]);
        end
      end
    end
    rd_en = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
