// data_buffer: the "systolic array data buffer" holding INT8 activation
// vectors (model input, Q/K/V, probabilities, head outputs, FFN vectors).
//
// A word is eight INT8 elements (one array column chunk). Two fixed read
// ports serve the two kinds of core: port A feeds the TINT group (one word
// broadcast to all three TINT cores), port B feeds BoothFlex. One write port
// is shared by the quantizer of the nonlinear unit (priority) and the DMA
// load path, which sees dma_ready low while the quantizer writes. Reads are
// synchronous (data the cycle after the enable). The fixed A/B ports follow
// the paper ("TINT->A, BoothFlex->B"); depth, word width and the write
// arbitration are this design's own.
module data_buffer #(
  parameter int unsigned DEPTH = 4096,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              a_en,
  input  logic [AW-1:0]     a_addr,
  output logic [7:0][7:0]   a_data,
  input  logic              b_en,
  input  logic [AW-1:0]     b_addr,
  output logic [7:0][7:0]   b_data,
  input  logic              q_wr,
  input  logic [AW-1:0]     q_addr,
  input  logic [7:0][7:0]   q_data,
  input  logic              dma_wr,
  output logic              dma_ready,
  input  logic [AW-1:0]     dma_addr,
  input  logic [7:0][7:0]   dma_data
);
  logic [7:0][7:0] mem [DEPTH];

  assign dma_ready = !q_wr;

  always_ff @(posedge clk) begin
    if (q_wr)        mem[q_addr]   <= q_data;
    else if (dma_wr) mem[dma_addr] <= dma_data;
    if (a_en) a_data <= mem[a_addr];
    if (b_en) b_data <= mem[b_addr];
  end
endmodule
