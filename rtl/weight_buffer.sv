// weight_buffer: on-chip ternary weight tile storage, one bank per core.
//
// A word is one 8x8 block of 2-bit ternary codes (128 bits), the weights one
// array consumes in one cycle. There is one bank, with its own fixed read
// port, per compute core (three TINT cores and BoothFlex), so all cores read
// in the same cycle without a multi-ported memory. Writes come from the DMA
// side (one bank per cycle). Reads are synchronous: rd_data is valid the
// cycle after rd_en. Bank count, word shape and depth are this design's
// choices; the paper gives only the block's name and the 120 KB total.
module weight_buffer
  import vita_pkg::*;
#(
  parameter int unsigned NB    = 4,
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                                 clk,
  input  logic                                 wr_en,
  input  logic [$clog2(NB)-1:0]                wr_bank,
  input  logic [AW-1:0]                        wr_addr,
  input  tcode_t [ROWS-1:0][COLS-1:0]          wr_data,
  input  logic [NB-1:0]                        rd_en,
  input  logic [NB-1:0][AW-1:0]                rd_addr,
  output tcode_t [NB-1:0][ROWS-1:0][COLS-1:0]  rd_data
);
  for (genvar b = 0; b < NB; b++) begin : g_bank
    // one single-write, single-read memory per bank
    tcode_t [ROWS-1:0][COLS-1:0] mem [DEPTH];

    always_ff @(posedge clk) begin
      if (wr_en && wr_bank == b) mem[wr_addr] <= wr_data;
      if (rd_en[b]) rd_data[b] <= mem[rd_addr[b]];
    end
  end
endmodule
