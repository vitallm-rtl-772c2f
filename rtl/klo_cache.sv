// klo_cache: staging buffer for key leading-one features.
//
// Key features (nz, sgn, LO) of the cached tokens live off chip; they are
// streamed in blocks of 8 tokens x 8 dimensions (one LOP array cycle) and held
// here until the LOP array consumes them, so DRAM bursts and array cycles
// are decoupled. It is a first-in first-out buffer with valid/ready on both
// sides; a block written is readable the next cycle. The paper names the
// K_LO cache; its organization and depth are this design's choice.
module klo_cache
  import vita_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic                          in_valid,
  output logic                          in_ready,
  input  lo_feat_t [ROWS-1:0][COLS-1:0] in_data,
  output logic                          out_valid,
  input  logic                          out_ready,
  output lo_feat_t [ROWS-1:0][COLS-1:0] out_data
);
  localparam int unsigned PW = $clog2(DEPTH);
  lo_feat_t [ROWS-1:0][COLS-1:0] mem [DEPTH];
  logic [PW:0] wp, rp;

  assign in_ready  = (wp - rp) != (PW+1)'(DEPTH);
  assign out_valid = (wp != rp);
  assign out_data  = mem[rp[PW-1:0]];

  always_ff @(posedge clk) if (in_valid && in_ready) mem[wp[PW-1:0]] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0;
    end else if (clear) begin
      wp <= '0; rp <= '0;
    end else begin
      if (in_valid && in_ready)   wp <= wp + 1'b1;
      if (out_valid && out_ready) rp <= rp + 1'b1;
    end
  end
endmodule
