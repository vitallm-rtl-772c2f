// tile_fifo: small first-in first-out queue of finished output tiles
// (tile index, lane mask and eight accumulators packed into W bits).
// Pushes are not checked for space: the credit counter in front of it
// guarantees there is room. Data at the head is visible combinationally.
module tile_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] push_data,
  input  logic         pop,
  output logic         not_empty,
  output logic [W-1:0] head
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0] mem [DEPTH];
  logic [PW:0]  wp, rp;

  assign not_empty = (wp != rp);
  assign head      = mem[rp[PW-1:0]];

  always_ff @(posedge clk) if (push) mem[wp[PW-1:0]] <= push_data;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0;
    end else begin
      if (push) wp <= (wp[PW-1:0] == PW'(DEPTH - 1)) ? {~wp[PW], {PW{1'b0}}} : wp + 1'b1;
      if (pop)  rp <= (rp[PW-1:0] == PW'(DEPTH - 1)) ? {~rp[PW], {PW{1'b0}}} : rp + 1'b1;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  push |-> !(wp[PW-1:0] == rp[PW-1:0] && wp[PW] != rp[PW]) || pop);
endmodule
