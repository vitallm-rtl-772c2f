// credit_counter: flow control between a core and its output queue.
//
// Holds the number of free output slots. A core may begin an output tile
// only while `avail` is high; `take` spends one credit when the tile starts
// and `give` returns one when the nonlinear unit drains a finished tile from
// the queue. Take and give in the same cycle cancel. Assertions check that a
// credit is never taken when none is left and never returned above the
// maximum. The paper names "a small credit counter"; the rest is this
// design's own.
module credit_counter #(
  parameter int unsigned CREDITS = 2
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          take,
  input  logic                          give,
  output logic                          avail,
  output logic [$clog2(CREDITS+1)-1:0]  count
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             count <= ($clog2(CREDITS+1))'(CREDITS);
    else if (take && !give) count <= count - 1'b1;
    else if (give && !take) count <= count + 1'b1;
  end
  assign avail = (count != 0);

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) take |-> (count != 0 || give));
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n)
                                   give |-> (count != ($clog2(CREDITS+1))'(CREDITS) || take));
endmodule
