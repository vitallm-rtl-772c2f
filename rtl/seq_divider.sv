// seq_divider: unsigned restoring divider, one quotient bit per cycle.
//
// Used once per vector by the nonlinear unit to form reciprocals and scales,
// so a small sequential divider is enough. `start` loads the operands; `done`
// pulses W cycles later with the quotient. A zero divisor returns zero.
// This is a helper of this design; the paper does not describe it.
module seq_divider #(
  parameter int unsigned W = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic [W-1:0] quotient,
  output logic         done
);
  logic [W:0]           rem;
  logic [W-1:0]         dvd, dvs;
  logic [$clog2(W+1)-1:0] cnt;
  logic                 run, zero;

  // one restoring step: shift in the next dividend bit, try to subtract
  logic [W:0] trial;
  assign trial = {rem[W-1:0], dvd[W-1]} - {1'b0, dvs};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem <= '0; dvd <= '0; dvs <= '0; cnt <= '0; run <= 1'b0; zero <= 1'b0;
      quotient <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rem  <= '0;
        dvd  <= dividend;
        dvs  <= divisor;
        zero <= (divisor == '0);
        cnt  <= ($clog2(W+1))'(W);
        run  <= 1'b1;
      end else if (run) begin
        if (!trial[W]) begin
          rem <= trial;
          dvd <= {dvd[W-2:0], 1'b1};
        end else begin
          rem <= {rem[W-1:0], dvd[W-1]};
          dvd <= {dvd[W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          run      <= 1'b0;
          done     <= 1'b1;
          quotient <= zero ? '0 : (!trial[W] ? {dvd[W-2:0], 1'b1} : {dvd[W-2:0], 1'b0});
        end
      end
    end
  end
endmodule
