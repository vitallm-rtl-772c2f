// seq_isqrt: integer square root, floor(sqrt(x)), one result bit per cycle.
//
// Used once per vector for RMSNorm. `start` loads x; `done` pulses W/2
// cycles later. Digit-by-digit (non-restoring style) method on a 2W-bit
// radicand. A helper of this design; the paper does not describe it.
module seq_isqrt #(
  parameter int unsigned W = 64
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   x,
  output logic [W/2-1:0] root,
  output logic           done
);
  logic [W-1:0]   rad;
  logic [W/2+3:0] rem;
  logic [W/2-1:0] res;
  logic [$clog2(W/2+1)-1:0] cnt;
  logic           run;

  // one digit step: bring down two radicand bits, trial subtrahend 4*res+1
  logic [W/2+3:0] r2, t;
  assign r2 = {rem[W/2+1:0], rad[W-1:W-2]};
  assign t  = {2'b00, res, 2'b01};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rad <= '0; rem <= '0; res <= '0; cnt <= '0; run <= 1'b0; root <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rad <= x; rem <= '0; res <= '0; run <= 1'b1;
        cnt <= ($clog2(W/2+1))'(W/2);
      end else if (run) begin
        if (r2 >= t) begin
          rem <= r2 - t;
          res <= {res[W/2-2:0], 1'b1};
        end else begin
          rem <= r2;
          res <= {res[W/2-2:0], 1'b0};
        end
        rad <= {rad[W-3:0], 2'b00};
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          run  <= 1'b0;
          done <= 1'b1;
          root <= (r2 >= t) ? {res[W/2-2:0], 1'b1} : {res[W/2-2:0], 1'b0};
        end
      end
    end
  end
endmodule
