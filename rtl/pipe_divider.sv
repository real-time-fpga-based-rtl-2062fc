// pipe_divider: pipelined restoring divider for a fraction num/den with
// num <= den.  It returns q = floor(num * 2**F / den), which lies in
// 0 .. 2**F, so the quotient has F+1 bits.  One quotient bit is produced per
// pipeline stage, most significant first, giving a latency of F+1 cycles and
// a throughput of one division per cycle.  A zero denominator yields 0.  The
// paper uses a vendor divider core with an adjustable latency; this
// long-division pipeline stands in for it.
module pipe_divider #(
  parameter int unsigned NW = 18,   // width of numerator and denominator
  parameter int unsigned F  = 9     // fraction bits of the quotient
) (
  input  logic          clk,
  input  logic [NW-1:0] num,
  input  logic [NW-1:0] den,
  output logic [F:0]    quo
);
  // stage s holds the partial remainder (NW+1 bits), the divisor and the
  // quotient bits produced so far
  logic [NW:0]   rem_q [F+1];
  logic [NW-1:0] den_q [F+1];
  logic [F:0]    quo_q [F+1];

  always_ff @(posedge clk) begin
    // stage 0: integer bit (num >= den means the fraction is exactly 1)
    if (den != 0 && {1'b0, num} >= {1'b0, den}) begin
      rem_q[0] <= {1'b0, num} - {1'b0, den};
      quo_q[0] <= (F+1)'(1);
    end else begin
      rem_q[0] <= {1'b0, num};
      quo_q[0] <= '0;
    end
    den_q[0] <= den;
    for (int s = 1; s <= F; s++) begin
      logic [NW+1:0] sh;
      sh = {rem_q[s-1], 1'b0};
      if (den_q[s-1] != 0 && sh >= {2'b00, den_q[s-1]}) begin
        rem_q[s] <= (NW+1)'(sh - {2'b00, den_q[s-1]});
        quo_q[s] <= {quo_q[s-1][F-1:0], 1'b1};
      end else begin
        rem_q[s] <= sh[NW:0];
        quo_q[s] <= {quo_q[s-1][F-1:0], 1'b0};
      end
      den_q[s] <= den_q[s-1];
    end
  end

  assign quo = quo_q[F];
endmodule
