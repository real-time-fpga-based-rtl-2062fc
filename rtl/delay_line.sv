// delay_line: fixed-latency shift register that keeps a value aligned with a
// pipeline.  Output equals the input delayed by LAT clock cycles (LAT >= 1).
module delay_line #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned LAT   = 1
) (
  input  logic             clk,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  logic [WIDTH-1:0] sr [LAT];
  always_ff @(posedge clk) begin
    sr[0] <= d;
    for (int i = 1; i < LAT; i++) sr[i] <= sr[i-1];
  end
  assign q = sr[LAT-1];
endmodule
