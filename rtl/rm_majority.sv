// rm_majority -- majority gate with WIDTH inputs.
//
// Output is 1 when more than floor(WIDTH/2) inputs are 1. This is the linear
// threshold gate with all weights 1 and threshold floor(WIDTH/2)+1 that the
// paper assumes as its majority gate; here it is written as a population
// count compared against THRESHOLD. With an even WIDTH a tie gives 0.
// The decoder uses WIDTH = delta = 8 inside each parity-majority module
// (mu_l) and WIDTH = delta-2 = 6 for the per-position decision (eta_j).
//
// Purely combinational, no clock.
module rm_majority #(
  parameter int unsigned WIDTH     = 8,
  parameter int unsigned THRESHOLD = WIDTH / 2 + 1
) (
  input  logic [WIDTH-1:0] votes_i,
  output logic             major_o
);

  localparam int unsigned CW = $clog2(WIDTH + 1);

  logic [CW-1:0] ones;

  always_comb begin
    ones = '0;
    for (int unsigned k = 0; k < WIDTH; k++) begin
      ones = ones + CW'(votes_i[k]);
    end
  end

  assign major_o = (32'(ones) >= THRESHOLD);

endmodule
