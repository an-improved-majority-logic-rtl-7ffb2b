// rm_parity_gen -- even parity generator (check-sum of one r-flat).
//
// Returns 1 exactly when an odd number of its WIDTH inputs are 1, i.e. the
// check-sum z . chi_S of the set S whose received bits are applied. In the
// RM(2,5) decoder every r-flat holds n/delta = 4 positions, so WIDTH = 4.
// The function is a plain XOR reduction; synthesis builds it as the
// WIDTH-1 two-input XOR gates of depth ceil(log2 WIDTH) the paper names.
// The paper also mentions threshold-gate parity circuits of constant depth
// as an alternative for large WIDTH; they are not used here.
//
// Purely combinational, no clock: the output follows the inputs within one
// gate-tree delay.
module rm_parity_gen #(
  parameter int unsigned WIDTH = 4
) (
  input  logic [WIDTH-1:0] bits_i,
  output logic             parity_o
);

  assign parity_o = ^bits_i;

endmodule
