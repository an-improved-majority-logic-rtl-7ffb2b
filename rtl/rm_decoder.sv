// rm_decoder -- combinational majority-logic decoder for Reed-Muller RM(R,M).
//
// Takes a received n-bit word z (n = 2^M) and returns the codeword c,
// correcting up to delta/2-1 bit errors (delta = 2^(M-R)) in one pass through
// a network of gates: no clock, no registers. Defaults R = 2, M = 5 give the
// 32-bit, three-error-correcting RM(2,5) decoder. The network has five levels:
//   1. delta*(delta-2) check-sums: for each of the delta-2 subspaces U_l the
//      word is permuted by a fixed wiring (omega_l; slot j of module l gets
//      z_{psi_l(j)}) and cut into delta groups of 2^R bits, one per r-flat;
//   2. per subspace a delta-input majority over its check-sums gives mu_l;
//   3. delta*(delta-2) XORs sigma_bar_{l,i} = sigma_{l,i} xor mu_l flag the
//      flats that hold an odd number of errors (levels 1-3 sit in one
//      rm_parity_majority module per subspace);
//   4. the inverse wiring omega_l^-1 sends flag i of module l to the 2^R
//      positions of flat i; every position then sees one flag per subspace,
//      and a (delta-2)-input majority gate gives the error estimate eta_j;
//   5. n XORs give c_j = z_j xor eta_j.
// The levels, gate counts and, for RM(2,5), the wiring table are the
// paper's. The subspaces used for other (R,M) come from a construction of
// this design (see rm_pkg). With more than delta/2-1 errors the output is
// whatever the network gives; there is no error flag, as the paper has none.
//
// Interface: z_i[j] is received bit j, c_o[j] decoded bit j, bit index j
// being the position whose M-bit binary value is j. Output settles one
// combinational path delay after the input (parity tree, two majority
// gates, two XOR levels).
module rm_decoder
  import rm_pkg::*;
#(
  parameter int unsigned R = 2,
  parameter int unsigned M = 5
) (
  input  logic [(1 << M)-1:0] z_i,
  output logic [(1 << M)-1:0] c_o
);

  localparam int unsigned N         = 1 << M;        // code length
  localparam int unsigned DELTA     = 1 << (M - R);  // minimum distance
  localparam int unsigned NUM_SUB   = DELTA - 2;     // subspaces U_l
  localparam int unsigned FLAT_SIZE = 1 << R;        // positions per r-flat
  localparam int unsigned NUM_FLATS = N / FLAT_SIZE; // r-flats per subspace (= DELTA)

  if (M < 3 || R < 1 || 2 * R > M || M - R > 16) begin : g_bad_params
    $error("rm_decoder needs M >= 3, 1 <= R <= M/2 and M-R <= 16");
  end

  // wiring table, entry l*N + j = psi_l(j), worked out once at elaboration
  typedef int unsigned psi_table_t [NUM_SUB*N];

  function automatic psi_table_t make_psi_table();
    psi_table_t t;
    for (int unsigned k = 0; k < NUM_SUB * N; k++) t[k] = psi(R, M, k / N, k % N);
    return t;
  endfunction

  localparam psi_table_t PSI = make_psi_table();

  logic [N-1:0]         flat_bits [NUM_SUB];  // after omega_l
  logic [NUM_FLATS-1:0] sbar      [NUM_SUB];  // parity-majority outputs
  logic [NUM_SUB-1:0]   votes     [N];        // after omega_l^-1, per position
  logic [N-1:0]         eta;

  for (genvar l = 0; l < NUM_SUB; l++) begin : g_sub
    // omega_l: fixed wiring, position psi_l(j) goes to slot j
    for (genvar j = 0; j < N; j++) begin : g_omega
      assign flat_bits[l][j] = z_i[PSI[l*N+j]];
    end

    rm_parity_majority #(
      .FLAT_SIZE(FLAT_SIZE),
      .NUM_FLATS(NUM_FLATS)
    ) u_pmu (
      .flat_bits_i(flat_bits[l]),
      .sbar_o     (sbar[l])
    );

    // omega_l^-1: slot j carries the flag of flat j / 2^R and goes to position psi_l(j)
    for (genvar j = 0; j < N; j++) begin : g_omega_inv
      assign votes[PSI[l*N+j]][l] = sbar[l][j / FLAT_SIZE];
    end
  end

  for (genvar p = 0; p < N; p++) begin : g_pos
    rm_majority #(.WIDTH(NUM_SUB)) u_major (
      .votes_i(votes[p]),
      .major_o(eta[p])
    );
  end

  assign c_o = z_i ^ eta;

endmodule
