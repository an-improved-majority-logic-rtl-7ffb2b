// rm_parity_majority -- the parity-majority module "P-mu" for one subspace U_l.
//
// Carries out lines 1 to 3 of the decoding algorithm for one l:
//   layer 1: NUM_FLATS even parity generators; generator i takes inputs
//            4i..4i+3 (the four positions of flat w_{l,i}+U_l, already put in
//            this order by the fixed wiring in front of the module) and gives
//            the check-sum sigma_{l,i};
//   layer 2: one majority gate over sigma_{l,0..7} gives mu_l;
//   layer 3: NUM_FLATS XOR gates give sigma_bar_{l,i} = sigma_{l,i} xor mu_l.
// sigma_bar_{l,i} is 1 exactly when flat w_{l,i}+U_l holds an odd number of
// errors, as long as at most delta/2-1 errors occurred. The structure, the
// port numbering (inputs I00..I31, outputs O00..O07) and the sizes follow the
// paper's schematic of the module; the majority gate breaks a tie towards 0,
// which the paper shows cannot occur for a correctable error pattern.
//
// Interface: flat_bits_i[j] = z_{psi_l(j)}; sbar_o[i] = sigma_bar_{l,i}.
// Purely combinational, no clock.
module rm_parity_majority #(
  parameter int unsigned FLAT_SIZE = 4,
  parameter int unsigned NUM_FLATS = 8
) (
  input  logic [NUM_FLATS*FLAT_SIZE-1:0] flat_bits_i,
  output logic [NUM_FLATS-1:0]           sbar_o
);

  logic [NUM_FLATS-1:0] sigma;
  logic                 mu;

  for (genvar i = 0; i < NUM_FLATS; i++) begin : g_check
    rm_parity_gen #(.WIDTH(FLAT_SIZE)) u_parity (
      .bits_i  (flat_bits_i[i*FLAT_SIZE +: FLAT_SIZE]),
      .parity_o(sigma[i])
    );
  end

  rm_majority #(.WIDTH(NUM_FLATS)) u_major (
    .votes_i(sigma),
    .major_o(mu)
  );

  assign sbar_o = sigma ^ {NUM_FLATS{mu}};

endmodule
