// rm_code_check -- test harness for one rm_decoder configuration RM(R,M).
//
// Builds random codewords with a reference encoder (every monomial of degree
// <= R in the M coordinate bits of the position is a generator row; each row
// is taken with probability 1/2), adds a random error pattern of 0 to
// delta/2-1 distinct positions, and checks that the decoder returns the sent
// codeword. Half of the trials use the full correctable weight delta/2-1.
// It also checks the size of the decoder against the function counts the
// paper tabulates for the code (EXP_* parameters): number and width of
// check-sums, of the two kinds of majority votes and of the XOR gates.
// Results are reported on the output ports once done_o rises.
module rm_code_check #(
  parameter int unsigned R = 2,
  parameter int unsigned M = 5,
  parameter int unsigned TRIALS = 1000,
  parameter int unsigned EXP_CS_IN = 0,     // check-sum inputs
  parameter int unsigned EXP_CS_CALLS = 0,  // check-sums
  parameter int unsigned EXP_MAJ1_IN = 0,   // inputs of the majority that gives mu_l
  parameter int unsigned EXP_MAJ1_CALLS = 0,
  parameter int unsigned EXP_MAJ2_IN = 0,   // inputs of the majority that gives eta_j
  parameter int unsigned EXP_MAJ2_CALLS = 0,
  parameter int unsigned EXP_XOR_CALLS = 0
) (
  output logic done_o,
  output int   checks_o,
  output int   failures_o
);

  localparam int unsigned N     = 1 << M;
  localparam int unsigned DELTA = 1 << (M - R);
  localparam int unsigned T     = DELTA / 2 - 1;

  logic [N-1:0] z, c;
  int weight_seen [T+1];

  rm_decoder #(.R(R), .M(M)) dut (.z_i(z), .c_o(c));

  function automatic logic [N-1:0] random_codeword();
    logic [N-1:0] cw = '0;
    for (int unsigned s = 0; s < N; s++) begin
      if ($countones(s) <= R && $urandom_range(1, 0) == 1) begin
        for (int unsigned p = 0; p < N; p++)
          if ((p & s) == s) cw[p] = ~cw[p];
      end
    end
    return cw;
  endfunction

  function automatic logic [N-1:0] random_errors(input int unsigned w);
    logic [N-1:0] e = '0;
    while ($countones(e) < w) e[$urandom_range(N - 1, 0)] = 1'b1;
    return e;
  endfunction

  task automatic expect_eq(input string what, input int unsigned got, input int unsigned exp);
    checks_o++;
    if (got != exp) begin
      failures_o++;
      $display("FAIL RM(%0d,%0d) %s = %0d, expected %0d", R, M, what, got, exp);
    end
  endtask

  initial begin
    done_o = 1'b0;
    checks_o = 0;
    failures_o = 0;
    z = '0;
    foreach (weight_seen[w]) weight_seen[w] = 0;
    #1;
    // structure against the function counts of the code
    expect_eq("check-sum inputs", dut.FLAT_SIZE, EXP_CS_IN);
    expect_eq("check-sums", dut.NUM_SUB * dut.NUM_FLATS, EXP_CS_CALLS);
    expect_eq("mu majority inputs", dut.NUM_FLATS, EXP_MAJ1_IN);
    expect_eq("mu majorities", dut.NUM_SUB, EXP_MAJ1_CALLS);
    expect_eq("eta majority inputs", dut.NUM_SUB, EXP_MAJ2_IN);
    expect_eq("eta majorities", N, EXP_MAJ2_CALLS);
    expect_eq("XOR gates", dut.NUM_SUB * dut.NUM_FLATS + N, EXP_XOR_CALLS);
    // decoding
    for (int unsigned t = 0; t < TRIALS; t++) begin
      logic [N-1:0] cw, e;
      int unsigned w;
      w  = (t % 2 == 0) ? T : $urandom_range(T, 0);
      cw = random_codeword();
      e  = random_errors(w);
      z  = cw ^ e;
      #1;
      weight_seen[w]++;
      checks_o++;
      if (c !== cw) begin
        failures_o++;
        if (failures_o < 5) $display("FAIL RM(%0d,%0d) cw=%h e=%h got %h", R, M, cw, e, c);
      end
    end
    for (int unsigned w = 0; w <= T; w++) begin
      checks_o++;
      if (weight_seen[w] == 0) begin
        failures_o++;
        $display("FAIL RM(%0d,%0d) error weight %0d never applied", R, M, w);
      end
    end
    $display("RM(%0d,%0d): n=%0d delta=%0d, %0d decodes, up to %0d errors", R, M, N, DELTA,
             TRIALS, T);
    done_o = 1'b1;
  end

endmodule
