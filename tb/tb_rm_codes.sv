// tb_rm_codes -- runs rm_decoder for the Reed-Muller codes the paper compares.
//
// RM(2,4), RM(2,5), RM(3,6) and RM(3,7) are the codes of the paper's
// function-count table; RM(1,3) is the smallest code the algorithm covers.
// Each instance of rm_code_check decodes random codewords with random
// correctable error patterns and checks the decoder's gate counts against
// that table (RM(1,3) against the same formulas: check-sums delta*(delta-2)
// with 2^r inputs, delta-2 majorities of delta inputs, n majorities of
// delta-2 inputs, n + delta*(delta-2) XORs). RM(2,5) is built here with the
// paper's own wiring table, the other codes with the generated one.
module tb_rm_codes;

  localparam int NCODES = 5;

  logic done [NCODES];
  int   chk  [NCODES];
  int   fail [NCODES];

  rm_code_check #(.R(1), .M(3), .TRIALS(2000),
    .EXP_CS_IN(2), .EXP_CS_CALLS(8), .EXP_MAJ1_IN(4), .EXP_MAJ1_CALLS(2),
    .EXP_MAJ2_IN(2), .EXP_MAJ2_CALLS(8), .EXP_XOR_CALLS(16))
    u_rm13 (.done_o(done[0]), .checks_o(chk[0]), .failures_o(fail[0]));

  rm_code_check #(.R(2), .M(4), .TRIALS(4000),
    .EXP_CS_IN(4), .EXP_CS_CALLS(8), .EXP_MAJ1_IN(4), .EXP_MAJ1_CALLS(2),
    .EXP_MAJ2_IN(2), .EXP_MAJ2_CALLS(16), .EXP_XOR_CALLS(24))
    u_rm24 (.done_o(done[1]), .checks_o(chk[1]), .failures_o(fail[1]));

  rm_code_check #(.R(2), .M(5), .TRIALS(20000),
    .EXP_CS_IN(4), .EXP_CS_CALLS(48), .EXP_MAJ1_IN(8), .EXP_MAJ1_CALLS(6),
    .EXP_MAJ2_IN(6), .EXP_MAJ2_CALLS(32), .EXP_XOR_CALLS(80))
    u_rm25 (.done_o(done[2]), .checks_o(chk[2]), .failures_o(fail[2]));

  rm_code_check #(.R(3), .M(6), .TRIALS(20000),
    .EXP_CS_IN(8), .EXP_CS_CALLS(48), .EXP_MAJ1_IN(8), .EXP_MAJ1_CALLS(6),
    .EXP_MAJ2_IN(6), .EXP_MAJ2_CALLS(64), .EXP_XOR_CALLS(112))
    u_rm36 (.done_o(done[3]), .checks_o(chk[3]), .failures_o(fail[3]));

  rm_code_check #(.R(3), .M(7), .TRIALS(20000),
    .EXP_CS_IN(8), .EXP_CS_CALLS(224), .EXP_MAJ1_IN(16), .EXP_MAJ1_CALLS(14),
    .EXP_MAJ2_IN(14), .EXP_MAJ2_CALLS(128), .EXP_XOR_CALLS(352))
    u_rm37 (.done_o(done[4]), .checks_o(chk[4]), .failures_o(fail[4]));

  initial begin
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", 0, 1);
    $finish;
  end

  initial begin
    int checks, failures;
    #1;
    wait (done[0] && done[1] && done[2] && done[3] && done[4]);
    checks = 0;
    failures = 0;
    for (int i = 0; i < NCODES; i++) begin
      checks += chk[i];
      failures += fail[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
