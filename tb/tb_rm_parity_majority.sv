// tb_rm_parity_majority -- self-checking test of the parity-majority module.
//
// Part 1 replays the worked RM(2,5) example: the received word with errors at
// positions 0, 1 and 31 is cut into the eight 2-flats w+U_l of each subspace,
// built here from the subspaces U_l and coset leaders W_l (not from the
// psi wiring table the decoder uses), and the module's eight outputs are
// compared with the sigma_bar values the worked example lists.
// Part 2 applies random 32-bit inputs and compares with a reference that
// counts check-sums, takes their majority (ties give 0) and XORs. The test
// counts how often mu was 0, 1 and how often the check-sums tied.
// Combinational: results are checked one time step after the inputs change.
module tb_rm_parity_majority;

  int checks = 0;
  int failures = 0;
  int mu_zero = 0, mu_one = 0, tie = 0;

  logic [31:0] flat_bits;
  logic [7:0]  sbar;

  rm_parity_majority dut (.flat_bits_i(flat_bits), .sbar_o(sbar));

  // subspaces U_l and complements W_l of the worked example (bit value = position)
  int U [6][4] = '{'{0, 1, 30, 31}, '{0, 2, 24, 26}, '{0, 3, 20, 23},
                   '{0, 4, 18, 22}, '{0, 5, 25, 28}, '{0, 6, 27, 29}};
  int W [6][8] = '{'{0, 2, 8, 10, 16, 18, 24, 26}, '{0, 3, 4, 7, 16, 19, 20, 23},
                   '{0, 4, 8, 12, 18, 22, 26, 30}, '{0, 2, 5, 7, 25, 27, 28, 30},
                   '{0, 6, 8, 14, 19, 21, 27, 29}, '{0, 1, 8, 9, 22, 30, 23, 31}};
  // sigma_bar_{l,0..7} from the worked example, written as 8-bit words, bit i = flat i
  logic [7:0] SBAR_EX [6] = '{8'b0000_0001, 8'b0000_1011, 8'b0010_0101,
                              8'b0010_0101, 8'b1000_0011, 8'b1000_0011};
  // received word z of the example, bit j = position j
  logic [31:0] Z_EX = 32'hd9c0a63c;

  function automatic logic [7:0] ref_pmu(input logic [31:0] in);
    logic [7:0] s;
    int ones = 0;
    logic mu;
    for (int i = 0; i < 8; i++) begin
      s[i] = in[4*i] ^ in[4*i+1] ^ in[4*i+2] ^ in[4*i+3];
      if (s[i]) ones++;
    end
    mu = logic'(ones > 4);
    if (ones == 4) tie++;
    if (mu) mu_one++; else mu_zero++;
    return s ^ {8{mu}};
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // part 1: paper example
    for (int l = 0; l < 6; l++) begin
      for (int i = 0; i < 8; i++)
        for (int q = 0; q < 4; q++)
          flat_bits[4*i+q] = Z_EX[W[l][i] ^ U[l][q]];
      #1;
      checks++;
      if (sbar !== SBAR_EX[l]) begin
        failures++;
        $display("FAIL example l=%0d got %b expected %b", l, sbar, SBAR_EX[l]);
      end
      void'(ref_pmu(flat_bits));
    end
    // part 2: random inputs
    for (int t = 0; t < 20000; t++) begin
      logic [7:0] exp_s;
      flat_bits = $urandom;
      #1;
      exp_s = ref_pmu(flat_bits);
      checks++;
      if (sbar !== exp_s) begin
        failures++;
        $display("FAIL random in=%h got %b expected %b", flat_bits, sbar, exp_s);
      end
    end
    checks += 3;
    if (mu_zero == 0) begin failures++; $display("FAIL mu never 0"); end
    if (mu_one == 0)  begin failures++; $display("FAIL mu never 1"); end
    if (tie == 0)     begin failures++; $display("FAIL no tie seen"); end
    $display("mu=0: %0d  mu=1: %0d  ties: %0d", mu_zero, mu_one, tie);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
