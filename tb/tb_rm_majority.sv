// tb_rm_majority -- self-checking test of the majority gate.
//
// Runs every input pattern through the 8-input gate (mu_l inside a
// parity-majority module) and the 6-input gate (eta_j per code position) and
// compares with "more than floor(s/2) ones". Ties (4 of 8, 3 of 6) must give
// 0; the test counts how many tie patterns it saw. Combinational: each result
// is checked one time step after the inputs change.
module tb_rm_majority;

  int checks = 0;
  int failures = 0;
  int ties = 0;

  logic [7:0] v8;
  logic       m8;
  logic [5:0] v6;
  logic       m6;

  rm_majority dut8 (.votes_i(v8), .major_o(m8));
  rm_majority #(.WIDTH(6)) dut6 (.votes_i(v6), .major_o(m6));

  function automatic logic ref_major(input logic [31:0] v, input int w);
    int ones = 0;
    for (int k = 0; k < w; k++) if (v[k]) ones++;
    if (2 * ones == w) ties++;
    return logic'(ones > w / 2);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      v8 = 8'(v);
      #1;
      checks++;
      if (m8 !== ref_major(32'(v), 8)) begin
        failures++;
        $display("FAIL width 8 in=%b got %b", v8, m8);
      end
    end
    for (int v = 0; v < 64; v++) begin
      v6 = 6'(v);
      #1;
      checks++;
      if (m6 !== ref_major(32'(v), 6)) begin
        failures++;
        $display("FAIL width 6 in=%b got %b", v6, m6);
      end
    end
    // C(8,4) + C(6,3) tie patterns
    checks++;
    if (ties != 70 + 20) begin
      failures++;
      $display("FAIL tie count %0d", ties);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
