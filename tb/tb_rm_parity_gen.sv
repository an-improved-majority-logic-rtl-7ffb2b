// tb_rm_parity_gen -- self-checking test of the even parity generator.
//
// Applies every input pattern to a 4-input generator (the size of an r-flat
// in RM(2,5)) and to a 7-input one, and compares the output with a parity
// worked out by counting ones. The generator is combinational, so each
// result is checked one time step after the inputs change, with no clock.
module tb_rm_parity_gen;

  int checks = 0;
  int failures = 0;

  logic [3:0] bits4;
  logic       par4;
  logic [6:0] bits7;
  logic       par7;

  rm_parity_gen dut4 (.bits_i(bits4), .parity_o(par4));
  rm_parity_gen #(.WIDTH(7)) dut7 (.bits_i(bits7), .parity_o(par7));

  function automatic logic ref_parity(input logic [31:0] v, input int w);
    int ones = 0;
    for (int k = 0; k < w; k++) if (v[k]) ones++;
    return logic'(ones % 2);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 16; v++) begin
      bits4 = 4'(v);
      #1;
      checks++;
      if (par4 !== ref_parity(32'(v), 4)) begin
        failures++;
        $display("FAIL width 4 in=%b got %b", bits4, par4);
      end
    end
    for (int v = 0; v < 128; v++) begin
      bits7 = 7'(v);
      #1;
      checks++;
      if (par7 !== ref_parity(32'(v), 7)) begin
        failures++;
        $display("FAIL width 7 in=%b got %b", bits7, par7);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
