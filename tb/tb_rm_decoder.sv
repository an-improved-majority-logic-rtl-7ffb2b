// tb_rm_decoder -- end-to-end test of rm_decoder at its default size, RM(2,5).
//
// Codewords are produced by a reference encoder that multiplies the 16-bit
// message by the generator matrix G of RM(2,5) (rows 1, v4..v0 and the ten
// products v_a*v_b, columns = positions 0..31). Errors are added and the
// decoder output must equal the sent codeword. The test
//   1. replays the worked example (message 1110 0000 0001 1100, errors at
//      positions 0, 1, 31) and checks the encoder result, the decoded word,
//      every sigma_bar_{l,i} and the six-bit votes that the example lists
//      for positions 0, 1, 2, 3, 30, 31;
//   2. runs every error pattern of weight 0..3 (5489 of them) on 64
//      codewords;
//   3. decodes every one of the 65536 codewords once without errors and once
//      with a random pattern of 1 to 3 errors.
// On every decode it also checks the property that makes the design work:
// the number of odd check-sums of a subspace is never exactly delta/2 = 4
// when at most three errors occurred. It counts how often each mechanism
// happened: error weights 0..3, mu_l = 0 and mu_l = 1, a position corrected.
// The design is combinational; outputs are checked one time step after the
// input changes, with no clock (decoding latency zero cycles).
module tb_rm_decoder;

  int checks = 0;
  int failures = 0;
  int weight_seen [4] = '{0, 0, 0, 0};
  int mu_zero = 0, mu_one = 0, corrections = 0;

  logic [31:0] z;
  logic [31:0] c;

  rm_decoder dut (.z_i(z), .c_o(c));

  // internal signals for the worked example and the mechanism counts
  logic [7:0] sbar_h  [6];
  logic [7:0] sigma_h [6];
  logic [5:0] mu_h;
  for (genvar l = 0; l < 6; l++) begin : g_probe
    assign sbar_h[l]  = dut.g_sub[l].u_pmu.sbar_o;
    assign sigma_h[l] = dut.g_sub[l].u_pmu.sigma;
    assign mu_h[l]    = dut.g_sub[l].u_pmu.mu;
  end

  // generator matrix, row k as a 32-bit word with bit j = column j
  logic [31:0] G [16] = '{
    32'hffffffff, 32'hffff0000, 32'hff00ff00, 32'hf0f0f0f0,
    32'hcccccccc, 32'haaaaaaaa, 32'hff000000, 32'hf0f00000,
    32'hcccc0000, 32'haaaa0000, 32'hf000f000, 32'hcc00cc00,
    32'haa00aa00, 32'hc0c0c0c0, 32'ha0a0a0a0, 32'h88888888};

  function automatic logic [31:0] encode(input logic [15:0] msg);
    logic [31:0] cw = '0;
    for (int k = 0; k < 16; k++) if (msg[k]) cw ^= G[k];
    return cw;
  endfunction

  function automatic logic [31:0] rand_errors(input int w);
    logic [31:0] e = '0;
    while ($countones(e) < w) e[$urandom_range(31, 0)] = 1'b1;
    return e;
  endfunction

  task automatic decode_check(input logic [31:0] cw, input logic [31:0] e);
    z = cw ^ e;
    #1;
    checks++;
    weight_seen[$countones(e)]++;
    corrections += $countones(z ^ c);
    for (int l = 0; l < 6; l++) if (mu_h[l]) mu_one++; else mu_zero++;
    if (c !== cw) begin
      failures++;
      if (failures < 10) $display("FAIL cw=%h e=%h got %h", cw, e, c);
    end
    checks++;
    for (int l = 0; l < 6; l++) begin
      if ($countones(sigma_h[l]) == 4) begin
        failures++;
        if (failures < 10) $display("FAIL tie in subspace %0d, cw=%h e=%h", l, cw, e);
        break;
      end
    end
  endtask

  task automatic all_patterns(input logic [31:0] cw);
    decode_check(cw, '0);
    for (int a = 0; a < 32; a++) begin
      decode_check(cw, 32'(1) << a);
      for (int b = a + 1; b < 32; b++) begin
        decode_check(cw, (32'(1) << a) | (32'(1) << b));
        for (int d = b + 1; d < 32; d++)
          decode_check(cw, (32'(1) << a) | (32'(1) << b) | (32'(1) << d));
      end
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] sbar_ex [6];
    logic [31:0] c_ex;
    // ---- 1. worked example
    sbar_ex = '{8'b0000_0001, 8'b0000_1011, 8'b0010_0101,
                8'b0010_0101, 8'b1000_0011, 8'b1000_0011};
    // message m_0..m_15 = 1,1,1,0,0,0,0,0,0,0,0,1,1,1,0,0 (bit k = m_k)
    c_ex = encode(16'h3807);
    checks++;
    if (c_ex !== 32'h59c0a63f) begin
      failures++;
      $display("FAIL encoder gives %h", c_ex);
    end
    z = 32'hd9c0a63c;  // errors at 0, 1, 31
    #1;
    checks++;
    if (c !== 32'h59c0a63f) begin
      failures++;
      $display("FAIL example decode %h", c);
    end
    for (int l = 0; l < 6; l++) begin
      checks++;
      if (sbar_h[l] !== sbar_ex[l]) begin
        failures++;
        $display("FAIL example sigma_bar l=%0d %b", l, sbar_h[l]);
      end
    end
    checks += 6;
    // votes listed in the example, bit l = flag from subspace l
    if (dut.votes[0]  !== 6'b111111) begin failures++; $display("FAIL votes 0");  end
    if (dut.votes[1]  !== 6'b111111) begin failures++; $display("FAIL votes 1");  end
    if (dut.votes[2]  !== 6'b100110) begin failures++; $display("FAIL votes 2");  end
    if (dut.votes[3]  !== 6'b010110) begin failures++; $display("FAIL votes 3");  end
    if (dut.votes[30] !== 6'b000001) begin failures++; $display("FAIL votes 30"); end
    if (dut.votes[31] !== 6'b111111) begin failures++; $display("FAIL votes 31"); end
    checks++;
    if (mu_h !== 6'b011111) begin
      failures++;
      $display("FAIL example mu %b", mu_h);
    end

    // ---- 2. every error pattern of weight <= 3 on 64 codewords
    all_patterns(c_ex);
    for (int t = 0; t < 63; t++) all_patterns(encode(16'($urandom)));

    // ---- 3. every codeword, clean and with 1..3 random errors
    for (int msg = 0; msg < 65536; msg++) begin
      logic [31:0] cw;
      cw = encode(16'(msg));
      decode_check(cw, '0);
      decode_check(cw, rand_errors($urandom_range(3, 1)));
    end

    // ---- mechanisms
    for (int w = 0; w < 4; w++) begin
      checks++;
      if (weight_seen[w] == 0) begin failures++; $display("FAIL weight %0d never run", w); end
    end
    checks += 3;
    if (mu_zero == 0)     begin failures++; $display("FAIL mu never 0"); end
    if (mu_one == 0)      begin failures++; $display("FAIL mu never 1"); end
    if (corrections == 0) begin failures++; $display("FAIL nothing corrected"); end
    $display("decodes by error weight: %0d %0d %0d %0d", weight_seen[0], weight_seen[1],
             weight_seen[2], weight_seen[3]);
    $display("mu_l=0: %0d  mu_l=1: %0d  bits corrected: %0d", mu_zero, mu_one, corrections);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
