// tb_rso_xor_obf -- checks C' = C xor Key_i and R_hat = R' xor Key_j on
// random vectors (first one all-zero challenge, all-one key), bit by bit
// against a loop-computed reference.
module tb_rso_xor_obf;
  localparam int N = 64;
  logic [N-1:0] c, ki, co, r, kj, ro, ec, er;
  int checks = 0, failures = 0;

  rso_xor_obf #(.N(N)) dut (.chal(c), .key_i(ki), .chal_obf(co), .resp_raw(r),
    .key_j(kj), .resp_obf(ro));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 500; k++) begin
      c = {$urandom, $urandom}; ki = {$urandom, $urandom};
      r = {$urandom, $urandom}; kj = {$urandom, $urandom};
      if (k == 0) begin c = '0; ki = '1; end
      #1;
      for (int b = 0; b < N; b++) begin
        ec[b] = (c[b] != ki[b]);
        er[b] = (r[b] != kj[b]);
      end
      checks++;
      if (co !== ec) begin failures++; $display("FAIL chal %h ^ %h -> %h", c, ki, co); end
      checks++;
      if (ro !== er) begin failures++; $display("FAIL resp %h ^ %h -> %h", r, kj, ro); end
      // undoing the obfuscation with the same key restores the challenge
      checks++;
      if ((co ^ ki) !== c) begin failures++; $display("FAIL not invertible"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
