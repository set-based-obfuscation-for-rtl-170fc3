// tb_rso_hd_check -- checks the Hamming distance and the `match` decision
// (HD <= tol) on 32-bit strings: exact distances 0..32 built by flipping a
// chosen number of bits, the boundary tol = HD and tol = HD - 1, and random
// pairs against a bit-counting reference.
module tb_rso_hd_check;
  localparam int L = 32, HW = 6;
  logic [L-1:0] a, b;
  logic [HW-1:0] tol, hd;
  logic match;
  int checks = 0, failures = 0;

  rso_hd_check #(.L(L)) dut (.a(a), .b(b), .tol(tol), .hd(hd), .match(match));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e, pos;
    for (int d = 0; d <= L; d++) begin
      a = $urandom;
      b = a;
      for (int f = 0; f < d; f++) b[(f * 13) % L] = ~b[(f * 13) % L];
      tol = HW'(d);
      #1;
      checks++;
      if (hd != HW'(d) || !match) begin
        failures++; $display("FAIL d=%0d hd=%0d match=%b", d, hd, match);
      end
      if (d > 0) begin
        tol = HW'(d - 1);
        #1;
        checks++;
        if (match) begin failures++; $display("FAIL d=%0d tol=%0d matched", d, d - 1); end
      end
    end
    for (int k = 0; k < 1000; k++) begin
      a = $urandom; b = $urandom; tol = HW'($urandom % (L + 1));
      #1;
      e = 0;
      for (int i = 0; i < L; i++) if (a[i] != b[i]) e++;
      checks++;
      if (hd != HW'(e) || match != (e <= int'(tol))) begin
        failures++; $display("FAIL random hd=%0d exp %0d", hd, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
