// tb_rso_trng -- checks the TRNG model: `valid` follows each request by
// exactly one cycle and only then, and over 2000 draws of 5 bits every one
// of the 32 values appears and none dominates (a stuck or biased source
// fails).
module tb_rso_trng;
  localparam int W = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic req, valid;
  logic [W-1:0] rnd;
  int checks = 0, failures = 0;
  int hist [2**W];

  rso_trng #(.W(W)) dut (.clk(clk), .rst_n(rst_n), .req(req), .valid(valid), .rnd(rnd));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int maxc, seen;
    req = 1'b0;
    foreach (hist[v]) hist[v] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int k = 0; k < 2000; k++) begin
      req <= 1'b1;
      @(posedge clk);
      req <= 1'b0;
      #1;
      checks++;
      if (!valid) begin failures++; $display("FAIL valid missing"); end
      hist[rnd]++;
      @(posedge clk);
      #1;
      checks++;
      if (valid) begin failures++; $display("FAIL valid without request"); end
    end
    maxc = 0; seen = 0;
    foreach (hist[v]) begin
      if (hist[v] > 0) seen++;
      if (hist[v] > maxc) maxc = hist[v];
    end
    $display("values seen %0d of %0d, largest count %0d", seen, 2**W, maxc);
    checks++;
    if (seen != 2**W) begin failures++; $display("FAIL not all values drawn"); end
    checks++;
    if (maxc > 120) begin failures++; $display("FAIL biased"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
