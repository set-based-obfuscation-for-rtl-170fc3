// tb_rso_nvm -- programs every word of a reduced challenge store (n = 16,
// m = 4) with a value computed from its address, then reads all words back
// in a scrambled order and checks each one arrives the cycle after its
// read and holds while no read is issued.
module tb_rso_nvm;
  localparam int N = 16, M = 4, DEPTH = M * N, AW = $clog2(DEPTH);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic prog_we, rd_en;
  logic [AW-1:0] prog_addr, rd_addr;
  logic [N-1:0] prog_data, rd_data;
  int checks = 0, failures = 0;

  rso_nvm #(.N(N), .M(M)) dut (.clk(clk), .prog_we(prog_we), .prog_addr(prog_addr),
    .prog_data(prog_data), .rd_en(rd_en), .rd_addr(rd_addr), .rd_data(rd_data));

  function automatic logic [N-1:0] pattern(input int a);
    return N'((a * 40503 + 12345) ^ (a << 7));
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    prog_we = 0; rd_en = 0; prog_addr = '0; rd_addr = '0; prog_data = '0;
    @(posedge clk);
    for (int k = 0; k < DEPTH; k++) begin
      prog_we <= 1'b1; prog_addr <= AW'(k); prog_data <= pattern(k);
      @(posedge clk);
    end
    prog_we <= 1'b0;
    for (int k = 0; k < DEPTH; k++) begin
      a = (k * 37 + 5) % DEPTH;
      rd_en <= 1'b1; rd_addr <= AW'(a);
      @(posedge clk);
      rd_en <= 1'b0; rd_addr <= AW'(a + 1);
      #1;
      checks++;
      if (rd_data !== pattern(a)) begin
        failures++;
        $display("FAIL addr %0d got %h exp %h", a, rd_data, pattern(a));
      end
      @(posedge clk);
      #1;
      checks++;
      if (rd_data !== pattern(a)) begin failures++; $display("FAIL data not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
