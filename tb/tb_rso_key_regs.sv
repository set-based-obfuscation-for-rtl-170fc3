// tb_rso_key_regs -- writes all keys of a set (n = 64, m = 32), reads every
// (i, j) pair on the two read ports, overwrites a few keys, and checks the
// valid flag against reset, set_valid and clear.
module tb_rso_key_regs;
  localparam int N = 64, M = 32, KW = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic we, clear, set_valid, valid;
  logic [KW-1:0] waddr, ri, rj;
  logic [N-1:0] wdata, ki, kj;
  logic [N-1:0] model [M];
  int checks = 0, failures = 0;

  rso_key_regs #(.N(N), .M(M)) dut (.clk(clk), .rst_n(rst_n), .we(we), .waddr(waddr),
    .wdata(wdata), .clear(clear), .set_valid(set_valid), .raddr_i(ri), .raddr_j(rj),
    .key_i(ki), .key_j(kj), .valid(valid));

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic read_all();
    for (int i = 0; i < M; i++)
      for (int j = 0; j < M; j++) begin
        ri = KW'(i); rj = KW'(j);
        #1;
        chk(ki === model[i] && kj === model[j], $sformatf("read %0d,%0d", i, j));
      end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; clear = 0; set_valid = 0; waddr = '0; wdata = '0; ri = '0; rj = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    #1 chk(!valid, "valid after reset");
    for (int k = 0; k < M; k++) begin
      model[k] = {$urandom, $urandom};
      we <= 1'b1; waddr <= KW'(k); wdata <= model[k];
      @(posedge clk);
    end
    we <= 1'b0; set_valid <= 1'b1;
    @(posedge clk);
    set_valid <= 1'b0;
    #1 chk(valid, "valid after set_valid");
    read_all();
    for (int k = 3; k < M; k += 7) begin
      model[k] = ~model[k];
      we <= 1'b1; waddr <= KW'(k); wdata <= model[k];
      @(posedge clk);
    end
    we <= 1'b0;
    #1 read_all();
    clear <= 1'b1;
    @(posedge clk);
    clear <= 1'b0;
    #1 chk(!valid, "valid after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
