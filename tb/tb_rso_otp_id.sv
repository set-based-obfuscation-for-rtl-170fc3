// tb_rso_otp_id -- checks that the identifier store starts blank and
// unlocked, takes the first programming, then ignores further programming
// and survives repeated use.
module tb_rso_otp_id;
  localparam int W = 32;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we, locked;
  logic [W-1:0] d, id;
  int checks = 0, failures = 0;

  rso_otp_id #(.ID_W(W)) dut (.clk(clk), .prog_we(we), .prog_data(d), .id(id), .locked(locked));

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (id=%h locked=%b)", what, id, locked); end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; d = '0;
    #1 chk(id == '0 && !locked, "blank at start");
    @(posedge clk);
    we <= 1'b1; d <= 32'hA5C3_0F01;
    @(posedge clk);
    we <= 1'b0;
    #1 chk(id == 32'hA5C3_0F01 && locked, "first programming");
    for (int k = 0; k < 5; k++) begin
      we <= 1'b1; d <= $urandom;
      @(posedge clk);
      we <= 1'b0;
      #1 chk(id == 32'hA5C3_0F01, "write after lock ignored");
    end
    repeat (3) @(posedge clk);
    chk(id == 32'hA5C3_0F01 && locked, "held");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
