// tb_arbiter_puf -- self-checking test of the Arbiter PUF behavioural model.
//
// Reference: the delay difference D = t_upper - t_lower is computed stage by
// stage in its recursive form (D' = D + d0 - d1 for a straight stage,
// D' = -D + d2 - d3 for a crossed one) from the same instance delays, and
// the expected response is D < 0.  Checks: every response of 400 random
// challenges on a noiseless instance, the request-to-acknowledge latency,
// uniqueness between two instances (inter-distance near 50 %), and that a
// noisy instance flips some, but few, bits between repeated evaluations.
module tb_arbiter_puf;
  import rso_pkg::*;

  localparam int N   = 64;
  localparam int LAT = 2;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         req;
  logic [N-1:0] chal;
  logic         ack_a, resp_a, ack_b, resp_b, ack_n, resp_n;

  arbiter_puf #(.N(N), .SEED(32'h0000_1111), .LATENCY(LAT)) dut_a (
    .clk(clk), .rst_n(rst_n), .req(req), .chal(chal), .ack(ack_a), .resp(resp_a));
  arbiter_puf #(.N(N), .SEED(32'h0000_2222), .LATENCY(LAT)) dut_b (
    .clk(clk), .rst_n(rst_n), .req(req), .chal(chal), .ack(ack_b), .resp(resp_b));
  arbiter_puf #(.N(N), .SEED(32'h0000_1111), .LATENCY(LAT), .NOISE(8)) dut_n (
    .clk(clk), .rst_n(rst_n), .req(req), .chal(chal), .ack(ack_n), .resp(resp_n));

  int checks = 0, failures = 0;

  function automatic logic ref_resp(input logic [31:0] seed, input logic [N-1:0] c);
    int d;
    d = 0;
    for (int s = 0; s < N; s++) begin
      if (!c[N-1-s]) d =  d + stage_delay(seed, s, 0) - stage_delay(seed, s, 1);
      else           d = -d + stage_delay(seed, s, 2) - stage_delay(seed, s, 3);
    end
    return d < 0;
  endfunction

  task automatic eval(input logic [N-1:0] c, output logic ra, output logic rb,
                      output logic rn, output int lat);
    chal <= c;
    req  <= 1'b1;
    @(posedge clk);
    req  <= 1'b0;
    lat = 0;
    do begin
      @(posedge clk);
      lat++;
    end while (!ack_a && lat < 20);
    #1;
    ra = resp_a;
    rb = resp_b;
    rn = resp_n;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] c;
    logic ra, rb, rn, ra2, rb2, rn2;
    int lat, ones, diff_ab, flips;
    req = 1'b0;
    chal = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    ones = 0; diff_ab = 0; flips = 0;
    for (int k = 0; k < 400; k++) begin
      c = {$urandom, $urandom};
      eval(c, ra, rb, rn, lat);
      checks++;
      if (ra !== ref_resp(32'h0000_1111, c)) begin
        failures++;
        $display("FAIL resp A chal=%h got %b", c, ra);
      end
      checks++;
      if (rb !== ref_resp(32'h0000_2222, c)) begin
        failures++;
        $display("FAIL resp B chal=%h got %b", c, rb);
      end
      checks++;
      if (lat != LAT + 1) begin
        failures++;
        $display("FAIL latency %0d, expected %0d", lat, LAT + 1);
      end
      ones += ra;
      diff_ab += (ra != rb);
      eval(c, ra2, rb2, rn2, lat);
      flips += (rn != rn2);
    end
    $display("bias A %0d/400, inter-distance %0d/400, noisy repeat flips %0d/400",
             ones, diff_ab, flips);
    checks++;
    if (ones < 100 || ones > 300) begin failures++; $display("FAIL bias"); end
    checks++;
    if (diff_ab < 140 || diff_ab > 260) begin failures++; $display("FAIL uniqueness"); end
    checks++;
    if (flips < 1 || flips > 80) begin failures++; $display("FAIL noise flips"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
