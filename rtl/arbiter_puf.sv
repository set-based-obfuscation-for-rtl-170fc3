// arbiter_puf -- BEHAVIOURAL MODEL of an n-stage Arbiter PUF (not
// synthesizable logic: the real part is a pair of matched delay lines and an
// arbiter latch whose response comes from manufacturing variation).
//
// How it works: a rising edge is launched into two paths, upper (X) and
// lower (Y), through N switch stages M_1..M_N.  Stage M_s is set by
// challenge bit C_s: C_s = 0 passes both paths straight, C_s = 1 crosses
// them (as in the four-stage example the scheme is explained with).  Each
// stage has four path delays; the model sums them along the two paths and
// the arbiter compares the arrival times at its inputs a_1 (upper path) and
// a_-1 (lower path).  This is the additive linear delay model: the
// difference of the arrival times is a linear function of the parity
// features of the challenge, which is what makes a bare Arbiter PUF
// learnable and why the RSO wrapper exists.
//
// Interface: `req` for one cycle with `chal` starts an evaluation; `ack`
// rises at the LATENCY-th clock edge after the edge that sampled `req` and
// stays high for one cycle with `resp` valid, so a synchronous consumer sees
// it LATENCY + 1 edges after its request (resp holds its value until the
// next evaluation).  A `req` while busy is ignored.
// Bit order: C_1 is chal[N-1] (the leftmost bit when the challenge is
// written as a string), C_N is chal[0].
//
// Choices of this model (not given by the scheme): the response is 1 when
// the upper path wins (arrives strictly first), the per-instance delays come
// from rso_pkg::stage_delay(SEED, ...), LATENCY is 2 cycles, and optional
// environmental noise adds a fresh uniform value in [-NOISE, +NOISE] to
// every stage delay on every evaluation (NOISE = 0: ideal, repeatable PUF).
module arbiter_puf
  import rso_pkg::*;
#(
  parameter int unsigned N       = N_STAGES,
  parameter logic [31:0] SEED    = 32'h5eed_0001,
  parameter int unsigned LATENCY = 2,
  parameter int unsigned NOISE   = 0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         req,
  input  logic [N-1:0] chal,
  output logic         ack,
  output logic         resp
);

  // Per-instance stage delays, fixed at "manufacture".
  int dly [N][4];

  initial begin
    for (int s = 0; s < int'(N); s++)
      for (int k = 0; k < 4; k++)
        dly[s][k] = stage_delay(SEED, s, k);
  end

  function automatic int noise_sample();
    if (NOISE == 0) return 0;
    return int'($urandom % (2 * NOISE + 1)) - int'(NOISE);
  endfunction

  // Race the two paths; returns 1 when the upper path (a_1) is first.
  function automatic logic race(input logic [N-1:0] c);
    int tx, ty, nx, ny;
    tx = 0;
    ty = 0;
    for (int s = 0; s < int'(N); s++) begin
      if (c[int'(N) - 1 - s] == 1'b0) begin
        nx = tx + dly[s][0] + noise_sample();
        ny = ty + dly[s][1] + noise_sample();
      end else begin
        nx = ty + dly[s][2] + noise_sample();
        ny = tx + dly[s][3] + noise_sample();
      end
      tx = nx;
      ty = ny;
    end
    return (tx < ty);
  endfunction

  localparam int CW = $clog2(LATENCY + 1);
  logic [CW-1:0] cnt;
  logic          busy;
  logic          result;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      cnt    <= '0;
      ack    <= 1'b0;
      resp   <= 1'b0;
      result <= 1'b0;
    end else begin
      ack <= 1'b0;
      if (!busy && req) begin
        result <= race(chal);
        busy   <= 1'b1;
        cnt    <= CW'(LATENCY - 1);
      end else if (busy) begin
        if (cnt == '0) begin
          busy <= 1'b0;
          ack  <= 1'b1;
          resp <= result;
        end else begin
          cnt <= cnt - 1'b1;
        end
      end
    end
  end

endmodule
