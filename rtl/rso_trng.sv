// rso_trng -- BEHAVIOURAL MODEL of the ceil(log2 m)-bit true random number
// generator that picks the two key indices of each authentication.
//
// A real TRNG harvests physical entropy (ring-oscillator jitter,
// metastability); the scheme reuses an existing one and does not design it,
// so this model stands in for it with the simulator's random generator.
// It is not synthesizable logic.
//
// Interface: `req` for one cycle asks for a fresh number; one cycle later
// `valid` pulses for one cycle with W fresh random bits on `rnd` (held
// until the next request).  A new request may follow every cycle.
// Choices of this model: the one-cycle latency and the request/valid
// handshake.
module rso_trng #(
  parameter int unsigned W = 5   // ceil(log2 m) for the default m = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         req,
  output logic         valid,
  output logic [W-1:0] rnd
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0;
      rnd   <= '0;
    end else begin
      valid <= req;
      if (req) rnd <= W'($urandom);
    end
  end

endmodule
