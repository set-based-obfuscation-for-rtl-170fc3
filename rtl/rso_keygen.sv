// rso_keygen -- key-set generator: builds the obfuscation set K from the
// PUF itself.
//
// On `start` (power-up initialisation or the server's update command, "init"
// in the protocol) it clears the set's valid flag, then for key k = 0..m-1
// and challenge t = 0..n-1 reads stored challenge C_{k,t} from the NVM,
// applies it to the PUF unobfuscated and shifts the response bit into an
// n-bit register.  After the n-th bit the register is written as key k.
// When all m keys are written it sets the valid flag and pulses `done`.
// The first challenge of a group gives the most significant key bit, so a
// key reads left to right in challenge order.
//
// Timing: each challenge costs one NVM read cycle, one PUF request cycle
// and the PUF latency plus one cycle to see the acknowledge, i.e. LAT + 3
// cycles with a PUF whose acknowledge rises LAT edges after the edge that
// took the request.  A whole set therefore takes m * n * (LAT + 3) cycles:
// `done` is seen high m * n * (LAT + 3) + 1 edges after the edge that
// sampled `start` (10241 for m = 32, n = 64, LAT = 2), and the key set
// reads valid from the following cycle.  `start` while busy is ignored.
// Two outputs are wires from inputs by design: `puf_chal` is the NVM read
// data (the stored challenge goes to the PUF unchanged, with no key XOR),
// and bit 0 of `key_wdata` is the PUF response bit being shifted in.
// The sequence (stored challenges in, responses into the key registers) is
// the scheme's; the order of the loops, the bit order, the handshake and
// the choice that an update re-derives the keys from what the NVM then
// holds are this design's.
module rso_keygen
  import rso_pkg::*;
#(
  parameter int unsigned N  = N_STAGES,
  parameter int unsigned M  = M_KEYS,
  parameter int unsigned KW = (M > 1) ? $clog2(M) : 1,
  parameter int unsigned AW = $clog2(M * N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  // NVM read port
  output logic          nvm_rd_en,
  output logic [AW-1:0] nvm_rd_addr,
  input  logic [N-1:0]  nvm_rd_data,
  // PUF port
  output logic          puf_req,
  output logic [N-1:0]  puf_chal,
  input  logic          puf_ack,
  input  logic          puf_resp,
  // key register write port
  output logic          key_we,
  output logic [KW-1:0] key_waddr,
  output logic [N-1:0]  key_wdata,
  output logic          key_clear,
  output logic          key_set_valid
);

  typedef enum logic [1:0] {S_IDLE, S_READ, S_REQ, S_WAIT} state_e;
  localparam int unsigned TW = (N > 1) ? $clog2(N) : 1;

  state_e        state;
  logic [KW-1:0] k;
  logic [TW-1:0] t;
  logic [N-1:0]  shreg;

  wire last_bit = (t == TW'(N - 1));
  wire last_key = (k == KW'(M - 1));

  assign busy        = (state != S_IDLE);
  assign nvm_rd_en   = (state == S_READ);
  assign nvm_rd_addr = AW'(k) * AW'(N) + AW'(t);
  assign puf_req     = (state == S_REQ);
  assign puf_chal    = nvm_rd_data;
  assign key_waddr   = k;
  assign key_wdata   = {shreg[N-2:0], puf_resp};
  assign key_we      = (state == S_WAIT) && puf_ack && last_bit;
  assign key_clear   = (state == S_IDLE) && start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      k             <= '0;
      t             <= '0;
      shreg         <= '0;
      done          <= 1'b0;
      key_set_valid <= 1'b0;
    end else begin
      done          <= 1'b0;
      key_set_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          k     <= '0;
          t     <= '0;
          state <= S_READ;
        end
        S_READ: state <= S_REQ;
        S_REQ:  state <= S_WAIT;
        S_WAIT: if (puf_ack) begin
          shreg <= {shreg[N-2:0], puf_resp};
          if (last_bit) begin
            t <= '0;
            if (last_key) begin
              state         <= S_IDLE;
              done          <= 1'b1;
              key_set_valid <= 1'b1;
            end else begin
              k     <= k + 1'b1;
              state <= S_READ;
            end
          end else begin
            t     <= t + 1'b1;
            state <= S_READ;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The PUF is only ever asked when it is idle.
  a_no_ack_outside_wait: assert property (@(posedge clk) disable iff (!rst_n)
                                           puf_ack |-> state == S_WAIT);

endmodule
