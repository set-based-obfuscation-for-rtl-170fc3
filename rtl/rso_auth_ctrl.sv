// rso_auth_ctrl -- device side of one RSO authentication (the obfuscation
// phase).
//
// Sequence, started by `start`:
//  1. If the key set is not valid, finish at once with AUTH_NOKEYS.
//  2. Draw two key indices i and j from the TRNG, independently (i may
//     equal j, so m*m (i, j) pairs are possible, as the server assumes).
//     The TRNG gives ceil(log2 m) bits; a draw >= m is discarded and drawn
//     again, so the pick stays uniform when m is not a power of two.
//  3. Accept the server's n challenges C_1..C_n on the challenge stream.
//     Each is XORed with Key_i and applied to the PUF; its response bit is
//     shifted into R' (C_1 gives the most significant bit).
//  4. R_hat = R' xor Key_j is split into R_hat_a (the upper RA_W bits) and
//     R_hat_b (the lower N - RA_W bits).
//  5. Accept the server's list of candidate R_a values on the R_a stream
//     (m*m of them, the last one flagged by ra_last) and compare each with
//     R_hat_a: a candidate matches when HD <= tol.
//  6. If any matched, offer R_hat_b on the R_b stream and finish with
//     AUTH_PASS once it is taken; otherwise finish with AUTH_NOMATCH and
//     release nothing.
// `done` pulses for one cycle at the end, with `status` valid from then on.
//
// Streams use valid/ready: a word moves on a cycle where both are high;
// the sender must hold valid and data until then.  rb_data reads zero
// while rb_valid is low, so R_hat is never visible otherwise.
//
// Timing, with a PUF acknowledging LAT cycles after its request and a
// sender that never stalls: the two draws take 2 cycles each plus 2 per
// rejected draw; each challenge takes LAT + 2 cycles (accept + request,
// LAT cycles of PUF, one cycle to take the bit); each R_a takes one cycle;
// R_b is offered the cycle after the last R_a.
//
// The steps, the XORs, the split and the HD test are the scheme's.  The
// split point (half and half), which half is R_a, the handshake, the bit
// order, drawing both indices before the challenges, the rejection of
// out-of-range draws and comparing every R_a before deciding (constant
// time) are this design's.
module rso_auth_ctrl
  import rso_pkg::*;
#(
  parameter int unsigned N    = N_STAGES,
  parameter int unsigned M    = M_KEYS,
  parameter int unsigned RA_W = N / 2,
  parameter int unsigned KW   = (M > 1) ? $clog2(M) : 1,
  parameter int unsigned HW   = $clog2(RA_W + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [HW-1:0]  tol,
  output logic           busy,
  output logic           done,
  output auth_status_e   status,
  // key set
  input  logic           keys_valid,
  output logic [KW-1:0]  key_idx_i,
  output logic [KW-1:0]  key_idx_j,
  input  logic [N-1:0]   key_i,
  input  logic [N-1:0]   key_j,
  // TRNG
  output logic           trng_req,
  input  logic           trng_valid,
  input  logic [KW-1:0]  trng_rnd,
  // PUF
  output logic           puf_req,
  output logic [N-1:0]   puf_chal,
  input  logic           puf_ack,
  input  logic           puf_resp,
  // challenge stream [C]
  input  logic           chal_valid,
  output logic           chal_ready,
  input  logic [N-1:0]   chal_data,
  // candidate R_a stream
  input  logic           ra_valid,
  output logic           ra_ready,
  input  logic [RA_W-1:0] ra_data,
  input  logic           ra_last,
  // released R_hat_b
  output logic           rb_valid,
  input  logic           rb_ready,
  output logic [N-RA_W-1:0] rb_data
);

  typedef enum logic [2:0] {
    S_IDLE, S_DRAW, S_DRAW_WAIT, S_CHAL, S_PUF_WAIT, S_RA, S_RB
  } state_e;
  localparam int unsigned TW = (N > 1) ? $clog2(N) : 1;

  state_e          state;
  logic            second;    // 0: drawing i, 1: drawing j
  logic [TW-1:0]   t;
  logic [N-1:0]    r_raw;     // R'
  logic [HW-1:0]   tol_q;
  logic            matched;
  logic [N-1:0]    r_hat;
  logic [N-1:0]    chal_obf;
  logic            hd_match;
  logic [HW-1:0]   hd;

  rso_xor_obf #(.N(N)) u_xor (
    .chal     (chal_data),
    .key_i    (key_i),
    .chal_obf (chal_obf),
    .resp_raw (r_raw),
    .key_j    (key_j),
    .resp_obf (r_hat)
  );

  rso_hd_check #(.L(RA_W), .HW(HW)) u_hd (
    .a     (r_hat[N-1 -: RA_W]),
    .b     (ra_data),
    .tol   (tol_q),
    .hd    (hd),
    .match (hd_match)
  );

  wire chal_fire = (state == S_CHAL) && chal_valid;
  wire ra_fire   = (state == S_RA) && ra_valid;
  wire rb_fire   = (state == S_RB) && rb_ready;
  wire in_range  = (32'(trng_rnd) < 32'(M));

  assign busy       = (state != S_IDLE);
  assign trng_req   = (state == S_DRAW);
  assign chal_ready = (state == S_CHAL);
  assign puf_req    = chal_fire;
  assign puf_chal   = chal_obf;
  assign ra_ready   = (state == S_RA);
  assign rb_valid   = (state == S_RB);
  assign rb_data    = rb_valid ? r_hat[N-RA_W-1:0] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      second    <= 1'b0;
      t         <= '0;
      r_raw     <= '0;
      tol_q     <= '0;
      matched   <= 1'b0;
      key_idx_i <= '0;
      key_idx_j <= '0;
      done      <= 1'b0;
      status    <= AUTH_NOKEYS;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          tol_q   <= tol;
          matched <= 1'b0;
          t       <= '0;
          second  <= 1'b0;
          if (keys_valid) begin
            state <= S_DRAW;
          end else begin
            done   <= 1'b1;
            status <= AUTH_NOKEYS;
          end
        end
        S_DRAW: state <= S_DRAW_WAIT;
        S_DRAW_WAIT: if (trng_valid) begin
          if (!in_range) begin
            state <= S_DRAW;
          end else if (!second) begin
            key_idx_i <= trng_rnd;
            second    <= 1'b1;
            state     <= S_DRAW;
          end else begin
            key_idx_j <= trng_rnd;
            state     <= S_CHAL;
          end
        end
        S_CHAL: if (chal_fire) state <= S_PUF_WAIT;
        S_PUF_WAIT: if (puf_ack) begin
          r_raw <= {r_raw[N-2:0], puf_resp};
          if (t == TW'(N - 1)) begin
            state <= S_RA;
          end else begin
            t     <= t + 1'b1;
            state <= S_CHAL;
          end
        end
        S_RA: if (ra_fire) begin
          if (hd_match) matched <= 1'b1;
          if (ra_last) begin
            if (matched || hd_match) begin
              state <= S_RB;
            end else begin
              state  <= S_IDLE;
              done   <= 1'b1;
              status <= AUTH_NOMATCH;
            end
          end
        end
        S_RB: if (rb_fire) begin
          state  <= S_IDLE;
          done   <= 1'b1;
          status <= AUTH_PASS;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Stream rules: a sender keeps valid and data until accepted.
  a_chal_hold: assert property (@(posedge clk) disable iff (!rst_n)
      chal_valid && !chal_ready |=> chal_valid && $stable(chal_data));
  a_ra_hold: assert property (@(posedge clk) disable iff (!rst_n)
      ra_valid && !ra_ready |=> ra_valid && $stable(ra_data) && $stable(ra_last));
  a_rb_hold: assert property (@(posedge clk) disable iff (!rst_n)
      rb_valid && !rb_ready |=> rb_valid && $stable(rb_data));
  // Key indices never leave the set.
  a_idx_range: assert property (@(posedge clk) disable iff (!rst_n)
      state == S_CHAL |-> 32'(key_idx_i) < 32'(M) && 32'(key_idx_j) < 32'(M));

endmodule
