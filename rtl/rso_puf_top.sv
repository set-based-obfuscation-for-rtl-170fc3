// rso_puf_top -- RSO-protected Arbiter PUF device: a strong PUF whose
// challenges and responses are hidden behind XOR keys drawn at random from a
// set of the PUF's own stable responses.
//
// Blocks and data flow:
//   rso_otp_id     identifier id_i, burnt once at enrollment, sent first
//   rso_nvm        the m x n stored challenges C_ob
//   rso_keygen     (on init_req) runs the stored challenges through the PUF
//                  and writes the m responses into rso_key_regs as the set K
//   rso_key_regs   the set K, with read ports for Key_i and Key_j
//   rso_trng       ceil(log2 m)-bit random source that picks i and j
//   rso_auth_ctrl  one authentication: C' = C xor Key_i into the PUF, n
//                  response bits into R', R_hat = R' xor Key_j, match
//                  R_hat_a against the server's R_a list, release R_hat_b
//   arbiter_puf    the n-stage Arbiter PUF (behavioural model)
// The PUF is shared: while the key-set generator runs it owns the PUF and
// authentication requests are ignored; otherwise the authentication
// controller owns it.  init_req is ignored while an authentication runs.
//
// External interface (all synchronous to clk, active-low async reset):
//   otp_prog_*     program the identifier (write-once)
//   nvm_prog_*     write stored challenge word k*n + t (tester / update)
//   init_req       generate or update the key set from the NVM; keys_valid
//                  rises when done (m * n * (PUF_LAT + 3) cycles later)
//   auth_start     begin an authentication, with hd_tol = allowed flips in
//                  R_hat_a; auth_done pulses with auth_status at the end
//   chal_*         the n challenges of [C], valid/ready
//   ra_*           the candidate R_a values (m*m), valid/ready, ra_last
//   rb_*           the released R_hat_b, valid/ready
// The set update itself follows the scheme: the server decides it and
// sends the command; here the new stored challenges are written through
// the NVM program port and init_req re-derives the keys from them.  That
// division of work, the handshakes and all widths not given by the scheme
// (identifier width, R_a/R_b split) are this design's choices.
module rso_puf_top
  import rso_pkg::*;
#(
  parameter int unsigned N         = N_STAGES,
  parameter int unsigned M         = M_KEYS,
  parameter int unsigned RA_W      = N / 2,
  parameter int unsigned ID_W      = 32,
  parameter logic [31:0] PUF_SEED  = 32'h5eed_0001,
  parameter int unsigned PUF_LAT   = 2,
  parameter int unsigned PUF_NOISE = 0,
  parameter int unsigned KW        = (M > 1) ? $clog2(M) : 1,
  parameter int unsigned AW        = $clog2(M * N),
  parameter int unsigned HW        = $clog2(RA_W + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // identifier
  input  logic              otp_prog_we,
  input  logic [ID_W-1:0]   otp_prog_data,
  output logic [ID_W-1:0]   dev_id,
  output logic              id_locked,
  // stored challenges
  input  logic              nvm_prog_we,
  input  logic [AW-1:0]     nvm_prog_addr,
  input  logic [N-1:0]      nvm_prog_data,
  // key set generation / update
  input  logic              init_req,
  output logic              keygen_busy,
  output logic              keygen_done,
  output logic              keys_valid,
  // authentication
  input  logic              auth_start,
  input  logic [HW-1:0]     hd_tol,
  output logic              auth_busy,
  output logic              auth_done,
  output auth_status_e      auth_status,
  input  logic              chal_valid,
  output logic              chal_ready,
  input  logic [N-1:0]      chal_data,
  input  logic              ra_valid,
  output logic              ra_ready,
  input  logic [RA_W-1:0]   ra_data,
  input  logic              ra_last,
  output logic              rb_valid,
  input  logic              rb_ready,
  output logic [N-RA_W-1:0] rb_data
);

  // ---------------------------------------------------------------- OTP id
  rso_otp_id #(.ID_W(ID_W)) u_otp (
    .clk       (clk),
    .prog_we   (otp_prog_we),
    .prog_data (otp_prog_data),
    .id        (dev_id),
    .locked    (id_locked)
  );

  // ------------------------------------------------------------------ NVM
  logic          nvm_rd_en;
  logic [AW-1:0] nvm_rd_addr;
  logic [N-1:0]  nvm_rd_data;

  rso_nvm #(.N(N), .M(M), .AW(AW)) u_nvm (
    .clk       (clk),
    .prog_we   (nvm_prog_we),
    .prog_addr (nvm_prog_addr),
    .prog_data (nvm_prog_data),
    .rd_en     (nvm_rd_en),
    .rd_addr   (nvm_rd_addr),
    .rd_data   (nvm_rd_data)
  );

  // ------------------------------------------------------------------ PUF
  logic         puf_req, puf_ack, puf_resp;
  logic [N-1:0] puf_chal;

  arbiter_puf #(.N(N), .SEED(PUF_SEED), .LATENCY(PUF_LAT), .NOISE(PUF_NOISE)) u_puf (
    .clk   (clk),
    .rst_n (rst_n),
    .req   (puf_req),
    .chal  (puf_chal),
    .ack   (puf_ack),
    .resp  (puf_resp)
  );

  // -------------------------------------------------------- key generator
  logic          kg_puf_req;
  logic [N-1:0]  kg_puf_chal;
  logic          kg_we, kg_clear, kg_set_valid;
  logic [KW-1:0] kg_waddr;
  logic [N-1:0]  kg_wdata;

  rso_keygen #(.N(N), .M(M), .KW(KW), .AW(AW)) u_keygen (
    .clk           (clk),
    .rst_n         (rst_n),
    .start         (init_req && !auth_busy),
    .busy          (keygen_busy),
    .done          (keygen_done),
    .nvm_rd_en     (nvm_rd_en),
    .nvm_rd_addr   (nvm_rd_addr),
    .nvm_rd_data   (nvm_rd_data),
    .puf_req       (kg_puf_req),
    .puf_chal      (kg_puf_chal),
    .puf_ack       (puf_ack && keygen_busy),
    .puf_resp      (puf_resp),
    .key_we        (kg_we),
    .key_waddr     (kg_waddr),
    .key_wdata     (kg_wdata),
    .key_clear     (kg_clear),
    .key_set_valid (kg_set_valid)
  );

  // -------------------------------------------------------- key registers
  logic [KW-1:0] idx_i, idx_j;
  logic [N-1:0]  key_i, key_j;

  rso_key_regs #(.N(N), .M(M), .KW(KW)) u_keys (
    .clk       (clk),
    .rst_n     (rst_n),
    .we        (kg_we),
    .waddr     (kg_waddr),
    .wdata     (kg_wdata),
    .clear     (kg_clear),
    .set_valid (kg_set_valid),
    .raddr_i   (idx_i),
    .raddr_j   (idx_j),
    .key_i     (key_i),
    .key_j     (key_j),
    .valid     (keys_valid)
  );

  // ----------------------------------------------------------------- TRNG
  logic          trng_req, trng_valid;
  logic [KW-1:0] trng_rnd;

  rso_trng #(.W(KW)) u_trng (
    .clk   (clk),
    .rst_n (rst_n),
    .req   (trng_req),
    .valid (trng_valid),
    .rnd   (trng_rnd)
  );

  // ------------------------------------------------ authentication control
  logic          au_puf_req;
  logic [N-1:0]  au_puf_chal;

  rso_auth_ctrl #(.N(N), .M(M), .RA_W(RA_W), .KW(KW), .HW(HW)) u_auth (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (auth_start && !keygen_busy),
    .tol        (hd_tol),
    .busy       (auth_busy),
    .done       (auth_done),
    .status     (auth_status),
    .keys_valid (keys_valid),
    .key_idx_i  (idx_i),
    .key_idx_j  (idx_j),
    .key_i      (key_i),
    .key_j      (key_j),
    .trng_req   (trng_req),
    .trng_valid (trng_valid),
    .trng_rnd   (trng_rnd),
    .puf_req    (au_puf_req),
    .puf_chal   (au_puf_chal),
    .puf_ack    (puf_ack && !keygen_busy),
    .puf_resp   (puf_resp),
    .chal_valid (chal_valid),
    .chal_ready (chal_ready),
    .chal_data  (chal_data),
    .ra_valid   (ra_valid),
    .ra_ready   (ra_ready),
    .ra_data    (ra_data),
    .ra_last    (ra_last),
    .rb_valid   (rb_valid),
    .rb_ready   (rb_ready),
    .rb_data    (rb_data)
  );

  // PUF ownership: the key-set generator while it runs, else authentication.
  always_comb begin
    if (keygen_busy) begin
      puf_req  = kg_puf_req;
      puf_chal = kg_puf_chal;
    end else begin
      puf_req  = au_puf_req;
      puf_chal = au_puf_chal;
    end
  end

  a_one_owner: assert property (@(posedge clk) disable iff (!rst_n)
      !(keygen_busy && auth_busy));

endmodule
