// tb_rso_puf_top -- end-to-end run of the RSO device against a server model.
//
// Configuration: n = 64 stages, m = 6 keys (so some TRNG draws are out of
// range and redrawn), a noisy PUF (about 5 % of response bits flip between
// evaluations) and a tolerance of 5 flipped bits in the 32-bit R_hat_a
// (10 of 64, as in the scheme's success-probability example).  The
// server's set-update threshold is cut to four authentications so that an
// update happens within the run.
//
// Flow: an authentication before any key set exists (must abort); identifier
// programming; test-time selection of stable challenges and key-set
// generation (an authentication request during it must be ignored);
// rounds of honest authentications (must pass, R_hat_b within tolerance of
// some candidate R_b), forged R_a lists (must abort), and, when the CRP
// counter reaches the threshold, a set update followed by one
// authentication with the server's stale set (must abort).  Each mechanism
// is counted and one that never happened is a failure.
module tb_rso_puf_top;
  import rso_pkg::*;
  import rso_tb_server_pkg::*;

  localparam int N = 64, M = 6, RA_W = 32, RB_W = N - RA_W, ID_W = 32, LAT = 2;
  localparam int KW = 3, AW = $clog2(M * N), HW = $clog2(RA_W + 1);
  localparam int TOL = 5, NOISE = 8, MARGIN = 400;
  localparam logic [31:0] SEED = 32'hfeed_0042;
  localparam longint N_MIN = 4 * N;   // reduced update threshold
  localparam int ROUNDS = 14;

  typedef rso_server #(N, M, RA_W) server_t;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic otp_we, id_locked, nvm_we, init_req, kg_busy, kg_done, keys_valid;
  logic [ID_W-1:0] otp_data, dev_id;
  logic [AW-1:0] nvm_addr;
  logic [N-1:0] nvm_data;
  logic auth_start, auth_busy, auth_done;
  auth_status_e auth_status;
  logic [HW-1:0] hd_tol;
  logic chal_valid, chal_ready, ra_valid, ra_ready, ra_last, rb_valid, rb_ready;
  logic [N-1:0] chal_data;
  logic [RA_W-1:0] ra_data;
  logic [RB_W-1:0] rb_data;

  rso_puf_top #(.N(N), .M(M), .RA_W(RA_W), .ID_W(ID_W), .PUF_SEED(SEED),
                .PUF_LAT(LAT), .PUF_NOISE(NOISE)) dut (
    .clk(clk), .rst_n(rst_n),
    .otp_prog_we(otp_we), .otp_prog_data(otp_data), .dev_id(dev_id), .id_locked(id_locked),
    .nvm_prog_we(nvm_we), .nvm_prog_addr(nvm_addr), .nvm_prog_data(nvm_data),
    .init_req(init_req), .keygen_busy(kg_busy), .keygen_done(kg_done), .keys_valid(keys_valid),
    .auth_start(auth_start), .hd_tol(hd_tol), .auth_busy(auth_busy), .auth_done(auth_done),
    .auth_status(auth_status),
    .chal_valid(chal_valid), .chal_ready(chal_ready), .chal_data(chal_data),
    .ra_valid(ra_valid), .ra_ready(ra_ready), .ra_data(ra_data), .ra_last(ra_last),
    .rb_valid(rb_valid), .rb_ready(rb_ready), .rb_data(rb_data));

  int checks = 0, failures = 0, cyc = 0;
  int n_nokeys = 0, n_ignored = 0, n_keygen = 0, n_update = 0, n_pass = 0;
  int n_noisy = 0, n_forged = 0, n_stale = 0, n_reject = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.trng_valid && 32'(dut.trng_rnd) >= M) n_reject <= n_reject + 1;
  end

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic load_set(server_t s);
    for (int a = 0; a < M * N; a++) begin
      @(posedge clk); #1;
      nvm_we = 1'b1; nvm_addr = AW'(a); nvm_data = s.store[a];
    end
    @(posedge clk); #1 nvm_we = 1'b0;
  endtask

  task automatic run_keygen(input bit poke_auth);
    int c0;
    @(posedge clk); #1 init_req = 1'b1;
    @(posedge clk); c0 = cyc; #1 init_req = 1'b0;
    if (poke_auth) begin
      repeat (3) @(posedge clk);
      #1 auth_start = 1'b1;
      @(posedge clk); #1 auth_start = 1'b0;
      @(posedge clk);
      if (!auth_busy && kg_busy) n_ignored++;
      chk(!auth_busy, "authentication must wait for key generation");
    end
    while (!kg_done) @(posedge clk);
    chk(cyc - c0 == M * N * (LAT + 3) + 1, $sformatf("key generation %0d cycles", cyc - c0));
    #1 chk(keys_valid, "keys valid after generation");
    n_keygen++;
  endtask

  // kind 0: honest, 1: forged R_a list, 2: stale key set (server side)
  task automatic authenticate(server_t s, input int kind);
    int c0, rbdist;
    bit seen_rb;
    logic [RB_W-1:0] rb;
    s.new_challenges();
    s.candidates();
    @(posedge clk); #1 auth_start = 1'b1; hd_tol = HW'(TOL);
    @(posedge clk); c0 = cyc; #1 auth_start = 1'b0;
    for (int t = 0; t < N; t++) begin
      chal_valid = 1'b1; chal_data = s.chals[t];
      do @(posedge clk); while (!chal_ready);
      #1;
    end
    chal_valid = 1'b0;
    for (int k = 0; k < M * M; k++) begin
      ra_valid = 1'b1; ra_last = (k == M * M - 1);
      ra_data = (kind == 1) ? RA_W'({$urandom, $urandom}) : s.ra(k);
      do @(posedge clk); while (!ra_ready);
      #1;
    end
    ra_valid = 1'b0; ra_last = 1'b0;
    seen_rb = 1'b0; rb = '0;
    rb_ready = 1'b1;
    do begin
      @(posedge clk);
      if (rb_valid) begin seen_rb = 1'b1; rb = rb_data; end
    end while (!auth_done && cyc - c0 < 5000);
    #1 rb_ready = 1'b0;
    if (kind == 0) begin
      rbdist = s.best_rb_distance(rb);
      chk(auth_status == AUTH_PASS && seen_rb, "honest authentication passes on the device");
      chk(rbdist <= TOL, $sformatf("server check: R_hat_b is %0d bits from the nearest R_b", rbdist));
      if (auth_status == AUTH_PASS) n_pass++;
      if (rbdist > 0 && rbdist <= TOL) n_noisy++;
    end else begin
      chk(auth_status == AUTH_NOMATCH && !seen_rb, $sformatf("kind %0d must abort", kind));
      if (auth_status == AUTH_NOMATCH && kind == 1) n_forged++;
      if (auth_status == AUTH_NOMATCH && kind == 2) n_stale++;
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    server_t srv, srv_new;
    otp_we = 0; otp_data = '0; nvm_we = 0; nvm_addr = '0; nvm_data = '0; init_req = 0;
    auth_start = 0; hd_tol = '0; chal_valid = 0; chal_data = '0; ra_valid = 0;
    ra_data = '0; ra_last = 0; rb_ready = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    // no key set yet
    @(posedge clk); #1 auth_start = 1'b1;
    @(posedge clk); #1 auth_start = 1'b0;
    chk(auth_done && auth_status == AUTH_NOKEYS, "abort before key generation");
    if (auth_done && auth_status == AUTH_NOKEYS) n_nokeys++;
    // enrollment: identifier
    @(posedge clk); #1 otp_we = 1'b1; otp_data = 32'h0000_2a17;
    @(posedge clk); #1 otp_we = 1'b0;
    chk(dev_id == 32'h0000_2a17 && id_locked, "identifier programmed");
    // preparation: stable challenges, key set
    srv = new(SEED);
    srv.select_set(MARGIN);
    load_set(srv);
    run_keygen(1'b1);
    for (int r = 0; r < ROUNDS; r++) begin
      if (srv.counter >= N_MIN) begin
        srv_new = new(SEED);
        srv_new.select_set(MARGIN);
        load_set(srv_new);
        run_keygen(1'b0);
        n_update++;
        authenticate(srv, 2);
        srv = srv_new;
      end
      authenticate(srv, (r % 5 == 4) ? 1 : 0);
    end
    $display("no-key aborts %0d, ignored starts %0d, key generations %0d, set updates %0d",
             n_nokeys, n_ignored, n_keygen, n_update);
    $display("passes %0d (with tolerated bit errors %0d), forged-list aborts %0d, stale-set aborts %0d, redraws %0d",
             n_pass, n_noisy, n_forged, n_stale, n_reject);
    chk(n_nokeys > 0, "mechanism: abort without keys");
    chk(n_ignored > 0, "mechanism: start ignored during key generation");
    chk(n_keygen > 1, "mechanism: key generation");
    chk(n_update > 0, "mechanism: set update");
    chk(n_pass > 0, "mechanism: pass");
    chk(n_noisy > 0, "mechanism: pass within tolerance");
    chk(n_forged > 0, "mechanism: abort on no match");
    chk(n_stale > 0, "mechanism: stale set rejected after update");
    chk(n_reject > 0, "mechanism: out-of-range TRNG draw");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
