// tb_rso_workload_sets -- the evaluated set sizes on the default build.
//
// The device is the top at its default size (n = 64 stages, M = 32 key
// slots, R_a and R_b of 32 bits), with only the PUF model's noise raised
// (PUF_NOISE = 8, about 5.7 % of the bits flip between evaluations, close
// to the 4.8 % to 5.2 % intra-distance measured on real Arbiter PUFs).
// For each set size m = 2, 4, 8, 16 and 32 the server model selects m
// groups of stable challenges, stores each group 32 / m times so that the
// 32-slot draw is uniform over the m distinct keys, programs them and runs
// key generation. Then it runs honest authentications with a threshold of
// 13 flips per 64 bits, which on each 32-bit half is 6 flips.
//
// It checks:
// * every key generation takes m * n * (LAT + 3) cycles;
// * at most 5 % of the honest authentications are rejected, either by the
//   device (R_a) or by the server (R_b);
// * an exact model of the unprotected PUF, f(C_t), predicts between 40 %
//   and 60 % of the released R_hat_b bits at every set size: the attacker
//   who had modelled the bare PUF perfectly is reduced to guessing;
// * the key pairs (i mod m, j mod m) recovered from the returned R_hat_b
//   cover all m * m pairs for m = 2 and m = 32.
//
// For m = 32 the device answers until one million CRPs have been released
// (15625 authentications, about 2e7 cycles, under a minute of simulation).
// For m = 2 the server runs its CRP counter up to the set-update
// threshold m^2 (n + 1) / (2 eps) = 4 * 650 = 2600 CRPs (eps = 5 %).
// That takes 41 authentications of 64 CRPs each. The server then selects
// a new set and has the device derive its keys again. A list computed with
// the old set must then be refused, and one computed with the new set must
// pass. Each event is counted, and an event that never happened counts as
// a failure. The other sizes run 8 authentications each.
module tb_rso_workload_sets;
  import rso_pkg::*;
  import rso_tb_server_pkg::*;

  localparam int N = N_STAGES, M = M_KEYS, RA_W = N / 2, RB_W = N - RA_W, ID_W = 32;
  localparam int LAT = 2, AW = $clog2(M * N), HW = $clog2(RA_W + 1);
  localparam int TOL = 13 * RA_W / 64;             // 13 of 64 bits, per 32-bit half
  localparam int AUTHS = 8;                        // honest authentications per size
  localparam int NMIN_ARB = 650;                   // (n + 1) / (2 eps), eps = 5 %
  localparam longint CRPS_M32 = 1_000_000;         // CRPs collected with the full set
  localparam logic [31:0] SEED = 32'h5eed_0001;

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

  rso_puf_top #(.PUF_NOISE(8)) dut (
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
  int n_auth = 0, n_reject = 0, n_update = 0, n_stale_refused = 0, n_after_update = 0;
  longint bits_seen, bits_same;   // released bits, and those the bare-PUF model predicts
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // Program the server's stored challenges and derive the key set.
  task automatic load_set(server_t s);
    int c0;
    for (int a = 0; a < M * N; a++) begin
      @(posedge clk); #1;
      nvm_we = 1'b1; nvm_addr = AW'(a); nvm_data = s.store[a];
    end
    @(posedge clk); #1 nvm_we = 1'b0; init_req = 1'b1;
    @(posedge clk); c0 = cyc; #1 init_req = 1'b0;
    while (!kg_done) @(posedge clk);
    chk(cyc - c0 == M * N * (LAT + 3) + 1, $sformatf("key generation %0d cycles", cyc - c0));
    #1 chk(keys_valid, "key set valid");
  endtask

  // One authentication with the candidate list of server `s`. Returns 1
  // when both the device and the server accept. `pair` is the index of the
  // candidate nearest to the returned R_hat_b.
  task automatic authenticate(server_t s, output bit ok, output int pair);
    int c0;
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
      ra_valid = 1'b1; ra_last = (k == M * M - 1); ra_data = s.ra(k);
      do @(posedge clk); while (!ra_ready);
      #1;
    end
    ra_valid = 1'b0; ra_last = 1'b0;
    seen_rb = 1'b0; rb = '0;
    rb_ready = 1'b1;
    do begin
      @(posedge clk);
      if (rb_valid) begin seen_rb = 1'b1; rb = rb_data; end
    end while (!auth_done && cyc - c0 < 10000);
    #1 rb_ready = 1'b0;
    if (seen_rb)
      for (int t = RA_W; t < N; t++) begin
        bits_seen++;
        if (rb[N-1-t] == s.resp(s.chals[t])) bits_same++;
      end
    ok = auth_status == AUTH_PASS && seen_rb && s.best_rb_distance(rb) <= TOL;
    pair = seen_rb ? s.best_rb_index(rb) : -1;
  endtask

  initial begin
    repeat (25_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    server_t srv, old;
    bit ok;
    int pair, rej;
    bit seen_pair [M][M];
    otp_we = 0; otp_data = '0; nvm_we = 0; nvm_addr = '0; nvm_data = '0; init_req = 0;
    auth_start = 0; hd_tol = '0; chal_valid = 0; chal_data = '0; ra_valid = 0;
    ra_data = '0; ra_last = 0; rb_ready = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1 otp_we = 1'b1; otp_data = 32'hc0de_0002;
    @(posedge clk); #1 otp_we = 1'b0;

    for (int meff = 2; meff <= M; meff *= 2) begin
      srv = new(SEED);
      srv.select_set(200);
      srv.fold(meff);
      load_set(srv);
      foreach (seen_pair[i, j]) seen_pair[i][j] = 1'b0;
      rej = 0; bits_seen = 0; bits_same = 0;
      // m = 2 runs until the counter reaches the update threshold
      while (meff == 2 ? srv.counter < longint'(meff * meff * NMIN_ARB)
               : meff == M ? srv.counter < CRPS_M32
                           : srv.counter < longint'(AUTHS * N)) begin
        authenticate(srv, ok, pair);
        n_auth++;
        if (!ok) begin rej++; n_reject++; end
        if (pair >= 0) seen_pair[(pair / M) % meff][(pair % M) % meff] = 1'b1;
      end
      $display("m = %0d: %0d authentications, %0d rejected, %0d CRPs released, exact model of the bare PUF right on %0d of %0d released bits",
               meff, srv.counter / longint'(N), rej, srv.counter, bits_same, bits_seen);
      chk(bits_same * 10 >= bits_seen * 4 && bits_same * 10 <= bits_seen * 6,
          $sformatf("bare-PUF model accuracy %0d of %0d bits is between 40 %% and 60 %%",
                    bits_same, bits_seen));
      if (meff == M)
        foreach (seen_pair[i, j]) chk(seen_pair[i][j], $sformatf("key pair (%0d, %0d) drawn", i, j));
      if (meff == 2) begin
        for (int i = 0; i < meff; i++)
          for (int j = 0; j < meff; j++)
            chk(seen_pair[i][j], $sformatf("key pair (%0d, %0d) drawn", i, j));
        // the counter reached N_min^RSO: the server orders a new set
        old = srv;
        srv = new(SEED);
        srv.select_set(200);
        srv.fold(meff);
        load_set(srv);
        n_update++;
        authenticate(old, ok, pair);
        chk(!ok, "list from the replaced set is refused");
        if (!ok) n_stale_refused++;
        authenticate(srv, ok, pair);
        chk(ok, "list from the new set passes");
        if (ok) n_after_update++;
      end
    end

    $display("honest authentications %0d, rejected %0d, updates %0d, stale lists refused %0d",
             n_auth, n_reject, n_update, n_stale_refused);
    chk(n_reject * 20 <= n_auth, $sformatf("rejection rate %0d of %0d", n_reject, n_auth));
    chk(n_update > 0 && n_stale_refused > 0 && n_after_update > 0, "set update happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
