// rso_tb_device_run -- one device build taken through enrollment, key
// generation and a run of honest authentications against the server model.
// It is a harness for testbenches that compare builds of different sizes.
//
// It instantiates rso_puf_top with N stages, M keys, R_a of N/2 bits and a
// noisy PUF model. It programs a freshly selected set of stable challenges,
// derives the keys and runs AUTHS authentications with threshold TOL on
// each half.
//
// It checks:
// * key generation takes M * N * (LAT + 3) cycles;
// * each authentication takes 5 + N * (LAT + 2) + M * M + 2 cycles when no
//   draw is discarded (M a power of two);
// * at most a fifth of the authentications are rejected, by the device or
//   by the server.
//
// `done` rises when the run is over. `checks` and `failures` then hold the
// counts for the parent to add to its own.
module rso_tb_device_run
  import rso_pkg::*;
  import rso_tb_server_pkg::*;
#(
  parameter int          N     = 64,
  parameter int          M     = 8,
  parameter int          TOL   = 6,
  parameter int          AUTHS = 8,
  parameter logic [31:0] SEED  = 32'h5eed_0001
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int RA_W = N / 2, RB_W = N - RA_W, ID_W = 32;
  localparam int LAT = 2, AW = $clog2(M * N), HW = $clog2(RA_W + 1);

  typedef rso_server #(N, M, RA_W) server_t;

  logic rst_n;
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

  rso_puf_top #(.N(N), .M(M), .PUF_SEED(SEED), .PUF_NOISE(8)) dut (
    .clk(clk), .rst_n(rst_n),
    .otp_prog_we(otp_we), .otp_prog_data(otp_data), .dev_id(dev_id), .id_locked(id_locked),
    .nvm_prog_we(nvm_we), .nvm_prog_addr(nvm_addr), .nvm_prog_data(nvm_data),
    .init_req(init_req), .keygen_busy(kg_busy), .keygen_done(kg_done), .keys_valid(keys_valid),
    .auth_start(auth_start), .hd_tol(hd_tol), .auth_busy(auth_busy), .auth_done(auth_done),
    .auth_status(auth_status),
    .chal_valid(chal_valid), .chal_ready(chal_ready), .chal_data(chal_data),
    .ra_valid(ra_valid), .ra_ready(ra_ready), .ra_data(ra_data), .ra_last(ra_last),
    .rb_valid(rb_valid), .rb_ready(rb_ready), .rb_data(rb_data));

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL n=%0d m=%0d: %s", N, M, what); end
  endtask

  initial begin
    server_t srv;
    int c0, rej, rbdist;
    bit seen_rb;
    logic [RB_W-1:0] rb;
    done = 1'b0; checks = 0; failures = 0; rst_n = 1'b0;
    otp_we = 0; otp_data = '0; nvm_we = 0; nvm_addr = '0; nvm_data = '0; init_req = 0;
    auth_start = 0; hd_tol = '0; chal_valid = 0; chal_data = '0; ra_valid = 0;
    ra_data = '0; ra_last = 0; rb_ready = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    srv = new(SEED);
    srv.select_set(200);
    for (int a = 0; a < M * N; a++) begin
      @(posedge clk); #1;
      nvm_we = 1'b1; nvm_addr = AW'(a); nvm_data = srv.store[a];
    end
    @(posedge clk); #1 nvm_we = 1'b0; init_req = 1'b1;
    @(posedge clk); c0 = cyc; #1 init_req = 1'b0;
    while (!kg_done) @(posedge clk);
    chk(cyc - c0 == M * N * (LAT + 3) + 1, $sformatf("key generation %0d cycles", cyc - c0));

    rej = 0;
    for (int r = 0; r < AUTHS; r++) begin
      srv.new_challenges();
      srv.candidates();
      @(posedge clk); #1 auth_start = 1'b1; hd_tol = HW'(TOL);
      @(posedge clk); c0 = cyc; #1 auth_start = 1'b0;
      for (int t = 0; t < N; t++) begin
        chal_valid = 1'b1; chal_data = srv.chals[t];
        do @(posedge clk); while (!chal_ready);
        #1;
      end
      chal_valid = 1'b0;
      for (int k = 0; k < M * M; k++) begin
        ra_valid = 1'b1; ra_last = (k == M * M - 1); ra_data = srv.ra(k);
        do @(posedge clk); while (!ra_ready);
        #1;
      end
      ra_valid = 1'b0; ra_last = 1'b0;
      seen_rb = 1'b0; rb = '0;
      rb_ready = 1'b1;
      do begin
        @(posedge clk);
        if (rb_valid) begin seen_rb = 1'b1; rb = rb_data; end
      end while (!auth_done && cyc - c0 < 100000);
      #1 rb_ready = 1'b0;
      rbdist = srv.best_rb_distance(rb);
      if (seen_rb)
        chk(cyc - c0 == 5 + N * (LAT + 2) + M * M + 2,
            $sformatf("authentication took %0d cycles", cyc - c0));
      if (!(auth_status == AUTH_PASS && seen_rb && rbdist <= TOL)) rej++;
    end
    $display("n = %0d, m = %0d, tolerance %0d per half: %0d of %0d authentications rejected",
             N, M, TOL, rej, AUTHS);
    chk(rej * 5 <= AUTHS, $sformatf("%0d of %0d rejected", rej, AUTHS));
    done = 1'b1;
  end
endmodule
