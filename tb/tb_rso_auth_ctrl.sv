// tb_rso_auth_ctrl -- device-side authentication with the real XOR, HD
// detector, key registers, TRNG model and PUF model (n = 32, m = 6, so the
// 3-bit TRNG sometimes draws an out-of-range index that must be redrawn).
//
// The testbench plays the server: it knows the keys and the PUF (reference
// delay model), computes all m*m candidate responses R_hat(i, j) and sends
// their upper halves as the R_a list.  Cases, repeated with fresh
// challenges: the full honest list (must pass and release the R_b of the
// pair the device drew); a list with every entry far from the true R_hat_a
// (must abort, nothing released); the true entry with exactly `tol` flipped
// bits (passes) and with tol + 1 (aborts).  Also checked: authentication
// before the key set is valid aborts with AUTH_NOKEYS; cycle counts of the
// draws (5 + 2 per rejected draw) and of the challenge phase (n * (LAT + 2)
// with a sender that never stalls); that several (i, j) pairs occur.
module tb_rso_auth_ctrl;
  import rso_pkg::*;
  localparam int N = 32, M = 6, KW = 3, RA_W = 16, RB_W = N - RA_W, HW = 5, LAT = 2;
  localparam logic [31:0] SEED = 32'h1357_9bdf;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, busy, done;
  auth_status_e status;
  logic [HW-1:0] tol;
  logic kv, kwe, kclear, kset;
  logic [KW-1:0] kwaddr, idx_i, idx_j;
  logic [N-1:0] kwdata, key_i, key_j;
  logic trng_req, trng_valid;
  logic [KW-1:0] trng_rnd;
  logic puf_req, puf_ack, puf_resp;
  logic [N-1:0] puf_chal;
  logic chal_valid, chal_ready, ra_valid, ra_ready, ra_last, rb_valid, rb_ready;
  logic [N-1:0] chal_data;
  logic [RA_W-1:0] ra_data;
  logic [RB_W-1:0] rb_data;

  rso_key_regs #(.N(N), .M(M)) u_keys (.clk(clk), .rst_n(rst_n), .we(kwe), .waddr(kwaddr),
    .wdata(kwdata), .clear(kclear), .set_valid(kset), .raddr_i(idx_i), .raddr_j(idx_j),
    .key_i(key_i), .key_j(key_j), .valid(kv));
  rso_trng #(.W(KW)) u_trng (.clk(clk), .rst_n(rst_n), .req(trng_req), .valid(trng_valid),
    .rnd(trng_rnd));
  arbiter_puf #(.N(N), .SEED(SEED), .LATENCY(LAT)) u_puf (.clk(clk), .rst_n(rst_n),
    .req(puf_req), .chal(puf_chal), .ack(puf_ack), .resp(puf_resp));
  rso_auth_ctrl #(.N(N), .M(M), .RA_W(RA_W)) dut (.clk(clk), .rst_n(rst_n), .start(start),
    .tol(tol), .busy(busy), .done(done), .status(status), .keys_valid(kv),
    .key_idx_i(idx_i), .key_idx_j(idx_j), .key_i(key_i), .key_j(key_j),
    .trng_req(trng_req), .trng_valid(trng_valid), .trng_rnd(trng_rnd),
    .puf_req(puf_req), .puf_chal(puf_chal), .puf_ack(puf_ack), .puf_resp(puf_resp),
    .chal_valid(chal_valid), .chal_ready(chal_ready), .chal_data(chal_data),
    .ra_valid(ra_valid), .ra_ready(ra_ready), .ra_data(ra_data), .ra_last(ra_last),
    .rb_valid(rb_valid), .rb_ready(rb_ready), .rb_data(rb_data));

  int checks = 0, failures = 0;
  int cyc = 0;
  int rejects = 0;
  logic [N-1:0] keys [M];
  logic [N-1:0] chals [N];
  logic [N-1:0] cand [M][M];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (trng_valid && 32'(trng_rnd) >= M) rejects <= rejects + 1;
  end

  function automatic logic ref_resp(input logic [N-1:0] c);
    int d;
    d = 0;
    for (int s = 0; s < N; s++) begin
      if (!c[N-1-s]) d =  d + stage_delay(SEED, s, 0) - stage_delay(SEED, s, 1);
      else           d = -d + stage_delay(SEED, s, 2) - stage_delay(SEED, s, 3);
    end
    return d < 0;
  endfunction

  // Server side: every possible R_hat for the current challenge set.
  task automatic server_candidates();
    logic [N-1:0] r;
    for (int i = 0; i < M; i++) begin
      for (int t = 0; t < N; t++) r[N-1-t] = ref_resp(chals[t] ^ keys[i]);
      for (int j = 0; j < M; j++) cand[i][j] = r ^ keys[j];
    end
  endtask

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [RA_W-1:0] flip(input logic [RA_W-1:0] v, input int nbits);
    for (int b = 0; b < nbits; b++) v[(b * 5 + 1) % RA_W] = ~v[(b * 5 + 1) % RA_W];
    return v;
  endfunction

  // mode 0: honest list; 1: all far; 2: true entry with tol flips; 3: tol + 1
  task automatic authenticate(input int mode, input int tolv, output int ii, output int jj);
    int c0, r0, rej0, sent;
    logic [RA_W-1:0] list [M * M];
    logic [RA_W-1:0] truth_a;
    logic [RB_W-1:0] truth_b;
    bit seen_rb;
    for (int t = 0; t < N; t++) chals[t] = N'({$urandom, $urandom});
    server_candidates();
    // start
    @(posedge clk); #1;
    tol = HW'(tolv); start = 1'b1; rej0 = rejects;
    @(posedge clk); c0 = cyc; #1;
    start = 1'b0;
    // challenges, never stalling
    for (int t = 0; t < N; t++) begin
      chal_valid = 1'b1; chal_data = chals[t];
      do @(posedge clk); while (!chal_ready);
      if (t == 0) begin
        chk(cyc - c0 == 5 + 2 * (rejects - rej0), $sformatf("draw phase %0d cycles, %0d rejects",
            cyc - c0, rejects - rej0));
        c0 = cyc;
      end
      #1;
    end
    chal_valid = 1'b0;
    ii = int'(idx_i); jj = int'(idx_j);
    truth_a = cand[ii][jj][N-1 -: RA_W];
    truth_b = cand[ii][jj][RB_W-1:0];
    // R_a list
    for (int k = 0; k < M * M; k++) begin
      list[k] = cand[k / M][k % M][N-1 -: RA_W];
      if (mode != 0) list[k] = flip(truth_a, tolv + 2 + (k % 5));
    end
    if (mode == 2) list[7] = flip(truth_a, tolv);
    if (mode == 3) list[7] = flip(truth_a, tolv + 1);
    sent = 0;
    for (int k = 0; k < M * M; k++) begin
      ra_valid = 1'b1; ra_data = list[k]; ra_last = (k == M * M - 1);
      do @(posedge clk); while (!ra_ready);
      if (k == 0) chk(cyc - c0 == N * (LAT + 2), $sformatf("challenge phase %0d cycles, expected %0d",
                      cyc - c0, N * (LAT + 2)));
      #1;
    end
    ra_valid = 1'b0; ra_last = 1'b0;
    // result
    seen_rb = 1'b0;
    rb_ready = 1'b1;
    do begin
      @(posedge clk);
      if (rb_valid) begin
        seen_rb = 1'b1;
        chk(rb_data === truth_b, $sformatf("R_b %h, expected %h (i=%0d j=%0d)", rb_data, truth_b, ii, jj));
      end
    end while (!done && cyc - c0 < 2000);
    #1 rb_ready = 1'b0;
    if (mode == 0 || mode == 2) begin
      chk(status == AUTH_PASS && seen_rb, $sformatf("mode %0d should pass", mode));
    end else begin
      chk(status == AUTH_NOMATCH && !seen_rb, $sformatf("mode %0d should abort", mode));
    end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ii, jj, npairs, rej_total;
    bit pairs [M][M];
    start = 0; tol = '0; kwe = 0; kclear = 0; kset = 0; kwaddr = '0; kwdata = '0;
    chal_valid = 0; chal_data = '0; ra_valid = 0; ra_data = '0; ra_last = 0; rb_ready = 0;
    foreach (pairs[a, b]) pairs[a][b] = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    // no keys yet
    @(posedge clk); #1 start = 1'b1;
    @(posedge clk); #1 start = 1'b0;
    chk(done && status == AUTH_NOKEYS && !busy, "abort without keys");
    // load a key set
    for (int k = 0; k < M; k++) begin
      keys[k] = N'({$urandom, $urandom});
      @(posedge clk); #1 kwe = 1'b1; kwaddr = KW'(k); kwdata = keys[k];
    end
    @(posedge clk); #1 kwe = 1'b0; kset = 1'b1;
    @(posedge clk); #1 kset = 1'b0;
    for (int r = 0; r < 16; r++) begin
      authenticate(r % 4, 2, ii, jj);
      pairs[ii][jj] = 1'b1;
    end
    npairs = 0;
    foreach (pairs[a, b]) npairs += pairs[a][b];
    rej_total = rejects;
    $display("distinct (i,j) pairs %0d, rejected draws %0d", npairs, rej_total);
    chk(npairs >= 5, "key pairs vary");
    chk(rej_total > 0, "an out-of-range draw was rejected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
