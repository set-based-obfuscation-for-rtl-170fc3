// tb_rso_puf_top_full -- the device at its default size (n = 64 stages,
// m = 32 keys, R_a and R_b of 32 bits each, ideal noiseless PUF model),
// taken through complete operations against the server model: identifier
// programming, loading all 2048 stored challenges, key-set generation
// (checked to take m * n * (LAT + 3) cycles), three honest authentications
// (each checked to take 5 + n * (LAT + 2) + m * m + 2 cycles from start to done)
// with the full list of 1024 candidate R_a values (must pass with an
// R_hat_b equal to a candidate R_b) and one forged list (must abort).
module tb_rso_puf_top_full;
  import rso_pkg::*;
  import rso_tb_server_pkg::*;

  localparam int N = N_STAGES, M = M_KEYS, RA_W = N / 2, RB_W = N - RA_W, ID_W = 32;
  localparam int LAT = 2, AW = $clog2(M * N), HW = $clog2(RA_W + 1);
  localparam int TOL = 5;
  localparam logic [31:0] SEED = 32'h5eed_0001;   // the top's default PUF instance

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

  rso_puf_top dut (
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
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic authenticate(server_t s, input bit forged);
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
      ra_data = forged ? RA_W'({$urandom, $urandom}) : s.ra(k);
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
    $display("authentication %s: status %s after %0d cycles", forged ? "(forged list)" : "",
             auth_status.name(), cyc - c0);
    chk(cyc - c0 == 5 + N * (LAT + 2) + M * M + (forged ? 1 : 2),
        $sformatf("authentication took %0d cycles", cyc - c0));
    if (!forged) begin
      rbdist = s.best_rb_distance(rb);
      chk(auth_status == AUTH_PASS && seen_rb, "honest authentication passes");
      chk(rbdist == 0, $sformatf("R_hat_b is %0d bits from the nearest R_b", rbdist));
    end else begin
      chk(auth_status == AUTH_NOMATCH && !seen_rb, "forged list aborts");
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    server_t srv;
    int c0;
    otp_we = 0; otp_data = '0; nvm_we = 0; nvm_addr = '0; nvm_data = '0; init_req = 0;
    auth_start = 0; hd_tol = '0; chal_valid = 0; chal_data = '0; ra_valid = 0;
    ra_data = '0; ra_last = 0; rb_ready = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1 otp_we = 1'b1; otp_data = 32'hc0de_0001;
    @(posedge clk); #1 otp_we = 1'b0;
    chk(dev_id == 32'hc0de_0001 && id_locked, "identifier programmed");
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
    #1 chk(keys_valid, "key set valid");
    for (int r = 0; r < 3; r++) authenticate(srv, 1'b0);
    authenticate(srv, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
