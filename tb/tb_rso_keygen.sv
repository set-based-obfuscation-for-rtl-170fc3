// tb_rso_keygen -- key-set generation with the real NVM, key registers and
// PUF model (n = 16, m = 4).  The stored challenges are random; each
// expected key bit is the reference PUF response (recursive delay
// difference) to the stored challenge, first challenge in the MSB.  Checks:
// the keys, the valid flag (low during generation, high after), the cycle
// count (done seen m * n * (LAT + 3) + 1 edges after start), that a second start during generation is
// ignored, and that an update after rewriting part of the NVM changes
// exactly the affected keys.
module tb_rso_keygen;
  import rso_pkg::*;
  localparam int N = 16, M = 4, LAT = 2, KW = 2, AW = $clog2(M * N);
  localparam logic [31:0] SEED = 32'h0bad_cafe;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, busy, done;
  logic nvm_rd_en, nvm_we;
  logic [AW-1:0] nvm_rd_addr, nvm_waddr;
  logic [N-1:0] nvm_rd_data, nvm_wdata;
  logic puf_req, puf_ack, puf_resp;
  logic [N-1:0] puf_chal;
  logic key_we, key_clear, key_set_valid, key_valid;
  logic [KW-1:0] key_waddr, ri, rj;
  logic [N-1:0] key_wdata, ki, kj;

  rso_nvm #(.N(N), .M(M)) u_nvm (.clk(clk), .prog_we(nvm_we), .prog_addr(nvm_waddr),
    .prog_data(nvm_wdata), .rd_en(nvm_rd_en), .rd_addr(nvm_rd_addr), .rd_data(nvm_rd_data));
  arbiter_puf #(.N(N), .SEED(SEED), .LATENCY(LAT)) u_puf (.clk(clk), .rst_n(rst_n),
    .req(puf_req), .chal(puf_chal), .ack(puf_ack), .resp(puf_resp));
  rso_key_regs #(.N(N), .M(M)) u_keys (.clk(clk), .rst_n(rst_n), .we(key_we),
    .waddr(key_waddr), .wdata(key_wdata), .clear(key_clear), .set_valid(key_set_valid),
    .raddr_i(ri), .raddr_j(rj), .key_i(ki), .key_j(kj), .valid(key_valid));
  rso_keygen #(.N(N), .M(M)) dut (.clk(clk), .rst_n(rst_n), .start(start), .busy(busy),
    .done(done), .nvm_rd_en(nvm_rd_en), .nvm_rd_addr(nvm_rd_addr), .nvm_rd_data(nvm_rd_data),
    .puf_req(puf_req), .puf_chal(puf_chal), .puf_ack(puf_ack), .puf_resp(puf_resp),
    .key_we(key_we), .key_waddr(key_waddr), .key_wdata(key_wdata), .key_clear(key_clear),
    .key_set_valid(key_set_valid));

  logic [N-1:0] store [M * N];
  int checks = 0, failures = 0;

  function automatic logic ref_resp(input logic [N-1:0] c);
    int d;
    d = 0;
    for (int s = 0; s < N; s++) begin
      if (!c[N-1-s]) d =  d + stage_delay(SEED, s, 0) - stage_delay(SEED, s, 1);
      else           d = -d + stage_delay(SEED, s, 2) - stage_delay(SEED, s, 3);
    end
    return d < 0;
  endfunction

  function automatic logic [N-1:0] ref_key(input int k);
    logic [N-1:0] r;
    for (int t = 0; t < N; t++) r[N-1-t] = ref_resp(store[k * N + t]);
    return r;
  endfunction

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic prog_word(input int a, input logic [N-1:0] v);
    store[a] = v;
    @(negedge clk);
    nvm_we = 1'b1; nvm_waddr = AW'(a); nvm_wdata = v;
    @(negedge clk);
    nvm_we = 1'b0;
  endtask

  task automatic run_keygen(input bit poke_start);
    int cyc;
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    cyc = 0;
    do begin
      @(posedge clk);
      cyc++;
      if (cyc == 5) begin
        chk(!key_valid && busy, "valid low while generating");
        if (poke_start) start <= 1'b1;
      end
      if (cyc == 6) start <= 1'b0;
    end while (!done && cyc < 100000);
    chk(cyc == M * N * (LAT + 3) + 1, $sformatf("generation took %0d cycles, expected %0d",
        cyc, M * N * (LAT + 3) + 1));
    @(posedge clk);
    #1;
    chk(key_valid && !busy, "valid after generation");
  endtask

  task automatic check_keys();
    for (int k = 0; k < M; k++) begin
      ri = KW'(k); rj = KW'(M - 1 - k);
      #1;
      chk(ki === ref_key(k), $sformatf("key %0d = %h, expected %h", k, ki, ref_key(k)));
      chk(kj === ref_key(M - 1 - k), "second read port");
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] old3;
    start = 0; nvm_we = 0; nvm_waddr = '0; nvm_wdata = '0; ri = '0; rj = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < M * N; a++) prog_word(a, N'($urandom));
    run_keygen(1'b1);
    check_keys();
    old3 = ref_key(3);
    // set update: new challenges for key 3 only
    for (int t = 0; t < N; t++) prog_word(3 * N + t, N'($urandom));
    run_keygen(1'b0);
    check_keys();
    ri = KW'(3);
    #1 chk(ki !== old3, "updated key 3 differs from the old one");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
