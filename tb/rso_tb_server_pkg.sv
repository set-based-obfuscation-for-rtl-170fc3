// rso_tb_server_pkg -- the server side of RSO authentication, for the
// top-level testbenches.
//
// rso_server models what the verifier holds after enrollment: an exact
// parametric model of the device's PUF (here the additive delay model
// with the same instance delays, standing for the soft model a real server
// trains), the obfuscation set derived from the stored challenges, and the
// per-device CRP counter that triggers a set update.  It computes the m*m
// candidate responses for a challenge set and checks a returned R_hat_b
// against all candidate R_b values with the Hamming-distance threshold.
// `fold` makes a set of fewer distinct keys on a full-size build, and
// `best_rb_index` tells which key pair (i, j) a returned R_hat_b came from.
package rso_tb_server_pkg;
  import rso_pkg::*;

  class rso_server #(int N = 64, int M = 32, int RA_W = N / 2);
    localparam int RB_W = N - RA_W;
    int               dly [N][4];
    logic [N-1:0]     store [M * N];   // stored challenges C_ob
    logic [N-1:0]     keys [M];        // R_ob, the set K
    logic [N-1:0]     chals [N];       // current challenge set [C]
    logic [N-1:0]     cand [M * M];    // candidate R_hat, index i*M + j
    longint unsigned  counter;         // CRPs released (Counter_i)

    function new(logic [31:0] seed);
      for (int s = 0; s < N; s++)
        for (int k = 0; k < 4; k++) dly[s][k] = stage_delay(seed, s, k);
      counter = 0;
    endfunction

    // Upper-minus-lower arrival time difference, recursive form.
    function int delta(logic [N-1:0] c);
      int d;
      d = 0;
      for (int s = 0; s < N; s++) begin
        if (!c[N-1-s]) d =  d + dly[s][0] - dly[s][1];
        else           d = -d + dly[s][2] - dly[s][3];
      end
      return d;
    endfunction

    function logic resp(logic [N-1:0] c);
      return delta(c) < 0;
    endfunction

    // Test-time selection of stable CRPs: keep challenges whose delay
    // difference is at least `margin` away from the decision point.
    function void select_set(int margin);
      logic [N-1:0] c;
      int d;
      for (int a = 0; a < M * N; a++) begin
        do begin
          c = N'({$urandom, $urandom});
          d = delta(c);
        end while (d < margin && d > -margin);
        store[a] = c;
      end
      for (int k = 0; k < M; k++)
        for (int t = 0; t < N; t++) keys[k][N-1-t] = resp(store[k * N + t]);
    endfunction

    // A set of only `meff` distinct keys on a build with M key slots: group
    // k of the stored challenges becomes a copy of group k mod meff, so the
    // uniform draw over M slots is uniform over the meff distinct keys.
    function void fold(int meff);
      for (int k = meff; k < M; k++)
        for (int t = 0; t < N; t++) store[k * N + t] = store[(k % meff) * N + t];
      for (int k = 0; k < M; k++)
        for (int t = 0; t < N; t++) keys[k][N-1-t] = resp(store[k * N + t]);
    endfunction

    function void new_challenges();
      for (int t = 0; t < N; t++) chals[t] = N'({$urandom, $urandom});
      counter += longint'(N);
    endfunction

    function void candidates();
      logic [N-1:0] r;
      for (int i = 0; i < M; i++) begin
        for (int t = 0; t < N; t++) r[N-1-t] = resp(chals[t] ^ keys[i]);
        for (int j = 0; j < M; j++) cand[i * M + j] = r ^ keys[j];
      end
    endfunction

    function logic [RA_W-1:0] ra(int k);
      return cand[k][N-1 -: RA_W];
    endfunction

    // Smallest Hamming distance between rb and any candidate R_b.
    function int best_rb_distance(logic [RB_W-1:0] rb);
      int best, d;
      logic [RB_W-1:0] x;
      best = RB_W + 1;
      for (int k = 0; k < M * M; k++) begin
        x = rb ^ cand[k][RB_W-1:0];
        d = $countones(x);
        if (d < best) best = d;
      end
      return best;
    endfunction

    // Candidate index i*M + j whose R_b is nearest to rb (first on ties).
    function int best_rb_index(logic [RB_W-1:0] rb);
      int best, bk, d;
      best = RB_W + 1; bk = 0;
      for (int k = 0; k < M * M; k++) begin
        d = $countones(rb ^ cand[k][RB_W-1:0]);
        if (d < best) begin best = d; bk = k; end
      end
      return bk;
    endfunction
  endclass

endpackage
