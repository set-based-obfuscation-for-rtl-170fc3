// rso_pkg -- shared constants, types and helper functions of the random
// set-based obfuscation (RSO) strong-PUF device.
//
// The main configuration is a 64-stage Arbiter PUF (n = 64 challenge bits,
// n challenges per authentication, so an n-bit response) with a set of
// m = 32 keys.  These two numbers are the headline configuration of the
// scheme; every module takes them as parameters with these defaults.
//
// The package also holds the deterministic "manufacturing variation"
// function used by the Arbiter PUF behavioural model: each stage delay of a
// PUF instance is derived from an instance seed by an integer hash.  The
// hash and the delay spread are choices of this model, not of the scheme.
package rso_pkg;

  // n: number of PUF stages = challenge width = response width
  parameter int unsigned N_STAGES = 64;
  // m: number of keys in the obfuscation set K
  parameter int unsigned M_KEYS   = 32;

  // Result codes of one device-side authentication attempt.
  typedef enum logic [1:0] {
    AUTH_PASS    = 2'd0,  // some R_a matched R_hat_a: R_hat_b released
    AUTH_NOMATCH = 2'd1,  // no R_a within tolerance: abort, nothing released
    AUTH_NOKEYS  = 2'd2   // key set not generated yet: abort
  } auth_status_e;

  // Nominal stage delay and +/- spread of the behavioural PUF model
  // (arbitrary time units).
  parameter int DELAY_NOM    = 1000;
  parameter int DELAY_SPREAD = 50;

  // 32-bit integer mixer (finaliser of a well-known hash); gives the
  // per-instance pseudo-random process variation.
  function automatic logic [31:0] mix32(input logic [31:0] x);
    logic [31:0] h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h7feb352d;
    h = h ^ (h >> 15);
    h = h * 32'h846ca68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // Delay of stage `stage` (0-based), path `k` of PUF instance `seed`:
  //   k = 0: upper input -> upper output (uncrossed)
  //   k = 1: lower input -> lower output (uncrossed)
  //   k = 2: lower input -> upper output (crossed)
  //   k = 3: upper input -> lower output (crossed)
  function automatic int stage_delay(input logic [31:0] seed,
                                     input int unsigned stage,
                                     input int unsigned k);
    logic [31:0] h;
    int          var_part;
    h = mix32(seed ^ mix32(32'(stage) * 32'd4 + 32'(k) + 32'h9e3779b9));
    var_part = int'(h % 32'(2 * DELAY_SPREAD + 1)) - DELAY_SPREAD;
    return DELAY_NOM + var_part;
  endfunction

endpackage
