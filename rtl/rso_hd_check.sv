// rso_hd_check -- Hamming-distance detector for the device-side match.
//
// Computes HD(a, b), the number of positions where the two L-bit strings
// differ (popcount of a xor b), and `match` = HD <= tol.  The device uses it
// to test FHD(R_hat_a, R_a) <= tau against each R_a the server sends, with
// tol = floor(tau * L) bit flips: the fractional threshold tau of the
// scheme becomes an integer count of allowed flips, set at run time, which
// is this design's encoding.
//
// Purely combinational (a popcount adder tree after synthesis).
module rso_hd_check #(
  parameter int unsigned L  = 32,                 // bits compared (n/2)
  parameter int unsigned HW = $clog2(L + 1)
) (
  input  logic [L-1:0]  a,
  input  logic [L-1:0]  b,
  input  logic [HW-1:0] tol,
  output logic [HW-1:0] hd,
  output logic          match
);

  always_comb begin
    hd = '0;
    for (int i = 0; i < int'(L); i++)
      hd = hd + HW'(a[i] ^ b[i]);
    match = (hd <= tol);
  end

endmodule
