// rso_xor_obf -- the two XOR layers of random set-based obfuscation.
//
// Challenge side: every challenge C_t of the server's set [C] is XORed with
// Key_i before it reaches the PUF, C'_t = C_t xor Key_i.  Response side:
// the n-bit raw PUF response R' (one bit per obfuscated challenge) is XORed
// with Key_j, R_hat = R' xor Key_j.  Because the keys are themselves stable
// PUF responses, XOR leaves the reliability of the PUF unchanged.
//
// Purely combinational, no clock.  This is exactly the scheme's equations;
// nothing in it is a choice of this design beyond packaging both XORs in
// one block.
module rso_xor_obf
  import rso_pkg::*;
#(
  parameter int unsigned N = N_STAGES
) (
  input  logic [N-1:0] chal,      // C_t from the server
  input  logic [N-1:0] key_i,     // Key_i
  output logic [N-1:0] chal_obf,  // C'_t, to the PUF
  input  logic [N-1:0] resp_raw,  // R'
  input  logic [N-1:0] key_j,     // Key_j
  output logic [N-1:0] resp_obf   // R_hat
);

  always_comb begin
    chal_obf = chal ^ key_i;
    resp_obf = resp_raw ^ key_j;
  end

endmodule
