// rso_key_regs -- the obfuscation set K: m keys of n bits in volatile
// registers.
//
// Key k is the n-bit response of the PUF to the k-th group of n stored
// challenges; the key-set generator writes it once the group is done.  Two
// independent combinational read ports give Key_i (for the challenges) and
// Key_j (for the response) at the indices drawn from the TRNG.  `valid`
// tells whether the set has been (re)generated since reset; it is cleared
// by reset and by `clear` (start of an update) and set by `set_valid`.
//
// Interface timing: a write (we, waddr, wdata) takes effect at the clock
// edge; reads are combinational.  Keys are not reset (they are always
// rewritten before `valid` is set).  All of this is a plain choice for
// "registers" as the scheme names them.
module rso_key_regs
  import rso_pkg::*;
#(
  parameter int unsigned N  = N_STAGES,
  parameter int unsigned M  = M_KEYS,
  parameter int unsigned KW = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [KW-1:0] waddr,
  input  logic [N-1:0]  wdata,
  input  logic          clear,
  input  logic          set_valid,
  input  logic [KW-1:0] raddr_i,
  input  logic [KW-1:0] raddr_j,
  output logic [N-1:0]  key_i,
  output logic [N-1:0]  key_j,
  output logic          valid
);

  logic [N-1:0] keys [M];

  always_ff @(posedge clk) begin
    if (we) keys[waddr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         valid <= 1'b0;
    else if (clear)     valid <= 1'b0;
    else if (set_valid) valid <= 1'b1;
  end

  assign key_i = keys[raddr_i];
  assign key_j = keys[raddr_j];

endmodule
