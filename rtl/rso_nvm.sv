// rso_nvm -- challenge store C_ob of the RSO device (the "NVM in secure
// zone").
//
// It holds the m x n obfuscation challenges picked from stable CRPs at
// test time: word k*n + t is challenge t of key k (k = 0..m-1,
// t = 0..n-1), each n bits wide.  With n = 64 and m = 32 that is 2048
// words of 64 bits (16 KiB); the scheme quotes 8 x 64 x 64 bits = 4 KB for
// m = 8.  The storage is written here as a plain memory array standing for
// the non-volatile macro: content is not cleared by reset, and a simulation
// must program it before it is read.
//
// Interface: a program port (prog_we, prog_addr, prog_data), used by the
// tester at enrollment and by a set update, writes one word per cycle.  The
// read port is synchronous: rd_en with rd_addr in one cycle gives rd_data
// in the next, held until the next read.
// The secure zone and its direct-memory-access path are only named by the
// scheme; here they reduce to the fact that only the key-set generator
// reads this memory and nothing reads it from outside the device.
module rso_nvm
  import rso_pkg::*;
#(
  parameter int unsigned N     = N_STAGES,
  parameter int unsigned M     = M_KEYS,
  parameter int unsigned DEPTH = M * N,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          prog_we,
  input  logic [AW-1:0] prog_addr,
  input  logic [N-1:0]  prog_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [N-1:0]  rd_data
);

  logic [N-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (prog_we) mem[prog_addr] <= prog_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
