// rso_otp_id -- one-time programmable storage of the device identifier id_i.
//
// At enrollment the server assigns the device a serial number, which is
// burnt into e-fuses; at every authentication the device first sends it to
// the server.  This block models the fuse array's logic behaviour: a fuse
// starts intact (0) and programming can only blow fuses (0 -> 1), so a
// programming cycle ORs prog_data into the stored value.  After the first
// programming cycle the array is locked and later writes are ignored, which
// makes the identifier write-once.  Reset clears neither the fuses nor the
// lock: they are non-volatile.  The power-on (manufactured) state is all
// zeros and unlocked.
//
// Interface: prog_we with prog_data for one cycle programs; `id` and
// `locked` show the stored state continuously.  The identifier width and
// the write-once lock are this design's choices; the scheme only says the
// identifier is kept in one-time programmable storage made with e-fuses.
module rso_otp_id #(
  parameter int unsigned ID_W = 32
) (
  input  logic            clk,
  input  logic            prog_we,
  input  logic [ID_W-1:0] prog_data,
  output logic [ID_W-1:0] id,
  output logic            locked
);

  logic [ID_W-1:0] fuse = '0;
  logic            lock = 1'b0;

  always_ff @(posedge clk) begin
    if (prog_we && !lock) begin
      fuse <= fuse | prog_data;
      lock <= 1'b1;
    end
  end

  assign id     = fuse;
  assign locked = lock;

endmodule
