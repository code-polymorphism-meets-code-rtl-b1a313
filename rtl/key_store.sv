// key_store: on-chip storage of the instruction-cipher key.
//
// The key must never be visible to software: it is written through a
// provisioning port and read only by the two cipher instances. The first
// prog_valid after reset stores prog_key and locks the register; later writes
// are ignored until the next reset. That write-once policy and the zero reset
// value are this design's choices; the architecture only asks for key storage
// that only the processor can access.
// Timing: key and locked change one cycle after the accepted prog_valid.
module key_store
  import polen_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             prog_valid,
  input  logic [KEY_W-1:0] prog_key,
  output logic [KEY_W-1:0] key,
  output logic             locked
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      key    <= '0;
      locked <= 1'b0;
    end else if (prog_valid && !locked) begin
      key    <= prog_key;
      locked <= 1'b1;
    end
  end

endmodule
