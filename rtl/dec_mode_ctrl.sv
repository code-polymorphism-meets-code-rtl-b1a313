// dec_mode_ctrl: decides whether the instruction stream is decrypted.
//
// enable_dec and disable_dec do not switch the mode at once: they set a
// pending bit, and the next taken control-flow instruction copies the pending
// bit into the active bit, so the branch target is fetched in the new mode.
// This is how a secured function calls a plaintext one and comes back
// (disable_dec; call; ... ; enable_dec; j <encrypted block>). The behaviour
// follows the architecture's ISA table; the reset mode (DEC_AT_RESET) and the
// rule that a same-cycle enable/disable applies to a same-cycle control flow
// are this design's choices.
// Outputs: dec_active (mode of the current stream), dec_pending, and
// target_dec, the mode of the stream that starts at a redirect in this cycle.
module dec_mode_ctrl #(
  parameter bit DEC_AT_RESET = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic set_enable,
  input  logic set_disable,
  input  logic cf_taken,
  output logic dec_active,
  output logic dec_pending,
  output logic target_dec
);

  logic pending_d;

  always_comb begin
    pending_d = dec_pending;
    if (set_enable)  pending_d = 1'b1;
    if (set_disable) pending_d = 1'b0;
  end

  assign target_dec = pending_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dec_active  <= DEC_AT_RESET;
      dec_pending <= DEC_AT_RESET;
    end else begin
      dec_pending <= pending_d;
      if (cf_taken) dec_active <= pending_d;
    end
  end

  // One instruction is executed at a time: both set requests never coincide.
  assert property (@(posedge clk) disable iff (!rst_n) !(set_enable && set_disable));

endmodule
