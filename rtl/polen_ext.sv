// polen_ext: code-encryption extension of an in-order RV32IM pipeline.
//
// Programs are stored encrypted with the Trivium stream cipher under a key
// that never leaves the chip. Each basic block starts with a three-word IV;
// the fetch stage reads that IV whenever a control-flow instruction is taken,
// re-initialises its cipher and then decrypts one instruction per cycle.
// A code generator running on the core (used to build polymorphic instances
// at run time) creates encrypted code with two extension instructions:
// initBB writes a fresh IV into memory and initialises a second cipher in the
// execute stage, enc_word encrypts one instruction word. enable_dec and
// disable_dec switch decryption on or off at the next taken control flow,
// which lets encrypted code call plaintext functions.
//
// The host pipeline is outside this module; its signals are ports:
//   imem_*    fetched words (valid/ready) from instruction memory, in order;
//   instr_*   plaintext instructions (valid/ready) toward decode;
//   cf_taken  a taken branch/jump/call/return: the next imem word is the
//             first word at the target;
//   ex_*      the instruction in execute and its rs1 value; ex_is_polen says
//             it belongs to the extension, ex_done says it completes this
//             cycle (the host holds it in execute until then), ex_result is
//             its write-back value;
//   st_*      store port for the IV words written by initBB;
//   key_prog_*, seed_*  key provisioning and entropy for the IV generator;
//   dec_active, dec_pending, fetch_busy, enc_ready  mode and cipher status.
// Timing: a taken control flow into encrypted code costs 3 IV-word fetches
// plus 1152/DEC_W stall cycles; initBB takes 3 cycles, and an enc_word issued
// within 1152/ENC_W cycles of it waits for the cipher.
// The split into a fetch-stage and an execute-stage cipher follows the
// architecture's drawings; the port-level protocol is this design's own.
module polen_ext
  import polen_pkg::*;
#(
  parameter int unsigned DEC_W        = 32,
  parameter int unsigned ENC_W        = 32,
  parameter bit          DEC_AT_RESET = 1'b0
) (
  input  logic              clk,
  input  logic              rst_n,
  // key provisioning and entropy
  input  logic              key_prog_valid,
  input  logic [KEY_W-1:0]  key_prog,
  output logic              key_locked,
  input  logic              seed_valid,
  input  logic [SEED_W-1:0] seed,
  // fetch
  input  logic              imem_valid,
  input  logic [XLEN-1:0]   imem_data,
  output logic              imem_ready,
  output logic              instr_valid,
  output logic [XLEN-1:0]   instr,
  input  logic              instr_ready,
  input  logic              cf_taken,
  // execute
  input  logic              ex_valid,
  input  logic [XLEN-1:0]   ex_instr,
  input  logic [XLEN-1:0]   ex_rs1,
  output logic              ex_is_polen,
  output logic              ex_done,
  output logic [XLEN-1:0]   ex_result,
  // IV stores
  output logic              st_valid,
  output logic [XLEN-1:0]   st_addr,
  output logic [XLEN-1:0]   st_data,
  input  logic              st_ready,
  // status
  output logic              dec_active,
  output logic              dec_pending,
  output logic              fetch_busy,
  output logic              enc_ready
);

  logic [KEY_W-1:0] key;
  polen_op_e        op;
  logic             is_polen;
  logic [4:0]       rd_unused, rs1_unused;
  logic             target_dec, fetch_dec_on;
  logic             cr_valid, cr_ready;

  key_store u_key (
    .clk, .rst_n,
    .prog_valid (key_prog_valid),
    .prog_key   (key_prog),
    .key,
    .locked     (key_locked)
  );

  polen_isa_decoder u_dec (
    .instr (ex_instr),
    .op, .is_polen,
    .rd    (rd_unused),
    .rs1   (rs1_unused)
  );

  dec_mode_ctrl #(.DEC_AT_RESET(DEC_AT_RESET)) u_mode (
    .clk, .rst_n,
    .set_enable  (ex_valid && op == PX_ENABLE_DEC),
    .set_disable (ex_valid && op == PX_DISABLE_DEC),
    .cf_taken,
    .dec_active, .dec_pending, .target_dec
  );

  fetch_decrypt #(.W(DEC_W), .DEC_AT_RESET(DEC_AT_RESET)) u_fetch (
    .clk, .rst_n, .key,
    .redirect     (cf_taken),
    .redirect_dec (target_dec),
    .in_valid     (imem_valid),
    .in_data      (imem_data),
    .in_ready     (imem_ready),
    .out_valid    (instr_valid),
    .out_instr    (instr),
    .out_ready    (instr_ready),
    .dec_on       (fetch_dec_on),
    .busy         (fetch_busy)
  );

  assign cr_valid = ex_valid && (op == PX_INITBB || op == PX_ENC_WORD);

  exec_crypto #(.W(ENC_W)) u_exec (
    .clk, .rst_n, .key, .seed_valid, .seed,
    .req_valid (cr_valid),
    .req_op    (op),
    .req_a     (ex_rs1),
    .req_ready (cr_ready),
    .res_data  (ex_result),
    .st_valid, .st_addr, .st_data, .st_ready,
    .enc_ready
  );

  assign ex_is_polen = is_polen;
  assign ex_done     = ex_valid && is_polen && (cr_valid ? cr_ready : 1'b1);

  // The fetch unit and the mode controller agree on the current stream's mode.
  assert property (@(posedge clk) disable iff (!rst_n) fetch_dec_on == dec_active);

endmodule
