// polen_pkg: types and constants shared by the code-encryption extension.
//
// The extension decrypts instructions in the fetch stage and encrypts freshly
// generated instructions in the execute stage with the Trivium stream cipher
// (80-bit key, 80-bit IV, 288-bit state, 1152 warm-up rounds). Every basic
// block of encrypted code starts with a three-word IV slot. The four extension
// instructions and their custom-0 encodings below are this design's choice;
// the instruction names come from the architecture description.
package polen_pkg;

  localparam int unsigned XLEN        = 32;
  localparam int unsigned KEY_W       = 80;
  localparam int unsigned IV_W        = 80;
  localparam int unsigned STATE_W     = 288;
  localparam int unsigned INIT_ROUNDS = 4 * STATE_W;  // 1152
  localparam int unsigned IV_WORDS    = 3;             // IV slot length in 32-bit words
  localparam int unsigned SEED_W      = 128;

  // RISC-V custom-0 major opcode carries the extension.
  localparam logic [6:0] OPC_CUSTOM0 = 7'b0001011;

  typedef enum logic [2:0] {
    PX_NONE        = 3'd0,
    PX_INITBB      = 3'd1,  // new IV -> memory[rs1..rs1+8], I_k(IV)
    PX_ENC_WORD    = 3'd2,  // rd <- rs1 ^ keystream, T_enc state update
    PX_ENABLE_DEC  = 3'd3,  // decrypt from the next taken control flow on
    PX_DISABLE_DEC = 3'd4   // plaintext from the next taken control flow on
  } polen_op_e;

  // funct3 values inside custom-0 (funct7 = 0)
  localparam logic [2:0] F3_INITBB      = 3'b000;
  localparam logic [2:0] F3_ENC_WORD    = 3'b001;
  localparam logic [2:0] F3_ENABLE_DEC  = 3'b010;
  localparam logic [2:0] F3_DISABLE_DEC = 3'b011;

  typedef logic [STATE_W-1:0] triv_state_t;

  // State after loading key and IV (bit i of the vector is s_(i+1)).
  function automatic triv_state_t triv_load(input logic [KEY_W-1:0] key,
                                            input logic [IV_W-1:0]  iv);
    triv_state_t s;
    s = '0;
    s[KEY_W-1:0]      = key;     // s1..s80
    s[93+IV_W-1:93]   = iv;      // s94..s173
    s[287:285]        = 3'b111;  // s286..s288
    return s;
  endfunction

  // One Trivium round: returns the next state, z is the output bit.
  function automatic triv_state_t triv_round(input triv_state_t s, output logic z);
    logic t1, t2, t3;
    triv_state_t n;
    t1 = s[65]  ^ s[92];
    t2 = s[161] ^ s[176];
    t3 = s[242] ^ s[287];
    z  = t1 ^ t2 ^ t3;
    t1 = t1 ^ (s[90]  & s[91])  ^ s[170];
    t2 = t2 ^ (s[174] & s[175]) ^ s[263];
    t3 = t3 ^ (s[285] & s[286]) ^ s[68];
    n[92:0]    = {s[91:0],    t3};
    n[176:93]  = {s[175:93],  t1};
    n[287:177] = {s[286:177], t2};
    return n;
  endfunction

  // IV slot word i (0..2) of an 80-bit IV.
  function automatic logic [XLEN-1:0] iv_word(input logic [IV_W-1:0] iv, input int unsigned i);
    case (i)
      0:       return iv[31:0];
      1:       return iv[63:32];
      default: return {16'h0000, iv[79:64]};
    endcase
  endfunction

endpackage
