// trivium_core: Trivium keystream generator used as the instruction cipher.
//
// Implements the abstract primitive (I, T_enc, T_dec) of the architecture:
// I_k(IV) loads key and IV into the 288-bit state and runs the 1152 warm-up
// rounds, W rounds per clock; T_enc/T_dec XOR a 32-bit word with the keystream
// word ks of the current state, and `step` advances the state by 32 rounds.
// The state register is fed through a mux that picks either the W-round chain
// (initialisation) or the 32-round chain (one instruction), as in the fetch and
// execute stage drawings.
//
// Interface / timing:
//   init_req  samples iv; the load and the first W rounds happen in that clock
//             edge, so ready rises 1152/W cycles after init_req (36 cycles for
//             W=32, 9 for W=128). init_req may restart a running init.
//   ready     ks is valid; step (only honoured while ready) consumes ks.
//   ks[j]     is keystream bit z_(j+1) of the current state.
// W must be a multiple of 32 dividing 1152. The round function follows the
// eStream Trivium specification; the bit order of key, IV and keystream is
// this design's own (key bit i -> s_(i+1), IV bit i -> s_(94+i)).
module trivium_core
  import polen_pkg::*;
#(
  parameter int unsigned W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [KEY_W-1:0]  key,
  input  logic              init_req,
  input  logic [IV_W-1:0]   iv,
  input  logic              step,
  output logic              ready,
  output logic [XLEN-1:0]   ks
);

  localparam int unsigned INIT_CYCLES = INIT_ROUNDS / W;
  localparam int unsigned CNT_W       = $clog2(INIT_CYCLES + 1);

  triv_state_t         state_q;
  logic [CNT_W-1:0]    cnt_q;      // init cycles still to run
  logic                valid_q;    // a key/IV has been loaded

  triv_state_t         chain_in;
  triv_state_t         st_w;       // state after W rounds
  triv_state_t         st_32;      // state after 32 rounds
  logic [XLEN-1:0]     z32;

  // During the init_req cycle the chain starts from the freshly loaded state.
  assign chain_in = init_req ? triv_load(key, iv) : state_q;

  always_comb begin
    triv_state_t s;
    logic        z;
    s     = chain_in;
    st_32 = chain_in;
    z32   = '0;
    for (int unsigned r = 0; r < W; r++) begin
      s = triv_round(s, z);
      if (r < XLEN) z32[r] = z;
      if (r == XLEN - 1) st_32 = s;
    end
    st_w = s;
  end

  assign ready = valid_q && (cnt_q == '0);
  assign ks    = z32;   // meaningful while ready (chain_in == state_q)

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= '0;
      cnt_q   <= '0;
      valid_q <= 1'b0;
    end else if (init_req) begin
      state_q <= st_w;
      cnt_q   <= CNT_W'(INIT_CYCLES - 1);
      valid_q <= 1'b1;
    end else if (cnt_q != '0) begin
      state_q <= st_w;
      cnt_q   <= cnt_q - 1'b1;
    end else if (step && valid_q) begin
      state_q <= st_32;
    end
  end

  // W must tile the warm-up exactly and cover at least one word.
  initial begin
    assert (W % XLEN == 0 && INIT_ROUNDS % W == 0)
      else $error("trivium_core: W=%0d must be a multiple of 32 dividing 1152", W);
  end

endmodule
