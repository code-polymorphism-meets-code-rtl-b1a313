// exec_crypto: execute-stage encryption for run-time code generation.
//
// A code generator running on the core emits encrypted instructions with two
// instructions served by this unit:
//   initBB rs1    takes a fresh 80-bit IV from the PRNG, stores it as the
//                 three-word IV slot at rs1, rs1+4, rs1+8 (word2 = {16'b0,
//                 IV[79:64]}) and starts I_k(IV) on the unit's own Trivium
//                 state. It completes when the third word is accepted by the
//                 store port: three cycles if the port never stalls.
//   enc_word rd,rs1  returns rs1 XOR the current keystream word (T_enc) and
//                 advances the state; it stalls (req_ready low) while the
//                 1152/W-cycle initialisation is still running.
// Because encryption is an XOR with the keystream, software can emit a
// dummy 0 word for a forward jump and later patch the stored word by XORing
// in the real encoding.
// Interface: req_valid/req_op/req_a come from the execute stage and are held
// until req_ready; res_data is the write-back value (for initBB, IV word 0).
// The unit layout (operand into T_enc, PRNG into I_k, results muxed into the
// execute result) follows the execute-stage drawing; the store port and the
// cycle-level sequencing are this design's own.
module exec_crypto
  import polen_pkg::*;
#(
  parameter int unsigned W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [KEY_W-1:0]  key,
  input  logic              seed_valid,
  input  logic [SEED_W-1:0] seed,
  // execute stage
  input  logic              req_valid,
  input  polen_op_e         req_op,
  input  logic [XLEN-1:0]   req_a,
  output logic              req_ready,
  output logic [XLEN-1:0]   res_data,
  // IV store port
  output logic              st_valid,
  output logic [XLEN-1:0]   st_addr,
  output logic [XLEN-1:0]   st_data,
  input  logic              st_ready,
  // status
  output logic              enc_ready
);

  typedef enum logic {E_IDLE, E_STORE} estate_e;

  estate_e         st_q;
  logic [1:0]      idx_q;
  logic [XLEN-1:0] base_q;
  logic [IV_W-1:0] iv_q;

  logic [IV_W-1:0] prng_iv;
  logic            prng_next;
  logic            init_req, step, tri_ready;
  logic [XLEN-1:0] ks;

  // Entropy is not mixed in while an initBB waits on the store port, so the
  // IV word being offered stays stable.
  logic seed_ok;
  assign seed_ok = seed_valid && !(st_q == E_IDLE && req_valid && req_op == PX_INITBB);

  prng u_prng (
    .clk, .rst_n, .seed,
    .seed_valid (seed_ok),
    .next (prng_next),
    .iv   (prng_iv)
  );

  trivium_core #(.W(W)) u_tenc (
    .clk, .rst_n, .key,
    .init_req,
    .iv    (prng_iv),
    .step,
    .ready (tri_ready),
    .ks
  );

  always_comb begin
    req_ready = 1'b0;
    res_data  = req_a ^ ks;                     // T_enc
    st_valid  = 1'b0;
    st_addr   = req_a;
    st_data   = iv_word(prng_iv, 0);
    prng_next = 1'b0;
    init_req  = 1'b0;
    step      = 1'b0;
    unique case (st_q)
      E_IDLE: begin
        if (req_valid) begin
          unique case (req_op)
            PX_INITBB: begin
              st_valid  = 1'b1;
              init_req  = st_ready;             // I_k(IV) with the IV just stored
              prng_next = st_ready;
            end
            PX_ENC_WORD: begin
              req_ready = tri_ready;
              step      = tri_ready;
            end
            default: req_ready = 1'b1;
          endcase
        end
      end
      E_STORE: begin
        st_valid  = 1'b1;
        st_addr   = base_q + {28'b0, idx_q, 2'b00};
        st_data   = iv_word(iv_q, 32'(idx_q));
        res_data  = iv_word(iv_q, 0);
        req_ready = st_ready && (idx_q == 2'd2);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q   <= E_IDLE;
      idx_q  <= '0;
      base_q <= '0;
      iv_q   <= '0;
    end else begin
      unique case (st_q)
        E_IDLE:
          if (req_valid && req_op == PX_INITBB && st_ready) begin
            st_q   <= E_STORE;
            idx_q  <= 2'd1;
            base_q <= req_a;
            iv_q   <= prng_iv;
          end
        E_STORE:
          if (st_ready) begin
            idx_q <= idx_q + 2'd1;
            if (idx_q == 2'd2) st_q <= E_IDLE;
          end
        default: st_q <= E_IDLE;
      endcase
    end
  end

  assign enc_ready = tri_ready;

  // A store request is held until accepted; the request stays during initBB.
  assert property (@(posedge clk) disable iff (!rst_n)
                   st_valid && !st_ready |=> st_valid && $stable(st_addr) && $stable(st_data));
  assert property (@(posedge clk) disable iff (!rst_n) st_q == E_STORE |-> req_valid);

endmodule
