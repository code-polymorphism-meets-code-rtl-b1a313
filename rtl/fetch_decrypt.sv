// fetch_decrypt: on-the-fly instruction decryption in the fetch stage.
//
// Encrypted code is organised in basic blocks that each begin with a
// three-word IV slot; the block's instructions are XORed with the Trivium
// keystream started from that IV. Whenever a control-flow instruction is
// taken (redirect) into encrypted code, this unit swallows the next three
// fetched words as the IV (IV = {word2[15:0], word1, word0}), starts I_k(IV)
// and stalls fetch until the cipher is ready; from then on each fetched word
// is XORed with the current keystream word (T_dec) and the state advances by
// one word per instruction handed to decode. A redirect into plaintext code
// makes the unit a wire. Words presented in the redirect cycle belong to the
// old stream and are dropped.
//
// Timing: the first instruction of an encrypted block is available 1152/W
// cycles after its third IV word was accepted (36 cycles at W=32, 9 at
// W=128); afterwards one instruction per cycle, with no added latency
// (combinational XOR between IMem data and decode).
// Follows the fetch-stage drawing (State register, T_dec, I_k fed from IMem,
// 'branch taken' selecting I_k); the three-word IV slot comes from the
// three memory reads per IV in the architecture's trace model; handshakes,
// the placement of the 80 IV bits in the slot and the reset mode are this
// design's own.
module fetch_decrypt
  import polen_pkg::*;
#(
  parameter int unsigned W            = 32,
  parameter bit          DEC_AT_RESET = 1'b0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [KEY_W-1:0] key,
  // control flow
  input  logic             redirect,
  input  logic             redirect_dec,
  // from instruction memory
  input  logic             in_valid,
  input  logic [XLEN-1:0]  in_data,
  output logic             in_ready,
  // to decode
  output logic             out_valid,
  output logic [XLEN-1:0]  out_instr,
  input  logic             out_ready,
  // status
  output logic             dec_on,
  output logic             busy
);

  typedef enum logic [1:0] {F_PLAIN, F_IV, F_RUN} fstate_e;

  fstate_e         st_q;
  logic [1:0]      ivcnt_q;
  logic [XLEN-1:0] ivw0_q, ivw1_q;

  logic            init_req, step, tri_ready;
  logic [IV_W-1:0] iv;
  logic [XLEN-1:0] ks;

  trivium_core #(.W(W)) u_tdec (
    .clk, .rst_n, .key,
    .init_req, .iv, .step,
    .ready (tri_ready),
    .ks
  );

  assign iv = {in_data[15:0], ivw1_q, ivw0_q};

  always_comb begin
    in_ready  = 1'b0;
    out_valid = 1'b0;
    out_instr = in_data;
    init_req  = 1'b0;
    step      = 1'b0;
    if (redirect) begin
      in_ready = 1'b1;                          // drop the stale word
    end else begin
      unique case (st_q)
        F_PLAIN: begin
          out_valid = in_valid;
          in_ready  = out_ready;
        end
        F_IV: begin
          in_ready  = 1'b1;
          init_req  = in_valid && (ivcnt_q == 2'd2);
        end
        F_RUN: begin
          out_valid = in_valid && tri_ready;
          out_instr = in_data ^ ks;             // T_dec
          in_ready  = out_ready && tri_ready;
          step      = in_valid && out_ready && tri_ready;
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q    <= DEC_AT_RESET ? F_IV : F_PLAIN;
      ivcnt_q <= '0;
      ivw0_q  <= '0;
      ivw1_q  <= '0;
    end else if (redirect) begin
      st_q    <= redirect_dec ? F_IV : F_PLAIN;
      ivcnt_q <= '0;
    end else if (st_q == F_IV && in_valid) begin
      if (ivcnt_q == 2'd0) ivw0_q <= in_data;
      if (ivcnt_q == 2'd1) ivw1_q <= in_data;
      ivcnt_q <= ivcnt_q + 2'd1;
      if (ivcnt_q == 2'd2) st_q <= F_RUN;
    end
  end

  assign dec_on = (st_q != F_PLAIN);
  assign busy   = (st_q == F_IV) || (st_q == F_RUN && !tri_ready);

  // The keystream only advances on an initialised cipher.
  assert property (@(posedge clk) disable iff (!rst_n) step |-> tri_ready);
  assert property (@(posedge clk) disable iff (!rst_n) st_q == F_IV |-> ivcnt_q <= 2'd2);

endmodule
