// polen_isa_decoder: recognises the four code-encryption instructions.
//
// initBB, enc_word, enable_dec and disable_dec are R-type instructions in the
// RISC-V custom-0 opcode space with funct7 = 0; funct3 selects the operation
// (000 initBB rs1, 001 enc_word rd,rs1, 010 enable_dec, 011 disable_dec).
// The instruction names follow the architecture's ISA table; the bit encodings
// are this design's choice. Purely combinational.
module polen_isa_decoder
  import polen_pkg::*;
(
  input  logic [XLEN-1:0] instr,
  output polen_op_e       op,
  output logic            is_polen,
  output logic [4:0]      rd,
  output logic [4:0]      rs1
);

  always_comb begin
    op = PX_NONE;
    if (instr[6:0] == OPC_CUSTOM0 && instr[31:25] == 7'b0) begin
      unique case (instr[14:12])
        F3_INITBB:      op = PX_INITBB;
        F3_ENC_WORD:    op = PX_ENC_WORD;
        F3_ENABLE_DEC:  op = PX_ENABLE_DEC;
        F3_DISABLE_DEC: op = PX_DISABLE_DEC;
        default:        op = PX_NONE;
      endcase
    end
  end

  assign is_polen = (op != PX_NONE);
  assign rd       = instr[11:7];
  assign rs1      = instr[19:15];

endmodule
