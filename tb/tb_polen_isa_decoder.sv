// tb_polen_isa_decoder: builds each extension instruction from its fields and
// checks the decoded operation and registers; checks that base RV32IM
// instructions and malformed custom-0 words are not recognised.
module tb_polen_isa_decoder;
  import polen_pkg::*;
  int checks = 0, failures = 0;
  logic [31:0] instr;
  polen_op_e   op;
  logic        is_polen;
  logic [4:0]  rd, rs1;

  polen_isa_decoder dut (.instr, .op, .is_polen, .rd, .rs1);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] enc(input logic [2:0] f3, input logic [4:0] d, input logic [4:0] s1,
                                      input logic [4:0] s2, input logic [6:0] f7);
    return {f7, s2, s1, f3, d, 7'b0001011};
  endfunction

  initial begin
    polen_op_e exp;
    for (int i = 0; i < 400; i++) begin
      logic [2:0] f3; logic [4:0] d, s1;
      f3 = 3'($urandom_range(0, 7)); d = 5'($urandom); s1 = 5'($urandom);
      instr = enc(f3, d, s1, 5'd0, 7'd0);
      #1;
      case (f3)
        3'b000: exp = PX_INITBB;
        3'b001: exp = PX_ENC_WORD;
        3'b010: exp = PX_ENABLE_DEC;
        3'b011: exp = PX_DISABLE_DEC;
        default: exp = PX_NONE;
      endcase
      check(op == exp, $sformatf("f3=%0d op=%0d", f3, op));
      check(is_polen == (exp != PX_NONE), "is_polen");
      if (exp != PX_NONE) check(rd == d && rs1 == s1, "register fields");
      // non-zero funct7 is not an extension instruction
      instr = enc(f3, d, s1, 5'd0, 7'h20);
      #1;
      check(!is_polen && op == PX_NONE, "funct7 != 0 rejected");
    end
    // base instructions: add a0,a1,a0 ; lw ; jal ; custom-1 opcode
    foreach (instr_list[i]) begin
      instr = instr_list[i];
      #1;
      check(!is_polen, $sformatf("base instruction %h not recognised", instr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic [31:0] instr_list [4] = '{32'h00a58533, 32'h0004a503, 32'h0080006f, 32'h0000002b};
  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
