// tb_overhead_run: one measurement run for tb_overhead at cipher width W.
//
// Builds a synthetic secured function of NB basic blocks (block sizes drawn
// in [MINB, MAXB]) that ends every block with a taken control flow. Phase 1
// generates the encrypted version on polen_ext itself (initBB + enc_word per
// instruction) and counts the generation cycles. Phase 2 runs the plaintext
// copy, phase 3 the encrypted copy, both with a memory that never stalls,
// checking every decoded instruction and counting cycles. The encryption
// overhead O = cycles_encrypted / cycles_plaintext must equal this design's
// cycle model (n + b*(3 + 1152/W)) / (n + b): each taken branch into
// encrypted code costs three IV-word fetches and the 1152/W-cycle cipher
// initialisation instead of one cycle.
module tb_overhead_run #(
  parameter int unsigned W    = 32,
  parameter int          NB   = 506,
  parameter int          MINB = 40,
  parameter int          MAXB = 64
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output bit   done,
  output int   n_instr,
  output int   cyc_plain,
  output int   cyc_enc,
  output int   cyc_gen
);
  import polen_pkg::*;

  localparam int unsigned INIT_CYC = 1152 / W;

  logic         key_prog_valid, key_locked, seed_valid;
  logic [79:0]  key_prog;
  logic [127:0] seed;
  logic         imem_valid, imem_ready, instr_valid, instr_ready, cf_taken;
  logic [31:0]  imem_data, instr;
  logic         ex_valid, ex_is_polen, ex_done;
  logic [31:0]  ex_instr, ex_rs1, ex_result;
  logic         st_valid, st_ready;
  logic [31:0]  st_addr, st_data;
  logic         dec_active, dec_pending, fetch_busy, enc_ready;

  polen_ext #(.DEC_W(W), .ENC_W(W)) dut (.*);

  localparam logic [31:0] X_INITBB      = {7'b0, 5'd0, 5'd12, 3'b000, 5'd0, 7'b0001011};
  localparam logic [31:0] X_ENC_WORD    = {7'b0, 5'd0, 5'd11, 3'b001, 5'd10, 7'b0001011};
  localparam logic [31:0] X_ENABLE_DEC  = {7'b0, 5'd0, 5'd0, 3'b010, 5'd0, 7'b0001011};

  logic [31:0] mem [int unsigned];
  logic [31:0] plain [$];
  int          bsize [NB];
  logic [31:0] enc_addr [NB], pl_addr [NB];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL (W=%0d): %s", W, what); end
  endtask

  task automatic ex_issue(input logic [31:0] ins, input logic [31:0] rs1v, output logic [31:0] res);
    ex_valid = 1; ex_instr = ins; ex_rs1 = rs1v;
    forever begin
      #1;
      cyc_gen++;
      if (st_valid) mem[st_addr] = st_data;
      if (ex_done) begin res = ex_result; @(negedge clk); break; end
      @(negedge clk);
    end
    ex_valid = 0;
  endtask

  // taken branch to `pc`, fetch `n` instructions starting at plain[first]
  task automatic run_block(input logic [31:0] pc, input int first, input int n, ref int cyc);
    int got;
    cf_taken = 1; imem_valid = 1; instr_ready = 1;
    @(negedge clk);
    cf_taken = 0;
    cyc++;
    got = 0;
    while (got < n) begin
      imem_data = mem[pc];
      #1;
      if (instr_valid) begin
        check(instr == plain[first + got], $sformatf("instruction %0d", first + got));
        got++;
      end
      if (imem_ready) pc += 4;
      @(negedge clk);
      cyc++;
      if (cyc > 10_000_000) break;
    end
    imem_valid = 0;
  endtask

  initial begin
    logic [31:0] res, pc;
    int first;
    checks = 0; failures = 0; done = 0; n_instr = 0; cyc_plain = 0; cyc_enc = 0; cyc_gen = 0;
    key_prog_valid = 0; key_prog = '0; seed_valid = 0; seed = '0;
    imem_valid = 0; imem_data = '0; instr_ready = 1; cf_taken = 0;
    ex_valid = 0; ex_instr = '0; ex_rs1 = '0; st_ready = 1;
    @(posedge rst_n);
    @(negedge clk);
    key_prog = 80'({$urandom, $urandom, $urandom}); key_prog_valid = 1;
    seed = {$urandom, $urandom, $urandom, $urandom}; seed_valid = 1;
    @(negedge clk);
    key_prog_valid = 0; seed_valid = 0;
    for (int b = 0; b < NB; b++) begin
      bsize[b] = $urandom_range(MINB, MAXB);
      for (int i = 0; i < bsize[b]; i++) plain.push_back($urandom);
      n_instr += bsize[b];
    end
    // phase 1: generate the encrypted instance at 0x10000, plaintext copy at 0x400000
    pc = 32'h10000; first = 0;
    for (int b = 0; b < NB; b++) begin
      enc_addr[b] = pc;
      ex_issue(X_INITBB, pc, res);
      pc += 12;
      for (int i = 0; i < bsize[b]; i++) begin
        ex_issue(X_ENC_WORD, plain[first + i], res);
        mem[pc] = res;
        pc += 4;
      end
      first += bsize[b];
    end
    pc = 32'h400000; first = 0;
    for (int b = 0; b < NB; b++) begin
      pl_addr[b] = pc;
      for (int i = 0; i < bsize[b]; i++) begin mem[pc] = plain[first + i]; pc += 4; end
      first += bsize[b];
    end
    // phase 2: plaintext execution
    first = 0;
    for (int b = 0; b < NB; b++) begin run_block(pl_addr[b], first, bsize[b], cyc_plain); first += bsize[b]; end
    // phase 3: encrypted execution
    ex_issue(X_ENABLE_DEC, 32'h0, res);
    first = 0;
    for (int b = 0; b < NB; b++) begin run_block(enc_addr[b], first, bsize[b], cyc_enc); first += bsize[b]; end
    check(cyc_plain == n_instr + NB, $sformatf("plaintext cycles %0d, model %0d", cyc_plain, n_instr + NB));
    check(cyc_enc == n_instr + NB * (3 + INIT_CYC),
          $sformatf("encrypted cycles %0d, model %0d", cyc_enc, n_instr + NB * (3 + INIT_CYC)));
    // generation: initBB 3 cycles, first enc_word waits INIT_CYC-2, the rest 1 cycle each
    check(cyc_gen == NB * (3 + INIT_CYC - 2) + (n_instr - NB) + 1,
          $sformatf("generation cycles %0d, model %0d", cyc_gen, NB * (3 + INIT_CYC - 2) + (n_instr - NB) + 1));
    done = 1;
  end
endmodule
