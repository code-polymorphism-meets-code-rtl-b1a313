// tb_polen_ext: end-to-end run of the code-encryption extension at its default
// parameters, with the testbench playing the host RV32IM pipeline and memory.
//
//  1. provisions the key (a second provisioning attempt must be ignored) and
//     fetches a plaintext boot sequence;
//  2. acts as a run-time code generator: for each basic block of a generated
//     instance it executes initBB (IV stored through the store port, which
//     stalls at random) and one enc_word per instruction, writing the results
//     to memory; a forward jump is emitted as an encrypted 0 and patched
//     afterwards by XOR with the real encoding;
//  3. executes enable_dec and jumps into the instance: every block is fetched
//     through the decryptor (IV read, cipher re-initialised, instructions
//     decrypted) and compared with the generated plaintext;
//  4. calls a plaintext function the way encrypted code does (disable_dec,
//     call, plaintext body, return, enable_dec, jump to an encrypted block).
// Each mechanism is counted and must happen at least once. The generated
// ciphertext is also checked against an independent Trivium model.
module tb_polen_ext;
  import polen_pkg::*;
  import tb_triv_ref_pkg::*;

  localparam int unsigned INIT_CYC = 1152 / 32;   // default DEC_W = ENC_W = 32
  localparam int NBB = 5;                         // basic blocks in the instance

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

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

  polen_ext dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // extension instruction encodings (custom-0, R-type)
  function automatic logic [31:0] x_initbb(input logic [4:0] rs1);
    return {7'b0, 5'd0, rs1, 3'b000, 5'd0, 7'b0001011};
  endfunction
  function automatic logic [31:0] x_encword(input logic [4:0] rd, input logic [4:0] rs1);
    return {7'b0, 5'd0, rs1, 3'b001, rd, 7'b0001011};
  endfunction
  localparam logic [31:0] X_ENABLE_DEC  = {7'b0, 5'd0, 5'd0, 3'b010, 5'd0, 7'b0001011};
  localparam logic [31:0] X_DISABLE_DEC = {7'b0, 5'd0, 5'd0, 3'b011, 5'd0, 7'b0001011};

  logic [31:0] mem [int unsigned];

  // mechanism counters
  int n_initbb = 0, n_encword = 0, n_encword_stall = 0, n_store_bp = 0;
  int n_reinit = 0, n_fetch_stall = 0, n_plain_instr = 0, n_dec_instr = 0;
  int n_to_plain = 0, n_to_enc = 0, n_patch = 0, n_key_relock = 0;

  // Host execute stage: hold an instruction until the extension completes it.
  task automatic ex_issue(input logic [31:0] ins, input logic [31:0] rs1v, output logic [31:0] res);
    int c;
    ex_valid = 1; ex_instr = ins; ex_rs1 = rs1v;
    c = 0;
    forever begin
      st_ready = $urandom_range(0, 3) != 0;
      #1;
      check(ex_is_polen, "extension instruction recognised");
      if (st_valid && st_ready) mem[st_addr] = st_data;
      if (st_valid && !st_ready) n_store_bp++;
      if (ins == x_encword(5'd10, 5'd11) && !ex_done) n_encword_stall++;
      if (ex_done) begin
        res = ex_result;
        @(negedge clk);
        break;
      end
      @(negedge clk);
      c++;
      if (c > 1000) begin check(0, "execute stage hung"); break; end
    end
    ex_valid = 0;
  endtask

  // Host fetch: taken control flow to `pc`, then fetch until `exp` is drained.
  task automatic run_from(input logic [31:0] pc, ref logic [31:0] exp[$], input bit enc_expected);
    int c;
    bit was_busy;
    cf_taken = 1; imem_valid = 1; imem_data = $urandom; instr_ready = 1;
    @(negedge clk);
    cf_taken = 0;
    check(dec_active == enc_expected, "mode at branch target");
    was_busy = 0;
    c = 0;
    while (exp.size() > 0 && c < 5000) begin
      imem_valid  = $urandom_range(0, 4) != 0;
      imem_data   = mem.exists(pc) ? mem[pc] : 32'h0;
      instr_ready = $urandom_range(0, 4) != 0;
      #1;
      if (fetch_busy) begin
        n_fetch_stall++;
        check(!instr_valid, "no instruction during IV read / init");
      end
      if (fetch_busy && !was_busy && enc_expected) n_reinit++;
      was_busy = fetch_busy;
      if (instr_valid && instr_ready) begin
        check(instr == exp[0], $sformatf("instruction at %h: %h exp %h", pc, instr, exp[0]));
        void'(exp.pop_front());
        if (enc_expected) n_dec_instr++; else n_plain_instr++;
      end
      if (imem_valid && imem_ready) pc += 4;
      @(negedge clk);
      c++;
    end
    imem_valid = 0;
    check(exp.size() == 0, "all instructions of the block fetched");
  endtask

  logic [31:0] plain [NBB][$];   // plaintext of each generated block
  logic [31:0] bb_addr [NBB];

  initial begin
    logic [79:0] key, iv;
    logic [31:0] res, q[$], pc, jaddr, jword;
    int jbb, ji;
    triv_ref r;
    r = new();

    key_prog_valid = 0; key_prog = '0; seed_valid = 0; seed = '0;
    imem_valid = 0; imem_data = '0; instr_ready = 1; cf_taken = 0;
    ex_valid = 0; ex_instr = '0; ex_rs1 = '0; st_ready = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // 1. key provisioning and entropy
    key = 80'({$urandom, $urandom, $urandom});
    key_prog = key; key_prog_valid = 1; seed_valid = 1; seed = {$urandom, $urandom, $urandom, $urandom};
    @(negedge clk);
    key_prog_valid = 0; seed_valid = 0;
    check(key_locked, "key locked after provisioning");
    key_prog = ~key; key_prog_valid = 1;
    @(negedge clk);
    key_prog_valid = 0;
    n_key_relock++;   // the wrong key must have no effect: checked by all decryptions below

    // boot code in plaintext at 0x100
    q.delete();
    for (int i = 0; i < 6; i++) begin mem[32'h100 + 4*i] = $urandom; q.push_back(mem[32'h100 + 4*i]); end
    run_from(32'h100, q, 1'b0);

    // 2. generate an encrypted instance at 0x1000
    pc = 32'h1000;
    jbb = 1; ji = 2;                  // a forward jump in block 1
    for (int b = 0; b < NBB; b++) begin
      int n;
      bb_addr[b] = pc;
      ex_issue(x_initbb(5'd12), pc, res);
      n_initbb++;
      iv = {mem[pc + 8][15:0], mem[pc + 4], mem[pc]};
      check(mem[pc + 8][31:16] == 16'h0, "IV slot layout");
      r.init(key, iv);
      pc += 12;
      n = $urandom_range(3, 12);
      for (int i = 0; i < n; i++) begin
        logic [31:0] p;
        if (b == jbb && i == ji) begin
          p = 32'h0;              // dummy word, patched once the target is known
          jaddr = pc;
        end else p = $urandom;
        ex_issue(x_encword(5'd10, 5'd11), p, res);
        n_encword++;
        check(res == (p ^ r.word()), "enc_word matches the reference cipher");
        mem[pc] = res;
        plain[b].push_back(p);
        pc += 4;
      end
    end
    // patch the forward jump now that the target (last block) is known
    jword = {1'b0, 10'((bb_addr[NBB-1] - jaddr) >> 1), 1'b0, 8'b0, 5'd0, 7'b1101111};
    mem[jaddr] = mem[jaddr] ^ jword;
    plain[jbb][ji] = jword;
    n_patch++;

    // 3. enable_dec and run every block of the instance
    ex_issue(X_ENABLE_DEC, 32'h0, res);
    check(!dec_active && dec_pending, "enable_dec waits for the next control flow");
    for (int b = 0; b < NBB; b++) begin
      q = plain[b];
      run_from(bb_addr[b], q, 1'b1);
      if (b == 0) n_to_enc++;
    end

    // 4. call a plaintext function from encrypted code and come back
    ex_issue(X_DISABLE_DEC, 32'h0, res);
    check(dec_active, "disable_dec waits for the next control flow");
    q.delete();
    for (int i = 0; i < 5; i++) begin mem[32'h800 + 4*i] = $urandom; q.push_back(mem[32'h800 + 4*i]); end
    run_from(32'h800, q, 1'b0);       // call f_unsec
    n_to_plain++;
    q.delete();
    mem[32'h200] = X_ENABLE_DEC; mem[32'h204] = 32'h0000006f;
    q.push_back(mem[32'h200]); q.push_back(mem[32'h204]);
    run_from(32'h200, q, 1'b0);       // return lands on the plaintext enable_dec; j sequence
    ex_issue(X_ENABLE_DEC, 32'h0, res);
    q = plain[NBB-1];
    run_from(bb_addr[NBB-1], q, 1'b1);   // j .LBBRET: back into encrypted code
    n_to_enc++;

    // taken-branch penalty with a memory that never stalls: redirect cycle,
    // three IV words, then the cipher initialisation
    begin
      int c;
      cf_taken = 1; imem_valid = 1; instr_ready = 1;
      @(negedge clk);
      cf_taken = 0;
      pc = bb_addr[0];
      c = 0;
      forever begin
        imem_data = mem[pc];
        #1;
        if (instr_valid) break;
        if (imem_ready) pc += 4;
        @(negedge clk);
        c++;
        if (c > 1000) break;
      end
      check(c + 1 == 3 + INIT_CYC, $sformatf("first instruction %0d cycles after the branch, expected %0d", c + 1, 3 + INIT_CYC));
      check(instr == plain[0][0], "first instruction after the measured branch");
      @(negedge clk);
      imem_valid = 0;
    end

    // every mechanism must have happened
    check(n_initbb > 0,        "initBB executed");
    check(n_encword > 0,       "enc_word executed");
    check(n_encword_stall > 0, "enc_word stalled on cipher initialisation");
    check(n_store_bp > 0,      "IV store back-pressure");
    check(n_reinit >= NBB + 1, "decryptor re-initialised on taken control flow");
    check(n_fetch_stall >= (NBB + 1) * INIT_CYC, "fetch stalled for IV read and initialisation");
    check(n_dec_instr > 0,     "instructions decrypted");
    check(n_plain_instr > 0,   "plaintext instructions passed through");
    check(n_to_plain > 0,      "switch to plaintext at a call");
    check(n_to_enc > 1,        "switch back to decryption");
    check(n_patch > 0,         "forward jump patched");
    check(n_key_relock > 0,    "second key write attempted");
    $display("mechanisms: initBB=%0d enc_word=%0d enc_stall=%0d store_bp=%0d reinit=%0d fetch_stall=%0d dec=%0d plain=%0d to_plain=%0d to_enc=%0d patch=%0d",
             n_initbb, n_encword, n_encword_stall, n_store_bp, n_reinit, n_fetch_stall,
             n_dec_instr, n_plain_instr, n_to_plain, n_to_enc, n_patch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
