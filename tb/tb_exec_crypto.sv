// tb_exec_crypto: runs code-generation sequences on exec_crypto: initBB to a
// random address, then enc_word on random plaintexts, with a randomly stalling
// store port and random entropy seeding. The IV is read back from the three
// stored words (addresses and layout checked), the reference cipher is
// initialised from it, and every enc_word result is compared with plaintext
// XOR reference keystream. Checks that initBB takes exactly three cycles with
// a free store port, that an enc_word right after initBB stalls until the
// 1152/W-cycle initialisation (begun with the first IV store) is over, and that two initBBs give different IVs. Also
// checks the forward-jump patch: encrypting 0 and XORing in the real word
// equals encrypting the real word.
module tb_exec_crypto;
  import polen_pkg::*;
  import tb_triv_ref_pkg::*;
  localparam int unsigned W = 32;
  localparam int unsigned INIT_CYC = 1152 / W;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [79:0]  key;
  logic         seed_valid;
  logic [127:0] seed;
  logic         req_valid, req_ready, st_valid, st_ready, enc_ready;
  polen_op_e    req_op;
  logic [31:0]  req_a, res_data, st_addr, st_data;

  exec_crypto #(.W(W)) dut (.clk, .rst_n, .key, .seed_valid, .seed,
                            .req_valid, .req_op, .req_a, .req_ready, .res_data,
                            .st_valid, .st_addr, .st_data, .st_ready, .enc_ready);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  bit rnd_store;
  logic [31:0] stored_addr[$], stored_data[$];

  // Issue one instruction and hold it until it completes; returns cycles taken.
  task automatic issue(input polen_op_e op, input logic [31:0] a, output logic [31:0] res, output int cyc);
    req_valid = 1; req_op = op; req_a = a;
    cyc = 0;
    forever begin
      st_ready   = !rnd_store || $urandom_range(0, 2) != 0;
      seed_valid = $urandom_range(0, 7) == 0;
      seed       = {$urandom, $urandom, $urandom, $urandom};
      #1;
      cyc++;
      if (st_valid && st_ready) begin
        stored_addr.push_back(st_addr);
        stored_data.push_back(st_data);
      end
      if (req_ready) begin
        res = res_data;
        @(negedge clk);
        break;
      end
      @(negedge clk);
      check(cyc < 500, "instruction completes");
      if (cyc >= 500) break;
    end
    req_valid = 0; seed_valid = 0;
  endtask

  initial begin
    logic [31:0] res, base, p, x;
    logic [79:0] iv, prev_iv;
    int cyc;
    triv_ref r;
    r = new();
    key = 80'({$urandom, $urandom, $urandom});
    req_valid = 0; req_op = PX_NONE; req_a = '0; st_ready = 1; seed_valid = 0; seed = '0;
    rnd_store = 0; prev_iv = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!enc_ready, "cipher idle after reset");
    for (int bb = 0; bb < 12; bb++) begin
      rnd_store = (bb >= 3);
      base = 32'({$urandom_range(0, 'hffff), 2'b00});
      stored_addr.delete(); stored_data.delete();
      issue(PX_INITBB, base, res, cyc);
      if (!rnd_store) check(cyc == 3, $sformatf("initBB took %0d cycles, expected 3", cyc));
      check(stored_addr.size() == 3, "three IV words stored");
      if (stored_addr.size() == 3) begin
        check(stored_addr[0] == base && stored_addr[1] == base + 4 && stored_addr[2] == base + 8,
              "IV slot addresses");
        check(stored_data[2][31:16] == 16'h0, "IV word 2 upper half is zero");
        iv = {stored_data[2][15:0], stored_data[1], stored_data[0]};
        check(res == stored_data[0], "initBB write-back value is IV word 0");
        check(iv != prev_iv, "fresh IV per basic block");
        prev_iv = iv;
        r.init(key, iv);
      end
      // first enc_word stalls for the remaining initialisation
      p = $urandom;
      issue(PX_ENC_WORD, p, res, cyc);
      // I_k starts with the first IV store, so two of its cycles overlap initBB
      if (!rnd_store) check(cyc == INIT_CYC - 2, $sformatf("first enc_word took %0d cycles, expected %0d", cyc, INIT_CYC - 2));
      check(res == (p ^ r.word()), "first enc_word");
      for (int i = 0; i < 25; i++) begin
        if (i == 10) begin
          // forward jump: encrypt 0 now, patch with the real encoding later
          issue(PX_ENC_WORD, 32'h0, x, cyc);
          p = 32'h0080006f | ({$urandom} & 32'hfff00000);
          check((x ^ p) == (p ^ r.word()), "patched dummy word equals encrypted jump");
        end else begin
          p = $urandom;
          issue(PX_ENC_WORD, p, res, cyc);
          check(cyc == 1, "enc_word single cycle once initialised");
          check(res == (p ^ r.word()), $sformatf("enc_word %0d", i));
        end
        if ($urandom_range(0, 3) == 0) @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
