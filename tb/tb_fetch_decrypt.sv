// tb_fetch_decrypt: streams a sequence of basic blocks through fetch_decrypt.
// Encrypted blocks are built here as IV slot + (plaintext XOR reference
// keystream); plaintext blocks are raw words. Each block starts with a
// redirect (with a stale word on the bus that must be dropped); the IMem and
// decode sides toggle valid/ready at random. Checks every instruction handed
// to decode, that nothing reaches decode while the cipher initialises, and
// that the stall after the third IV word lasts exactly 1152/W cycles.
// W is a local parameter (32 here); 128 exercises the fast-initialisation build.
module tb_fetch_decrypt;
  import tb_triv_ref_pkg::*;
  localparam int unsigned W = 32;
  localparam int unsigned INIT_CYC = 1152 / W;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [79:0] key;
  logic        redirect, redirect_dec;
  logic        in_valid, in_ready, out_valid, out_ready, dec_on, busy;
  logic [31:0] in_data, out_instr;

  fetch_decrypt #(.W(W)) dut (.clk, .rst_n, .key, .redirect, .redirect_dec,
                              .in_valid, .in_data, .in_ready,
                              .out_valid, .out_instr, .out_ready, .dec_on, .busy);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] mem_q[$];     // words still to be fetched
  logic [31:0] exp_q[$];     // plaintext expected at decode
  int          iv_left;      // IV words not yet accepted in this block
  int          wait_cnt;     // cycles since the third IV word
  bit          timing;       // measuring the init stall
  int          n_enc_blocks = 0, n_plain_blocks = 0;

  task automatic build_block(input bit enc, input int n);
    triv_ref r;
    logic [79:0] iv;
    logic [31:0] p;
    r = new();
    iv = 80'({$urandom, $urandom, $urandom});
    if (enc) begin
      r.init(key, iv);
      for (int i = 0; i < 3; i++) mem_q.push_back(slot_word(iv, i));
    end
    for (int i = 0; i < n; i++) begin
      p = $urandom;
      exp_q.push_back(p);
      mem_q.push_back(enc ? (p ^ r.word()) : p);
    end
  endtask

  // One clock of traffic; returns after the rising edge.
  task automatic cycle(input bit rnd);
    bit fire_in, fire_out;
    in_valid  = (mem_q.size() > 0) && (!rnd || $urandom_range(0, 3) != 0);
    in_data   = (mem_q.size() > 0) ? mem_q[0] : 32'hdeadbeef;
    out_ready = !rnd || $urandom_range(0, 3) != 0;
    #1;
    fire_in  = in_valid && in_ready;
    fire_out = out_valid && out_ready;
    if (timing) begin
      wait_cnt++;
      if (!busy) begin
        check(wait_cnt == INIT_CYC, $sformatf("init stall %0d cycles, expected %0d", wait_cnt, INIT_CYC));
        timing = 0;
      end else check(!out_valid, "no instruction while initialising");
    end
    if (fire_out) begin
      check(exp_q.size() > 0, "unexpected instruction");
      if (exp_q.size() > 0) begin
        check(out_instr == exp_q[0], $sformatf("instr %h exp %h", out_instr, exp_q[0]));
        void'(exp_q.pop_front());
      end
    end
    if (fire_in) begin
      void'(mem_q.pop_front());
      if (iv_left > 0) begin
        iv_left--;
        if (iv_left == 0) begin timing = 1; wait_cnt = 0; end
      end
    end
    @(negedge clk);
  endtask

  initial begin
    key = 80'({$urandom, $urandom, $urandom});
    redirect = 0; redirect_dec = 0; in_valid = 0; in_data = '0; out_ready = 0;
    iv_left = 0; timing = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!dec_on && !busy, "plaintext after reset");
    for (int b = 0; b < 24; b++) begin
      bit enc;
      enc = (b % 3 != 2);
      // redirect with a stale word on the bus
      redirect = 1; redirect_dec = enc;
      in_valid = 1; in_data = $urandom; out_ready = 1;
      #1;
      check(!out_valid && in_ready, "stale word dropped at redirect");
      @(negedge clk);
      redirect = 0;
      check(dec_on == enc, "mode after redirect");
      build_block(enc, $urandom_range(1, 30));
      iv_left = enc ? 3 : 0;
      if (enc) n_enc_blocks++; else n_plain_blocks++;
      // the first blocks run without random stalls, the rest with
      for (int c = 0; c < 2000 && (mem_q.size() > 0 || exp_q.size() > 0); c++) cycle(b >= 4);
      check(exp_q.size() == 0 && mem_q.size() == 0, $sformatf("block %0d drained", b));
      mem_q.delete(); exp_q.delete();
    end
    check(n_enc_blocks > 0 && n_plain_blocks > 0, "both modes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
