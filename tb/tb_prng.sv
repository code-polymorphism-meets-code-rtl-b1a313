// tb_prng: compares the IV sequence of prng with an xorshift128 model written
// here, across advances, idle cycles and entropy seeding; also checks that
// consecutive IVs differ.
module tb_prng;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic         seed_valid, next;
  logic [127:0] seed;
  logic [79:0]  iv;

  prng dut (.clk, .rst_n, .seed_valid, .seed, .next, .iv);

  logic [31:0] mx, my, mz, mw;
  task automatic model_step();
    logic [31:0] t;
    t = mx ^ (mx << 11);
    mx = my; my = mz; mz = mw;
    mw = mw ^ (mw >> 19) ^ t ^ (t >> 8);
  endtask

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [79:0] prev;
    seed_valid = 0; next = 0; seed = '0;
    {mx, my, mz, mw} = 128'h3c6ef372_a54ff53a_510e527f_9b05688c;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(iv == {my[15:0], mz, mw}, "reset IV");
    prev = iv;
    for (int i = 0; i < 300; i++) begin
      int r;
      r = $urandom_range(0, 9);
      next = (r < 6);
      seed_valid = (r == 9);
      seed = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk);
      if (next) model_step();
      if (seed_valid) {mx, my, mz, mw} = {mx, my, mz, mw} ^ seed;
      next = 0; seed_valid = 0;
      check(iv == {my[15:0], mz, mw}, $sformatf("IV %0d: %h exp %h", i, iv, {my[15:0], mz, mw}));
      if (r < 6) check(iv != prev, "fresh IV after next");
      prev = iv;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
