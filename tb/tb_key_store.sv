// tb_key_store: checks that the key register starts cleared, stores the first
// provisioned key, locks, ignores later writes and clears again on reset.
module tb_key_store;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        prog_valid;
  logic [79:0] prog_key, key;
  logic        locked;

  key_store dut (.clk, .rst_n, .prog_valid, .prog_key, .key, .locked);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [79:0] k1, k2;
    prog_valid = 0; prog_key = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      @(negedge clk);
      check(!locked && key == '0, "cleared after reset");
      k1 = 80'({$urandom, $urandom, $urandom});
      k2 = ~k1;
      prog_key = k1; prog_valid = 1;
      @(negedge clk);
      prog_valid = 0;
      check(key == k1 && locked, "first key stored and locked");
      prog_key = k2; prog_valid = 1;
      @(negedge clk);
      prog_valid = 0;
      check(key == k1, "second write ignored");
      repeat (3) @(negedge clk);
      check(key == k1 && locked, "key held");
      rst_n = 0; @(negedge clk); rst_n = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
