// tb_dec_mode_ctrl: random sequences of enable_dec, disable_dec and taken
// control flows against a two-bit reference; also replays the plaintext-call
// sequence (disable_dec, call, return, enable_dec, jump).
module tb_dec_mode_ctrl;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic set_enable, set_disable, cf_taken;
  logic dec_active, dec_pending, target_dec;

  dec_mode_ctrl #(.DEC_AT_RESET(1'b0)) dut (.clk, .rst_n, .set_enable, .set_disable, .cf_taken,
                                           .dec_active, .dec_pending, .target_dec);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  bit ma, mp;
  task automatic cyc(input bit en, input bit dis, input bit cf);
    bit np;
    set_enable = en; set_disable = dis; cf_taken = cf;
    np = en ? 1'b1 : dis ? 1'b0 : mp;
    #1;
    check(target_dec == np, "target_dec");
    @(negedge clk);
    mp = np;
    if (cf) ma = np;
    check(dec_active == ma && dec_pending == mp, $sformatf("active %0d exp %0d", dec_active, ma));
  endtask

  initial begin
    set_enable = 0; set_disable = 0; cf_taken = 0;
    ma = 0; mp = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!dec_active, "plaintext at reset");
    // enter encrypted code: enable_dec; straight-line; jump
    cyc(1, 0, 0); check(!dec_active, "enable_dec alone does not switch");
    cyc(0, 0, 0); cyc(0, 0, 1); check(dec_active, "jump switches to decryption");
    // call to a plaintext function
    cyc(0, 1, 0); check(dec_active, "disable_dec alone does not switch");
    cyc(0, 0, 1); check(!dec_active, "call enters plaintext");
    cyc(0, 0, 1); check(!dec_active, "return stays plaintext");
    cyc(1, 0, 0); cyc(0, 0, 1); check(dec_active, "enable_dec + jump back to encrypted code");
    for (int i = 0; i < 500; i++) begin
      int r;
      r = $urandom_range(0, 7);
      cyc(r == 0, r == 1, $urandom_range(0, 2) == 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
