// tb_trivium_core: checks trivium_core at W=32 and W=128 against a bit-serial
// reference written from the Trivium specification (1-based state bits s[1..288]).
// Checks: ready rises exactly 1152/W cycles after init_req, the keystream words
// after initialisation and after a run of steps, that a held step is ignored
// while not ready, and that an init_req restarts a running initialisation.
module tb_trivium_core;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic [79:0] key, iv;
  logic        init_req, step;
  logic        rdy32, rdy128;
  logic [31:0] ks32, ks128;

  trivium_core #(.W(32))  dut32  (.clk, .rst_n, .key, .init_req, .iv, .step, .ready(rdy32),  .ks(ks32));
  trivium_core #(.W(128)) dut128 (.clk, .rst_n, .key, .init_req, .iv, .step, .ready(rdy128), .ks(ks128));

  // ---------------- reference model ----------------
  bit rs[1:288];
  function automatic bit ref_clock();
    bit t1, t2, t3, z;
    t1 = rs[66] ^ rs[93];
    t2 = rs[162] ^ rs[177];
    t3 = rs[243] ^ rs[288];
    z = t1 ^ t2 ^ t3;
    t1 = t1 ^ (rs[91] & rs[92]) ^ rs[171];
    t2 = t2 ^ (rs[175] & rs[176]) ^ rs[264];
    t3 = t3 ^ (rs[286] & rs[287]) ^ rs[69];
    for (int i = 93; i >= 2; i--) rs[i] = rs[i-1];
    rs[1] = t3;
    for (int i = 177; i >= 95; i--) rs[i] = rs[i-1];
    rs[94] = t1;
    for (int i = 288; i >= 179; i--) rs[i] = rs[i-1];
    rs[178] = t2;
    return z;
  endfunction
  task automatic ref_init(input logic [79:0] k, input logic [79:0] v);
    bit z;
    for (int i = 1; i <= 288; i++) rs[i] = 0;
    for (int i = 0; i < 80; i++) rs[1+i] = k[i];
    for (int i = 0; i < 80; i++) rs[94+i] = v[i];
    rs[286] = 1; rs[287] = 1; rs[288] = 1;
    for (int i = 0; i < 1152; i++) z = ref_clock();
  endtask
  function automatic logic [31:0] ref_word();
    logic [31:0] w;
    for (int j = 0; j < 32; j++) w[j] = ref_clock();
    return w;
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Run one init and count cycles until each core is ready.
  task automatic do_init(input logic [79:0] k, input logic [79:0] v);
    int c, c32, c128;
    key = k; iv = v;
    @(negedge clk); init_req = 1'b1;
    @(negedge clk); init_req = 1'b0;
    c = 1; c32 = -1; c128 = -1;
    while ((c32 < 0 || c128 < 0) && c < 100) begin
      step = (c < 6);                  // a step while initialising must be ignored
      if (rdy32  && c32  < 0) c32  = c;
      if (rdy128 && c128 < 0) c128 = c;
      @(negedge clk); c++;
    end
    check(c32 == 36, $sformatf("W=32 init latency %0d, expected 36", c32));
    check(c128 == 9, $sformatf("W=128 init latency %0d, expected 9", c128));
  endtask

  initial begin
    logic [31:0] exp;
    key = '0; iv = '0; init_req = 0; step = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!rdy32 && !rdy128, "ready low after reset");
    for (int t = 0; t < 6; t++) begin
      logic [79:0] k, v;
      k = 80'({$urandom, $urandom, $urandom});
      v = 80'({$urandom, $urandom, $urandom});
      if (t == 0) begin k = '0; v = '0; end
      do_init(k, v);
      step = 1'b0;
      ref_init(k, v);
      for (int n = 0; n < 20; n++) begin
        exp = ref_word();
        check(ks32 == exp,  $sformatf("W=32 word %0d: %h exp %h", n, ks32, exp));
        check(ks128 == exp, $sformatf("W=128 word %0d: %h exp %h", n, ks128, exp));
        // random gaps between steps: state must hold
        if ($urandom_range(0, 2) == 0) @(negedge clk);
        step = 1'b1; @(negedge clk); step = 1'b0;
      end
    end
    // restart in the middle of an initialisation
    key = 80'h1; iv = 80'h2;
    @(negedge clk); init_req = 1; @(negedge clk); init_req = 0;
    repeat (5) @(negedge clk);
    do_init(80'h0123456789abcdef0123, 80'hfedcba9876543210fedc);
    ref_init(80'h0123456789abcdef0123, 80'hfedcba9876543210fedc);
    exp = ref_word();
    check(ks32 == exp && ks128 == exp, "keystream after restarted init");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
