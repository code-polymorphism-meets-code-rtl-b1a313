// tb_overhead: execution-time overhead of code encryption for a control-flow
// heavy function, in the spirit of the 8-bit AES case of the published
// evaluation: 506 taken control flows, and a taken-branch ratio rb near
// 0.019 (about 26,500 instructions, the ratio for which the overhead model
// O = 1 + (k_T - 1) * rb gives the reported 1.65 at k_T = 35). The same
// synthetic function is generated, run in plaintext and run encrypted on the
// W = 32 build and on the W = 128 build (tb_overhead_run); each run checks its
// cycle counts against this design's cycle model. The overheads are printed
// next to the values the model predicts for k_T = 35 and k_T = 9.
module tb_overhead;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int c32, f32, n32, p32, e32, g32;
  int c128, f128, n128, p128, e128, g128;
  bit d32, d128;

  tb_overhead_run #(.W(32))  r32  (.clk, .rst_n, .checks(c32),  .failures(f32),  .done(d32),
                                   .n_instr(n32),  .cyc_plain(p32),  .cyc_enc(e32),  .cyc_gen(g32));
  tb_overhead_run #(.W(128)) r128 (.clk, .rst_n, .checks(c128), .failures(f128), .done(d128),
                                   .n_instr(n128), .cyc_plain(p128), .cyc_enc(e128), .cyc_gen(g128));

  initial begin
    int checks, failures;
    real rb32, rb128;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (d32 && d128);
    checks = c32 + c128 + 1;
    failures = f32 + f128;
    rb32  = 506.0 / n32;
    rb128 = 506.0 / n128;
    $display("W=32 : n=%0d b=506 rb=%f; plaintext %0d cycles, encrypted %0d, O=%f (k_T=35 model %f); generation %0d cycles",
             n32, rb32, p32, e32, real'(e32) / p32, 1.0 + 34.0 * rb32, g32);
    $display("W=128: n=%0d b=506 rb=%f; plaintext %0d cycles, encrypted %0d, O=%f (k_T=9 model %f); generation %0d cycles",
             n128, rb128, p128, e128, real'(e128) / p128, 1.0 + 8.0 * rb128, g128);
    if (!(real'(e128) / p128 < real'(e32) / p32)) begin
      failures++;
      $display("FAIL: W=128 overhead not below W=32 overhead");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2_000_000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c32 + c128, f32 + f128 + 1);
    $finish;
  end
endmodule
