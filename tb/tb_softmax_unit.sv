// Test of softmax_unit: directed and random logit pairs. Checks the class,
// that p0 + p1 = 1, the PLAN sigmoid breakpoints against values worked out
// by hand, the one-clock latency, and that the PLAN output stays within
// 0.025 of the exact sigmoid (PLAN error 0.019 plus fixed-point truncation) computed with $exp.
module tb_softmax_unit;
  import rfd_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic in_valid = 0, out_valid, cls; wide_t z0, z1; logic [11:0] p0, p1;
  int checks = 0, failures = 0;

  softmax_unit #(.LOGIT_FRAC(8), .PROB_FRAC(11)) dut (.*);

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic run(int a, int b, int exp_p1);  // exp_p1 < 0: only bound check
    real ex;
    @(negedge clk); z0 = wide_t'(a); z1 = wide_t'(b); in_valid = 1;
    @(negedge clk); in_valid = 0;
    chk(out_valid, "latency");
    chk(cls == (b > a), $sformatf("class %0d %0d", a, b));
    chk(int'(p0) + int'(p1) == 2048, "sum");
    if (exp_p1 >= 0) chk(int'(p1) == exp_p1, $sformatf("p1 d=%0d got %0d exp %0d", b - a, p1, exp_p1));
    ex = 1.0 / (1.0 + $exp(-real'(b - a) / 256.0));
    chk((real'(p1) / 2048.0 - ex) < 0.025 && (ex - real'(p1) / 2048.0) < 0.025, $sformatf("accuracy d=%0d", b - a));
  endtask

  initial begin
    z0 = 0; z1 = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(0, 0, 1024);            // 0.5
    run(0, 128, 1280);          // 0.25*0.5+0.5 = 0.625
    run(0, 512, 1792);          // 0.125*2+0.625 = 0.875
    run(0, 768, 1920);          // 24/256 + 0.84375 = 0.9375
    run(0, 2000, 2048);         // saturated
    run(512, 0, 256);           // 1 - 0.875
    run(-1000, 1000, 2048);
    repeat (500) run(int'($urandom % 8192) - 4096, int'($urandom % 8192) - 4096, -1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
