// Self-checking test of post_op: directed corner cases (ReLU, shortcut add,
// saturation to 12 and 22 bits, floor shift of negative sums) and random
// operands, each compared with a reference computed here in 64-bit integers.
module tb_post_op;
  import rfd_pkg::*;
  acc_t acc; fm_t scale; wide_t bias, resid; logic [SH_W-1:0] rshift;
  logic resid_en, relu_en;
  wide_t y_wide; fm_t y_fm;
  int checks = 0, failures = 0;

  post_op dut (.*);

  function automatic longint clip(longint v, int bits);
    longint mx = (longint'(1) <<< (bits - 1)) - 1;
    return v > mx ? mx : (v < -mx - 1 ? -mx - 1 : v);
  endfunction

  task automatic apply(longint a, int s, int b, int sh, int r, bit re, bit rl);
    longint v;
    acc = acc_t'(a); scale = fm_t'(s); bias = wide_t'(b); rshift = SH_W'(sh);
    resid = wide_t'(r); resid_en = re; relu_en = rl;
    #1;
    v = a * s;
    v = (v >= 0) ? (v >> sh) : -((-v + (longint'(1) << sh) - 1) >> sh);  // floor division
    v = v + b + (re ? r : 0);
    if (rl && v < 0) v = 0;
    checks += 2;
    if (y_wide != wide_t'(clip(v, 22)) || y_fm != fm_t'(clip(v, 12))) begin
      failures++;
      $display("FAIL acc=%0d s=%0d b=%0d sh=%0d r=%0d/%0d relu=%0d: got %0d/%0d exp %0d/%0d",
               a, s, b, sh, r, re, rl, y_wide, y_fm, clip(v, 22), clip(v, 12));
    end
  endtask

  initial begin
    apply(1000, 256, 5, 8, 0, 0, 0);        // 1005
    apply(-1000, 256, 0, 8, 0, 0, 1);       // ReLU -> 0
    apply(-1000, 256, 0, 8, 0, 0, 0);       // -1000
    apply(-3, 1, 0, 1, 0, 0, 0);            // floor(-1.5) = -2
    apply(100000, 256, 0, 8, 0, 0, 0);      // 12-bit saturation
    apply(-100000, 256, 0, 8, 0, 0, 0);
    apply(64'sd1 << 40, 2047, 0, 4, 0, 0, 0); // 22-bit saturation
    apply(500, 256, 10, 8, 700, 1, 1);      // shortcut add
    apply(500, 256, 10, 8, -2000, 1, 1);    // shortcut add then ReLU
    apply(500, 256, 10, 8, -2000, 0, 1);    // shortcut disabled
    repeat (2000)
      apply(longint'($signed($urandom)) * 64, int'($urandom % 4096) - 2048,
            int'($urandom % 65536) - 32768, int'($urandom % 24), int'($urandom % 8192) - 4096,
            1'($urandom), 1'($urandom));
    repeat (2000)   // small operands: results near zero, where ReLU and the shortcut matter
      apply(longint'(int'($urandom % 20000) - 10000), int'($urandom % 512) - 256, int'($urandom % 2000) - 1000,
            int'($urandom % 10), int'($urandom % 2000) - 1000, 1'($urandom), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
