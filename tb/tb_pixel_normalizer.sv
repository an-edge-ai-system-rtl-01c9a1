// Exhaustive test of pixel_normalizer: every 8-bit input against
// round(p * 256 / 255) computed here with integer arithmetic.
module tb_pixel_normalizer;
  import rfd_pkg::*;
  logic [7:0] pix; fm_t val;
  int checks = 0, failures = 0;
  pixel_normalizer #(.FRAC(8)) dut (.*);
  initial begin
    for (int p = 0; p < 256; p++) begin
      int e;
      pix = 8'(p); #1;
      e = (p * 256 * 2 + 255) / (2 * 255);   // round to nearest
      checks++;
      if (int'(val) != e) begin failures++; $display("FAIL p=%0d got %0d exp %0d", p, val, e); end
    end
    checks++;
    if (int'(val) != 256) failures++;        // 255 -> 1.0
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
