// Test of gap_unit: streams a random 8x8 map of 64 channels in four groups
// of 16 lanes (as the convolution engine writes it), then compares each
// channel's average (sum >>> 6, floor) with a sum kept here; also checks
// saturation of a large average and that `clear` restarts the sums.
module tb_gap_unit;
  import rfd_pkg::*;
  localparam int C = 64, P = 16;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic clear = 0, in_valid = 0;
  logic [GRP_W-1:0] in_group;
  logic [P-1:0][WIDE_W-1:0] in_data;
  logic [4:0] shift;
  logic [C-1:0][WIDE_W-1:0] avg;
  longint s [C];
  int checks = 0, failures = 0;

  gap_unit #(.C(C), .P(P)) dut (.*);

  task automatic stream(int npix, int mag);
    foreach (s[c]) s[c] = 0;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int g = 0; g < C / P; g++) for (int p = 0; p < npix; p++) begin
      in_valid = 1; in_group = GRP_W'(g);
      for (int l = 0; l < P; l++) begin
        int v = int'($urandom % (2 * mag)) - mag;
        in_data[l] = WIDE_W'(v); s[g * P + l] += v;
      end
      @(negedge clk);
    end
    in_valid = 0;
    @(negedge clk);
  endtask

  initial begin
    shift = 5'd6;
    repeat (2) @(negedge clk); rst_n = 1;
    stream(64, 100000);
    for (int c = 0; c < C; c++) begin
      checks++;
      if (longint'($signed(avg[c])) != (s[c] >>> 6)) begin
        failures++; $display("FAIL ch %0d got %0d exp %0d", c, $signed(avg[c]), s[c] >>> 6);
      end
    end
    shift = 5'd0;   // no division: the 64-pixel sum saturates the 22-bit output
    stream(64, 2000000);
    for (int c = 0; c < C; c++) begin
      longint e;
      e = s[c];
      if (e > 2097151) e = 2097151;
      if (e < -2097152) e = -2097152;
      checks++;
      if (longint'($signed(avg[c])) != e) begin failures++; $display("FAIL sat ch %0d", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
