// Test of layer_ctrl at the default network sizes. Engine models answer each
// start pulse with a done after a random delay. The testbench checks the
// order of the phases, that each layer's configuration (kernel, map size,
// channels, groups, weight/parameter bases, shift, ReLU and shortcut flags)
// is the one worked out here from the network, that exactly one start goes
// to the right engine per layer, that the GAP sums are cleared at the start
// and that done pulses once at the end, twice in a row.
module tb_layer_ctrl;
  import rfd_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic start = 0, busy, done;
  logic [6:0][SH_W-1:0] shifts;
  phase_e phase;
  logic conv_start, pool_start, fc_start, smax_valid, gap_clear;
  logic conv_done = 0, pool_done = 0, fc_done = 0, smax_done = 0;
  conv_cfg_t conv_cfg; fc_cfg_t fc_cfg;
  logic [DIM_W-1:0] pool_h, pool_w;
  int checks = 0, failures = 0;
  int n_conv = 0, n_pool = 0, n_fc = 0, n_smax = 0, n_clear = 0, n_done = 0;

  layer_ctrl dut (.*);

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  // engine models: done after a random delay
  always @(posedge clk) begin
    if (rst_n && conv_start) begin
      n_conv++;
      case (n_conv % 4)
        1: chk(conv_cfg == '{k: 5, h: 128, w: 128, cin: 3, ngroups: 1, wbase: 0, pbase: 0,
                             rshift: 11, relu: 1, resid: 0} && phase == PH_CONV1, "conv1 cfg");
        2: chk(conv_cfg == '{k: 3, h: 64, w: 64, cin: 8, ngroups: 1, wbase: 25, pbase: 1,
                             rshift: 12, relu: 1, resid: 0} && phase == PH_CONVA, "convA cfg");
        3: chk(conv_cfg == '{k: 3, h: 64, w: 64, cin: 8, ngroups: 4, wbase: 34, pbase: 2,
                             rshift: 13, relu: 0, resid: 0} && phase == PH_CONVB, "convB cfg");
        0: chk(conv_cfg == '{k: 1, h: 64, w: 64, cin: 8, ngroups: 4, wbase: 70, pbase: 6,
                             rshift: 14, relu: 1, resid: 1} && phase == PH_CONV1X1, "conv1x1 cfg");
      endcase
      repeat ($urandom % 5 + 1) @(posedge clk);
      conv_done <= 1; @(posedge clk); conv_done <= 0;
    end
  end
  always @(posedge clk) begin
    if (rst_n && pool_start) begin
      n_pool++;
      chk(phase == PH_POOL && pool_h == 128 && pool_w == 128, "pool cfg");
      repeat ($urandom % 5 + 1) @(posedge clk);
      pool_done <= 1; @(posedge clk); pool_done <= 0;
    end
  end
  always @(posedge clk) begin
    if (rst_n && fc_start) begin
      n_fc++;
      case (n_fc % 3)
        1: chk(fc_cfg == '{n_in: 64, n_out: 48, wbase: 0, bbase: 0, rshift: 15, relu: 1, src_ext: 1} && phase == PH_FC1, "fc1 cfg");
        2: chk(fc_cfg == '{n_in: 48, n_out: 24, wbase: 3072, bbase: 48, rshift: 16, relu: 1, src_ext: 0} && phase == PH_FC2, "fc2 cfg");
        0: chk(fc_cfg == '{n_in: 24, n_out: 2, wbase: 4224, bbase: 72, rshift: 17, relu: 0, src_ext: 0} && phase == PH_FC3, "fc3 cfg");
      endcase
      repeat ($urandom % 5 + 1) @(posedge clk);
      fc_done <= 1; @(posedge clk); fc_done <= 0;
    end
  end
  always @(posedge clk) begin
    smax_done <= rst_n && smax_valid;
    if (rst_n && smax_valid) begin n_smax++; chk(phase == PH_SMAX, "softmax phase"); end
    if (rst_n && gap_clear) n_clear++;
    if (rst_n && done) n_done++;
  end

  initial begin
    for (int i = 0; i < 7; i++) shifts[i] = SH_W'(11 + i);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 1; r <= 2; r++) begin
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      chk(busy, "busy after start");
      @(posedge done);
      @(negedge clk); @(negedge clk);
      chk(!busy && phase == PH_IDLE, "idle after done");
      chk(n_conv == 4 * r && n_pool == r && n_fc == 3 * r && n_smax == r, "one start per layer");
      chk(n_clear == r && n_done == r, "gap clear and done once per image");
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
