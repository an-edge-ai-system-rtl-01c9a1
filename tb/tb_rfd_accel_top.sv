// End-to-end test of the accelerator at its default (full) size: a 128x128
// RGB image through the whole network, twice.
//
// The testbench draws random weights, folded-BN parameters and images,
// loads them through the host port exactly as a host processor would, runs
// an inference and compares the logits, the class and both probabilities
// with a reference model written here with plain nested loops (same
// fixed-point rules: floor shift, saturation to 12 or 22 bits, ReLU).
// The second run changes only the last FC biases, so the decision flips
// class, and tries a host write during the run, which must be ignored.
// It counts how often each mechanism occurred in the reference (zero-padded
// taps, ReLU clamps, saturations, shortcut adds, pooled windows, both
// classes) and fails any that never did. The clock count is checked against
// the one-tap-per-clock schedule (the sum of taps of all passes plus a
// bounded overhead) and against the 16.7 ms frame time of a 60 fps camera
// at 110 MHz.
module tb_rfd_accel_top;
  import rfd_pkg::*;

  localparam int H = 128, W = 128, CIN = 3, C1 = 8, CM = 8, C2 = 64;
  localparam int F1 = 48, F2 = 24, NC = 2, P_OC = 16, CI_MAX = 8;
  localparam int H2 = H / 2, W2 = W / 2;
  localparam int NG1 = 1, NGA = 1, NGB = C2 / P_OC;
  localparam int WL = P_OC * CI_MAX;
  localparam int WB1 = 0, WBA = 25, WBB = 34, WB11 = 34 + 9 * NGB;
  localparam int PB1 = 0, PBA = 1, PBB = 2, PB11 = 2 + NGB;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ld_we = 0; ld_sel_e ld_sel = LD_IMG; logic [23:0] ld_addr = 0; logic [WIDE_W-1:0] ld_data = 0;
  logic start = 0, busy, done, cls;
  logic [11:0] prob_normal, prob_fault;
  wide_t logit0, logit1;
  logic [31:0] cycles;

  rfd_accel_top dut (.*);

  int checks = 0, failures = 0;

  // Network data, flat arrays indexed [out][in][ky][kx] / [y][x][c].
  // Sizes are held in variables so the reference loops stay loops.
  int h1, w1d, h2, w2d, cin, c1, cm, c2, f1, f2, nc;
  int img[], w1[], wa[], wb[], w11[];
  int sc1[], sca[], scb[], sc11[], bi1[], bia[], bib[], bi11[];
  int fw1[], fw2[], fw3[], fb1[], fb2[], fb3[];
  int sh [7];

  // reference intermediates
  int x0[], m1[], mp[], ma[], mb[], m11[], none[];
  int gap[], v1[], v2[], z[];

  // mechanism counters
  int n_pad = 0, n_relu = 0, n_sat = 0, n_resid = 0, n_pool = 0, n_bn = 0, n_cls0 = 0, n_cls1 = 0;

  function automatic int srand(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  function automatic longint sat(longint v, int bits);
    longint mx = (longint'(1) <<< (bits - 1)) - 1;
    longint mn = -(longint'(1) <<< (bits - 1));
    if (v > mx) return mx;
    if (v < mn) return mn;
    return v;
  endfunction

  // post-processing reference: ((acc*scale) >>> sh) + bias + res, ReLU, saturate
  function automatic longint post(longint acc, int scale, int bias, int s, int res, bit relu, int bits);
    longint v = ((acc * scale) >>> s) + bias + res;
    if (relu && v < 0) begin v = 0; n_relu++; end
    if (v != sat(v, bits)) n_sat++;
    return sat(v, bits);
  endfunction

  function automatic int sigm(int d);  // PLAN sigmoid, Q8 in, Q8 out
    int a = d < 0 ? -d : d;
    int y;
    if (a >= 5 * 256)                y = 256;
    else if (a >= 19 * 256 / 8)      y = (a >>> 5) + 27 * 256 / 32;
    else if (a >= 256)               y = (a >>> 3) + 5 * 256 / 8;
    else                             y = (a >>> 2) + 128;
    return d < 0 ? 256 - y : y;
  endfunction

  function automatic void fill(ref int a[], input int n, input int lo, input int hi);
    a = new[n];
    foreach (a[i]) a[i] = srand(lo, hi);
  endfunction

  // Convolution, stride 1, zero padding k/2, then the post-op. `res` (same
  // layout as the output) is added when `use_res`.
  task automatic conv_ref(ref int src[], input int h, input int w, input int ci, input int co,
                          input int k, ref int wt[], ref int sc[], ref int bi[], input int s,
                          input bit relu, input int bits, input bit use_res, ref int res[],
                          ref int dst[], input bit count_pad);
    dst = new[h * w * co];
    for (int y = 0; y < h; y++) for (int x = 0; x < w; x++) for (int o = 0; o < co; o++) begin
      longint acc;
      acc = 0;
      for (int ky = 0; ky < k; ky++) for (int kx = 0; kx < k; kx++) begin
        int iy, ix;
        iy = y + ky - k / 2; ix = x + kx - k / 2;
        if (iy < 0 || iy >= h || ix < 0 || ix >= w) begin
          if (count_pad && o == 0) n_pad++;
          continue;
        end
        for (int c = 0; c < ci; c++)
          acc += longint'(wt[((o * ci + c) * k + ky) * k + kx]) * src[(iy * w + ix) * ci + c];
      end
      dst[(y * w + x) * co + o] = int'(post(acc, sc[o], bi[o], s,
                                            use_res ? res[(y * w + x) * co + o] : 0, relu, bits));
      if (use_res) n_resid++;
      if (sc[o] != 256) n_bn++;
    end
  endtask

  task automatic fc_ref(ref int x[], input int ni, input int no, ref int wt[], ref int b[],
                        input int s, input bit relu, ref int y[]);
    y = new[no];
    for (int j = 0; j < no; j++) begin
      longint acc;
      acc = 0;
      for (int i = 0; i < ni; i++) acc += longint'(wt[j * ni + i]) * x[i];
      y[j] = int'(post(acc, 1, b[j], s, 0, relu, 22));
    end
  endtask

  task automatic reference();
    x0 = new[h1 * w1d * cin];
    foreach (x0[i]) x0[i] = (img[i] * 257 * 256 + 32768) >>> 16;
    conv_ref(x0, h1, w1d, cin, c1, 5, w1, sc1, bi1, sh[0], 1, 12, 0, none, m1, 1);
    mp = new[h2 * w2d * c1];
    for (int y = 0; y < h2; y++) for (int x = 0; x < w2d; x++) begin
      n_pool++;
      for (int c = 0; c < c1; c++) begin
        int m, v;
        m = m1[((2 * y) * w1d + 2 * x) * c1 + c];
        v = m1[((2 * y) * w1d + 2 * x + 1) * c1 + c];     if (v > m) m = v;
        v = m1[((2 * y + 1) * w1d + 2 * x) * c1 + c];     if (v > m) m = v;
        v = m1[((2 * y + 1) * w1d + 2 * x + 1) * c1 + c]; if (v > m) m = v;
        mp[(y * w2d + x) * c1 + c] = m;
      end
    end
    conv_ref(mp, h2, w2d, c1, cm, 3, wa, sca, bia, sh[1], 1, 12, 0, none, ma, 0);
    conv_ref(ma, h2, w2d, cm, c2, 3, wb, scb, bib, sh[2], 0, 12, 0, none, mb, 0);
    conv_ref(mp, h2, w2d, c1, c2, 1, w11, sc11, bi11, sh[3], 1, 22, 1, mb, m11, 0);
    gap = new[c2];
    for (int o = 0; o < c2; o++) begin
      longint g;
      g = 0;
      for (int p = 0; p < h2 * w2d; p++) g += m11[p * c2 + o];
      gap[o] = int'(sat(g >>> $clog2(H2 * W2), 22));
    end
    fc_ref(gap, c2, f1, fw1, fb1, sh[4], 1, v1);
    fc_ref(v1, f1, f2, fw2, fb2, sh[5], 1, v2);
    fc_ref(v2, f2, nc, fw3, fb3, sh[6], 0, z);
  endtask

  task automatic ld(ld_sel_e s, int a, int d);
    @(negedge clk);
    ld_we = 1; ld_sel = s; ld_addr = 24'(a); ld_data = WIDE_W'(d);
    @(negedge clk);
    ld_we = 0;
  endtask

  // conv weights: word = base + group*k*k + tap, element = (o % P_OC)*CI_MAX + c
  task automatic load_conv(ref int wt[], input int ci, input int co, input int k, input int base);
    for (int o = 0; o < co; o++) for (int c = 0; c < ci; c++) for (int t = 0; t < k * k; t++)
      ld(LD_CONV_W, (base + (o / P_OC) * k * k + t) * WL + (o % P_OC) * CI_MAX + c,
         wt[((o * ci + c) * k + t / k) * k + t % k]);
  endtask

  task automatic load_post(ref int sc[], ref int bi[], input int co, input int pbase);
    for (int o = 0; o < co; o++) begin
      ld(LD_SCALE, pbase * P_OC + o, sc[o]);
      ld(LD_BIAS, pbase * P_OC + o, bi[o]);
    end
  endtask

  task automatic load_vec(ld_sel_e s, ref int v[], input int base);
    for (int i = 0; i < v.size(); i++) ld(s, base + i, v[i]);
  endtask

  task automatic load_params();
    for (int i = 0; i < 7; i++) ld(LD_SHIFT, i, sh[i]);
    load_conv(w1, cin, c1, 5, WB1);
    load_conv(wa, c1, cm, 3, WBA);
    load_conv(wb, cm, c2, 3, WBB);
    load_conv(w11, c1, c2, 1, WB11);
    load_post(sc1, bi1, c1, PB1);
    load_post(sca, bia, cm, PBA);
    load_post(scb, bib, c2, PBB);
    load_post(sc11, bi11, c2, PB11);
    load_vec(LD_FC_W, fw1, 0);
    load_vec(LD_FC_W, fw2, c2 * f1);
    load_vec(LD_FC_W, fw3, c2 * f1 + f1 * f2);
    load_vec(LD_FC_B, fb1, 0);
    load_vec(LD_FC_B, fb2, f1);
    load_vec(LD_FC_B, fb3, f1 + f2);
  endtask

  task automatic load_image();
    for (int p = 0; p < h1 * w1d; p++) for (int c = 0; c < cin; c++)
      ld(LD_IMG, p * 4 + c, img[p * cin + c]);
  endtask

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run_and_check(int run, bit poke_while_busy);
    int p1e;
    longint taps;
    reference();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    if (poke_while_busy) ld(LD_SHIFT, 4, 0);   // must be ignored: accelerator busy
    @(posedge done);
    @(negedge clk);
    p1e = sigm(z[1] - z[0]) << 3;
    check($sformatf("run%0d logit0", run), logit0, z[0]);
    check($sformatf("run%0d logit1", run), logit1, z[1]);
    check($sformatf("run%0d class", run), cls, z[1] > z[0]);
    check($sformatf("run%0d p_fault", run), prob_fault, p1e);
    check($sformatf("run%0d p_normal", run), prob_normal, 2048 - p1e);
    if (z[1] > z[0]) n_cls1++; else n_cls0++;
    taps = longint'(H) * W * 25 * NG1 + H2 * W2 * 4 + H2 * W2 * 9 * NGA + H2 * W2 * 9 * NGB
         + H2 * W2 * NGB + C2 * F1 + F1 * F2 + F2 * NC;
    checks++;
    if (cycles < taps || cycles > taps + 64) begin
      failures++;
      $display("FAIL run%0d cycles %0d, schedule needs %0d (+<=64)", run, cycles, taps);
    end
    // 60 fps camera: one image must finish within 1/60 s at the 110 MHz clock
    check($sformatf("run%0d under 16.7 ms at 110 MHz", run), cycles < 32'd1_833_333, 1);
    $display("run%0d: z=(%0d,%0d) class=%0d p_fault=%0d/2048 cycles=%0d (%.2f ms at 110 MHz)",
             run, z[0], z[1], cls, prob_fault, cycles, real'(cycles) / 110.0e3);
  endtask

  initial begin
    #400_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // per-layer shifts (layered quantization)
    sh = '{15, 17, 17, 17, 9, 8, 8};
    h1 = H; w1d = W; h2 = H2; w2d = W2; cin = CIN; c1 = C1; cm = CM; c2 = C2;
    f1 = F1; f2 = F2; nc = NC;
    fill(img, h1 * w1d * cin, 0, 255);
    fill(w1, c1 * cin * 25, -160, 160);
    fill(wa, cm * c1 * 9, -100, 100);
    fill(wb, c2 * cm * 9, -100, 100);
    fill(w11, c2 * c1, -120, 120);
    fill(sc1, c1, 256, 256);    fill(bi1, c1, -200, 100);
    fill(sca, cm, 256, 256);    fill(bia, cm, -200, 100);
    fill(scb, c2, 150, 400);    fill(bib, c2, -300, 300);
    fill(sc11, c2, 150, 400);   fill(bi11, c2, -300, 300);
    fill(fw1, f1 * c2, -128, 128);
    fill(fw2, f2 * f1, -128, 128);
    fill(fw3, nc * f2, -128, 128);
    fill(fb1, f1, -512, 512);
    fill(fb2, f2, -512, 512);
    fill(fb3, nc, 0, 0);
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_params();
    load_image();
    run_and_check(1, 0);
    // flip the decision through the last-layer biases
    if (z[1] > z[0]) begin fb3[0] = (z[1] - z[0]) + 300; fb3[1] = 0; end
    else             begin fb3[1] = (z[0] - z[1]) + 300; fb3[0] = 0; end
    load_vec(LD_FC_B, fb3, f1 + f2);
    run_and_check(2, 1);

    $display("mechanisms: pad=%0d relu=%0d sat=%0d resid=%0d pool=%0d bn=%0d cls0=%0d cls1=%0d",
             n_pad, n_relu, n_sat, n_resid, n_pool, n_bn, n_cls0, n_cls1);
    check("zero padding used", n_pad > 0, 1);
    check("ReLU clamped", n_relu > 0, 1);
    check("saturation occurred", n_sat > 0, 1);
    check("shortcut adds", n_resid > 0, 1);
    check("pooling windows", n_pool > 0, 1);
    check("BN scaling", n_bn > 0, 1);
    check("class 0 decided", n_cls0 > 0, 1);
    check("class 1 decided", n_cls1 > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
