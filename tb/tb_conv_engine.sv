// Test of conv_engine with its default 16 x 8 lane array on small maps:
// a 5x5 pass (3 input channels, padding 2), a 3x3 pass with two output
// groups and a shortcut operand, and a 1x1 pass with ReLU. Memories are
// modelled here with one-clock read latency. Every output word (address,
// group and all lanes, wide and 12-bit) is compared with a direct
// convolution computed in the testbench, and the clocks from start to done
// must equal groups*h*w*k*k + 2 (one tap per clock).
module tb_conv_engine;
  import rfd_pkg::*;
  localparam int P = 16, CI = 8, MAXPIX = 64, MAXW = 40;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;

  logic start = 0, busy, done;
  conv_cfg_t cfg;
  logic [PIX_AW-1:0] in_addr, res_addr, out_addr;
  logic [CI-1:0][FM_W-1:0] in_data;
  logic [WADDR_W-1:0] w_addr;
  logic [P-1:0][CI-1:0][FM_W-1:0] w_data;
  logic [PADDR_W-1:0] p_addr;
  logic [P-1:0][FM_W-1:0] p_scale, res_data;
  logic [P-1:0][WIDE_W-1:0] p_bias, out_wide;
  logic [GRP_W-1:0] res_group, out_group;
  logic out_we;
  logic [P-1:0][FM_W-1:0] out_fm;

  conv_engine #(.P_OC(P), .CI_MAX(CI)) dut (.*);

  int fin [MAXPIX][CI];
  int wt  [MAXW][P][CI];
  int sc  [4][P];
  int bi  [4][P];
  int rs  [MAXPIX][2 * P];
  longint got_w [2][MAXPIX][P];
  int got_f [2][MAXPIX][P];
  int seen [2][MAXPIX];
  int checks = 0, failures = 0;

  // memory models, one clock read latency
  always_ff @(posedge clk) begin
    for (int c = 0; c < CI; c++) in_data[c] <= FM_W'(fin[int'(in_addr) % MAXPIX][c]);
    for (int o = 0; o < P; o++) for (int c = 0; c < CI; c++) w_data[o][c] <= FM_W'(wt[int'(w_addr) % MAXW][o][c]);
    for (int o = 0; o < P; o++) begin
      p_scale[o] <= FM_W'(sc[int'(p_addr) % 4][o]);
      p_bias[o]  <= WIDE_W'(bi[int'(p_addr) % 4][o]);
    end
  end
  always_comb for (int o = 0; o < P; o++) res_data[o] = FM_W'(rs_q[int'(res_group) * P + o]);
  int rs_q [2 * P];
  always_ff @(posedge clk) for (int l = 0; l < 2 * P; l++) rs_q[l] <= rs[int'(res_addr) % MAXPIX][l];

  always_ff @(posedge clk) if (out_we) begin
    seen[out_group][out_addr]++;
    for (int o = 0; o < P; o++) begin
      got_w[out_group][out_addr][o] = longint'($signed(out_wide[o]));
      got_f[out_group][out_addr][o] = int'($signed(out_fm[o]));
    end
  end

  function automatic longint sat(longint v, int bits);
    longint mx = (longint'(1) <<< (bits - 1)) - 1;
    return v > mx ? mx : (v < -mx - 1 ? -mx - 1 : v);
  endfunction

  task automatic layer(int k, int h, int w, int cin, int ng, int wbase, int pbase, int sh, bit relu, bit resid);
    int t0, t1, pad;
    pad = k / 2;
    foreach (fin[p, c]) fin[p][c] = (c < cin) ? int'($urandom % 4096) - 2048 : int'($urandom % 4096) - 2048;
    foreach (wt[a, o, c]) wt[a][o][c] = int'($urandom % 512) - 256;
    foreach (sc[a, o]) sc[a][o] = int'($urandom % 512);
    foreach (bi[a, o]) bi[a][o] = int'($urandom % 8192) - 4096;
    foreach (rs[p, l]) rs[p][l] = int'($urandom % 4096) - 2048;
    foreach (seen[g, p]) seen[g][p] = 0;
    cfg = '{k: 3'(k), h: DIM_W'(h), w: DIM_W'(w), cin: CH_W'(cin), ngroups: GRP_W'(ng),
            wbase: WADDR_W'(wbase), pbase: PADDR_W'(pbase), rshift: SH_W'(sh), relu: relu, resid: resid};
    @(negedge clk); start = 1; t0 = $time;
    @(negedge clk); start = 0;
    @(posedge done); t1 = $time;
    checks++;
    if ((t1 - t0) / 10 != ng * h * w * k * k + 2) begin
      failures++; $display("FAIL k=%0d cycles %0d", k, (t1 - t0) / 10);
    end
    @(negedge clk);
    for (int g = 0; g < ng; g++) for (int y = 0; y < h; y++) for (int x = 0; x < w; x++) begin
      int a = y * w + x;
      checks++;
      if (seen[g][a] != 1) begin failures++; $display("FAIL k=%0d g%0d pix %0d written %0d times", k, g, a, seen[g][a]); end
      for (int o = 0; o < P; o++) begin
        longint acc = 0, v;
        for (int ky = 0; ky < k; ky++) for (int kx = 0; kx < k; kx++) begin
          int iy = y + ky - pad, ix = x + kx - pad;
          if (iy < 0 || iy >= h || ix < 0 || ix >= w) continue;
          for (int c = 0; c < cin; c++)
            acc += longint'(wt[wbase + g * k * k + ky * k + kx][o][c]) * fin[iy * w + ix][c];
        end
        v = ((acc * sc[pbase + g][o]) >>> sh) + bi[pbase + g][o] + (resid ? rs[a][g * P + o] : 0);
        if (relu && v < 0) v = 0;
        checks++;
        if (got_w[g][a][o] != sat(v, 22) || got_f[g][a][o] != int'(sat(v, 12))) begin
          failures++;
          if (failures < 10) $display("FAIL k=%0d g%0d (%0d,%0d) oc%0d got %0d/%0d exp %0d", k, g, y, x, o,
                                      got_w[g][a][o], got_f[g][a][o], v);
        end
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    layer(5, 7, 6, 3, 1, 0, 0, 12, 1, 0);
    layer(3, 5, 8, 8, 2, 3, 1, 10, 0, 1);
    layer(1, 6, 6, 5, 2, 30, 2, 8, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
