// Test of fc_engine running the classifier head's three layers back to back
// (64 -> 48 -> 24 -> 2, ReLU on the first two) on random weights, biases and
// input vector. Weight and bias RAMs are modelled with one clock of read
// latency. After each layer the output vector is compared with a reference
// computed here, and done must come n_out*n_in + 2 clocks after the start
// edge.
module tb_fc_engine;
  import rfd_pkg::*;
  localparam int N = 64;
  function automatic int NI(int l); return l == 0 ? 64 : (l == 1 ? 48 : 24); endfunction
  function automatic int NO(int l); return l == 0 ? 48 : (l == 1 ? 24 : 2); endfunction
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic start = 0, busy, done;
  fc_cfg_t cfg;
  logic [N-1:0][WIDE_W-1:0] x_ext, y;
  logic [FWA_W-1:0] w_addr;
  logic [FBA_W-1:0] b_addr;
  fm_t w_data; wide_t b_data;
  int wm [5000];
  int bm [80];
  longint v [N], nv [N];
  int checks = 0, failures = 0;

  fc_engine #(.MAX_N(N)) dut (.*);

  always_ff @(posedge clk) begin
    w_data <= fm_t'(wm[int'(w_addr) % 5000]);
    b_data <= wide_t'(bm[int'(b_addr) % 80]);
  end

  initial begin : main
    int wb, bb, sh, t0, t1;
    foreach (wm[a]) wm[a] = int'($urandom % 4096) - 2048;
    foreach (bm[a]) bm[a] = int'($urandom % 200000) - 100000;
    for (int i = 0; i < N; i++) begin v[i] = int'($urandom % 400000) - 200000; x_ext[i] = WIDE_W'(v[i]); end
    repeat (2) @(negedge clk); rst_n = 1;
    wb = 0; bb = 0;
    for (int l = 0; l < 3; l++) begin
      sh = 12;
      cfg = '{n_in: CH_W'(NI(l)), n_out: CH_W'(NO(l)), wbase: FWA_W'(wb), bbase: FBA_W'(bb),
              rshift: SH_W'(sh), relu: (l < 2), src_ext: (l == 0)};
      @(negedge clk); start = 1; t0 = $time; @(negedge clk); start = 0;
      @(posedge done); t1 = $time;
      checks++;
      if ((t1 - t0) / 10 != NI(l) * NO(l) + 2) begin failures++; $display("FAIL layer %0d cycles %0d", l, (t1 - t0) / 10); end
      @(negedge clk);
      for (int j = 0; j < NO(l); j++) begin
        longint acc;
        acc = 0;
        for (int i = 0; i < NI(l); i++) acc += longint'(wm[wb + j * NI(l) + i]) * v[i];
        nv[j] = (acc >>> sh) + bm[bb + j];
        if (l < 2 && nv[j] < 0) nv[j] = 0;
        if (nv[j] > 2097151) nv[j] = 2097151;
        if (nv[j] < -2097152) nv[j] = -2097152;
        checks++;
        if (longint'($signed(y[j])) != nv[j]) begin
          failures++; $display("FAIL layer %0d neuron %0d got %0d exp %0d", l, j, $signed(y[j]), nv[j]);
        end
      end
      for (int j = 0; j < NO(l); j++) v[j] = nv[j];
      wb += NI(l) * NO(l); bb += NO(l);
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
