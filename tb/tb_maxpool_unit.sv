// Test of maxpool_unit on random 10x8 and 4x4 maps of 8 signed lanes: each
// output word is compared with the maximum of its 2x2 window computed here;
// every output pixel must be written exactly once, and done must come
// 4*(h/2)*(w/2) + 2 clocks after the start edge.
module tb_maxpool_unit;
  import rfd_pkg::*;
  localparam int L = 8;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic start = 0, busy, done, wr_we;
  logic [DIM_W-1:0] in_h, in_w;
  logic [PIX_AW-1:0] rd_addr, wr_addr;
  logic [L-1:0][FM_W-1:0] rd_data, wr_data;
  int m [128][L];
  int got [32][L];
  int seen [32];
  int checks = 0, failures = 0;

  maxpool_unit #(.LANES(L)) dut (.*);

  always_ff @(posedge clk) for (int l = 0; l < L; l++) rd_data[l] <= FM_W'(m[int'(rd_addr) % 128][l]);
  always_ff @(posedge clk) if (wr_we) begin
    seen[int'(wr_addr) % 32]++;
    for (int l = 0; l < L; l++) got[int'(wr_addr) % 32][l] = int'($signed(wr_data[l]));
  end

  task automatic pass(int h, int w);
    int t0, t1;
    foreach (m[a, l]) m[a][l] = int'($urandom % 4096) - 2048;
    foreach (seen[a]) seen[a] = 0;
    in_h = DIM_W'(h); in_w = DIM_W'(w);
    @(negedge clk); start = 1; t0 = $time; @(negedge clk); start = 0;
    @(posedge done); t1 = $time;
    checks++;
    if ((t1 - t0) / 10 != 4 * (h / 2) * (w / 2) + 2) begin failures++; $display("FAIL cycles %0d", (t1 - t0) / 10); end
    @(negedge clk);
    for (int y = 0; y < h / 2; y++) for (int x = 0; x < w / 2; x++) begin
      int a = y * (w / 2) + x;
      checks++;
      if (seen[a] != 1) begin failures++; $display("FAIL pixel %0d written %0d times", a, seen[a]); end
      for (int l = 0; l < L; l++) begin
        int e = m[(2 * y) * w + 2 * x][l];
        if (m[(2 * y) * w + 2 * x + 1][l] > e) e = m[(2 * y) * w + 2 * x + 1][l];
        if (m[(2 * y + 1) * w + 2 * x][l] > e) e = m[(2 * y + 1) * w + 2 * x][l];
        if (m[(2 * y + 1) * w + 2 * x + 1][l] > e) e = m[(2 * y + 1) * w + 2 * x + 1][l];
        checks++;
        if (got[a][l] != e) begin failures++; $display("FAIL (%0d,%0d) lane %0d got %0d exp %0d", y, x, l, got[a][l], e); end
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    pass(10, 8);
    pass(4, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
