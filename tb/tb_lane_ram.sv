// Test of lane_ram: random masked writes and reads against a shadow array;
// checks the one-clock read latency and that unmasked lanes keep their data.
module tb_lane_ram;
  localparam int LANES = 4, EW = 12, DEPTH = 64;
  logic clk = 0; always #5 clk = ~clk;
  logic we; logic [5:0] waddr, raddr; logic [LANES-1:0] wmask;
  logic [LANES-1:0][EW-1:0] wdata, rdata;
  logic [LANES-1:0][EW-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  lane_ram #(.LANES(LANES), .EW(EW), .DEPTH(DEPTH)) dut (.*);

  initial begin
    we = 1; wmask = '1;
    for (int a = 0; a < DEPTH; a++) begin
      waddr = 6'(a); wdata = {$urandom, $urandom}; shadow[a] = wdata;
      @(posedge clk); #1;
    end
    we = 0;
    repeat (3000) begin
      logic [5:0] ra;
      we = 1'($urandom); waddr = 6'($urandom); wmask = 4'($urandom); wdata = {$urandom, $urandom};
      ra = 6'($urandom); raddr = ra;
      @(posedge clk); #1;
      // read returns the contents before this edge's write
      checks++;
      if (rdata != shadow[ra]) begin failures++; $display("FAIL addr %0d", ra); end
      if (we) for (int l = 0; l < LANES; l++) if (wmask[l]) shadow[waddr][l] = wdata[l];
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
