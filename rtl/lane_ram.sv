// Simple dual-port on-chip RAM with per-lane write enables.
//
// Every feature-map, weight and parameter buffer of the accelerator is one
// of these. A word holds LANES elements of EW bits; for feature maps a word
// is one pixel with all its channels side by side, so a single read returns
// every input channel a convolution tap needs. The write port updates only
// the lanes selected by `wmask`, which lets the host load one element at a
// time and lets the convolution engine write one group of output channels.
// Read latency is one clock (registered output, as a block RAM). A read of
// an address being written in the same cycle returns the old contents.
module lane_ram #(
  parameter int unsigned LANES = 8,
  parameter int unsigned EW    = 12,
  parameter int unsigned DEPTH = 4096,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
)(
  input  logic                       clk,
  input  logic                       we,
  input  logic [AW-1:0]              waddr,
  input  logic [LANES-1:0]           wmask,
  input  logic [LANES-1:0][EW-1:0]   wdata,
  input  logic [AW-1:0]              raddr,
  output logic [LANES-1:0][EW-1:0]   rdata
);
  logic [LANES-1:0][EW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int l = 0; l < int'(LANES); l++)
        if (wmask[l]) mem[waddr][l] <= wdata[l];
    end
    rdata <= mem[raddr];
  end

  // Addresses must stay inside the array.
  assert property (@(posedge clk) we |-> (int'(waddr) < int'(DEPTH)));
endmodule
