// Global average pooling over a whole feature map.
//
// Sits on the write stream of the last convolution pass (operator fusion:
// the residual-block output is never stored). Each `in_valid` beat carries
// P lanes of one pixel for output-channel group `in_group`; lane l is added
// to the running sum of channel in_group*P + l. `clear` zeroes all sums
// before a new image. The average of channel c is its sum shifted right by
// `shift` (= log2 of the pixel count, the map size being a power of two),
// saturated to the 22-bit wide format; it is combinational on the sums.
// The averaging itself is the network's; the fused placement, the
// power-of-two division and the sum width are this design's choices.
module gap_unit import rfd_pkg::*; #(
  parameter int unsigned C     = 64,
  parameter int unsigned P     = 16,
  parameter int unsigned SUM_W = 40
)(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic                        in_valid,
  input  logic [GRP_W-1:0]            in_group,
  input  logic [P-1:0][WIDE_W-1:0]    in_data,
  input  logic [4:0]                  shift,
  output logic [C-1:0][WIDE_W-1:0]    avg
);
  logic signed [SUM_W-1:0] sum [C];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < int'(C); c++) sum[c] <= '0;
    end else if (clear) begin
      for (int c = 0; c < int'(C); c++) sum[c] <= '0;
    end else if (in_valid) begin
      for (int l = 0; l < int'(P); l++)
        if (int'(in_group) * int'(P) + l < int'(C))
          sum[int'(in_group) * int'(P) + l] <= sum[int'(in_group) * int'(P) + l]
                                              + SUM_W'($signed(in_data[l]));
    end
  end

  always_comb begin
    for (int c = 0; c < int'(C); c++)
      avg[c] = sat_wide(64'(sum[c] >>> shift));
  end
endmodule
