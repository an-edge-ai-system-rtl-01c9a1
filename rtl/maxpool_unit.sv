// 2x2 pooling, stride 2, of a channel-packed feature map.
//
// For every output pixel the unit reads the four input pixels of its 2x2
// window (one per clock from a 1-cycle-latency RAM), keeps the per-channel
// signed maximum, and writes one output word after the fourth. All LANES
// channels are pooled in parallel. The input height and width (even) come
// with `start`; the output is (h/2) x (w/2), row-major. A pass takes
// `done` rises 4*(h/2)*(w/2) + 2 clocks after the edge
// that takes `start`, after the last write.
// The 2x2 pooling window is the network's; that it takes the maximum (not
// the mean) is this design's choice.
module maxpool_unit import rfd_pkg::*; #(
  parameter int unsigned LANES = 8
)(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [DIM_W-1:0]            in_h,
  input  logic [DIM_W-1:0]            in_w,
  output logic                        busy,
  output logic                        done,
  output logic [PIX_AW-1:0]           rd_addr,
  input  logic [LANES-1:0][FM_W-1:0]  rd_data,
  output logic                        wr_we,
  output logic [PIX_AW-1:0]           wr_addr,
  output logic [LANES-1:0][FM_W-1:0]  wr_data
);
  logic run;
  logic [DIM_W-1:0] h, w, oy, ox;
  logic [1:0] q;
  logic last_out;

  always_comb begin
    rd_addr  = PIX_AW'((PIX_AW'(oy) * 2 + PIX_AW'(q[1])) * w + PIX_AW'(ox) * 2 + PIX_AW'(q[0]));
    last_out = (oy == (h >> 1) - 1'b1) && (ox == (w >> 1) - 1'b1);
  end

  logic s1_valid, s1_first, s1_last, s1_final, s2_final;
  logic [PIX_AW-1:0] s1_oaddr;
  logic [LANES-1:0][FM_W-1:0] m;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; h <= '0; w <= '0; oy <= '0; ox <= '0; q <= '0;
      s1_valid <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0; s1_final <= 1'b0; s1_oaddr <= '0;
      m <= '0; s2_final <= 1'b0; wr_we <= 1'b0; wr_addr <= '0; wr_data <= '0; done <= 1'b0;
    end else begin
      wr_we <= 1'b0;
      if (start && !busy) begin
        run <= 1'b1; h <= in_h; w <= in_w; oy <= '0; ox <= '0; q <= '0;
      end else if (run) begin
        q <= q + 1'b1;
        if (q == 2'd3) begin
          if (last_out) run <= 1'b0;
          else if (ox == (w >> 1) - 1'b1) begin ox <= '0; oy <= oy + 1'b1; end
          else ox <= ox + 1'b1;
        end
      end
      s1_valid <= run;
      s1_first <= (q == 2'd0);
      s1_last  <= (q == 2'd3);
      s1_final <= run && (q == 2'd3) && last_out;
      s2_final <= s1_valid && s1_final;
      done     <= s2_final;   // one clock after the last write is presented
      s1_oaddr <= PIX_AW'(PIX_AW'(oy) * PIX_AW'(w >> 1) + PIX_AW'(ox));
      if (s1_valid) begin
        for (int l = 0; l < int'(LANES); l++) begin
          if (s1_first || ($signed(rd_data[l]) > $signed(m[l]))) m[l] <= rd_data[l];
          if (s1_last) wr_data[l] <= (!s1_first && $signed(m[l]) > $signed(rd_data[l])) ? m[l] : rd_data[l];
        end
        if (s1_last) begin wr_we <= 1'b1; wr_addr <= s1_oaddr; end
      end
    end
  end

  assign busy = run || s1_valid || wr_we || s2_final;
endmodule
