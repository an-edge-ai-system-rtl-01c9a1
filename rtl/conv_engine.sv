// Convolution engine shared by every convolution layer of the network
// (the 5x5 stem, the two 3x3 layers and the 1x1 shortcut of the residual
// block).
//
// Loop tiling: output channels are processed in groups of P_OC lanes. For
// each group, each output pixel (row-major) and each kernel tap, the engine
// reads one input pixel word (all CI_MAX input channels at once) and one
// weight word (P_OC x CI_MAX weights) and performs P_OC*CI_MAX
// multiply-accumulates in one clock. After the last tap of a pixel the P_OC
// sums go through the fused post-op (BN scale/bias, requantization shift,
// optional shortcut add, optional ReLU) and are written out. Stride is 1 and
// the border is zero-padded by K/2, so output size equals input size.
//
// Pipeline: S0 issues the input/weight/parameter/shortcut read addresses to
// 1-cycle-latency RAMs; S1 multiplies and accumulates; S2 applies the post-op
// and presents the write (out_we). One tap per clock, no stalls, so a pass
// raises `done` ngroups*h*w*k*k + 2 clocks after the clock edge that takes `start`.
// The shortcut operand (res_data) must be the lanes of group `res_group`
// at address `res_addr` of the previous cycle.
// The convolution layers themselves are the network's; the tiling over output
// channels, the one-tap-per-clock schedule and the padding are this design's.
module conv_engine import rfd_pkg::*; #(
  parameter int unsigned P_OC   = 16,
  parameter int unsigned CI_MAX = 8
)(
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               start,
  input  conv_cfg_t                          cfg,
  output logic                               busy,
  output logic                               done,
  // input feature map
  output logic [PIX_AW-1:0]                  in_addr,
  input  logic [CI_MAX-1:0][FM_W-1:0]        in_data,
  // weights
  output logic [WADDR_W-1:0]                 w_addr,
  input  logic [P_OC-1:0][CI_MAX-1:0][FM_W-1:0] w_data,
  // per-channel scale / bias
  output logic [PADDR_W-1:0]                 p_addr,
  input  logic [P_OC-1:0][FM_W-1:0]          p_scale,
  input  logic [P_OC-1:0][WIDE_W-1:0]        p_bias,
  // shortcut operand
  output logic [PIX_AW-1:0]                  res_addr,
  output logic [GRP_W-1:0]                   res_group,
  input  logic [P_OC-1:0][FM_W-1:0]          res_data,
  // output
  output logic                               out_we,
  output logic [PIX_AW-1:0]                  out_addr,
  output logic [GRP_W-1:0]                   out_group,
  output logic [P_OC-1:0][WIDE_W-1:0]        out_wide,
  output logic [P_OC-1:0][FM_W-1:0]          out_fm
);
  conv_cfg_t c;
  logic run;
  logic [GRP_W-1:0]   og;
  logic [DIM_W-1:0]   y, x;
  logic [2:0]         ky, kx;
  logic [WADDR_W-1:0] gbase, wptr;

  // ---------------- S0: address generation ----------------
  logic signed [DIM_W+1:0] iy, ix;
  logic inb, last_tap, last_pix, last_grp;
  logic [2:0] pad;

  always_comb begin
    pad      = c.k >> 1;
    iy       = $signed({2'b00, y}) + $signed({7'd0, ky}) - $signed({7'd0, pad});
    ix       = $signed({2'b00, x}) + $signed({7'd0, kx}) - $signed({7'd0, pad});
    inb      = (iy >= 0) && (iy < $signed({2'b00, c.h})) &&
               (ix >= 0) && (ix < $signed({2'b00, c.w}));
    in_addr  = inb ? PIX_AW'(PIX_AW'(iy) * c.w + PIX_AW'(ix)) : '0;
    w_addr   = wptr;
    p_addr   = c.pbase + PADDR_W'(og);
    res_addr = PIX_AW'(PIX_AW'(y) * c.w + PIX_AW'(x));
    last_tap = (ky == c.k - 3'd1) && (kx == c.k - 3'd1);
    last_pix = (y == c.h - 1'b1) && (x == c.w - 1'b1);
    last_grp = (og == c.ngroups - 1'b1);
  end

  // ---------------- pipeline registers ----------------
  logic                s1_valid, s1_first, s1_last, s1_zero, s1_final;
  logic [PIX_AW-1:0]   s1_addr;
  logic [GRP_W-1:0]    s1_grp;
  logic                s2_valid, s2_final;
  logic [PIX_AW-1:0]   s2_addr;
  logic [GRP_W-1:0]    s2_grp;
  acc_t                acc  [P_OC];
  acc_t                fin  [P_OC];
  logic [P_OC-1:0][FM_W-1:0]   s2_scale, s2_res;
  logic [P_OC-1:0][WIDE_W-1:0] s2_bias;

  // ---------------- S1: multiply-accumulate ----------------
  acc_t psum [P_OC];
  always_comb begin
    for (int o = 0; o < int'(P_OC); o++) begin
      psum[o] = '0;
      for (int i = 0; i < int'(CI_MAX); i++)
        if (!s1_zero && (i < int'(c.cin)))
          psum[o] += acc_t'($signed(w_data[o][i])) * acc_t'($signed(in_data[i]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; c <= '0;
      og <= '0; y <= '0; x <= '0; ky <= '0; kx <= '0; gbase <= '0; wptr <= '0;
      s1_valid <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0; s1_zero <= 1'b0; s1_final <= 1'b0;
      s1_addr <= '0; s1_grp <= '0;
      s2_valid <= 1'b0; s2_final <= 1'b0; s2_addr <= '0; s2_grp <= '0;
      s2_scale <= '0; s2_res <= '0; s2_bias <= '0;
      done <= 1'b0;
      for (int o = 0; o < int'(P_OC); o++) begin acc[o] <= '0; fin[o] <= '0; end
    end else begin
      done <= 1'b0;
      // S0 counters
      if (start && !busy) begin
        c <= cfg; run <= 1'b1;
        og <= '0; y <= '0; x <= '0; ky <= '0; kx <= '0;
        gbase <= cfg.wbase; wptr <= cfg.wbase;
      end else if (run) begin
        if (!last_tap) begin
          wptr <= wptr + 1'b1;
          if (kx == c.k - 3'd1) begin kx <= '0; ky <= ky + 1'b1; end
          else kx <= kx + 1'b1;
        end else begin
          kx <= '0; ky <= '0;
          if (!last_pix) begin
            wptr <= gbase;
            if (x == c.w - 1'b1) begin x <= '0; y <= y + 1'b1; end
            else x <= x + 1'b1;
          end else begin
            x <= '0; y <= '0;
            gbase <= wptr + 1'b1; wptr <= wptr + 1'b1;
            og <= og + 1'b1;
            if (last_grp) run <= 1'b0;
          end
        end
      end
      s1_valid <= run;
      s1_first <= (ky == '0) && (kx == '0);
      s1_last  <= last_tap;
      s1_zero  <= !inb;
      s1_final <= run && last_tap && last_pix && last_grp;
      s1_addr  <= res_addr;
      s1_grp   <= og;
      // S1 accumulate
      if (s1_valid) begin
        for (int o = 0; o < int'(P_OC); o++)
          acc[o] <= s1_first ? psum[o] : acc[o] + psum[o];
      end
      s2_valid <= s1_valid && s1_last;
      s2_final <= s1_valid && s1_final;
      if (s1_valid && s1_last) begin
        for (int o = 0; o < int'(P_OC); o++)
          fin[o] <= s1_first ? psum[o] : acc[o] + psum[o];
        s2_addr  <= s1_addr;
        s2_grp   <= s1_grp;
        s2_scale <= p_scale;
        s2_bias  <= p_bias;
        s2_res   <= res_data;
      end
      // S2 completes the last write of the pass
      if (s2_valid && s2_final) done <= 1'b1;
    end
  end

  assign busy      = run || s1_valid || s2_valid;
  assign res_group = s1_grp;

  // ---------------- S2: fused post-op ----------------
  for (genvar o = 0; o < int'(P_OC); o++) begin : g_post
    post_op u_post (
      .acc      (fin[o]),
      .scale    (s2_scale[o]),
      .bias     (s2_bias[o]),
      .rshift   (c.rshift),
      .resid    (wide_t'($signed(s2_res[o]))),
      .resid_en (c.resid),
      .relu_en  (c.relu),
      .y_wide   (out_wide[o]),
      .y_fm     (out_fm[o])
    );
  end

  assign out_we    = s2_valid;
  assign out_addr  = s2_addr;
  assign out_group = s2_grp;

  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
  assert property (@(posedge clk) disable iff (!rst_n)
                   (start && !busy) |-> (cfg.k inside {3'd1, 3'd3, 3'd5}) && (cfg.cin <= CH_W'(CI_MAX)));
endmodule
