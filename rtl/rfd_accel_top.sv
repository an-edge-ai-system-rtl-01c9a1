// CNN inference accelerator for railway track fault detection.
//
// Classifies one 128x128 colour track image as normal (class 0) or faulty
// (class 1) with a small residual network:
//   5x5 conv -> 2x2 pool -> [3x3 conv -> 3x3 conv -> BN] + [1x1 conv -> BN]
//   -> global average pool -> FC 64->48 -> FC 48->24 -> FC 24->2 -> softmax
// The host processor loads, through one element-wide write port, the
// per-layer shifts, the weights and folded BN parameters (once), then the
// image (8-bit RGB pixels, normalised to [0,1] on the way in), pulses
// `start`, and reads `cls` and the two probabilities when `done` pulses.
//
// Inside, `layer_ctrl` runs the layers one after another on three engines:
// `conv_engine` (all convolutions, output channels tiled P_OC at a time,
// BN/ReLU/shortcut add fused into its output stage), `maxpool_unit` and
// `fc_engine`, followed by `softmax_unit`. The shortcut branch's 1x1 pass
// adds the stored main-branch map on the fly and streams the sum straight
// into `gap_unit`, so the block output is never stored. Feature maps live
// in channel-packed on-chip RAMs (`lane_ram`): IMG (input), X (stem output,
// later reused for the first 3x3 output), P (pooled map) and B (main branch).
//
// Host port: ld_we with ld_sel/ld_addr/ld_data (see rfd_pkg::ld_sel_e for
// address layouts) is accepted only while not busy. Timing: done follows
// start after about IMG_H*IMG_W*25*NG1 + (H/2)*(W/2)*(4 + 9*NGA + 10*NGB)
// + FC MACs clocks (631k at the default sizes); `cycles` reports the count.
// The network topology and sizes 128x128x3, 64, 48, 24, 2 are the paper's
// network; C1 = CMID = 8 channels, P_OC = 16 lanes and all memory layouts
// are this design's choices.
module rfd_accel_top import rfd_pkg::*; #(
  parameter int unsigned IMG_H  = 128,
  parameter int unsigned IMG_W  = 128,
  parameter int unsigned C_IN   = 3,
  parameter int unsigned C1     = 8,
  parameter int unsigned CMID   = 8,
  parameter int unsigned C2     = 64,
  parameter int unsigned FC1    = 48,
  parameter int unsigned FC2    = 24,
  parameter int unsigned P_OC   = 16,
  parameter int unsigned CI_MAX = 8,
  parameter int unsigned IN_FRAC = 8
)(
  input  logic              clk,
  input  logic              rst_n,
  // host load port
  input  logic              ld_we,
  input  ld_sel_e           ld_sel,
  input  logic [23:0]       ld_addr,
  input  logic [WIDE_W-1:0] ld_data,
  // control
  input  logic              start,
  output logic              busy,
  output logic              done,
  // result
  output logic              cls,
  output logic [11:0]       prob_normal,
  output logic [11:0]       prob_fault,
  output wide_t             logit0,
  output wide_t             logit1,
  output logic [31:0]       cycles
);
  localparam int unsigned NCLS  = 2;
  localparam int unsigned H2    = IMG_H / 2;
  localparam int unsigned W2    = IMG_W / 2;
  localparam int unsigned NPIX  = IMG_H * IMG_W;
  localparam int unsigned NPIX2 = H2 * W2;
  localparam int unsigned NG1   = (C1 + P_OC - 1) / P_OC;
  localparam int unsigned NGA   = (CMID + P_OC - 1) / P_OC;
  localparam int unsigned NGB   = C2 / P_OC;
  localparam int unsigned XL    = (C1 > CMID) ? C1 : CMID;
  localparam int unsigned CWORDS = NG1 * 25 + NGA * 9 + NGB * 9 + NGB;
  localparam int unsigned PWORDS = NG1 + NGA + 2 * NGB;
  localparam int unsigned NFCW  = C2 * FC1 + FC1 * FC2 + FC2 * NCLS;
  localparam int unsigned NFCB  = FC1 + FC2 + NCLS;
  localparam int unsigned MAX_N = (C2 > FC1) ? C2 : FC1;
  localparam int unsigned WL    = P_OC * CI_MAX;
  localparam int unsigned GAP_SH = $clog2(NPIX2);

  localparam int unsigned IMG_AW = $clog2(NPIX);
  localparam int unsigned P_AW   = $clog2(NPIX2);
  localparam int unsigned CW_AW  = (CWORDS > 1) ? $clog2(CWORDS) : 1;
  localparam int unsigned PW_AW  = (PWORDS > 1) ? $clog2(PWORDS) : 1;
  localparam int unsigned FW_AW  = $clog2(NFCW);
  localparam int unsigned FB_AW  = $clog2(NFCB);

  // ---------------- controller ----------------
  phase_e    phase;
  logic      conv_start, conv_done, conv_busy, pool_start, pool_done, pool_busy;
  logic      fc_start, fc_done, fc_busy, gap_clear, smax_valid, smax_done;
  conv_cfg_t conv_cfg;
  fc_cfg_t   fc_cfg;
  logic [DIM_W-1:0] pool_h, pool_w;
  logic [6:0][SH_W-1:0] shifts;

  layer_ctrl #(.IMG_H(IMG_H), .IMG_W(IMG_W), .C_IN(C_IN), .C1(C1), .CMID(CMID), .C2(C2),
               .FC1(FC1), .FC2(FC2), .NCLS(NCLS), .P_OC(P_OC)) u_ctrl (
    .clk, .rst_n, .start, .shifts, .phase, .busy, .done,
    .conv_start, .conv_cfg, .conv_done,
    .pool_start, .pool_h, .pool_w, .pool_done,
    .gap_clear, .fc_start, .fc_cfg, .fc_done,
    .smax_valid, .smax_done
  );

  // ---------------- host load decode ----------------
  fm_t  pix_norm;
  pixel_normalizer #(.FRAC(IN_FRAC)) u_norm (.pix(ld_data[7:0]), .val(pix_norm));

  logic ld_ok;
  assign ld_ok = ld_we && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) shifts <= '0;
    else if (ld_ok && ld_sel == LD_SHIFT && ld_addr < 24'd7) shifts[ld_addr[2:0]] <= ld_data[SH_W-1:0];
  end

  // ---------------- engines ----------------
  logic [PIX_AW-1:0]              ce_in_addr, ce_res_addr, ce_out_addr;
  logic [CI_MAX-1:0][FM_W-1:0]    ce_in_data;
  logic [WADDR_W-1:0]             ce_w_addr;
  logic [WL-1:0][FM_W-1:0]        cw_rdata;
  logic [PADDR_W-1:0]             ce_p_addr;
  logic [P_OC-1:0][FM_W-1:0]      ps_rdata, ce_res_data;
  logic [P_OC-1:0][WIDE_W-1:0]    pb_rdata;
  logic [GRP_W-1:0]               ce_res_group, ce_out_group;
  logic                           ce_out_we;
  logic [P_OC-1:0][WIDE_W-1:0]    ce_out_wide;
  logic [P_OC-1:0][FM_W-1:0]      ce_out_fm;

  conv_engine #(.P_OC(P_OC), .CI_MAX(CI_MAX)) u_conv (
    .clk, .rst_n, .start(conv_start), .cfg(conv_cfg), .busy(conv_busy), .done(conv_done),
    .in_addr(ce_in_addr), .in_data(ce_in_data),
    .w_addr(ce_w_addr), .w_data(cw_rdata),
    .p_addr(ce_p_addr), .p_scale(ps_rdata), .p_bias(pb_rdata),
    .res_addr(ce_res_addr), .res_group(ce_res_group), .res_data(ce_res_data),
    .out_we(ce_out_we), .out_addr(ce_out_addr), .out_group(ce_out_group),
    .out_wide(ce_out_wide), .out_fm(ce_out_fm)
  );

  logic [PIX_AW-1:0]          mp_rd_addr, mp_wr_addr;
  logic [XL-1:0][FM_W-1:0]    x_rdata;
  logic                       mp_wr_we;
  logic [C1-1:0][FM_W-1:0]    mp_wr_data;

  maxpool_unit #(.LANES(C1)) u_pool (
    .clk, .rst_n, .start(pool_start), .in_h(pool_h), .in_w(pool_w),
    .busy(pool_busy), .done(pool_done),
    .rd_addr(mp_rd_addr), .rd_data(x_rdata[C1-1:0]),
    .wr_we(mp_wr_we), .wr_addr(mp_wr_addr), .wr_data(mp_wr_data)
  );

  logic [C2-1:0][WIDE_W-1:0]  gap_avg;
  gap_unit #(.C(C2), .P(P_OC)) u_gap (
    .clk, .rst_n, .clear(gap_clear),
    .in_valid(ce_out_we && phase == PH_CONV1X1), .in_group(ce_out_group),
    .in_data(ce_out_wide), .shift(5'(GAP_SH)), .avg(gap_avg)
  );

  logic [MAX_N-1:0][WIDE_W-1:0] fc_x, fc_y;
  logic [FWA_W-1:0] fc_w_addr;
  logic [FBA_W-1:0] fc_b_addr;
  logic [0:0][FM_W-1:0]   fcw_rdata;
  logic [0:0][WIDE_W-1:0] fcb_rdata;

  always_comb begin
    fc_x = '0;
    for (int c = 0; c < int'(C2); c++) fc_x[c] = gap_avg[c];
  end

  fc_engine #(.MAX_N(MAX_N)) u_fc (
    .clk, .rst_n, .start(fc_start), .cfg(fc_cfg), .busy(fc_busy), .done(fc_done),
    .x_ext(fc_x), .w_addr(fc_w_addr), .w_data(fm_t'(fcw_rdata[0])),
    .b_addr(fc_b_addr), .b_data(wide_t'(fcb_rdata[0])), .y(fc_y)
  );

  logic [11:0] p0, p1;
  logic        smax_cls;
  softmax_unit #(.LOGIT_FRAC(IN_FRAC), .PROB_FRAC(11)) u_smax (
    .clk, .rst_n, .in_valid(smax_valid), .z0(wide_t'(fc_y[0])), .z1(wide_t'(fc_y[1])),
    .out_valid(smax_done), .cls(smax_cls), .p0(p0), .p1(p1)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cls <= 1'b0; prob_normal <= '0; prob_fault <= '0; logit0 <= '0; logit1 <= '0; cycles <= '0;
    end else begin
      if (start && !busy) cycles <= '0;
      else if (busy) cycles <= cycles + 1'b1;
      if (smax_done) begin
        cls <= smax_cls; prob_normal <= p0; prob_fault <= p1;
        logit0 <= wide_t'(fc_y[0]); logit1 <= wide_t'(fc_y[1]);
      end
    end
  end

  // ---------------- memories ----------------
  // IMG: camera image, C_IN lanes
  logic [C_IN-1:0][FM_W-1:0] img_wdata, img_rdata;
  always_comb for (int l = 0; l < int'(C_IN); l++) img_wdata[l] = pix_norm;
  lane_ram #(.LANES(C_IN), .EW(FM_W), .DEPTH(NPIX)) u_img (
    .clk, .we(ld_ok && ld_sel == LD_IMG), .waddr(IMG_AW'(ld_addr >> 2)),
    .wmask(C_IN'(1) << ld_addr[1:0]), .wdata(img_wdata),
    .raddr(IMG_AW'(ce_in_addr)), .rdata(img_rdata)
  );

  // X: stem output (IMG_H x IMG_W x C1), later the first 3x3 output (H2 x W2 x CMID)
  logic [XL-1:0][FM_W-1:0] x_wdata;
  always_comb for (int l = 0; l < int'(XL); l++) x_wdata[l] = ce_out_fm[l];
  lane_ram #(.LANES(XL), .EW(FM_W), .DEPTH(NPIX)) u_bufx (
    .clk, .we(ce_out_we && (phase == PH_CONV1 || phase == PH_CONVA)),
    .waddr(IMG_AW'(ce_out_addr)), .wmask('1), .wdata(x_wdata),
    .raddr(phase == PH_POOL ? IMG_AW'(mp_rd_addr) : IMG_AW'(ce_in_addr)), .rdata(x_rdata)
  );

  // P: pooled map (H2 x W2 x C1)
  logic [C1-1:0][FM_W-1:0] p_rdata;
  lane_ram #(.LANES(C1), .EW(FM_W), .DEPTH(NPIX2)) u_bufp (
    .clk, .we(mp_wr_we), .waddr(P_AW'(mp_wr_addr)), .wmask('1), .wdata(mp_wr_data),
    .raddr(P_AW'(ce_in_addr)), .rdata(p_rdata)
  );

  // B: main residual branch after BN (H2 x W2 x C2), written one group at a time
  logic [C2-1:0][FM_W-1:0] b_wdata, b_rdata;
  always_comb for (int l = 0; l < int'(C2); l++) b_wdata[l] = ce_out_fm[l % int'(P_OC)];
  lane_ram #(.LANES(C2), .EW(FM_W), .DEPTH(NPIX2)) u_bufb (
    .clk, .we(ce_out_we && phase == PH_CONVB), .waddr(P_AW'(ce_out_addr)),
    .wmask({{(C2-P_OC){1'b0}}, {P_OC{1'b1}}} << (int'(ce_out_group) * int'(P_OC))),
    .wdata(b_wdata), .raddr(P_AW'(ce_res_addr)), .rdata(b_rdata)
  );
  always_comb
    for (int l = 0; l < int'(P_OC); l++)
      ce_res_data[l] = b_rdata[int'(ce_res_group) * int'(P_OC) + l];

  // conv input routing
  always_comb begin
    ce_in_data = '0;
    unique case (phase)
      PH_CONV1:   for (int l = 0; l < int'(C_IN); l++) ce_in_data[l] = img_rdata[l];
      PH_CONVB:   for (int l = 0; l < int'(CMID); l++) ce_in_data[l] = x_rdata[l];
      default:    for (int l = 0; l < int'(C1); l++)   ce_in_data[l] = p_rdata[l];
    endcase
  end

  // weights and parameters
  logic [WL-1:0][FM_W-1:0]     cw_wdata;
  logic [P_OC-1:0][FM_W-1:0]   ps_wdata;
  logic [P_OC-1:0][WIDE_W-1:0] pb_wdata;
  always_comb begin
    for (int l = 0; l < int'(WL); l++)   cw_wdata[l] = ld_data[FM_W-1:0];
    for (int l = 0; l < int'(P_OC); l++) ps_wdata[l] = ld_data[FM_W-1:0];
    for (int l = 0; l < int'(P_OC); l++) pb_wdata[l] = ld_data;
  end

  lane_ram #(.LANES(WL), .EW(FM_W), .DEPTH(CWORDS)) u_convw (
    .clk, .we(ld_ok && ld_sel == LD_CONV_W), .waddr(CW_AW'(ld_addr / WL)),
    .wmask(WL'(1) << (ld_addr % WL)), .wdata(cw_wdata),
    .raddr(CW_AW'(ce_w_addr)), .rdata(cw_rdata)
  );
  lane_ram #(.LANES(P_OC), .EW(FM_W), .DEPTH(PWORDS)) u_scale (
    .clk, .we(ld_ok && ld_sel == LD_SCALE), .waddr(PW_AW'(ld_addr / P_OC)),
    .wmask(P_OC'(1) << (ld_addr % P_OC)), .wdata(ps_wdata),
    .raddr(PW_AW'(ce_p_addr)), .rdata(ps_rdata)
  );
  lane_ram #(.LANES(P_OC), .EW(WIDE_W), .DEPTH(PWORDS)) u_bias (
    .clk, .we(ld_ok && ld_sel == LD_BIAS), .waddr(PW_AW'(ld_addr / P_OC)),
    .wmask(P_OC'(1) << (ld_addr % P_OC)), .wdata(pb_wdata),
    .raddr(PW_AW'(ce_p_addr)), .rdata(pb_rdata)
  );
  lane_ram #(.LANES(1), .EW(FM_W), .DEPTH(NFCW)) u_fcw (
    .clk, .we(ld_ok && ld_sel == LD_FC_W), .waddr(FW_AW'(ld_addr)), .wmask(1'b1),
    .wdata(ld_data[FM_W-1:0]), .raddr(FW_AW'(fc_w_addr)), .rdata(fcw_rdata)
  );
  lane_ram #(.LANES(1), .EW(WIDE_W), .DEPTH(NFCB)) u_fcb (
    .clk, .we(ld_ok && ld_sel == LD_FC_B), .waddr(FB_AW'(ld_addr)), .wmask(1'b1),
    .wdata(ld_data), .raddr(FB_AW'(fc_b_addr)), .rdata(fcb_rdata)
  );

  // Structural limits of this implementation.
  initial begin
    assert (C2 % P_OC == 0);
    assert (C1 <= P_OC && CMID <= P_OC);
    assert (C_IN <= CI_MAX && C1 <= CI_MAX && CMID <= CI_MAX);
    assert (NPIX2 == (1 << GAP_SH));
  end
endmodule
