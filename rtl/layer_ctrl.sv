// Layer sequencer of the accelerator.
//
// Walks the network one layer at a time:
//   CONV1  5x5 conv, C_IN -> C1, ReLU                  (image -> buffer X)
//   POOL   2x2 pooling                                  (X -> P)
//   CONVA  3x3 conv, C1 -> CMID, ReLU                   (P -> X)
//   CONVB  3x3 conv, CMID -> C2, folded BN              (X -> B)
//   CONV1X1 1x1 conv, C1 -> C2, folded BN, + B, ReLU    (P -> global average pool)
//   FC1/FC2/FC3  C2 -> FC1 -> FC2 -> NCLS, ReLU on the first two
//   SMAX   softmax
// For each step it pulses the start of the engine concerned with that
// layer's configuration (sizes, weight/parameter base addresses and the
// host-loaded per-layer shift) and waits for the engine's done. `phase`
// tells the top how to route the buffers. `done` pulses for one clock when
// the softmax result is valid; `busy` is high from `start` until then.
// Weight words and parameter words of the conv layers are packed in layer
// order; FC weights and biases likewise.
// The layer order, kernel sizes and FC sizes follow the network figure; the
// channel counts C1 and CMID, the ReLU positions and the memory layout are
// this design's choices.
module layer_ctrl import rfd_pkg::*; #(
  parameter int unsigned IMG_H = 128,
  parameter int unsigned IMG_W = 128,
  parameter int unsigned C_IN  = 3,
  parameter int unsigned C1    = 8,
  parameter int unsigned CMID  = 8,
  parameter int unsigned C2    = 64,
  parameter int unsigned FC1   = 48,
  parameter int unsigned FC2   = 24,
  parameter int unsigned NCLS  = 2,
  parameter int unsigned P_OC  = 16
)(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [6:0][SH_W-1:0] shifts,   // conv1, convA, convB, conv1x1, fc1, fc2, fc3
  output phase_e               phase,
  output logic                 busy,
  output logic                 done,
  output logic                 conv_start,
  output conv_cfg_t            conv_cfg,
  input  logic                 conv_done,
  output logic                 pool_start,
  output logic [DIM_W-1:0]     pool_h,
  output logic [DIM_W-1:0]     pool_w,
  input  logic                 pool_done,
  output logic                 gap_clear,
  output logic                 fc_start,
  output fc_cfg_t              fc_cfg,
  input  logic                 fc_done,
  output logic                 smax_valid,
  input  logic                 smax_done
);
  localparam int unsigned H2  = IMG_H / 2;
  localparam int unsigned W2  = IMG_W / 2;
  localparam int unsigned NG1 = (C1 + P_OC - 1) / P_OC;
  localparam int unsigned NGA = (CMID + P_OC - 1) / P_OC;
  localparam int unsigned NGB = (C2 + P_OC - 1) / P_OC;
  // conv weight words (one per group and tap), in layer order
  localparam int unsigned WB1 = 0;
  localparam int unsigned WBA = WB1 + NG1 * 25;
  localparam int unsigned WBB = WBA + NGA * 9;
  localparam int unsigned WB11 = WBB + NGB * 9;
  // scale/bias words (one per group)
  localparam int unsigned PB1 = 0;
  localparam int unsigned PBA = PB1 + NG1;
  localparam int unsigned PBB = PBA + NGA;
  localparam int unsigned PB11 = PBB + NGB;
  // FC weights and biases
  localparam int unsigned FW2 = C2 * FC1;
  localparam int unsigned FW3 = FW2 + FC1 * FC2;
  localparam int unsigned FB2 = FC1;
  localparam int unsigned FB3 = FC1 + FC2;

  logic launched;

  always_comb begin
    conv_cfg = '0;
    fc_cfg   = '0;
    pool_h   = DIM_W'(IMG_H);
    pool_w   = DIM_W'(IMG_W);
    unique case (phase)
      PH_CONV1: conv_cfg = '{k: 3'd5, h: DIM_W'(IMG_H), w: DIM_W'(IMG_W), cin: CH_W'(C_IN),
                             ngroups: GRP_W'(NG1), wbase: WADDR_W'(WB1), pbase: PADDR_W'(PB1),
                             rshift: shifts[0], relu: 1'b1, resid: 1'b0};
      PH_CONVA: conv_cfg = '{k: 3'd3, h: DIM_W'(H2), w: DIM_W'(W2), cin: CH_W'(C1),
                             ngroups: GRP_W'(NGA), wbase: WADDR_W'(WBA), pbase: PADDR_W'(PBA),
                             rshift: shifts[1], relu: 1'b1, resid: 1'b0};
      PH_CONVB: conv_cfg = '{k: 3'd3, h: DIM_W'(H2), w: DIM_W'(W2), cin: CH_W'(CMID),
                             ngroups: GRP_W'(NGB), wbase: WADDR_W'(WBB), pbase: PADDR_W'(PBB),
                             rshift: shifts[2], relu: 1'b0, resid: 1'b0};
      PH_CONV1X1: conv_cfg = '{k: 3'd1, h: DIM_W'(H2), w: DIM_W'(W2), cin: CH_W'(C1),
                             ngroups: GRP_W'(NGB), wbase: WADDR_W'(WB11), pbase: PADDR_W'(PB11),
                             rshift: shifts[3], relu: 1'b1, resid: 1'b1};
      PH_FC1: fc_cfg = '{n_in: CH_W'(C2), n_out: CH_W'(FC1), wbase: '0, bbase: '0,
                         rshift: shifts[4], relu: 1'b1, src_ext: 1'b1};
      PH_FC2: fc_cfg = '{n_in: CH_W'(FC1), n_out: CH_W'(FC2), wbase: FWA_W'(FW2), bbase: FBA_W'(FB2),
                         rshift: shifts[5], relu: 1'b1, src_ext: 1'b0};
      PH_FC3: fc_cfg = '{n_in: CH_W'(FC2), n_out: CH_W'(NCLS), wbase: FWA_W'(FW3), bbase: FBA_W'(FB3),
                         rshift: shifts[6], relu: 1'b0, src_ext: 1'b0};
      default: ;
    endcase
  end

  logic step_done;
  always_comb begin
    unique case (phase)
      PH_CONV1, PH_CONVA, PH_CONVB, PH_CONV1X1: step_done = conv_done;
      PH_POOL:                                  step_done = pool_done;
      PH_FC1, PH_FC2, PH_FC3:                   step_done = fc_done;
      PH_SMAX:                                  step_done = smax_done;
      default:                                  step_done = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= PH_IDLE; launched <= 1'b0; done <= 1'b0;
      conv_start <= 1'b0; pool_start <= 1'b0; fc_start <= 1'b0; smax_valid <= 1'b0;
      gap_clear <= 1'b0;
    end else begin
      conv_start <= 1'b0; pool_start <= 1'b0; fc_start <= 1'b0; smax_valid <= 1'b0;
      gap_clear <= 1'b0; done <= 1'b0;
      if (phase == PH_IDLE) begin
        if (start) begin phase <= PH_CONV1; launched <= 1'b0; gap_clear <= 1'b1; end
      end else if (phase == PH_DONE) begin
        phase <= PH_IDLE;
      end else if (!launched) begin
        launched <= 1'b1;
        unique case (phase)
          PH_CONV1, PH_CONVA, PH_CONVB, PH_CONV1X1: conv_start <= 1'b1;
          PH_POOL:                                  pool_start <= 1'b1;
          PH_FC1, PH_FC2, PH_FC3:                   fc_start   <= 1'b1;
          PH_SMAX:                                  smax_valid <= 1'b1;
          default: ;
        endcase
      end else if (step_done) begin
        launched <= 1'b0;
        if (phase == PH_SMAX) done <= 1'b1;
        phase <= phase_e'(phase + 1'b1);
      end
    end
  end

  assign busy = (phase != PH_IDLE);
endmodule
