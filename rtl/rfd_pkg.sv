// Shared types and constants of the railway-fault CNN accelerator.
//
// Number formats follow the mixed 12-bit / 22-bit fixed-point scheme of the
// design: convolution weights and stored feature maps are 12-bit signed,
// while per-channel bias/shift terms, the shortcut sum, the global-average
// pooling result and the fully connected activations are 22-bit signed.
// Which quantity uses which of the two widths is this design's choice; the
// binary point of every layer is set by a per-layer right shift loaded by
// the host ("layered quantization"), so no fixed fraction width is built in.
// Accumulators are wider than either so that no sum wraps before it is
// requantized.
package rfd_pkg;

  localparam int unsigned FM_W    = 12;  // feature maps, conv weights, BN scales
  localparam int unsigned WIDE_W  = 22;  // biases, shortcut sum, GAP, FC activations
  localparam int unsigned ACC_W   = 48;  // MAC accumulators
  localparam int unsigned SH_W    = 6;   // per-layer requantization shift

  // Widths of configuration fields (upper bounds, not the network's sizes).
  localparam int unsigned DIM_W   = 8;   // feature-map height / width, up to 255
  localparam int unsigned PIX_AW  = 16;  // pixel address inside a feature map
  localparam int unsigned CH_W    = 8;   // a channel / neuron count
  localparam int unsigned GRP_W   = 4;   // output-channel group index
  localparam int unsigned WADDR_W = 10;  // conv weight word address
  localparam int unsigned PADDR_W = 6;   // post-op parameter word address
  localparam int unsigned FWA_W   = 14;  // FC weight address
  localparam int unsigned FBA_W   = 8;   // FC bias address

  typedef logic signed [FM_W-1:0]   fm_t;
  typedef logic signed [WIDE_W-1:0] wide_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // One convolution pass: KxK kernel, stride 1, zero padding of K/2 on
  // every side, so the output has the input's height and width.
  typedef struct packed {
    logic [2:0]         k;        // kernel size: 1, 3 or 5
    logic [DIM_W-1:0]   h;        // feature-map height
    logic [DIM_W-1:0]   w;        // feature-map width
    logic [CH_W-1:0]    cin;      // input channels used (<= CI_MAX)
    logic [GRP_W-1:0]   ngroups;  // output-channel groups of P_OC lanes
    logic [WADDR_W-1:0] wbase;    // first weight word of this layer
    logic [PADDR_W-1:0] pbase;    // first scale/bias word of this layer
    logic [SH_W-1:0]    rshift;   // requantization shift
    logic               relu;     // apply ReLU after the post-op
    logic               resid;    // add the shortcut operand
  } conv_cfg_t;

  // One fully connected layer.
  typedef struct packed {
    logic [CH_W-1:0]    n_in;
    logic [CH_W-1:0]    n_out;
    logic [FWA_W-1:0]   wbase;    // weight w[j][i] sits at wbase + j*n_in + i
    logic [FBA_W-1:0]   bbase;    // bias b[j] sits at bbase + j
    logic [SH_W-1:0]    rshift;
    logic               relu;
    logic               src_ext;  // read the input vector from outside (GAP)
  } fc_cfg_t;

  // Targets of the host load port.
  typedef enum logic [2:0] {
    LD_IMG    = 3'd0,  // camera pixel, addr = pixel*4 + colour
    LD_CONV_W = 3'd1,  // conv weight, addr = word*(P_OC*CI_MAX) + oc*CI_MAX + ci
    LD_SCALE  = 3'd2,  // per-channel scale, addr = pword*P_OC + lane
    LD_BIAS   = 3'd3,  // per-channel bias,  addr = pword*P_OC + lane
    LD_FC_W   = 3'd4,  // FC weight, linear
    LD_FC_B   = 3'd5,  // FC bias, linear
    LD_SHIFT  = 3'd6   // per-layer shift, addr = layer 0..6
  } ld_sel_e;

  // Layer sequence of the network.
  typedef enum logic [3:0] {
    PH_IDLE, PH_CONV1, PH_POOL, PH_CONVA, PH_CONVB, PH_CONV1X1,
    PH_FC1, PH_FC2, PH_FC3, PH_SMAX, PH_DONE
  } phase_e;

  function automatic fm_t sat_fm(input logic signed [63:0] v);
    if (v > 64'sd2047)       return fm_t'(12'sd2047);
    else if (v < -64'sd2048) return fm_t'(-12'sd2048);
    else                     return fm_t'(v[FM_W-1:0]);
  endfunction

  function automatic wide_t sat_wide(input logic signed [63:0] v);
    if (v > 64'sd2097151)       return wide_t'(22'sd2097151);
    else if (v < -64'sd2097152) return wide_t'(-22'sd2097152);
    else                        return wide_t'(v[WIDE_W-1:0]);
  endfunction

endpackage
