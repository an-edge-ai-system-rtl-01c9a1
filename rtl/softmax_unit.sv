// Softmax over the two class logits (class 0: normal track, class 1: fault).
//
// For two classes softmax reduces to p1 = sigmoid(z1 - z0), p0 = 1 - p1.
// The sigmoid is evaluated with the piecewise-linear PLAN approximation
// (slopes 1/4, 1/8, 1/32 and saturation at |d| >= 5), which needs only
// shifts and adds; the error against the exact sigmoid is below 0.02 (0.025 after truncation to fixed point).
// Logits have LOGIT_FRAC fraction bits; probabilities are unsigned with
// PROB_FRAC fraction bits (1.0 = 2^PROB_FRAC). `cls` is 1 when z1 > z0.
// Outputs are registered: one clock after `in_valid`, with `out_valid`.
// The softmax layer is the network's; the two-class sigmoid form and the
// PLAN approximation are this design's choices.
module softmax_unit import rfd_pkg::*; #(
  parameter int unsigned LOGIT_FRAC = 8,
  parameter int unsigned PROB_FRAC  = 11
)(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  wide_t                z0,
  input  wide_t                z1,
  output logic                 out_valid,
  output logic                 cls,
  output logic [PROB_FRAC:0]   p0,
  output logic [PROB_FRAC:0]   p1
);
  localparam int unsigned F = LOGIT_FRAC;
  localparam logic [31:0] ONE  = 32'd1 << F;
  localparam logic [31:0] T5   = 32'd5 << F;
  localparam logic [31:0] T238 = (32'd19 << F) >> 3;   // 2.375
  localparam logic [31:0] C84  = (32'd27 << F) >> 5;   // 0.84375
  localparam logic [31:0] C625 = (32'd5 << F) >> 3;    // 0.625
  localparam logic [31:0] C5   = ONE >> 1;             // 0.5

  logic signed [WIDE_W:0] d;
  logic [31:0] ax, yq, pq;
  logic [PROB_FRAC:0] p1_c;

  always_comb begin
    d  = $signed({z1[WIDE_W-1], z1}) - $signed({z0[WIDE_W-1], z0});
    ax = d[WIDE_W] ? 32'(-d) : 32'(d);
    if (ax >= T5)        yq = ONE;
    else if (ax >= T238) yq = (ax >> 5) + C84;
    else if (ax >= ONE)  yq = (ax >> 3) + C625;
    else                 yq = (ax >> 2) + C5;
    pq = d[WIDE_W] ? (ONE - yq) : yq;
    if (PROB_FRAC >= F) p1_c = (PROB_FRAC+1)'(pq << (PROB_FRAC - F));
    else                p1_c = (PROB_FRAC+1)'(pq >> (F - PROB_FRAC));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; cls <= 1'b0; p0 <= '0; p1 <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        p1  <= p1_c;
        p0  <= (PROB_FRAC+1)'(1 << PROB_FRAC) - p1_c;
        cls <= (d > 0);
      end
    end
  end
endmodule
