// Camera pixel normalisation: maps an 8-bit colour value p in [0,255] to
// p/255 in [0,1], as a 12-bit signed fixed-point number with FRAC fraction
// bits (1.0 = 2^FRAC). p/255 is computed as (p*257*2^FRAC + 2^15) >> 16,
// which equals round(p*2^FRAC/255) for FRAC <= 8. Combinational.
// The [0,255] -> [0,1] normalisation is the network's; doing it in the
// accelerator's load path and the fraction width are this design's choices.
module pixel_normalizer import rfd_pkg::*; #(
  parameter int unsigned FRAC = 8
)(
  input  logic [7:0] pix,
  output fm_t        val
);
  logic [31:0] t;
  always_comb begin
    t   = ((32'(pix) * 32'd257) << FRAC) + 32'd32768;
    val = fm_t'(t >> 16);
  end
endmodule
