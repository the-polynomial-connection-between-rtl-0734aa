// umbra_gen - one sample of the umbra of an image or filter (Step 1).
//
// The umbra of a grey-value signal f is the 0/1 array
//   f_Um(x, y) = 1  if x is in the domain and f(x) = y,  else 0,
// i.e. the coefficient vector of the monomial x^f(x) along the range axis.
// A position outside the domain maps to the zero polynomial. This block
// returns the sample f_Um(x, z) for one pixel and one range index as a
// complex fixed-point value (1.0 or 0), ready for the first FFT pass.
//
// With invert set, the grey value is first replaced by L_MAX - value, the
// "negative image" used to reduce erosion to dilation; this mode and the
// purely combinational timing are this design's choices.
//
// Interface: combinational, no clock.
module umbra_gen
  import morph_pkg::*;
#(
  parameter int unsigned PIX_W = 5,
  parameter int unsigned ZW    = PIX_W + 1
) (
  input  logic [PIX_W-1:0] pix_val,
  input  logic             pix_in_dom,
  input  logic             invert,
  input  logic [ZW-1:0]    z,
  output cplx_t            sample
);

  localparam logic [PIX_W-1:0] L_MAX = '1;

  logic [PIX_W-1:0] v;
  assign v = invert ? (L_MAX - pix_val) : pix_val;

  always_comb begin
    sample.im = '0;
    sample.re = (pix_in_dom && (ZW'(v) == z)) ? FX_ONE : '0;
  end

endmodule
