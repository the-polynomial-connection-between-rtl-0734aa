// cmul - complex fixed-point multiplier for the spectral product (Step 2).
//
// Convolution of the two umbras is done as a point-wise product of their
// 3-D spectra. This block forms (a.re + j a.im)(b.re + j b.im) from the
// full-width integer products, rounds the result back to FRAC fraction bits
// (round half up) and saturates it to CW bits.
//
// Interface: combinational, no clock; the caller registers the result.
// Rounding and saturation are this design's choices.
module cmul
  import morph_pkg::*;
(
  input  cplx_t a,
  input  cplx_t b,
  output cplx_t p
);

  localparam int unsigned PW = 2 * CW + 1;
  typedef logic signed [PW-1:0] wide_t;

  localparam wide_t FX_MAXW = wide_t'({1'b0, {(CW-1){1'b1}}});
  localparam wide_t FX_MINW = -FX_MAXW - wide_t'(1);

  function automatic fx_t round_sat(input wide_t x);
    wide_t r;
    r = (x + (wide_t'(1) <<< (FRAC - 1))) >>> FRAC;
    if (r > FX_MAXW)      return fx_t'(FX_MAXW);
    else if (r < FX_MINW) return fx_t'(FX_MINW);
    else                  return fx_t'(r);
  endfunction

  wide_t rr, ii, ri, ir;
  always_comb begin
    rr = wide_t'(a.re) * wide_t'(b.re);
    ii = wide_t'(a.im) * wide_t'(b.im);
    ri = wide_t'(a.re) * wide_t'(b.im);
    ir = wide_t'(a.im) * wide_t'(b.re);
    p.re = round_sat(rr - ii);
    p.im = round_sat(ri + ir);
  end

endmodule
