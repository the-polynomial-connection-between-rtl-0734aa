// tb_cmul - complex multiplier against double-precision arithmetic.
// Random operands over several magnitude ranges; the result must lie within
// one unit in the last place of the exact product (rounded to FRAC
// fraction bits). Also checks (1+2j)(3+4j) = -5+10j exactly and that an
// overflowing product saturates instead of wrapping.
module tb_cmul;
  import morph_pkg::*;
  cplx_t a, b, p;
  cmul dut (.*);

  int checks = 0, failures = 0;
  localparam real S = real'(longint'(1) << FRAC);
  localparam longint FXMAX = (longint'(1) <<< (CW - 1)) - 1;

  function automatic fx_t fx(input real v);
    return fx_t'(longint'(v * S));
  endfunction
  function automatic real rv(input fx_t v);
    return real'(longint'(v)) / S;
  endfunction

  task automatic check(input real er, input real ei, input string what);
    checks++;
    if ((rv(p.re) - er) > 1.01 / S || (er - rv(p.re)) > 1.01 / S ||
        (rv(p.im) - ei) > 1.01 / S || (ei - rv(p.im)) > 1.01 / S) begin
      failures++;
      $display("FAIL %s: got %f + %fj expected %f + %fj", what, rv(p.re), rv(p.im), er, ei);
    end
  endtask

  initial begin
    a.re = fx(1.0); a.im = fx(2.0); b.re = fx(3.0); b.im = fx(4.0); #1;
    checks++;
    if (p.re != fx(-5.0) || p.im != fx(10.0)) begin
      failures++; $display("FAIL (1+2j)(3+4j) = %f + %fj", rv(p.re), rv(p.im));
    end
    for (int i = 0; i < 2000; i++) begin
      real ar, ai, br, bi, lim;
      lim = (i % 3 == 0) ? 4.0 : (i % 3 == 1) ? 1000.0 : 15000.0;
      ar = (real'($urandom % 2000001) / 1000000.0 - 1.0) * lim;
      ai = (real'($urandom % 2000001) / 1000000.0 - 1.0) * lim;
      br = (real'($urandom % 2000001) / 1000000.0 - 1.0) * lim;
      bi = (real'($urandom % 2000001) / 1000000.0 - 1.0) * lim;
      a.re = fx(ar); a.im = fx(ai); b.re = fx(br); b.im = fx(bi);
      #1;
      check(rv(a.re) * rv(b.re) - rv(a.im) * rv(b.im),
            rv(a.re) * rv(b.im) + rv(a.im) * rv(b.re), "random");
    end
    // saturation
    a.re = fx(1.0e8); a.im = '0; b.re = fx(1.0e8); b.im = fx(-1.0e8); #1;
    checks++;
    if (longint'(p.re) != FXMAX || longint'(p.im) != -FXMAX - 1) begin
      failures++; $display("FAIL saturation: re=%0d im=%0d", p.re, p.im);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
