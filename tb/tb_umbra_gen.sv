// tb_umbra_gen - exhaustive check of the umbra sample generator.
// For every grey value, domain flag, invert flag and range index the sample
// must be 1.0 exactly when the pixel is in the domain and its (possibly
// inverted) value equals the range index, and 0 otherwise; the imaginary
// part is always 0. Includes the column f_Um(0) = e_3 of the paper's
// example (value 3 at range index 3).
module tb_umbra_gen;
  import morph_pkg::*;
  localparam int PIX_W = 3, ZW = 4;
  logic [PIX_W-1:0] pix_val;
  logic             pix_in_dom, invert;
  logic [ZW-1:0]    z;
  cplx_t            sample;

  umbra_gen #(.PIX_W(PIX_W), .ZW(ZW)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    for (int v = 0; v < (1 << PIX_W); v++)
      for (int d = 0; d < 2; d++)
        for (int inv = 0; inv < 2; inv++)
          for (int k = 0; k < (1 << ZW); k++) begin
            int eff;
            real expv;
            pix_val = PIX_W'(v); pix_in_dom = d[0]; invert = inv[0]; z = ZW'(k);
            #1;
            eff  = inv ? (7 - v) : v;
            expv = (d == 1 && eff == k) ? 1.0 : 0.0;
            checks++;
            if (real'(longint'(sample.re)) / real'(longint'(1) << FRAC) != expv || sample.im != 0) begin
              failures++;
              $display("FAIL v=%0d dom=%0d inv=%0d z=%0d: re=%0d im=%0d", v, d, inv, k, sample.re, sample.im);
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
