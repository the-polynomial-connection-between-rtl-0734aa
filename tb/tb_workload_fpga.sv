// tb_workload_fpga - the FPGA experiment of the method at simulated sizes.
// That experiment dilates square images by a 5x5 filter for tonal ranges of
// 2, 3, 4 and 5 bits, with the image edge chosen so that image + filter - 1
// fills the FFT size (28x28 on a 32-point FFT up to 1020x1020 on 1024).
// Here every tonal range is run at FFT sizes 32 and 64 (28x28 and 60x60
// images); larger sizes only lengthen the simulation. Each run is checked
// pixel by pixel against the direct definition of dilation.
// The measured execution times of the method's FPGA core grow by about 1.8x
// per extra tonal bit (e.g. 5.02 ms -> 9.09 ms at FFT size 32) and by about
// 3.7x to 4x per doubling of the FFT size (5.02 ms -> 18.35 ms for 2-bit).
// The cycle counts of this core are checked to follow the same trend:
// between 1.5x and 2.5x per bit, between 3x and 5x per size doubling.
module tb_workload_fpga;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int NR = 8;
  logic go [NR];
  logic fin [NR];
  int ck [NR], fl [NR], cy [NR];

  wl_runner #(.N(32), .PIX_W(2), .IMG(28)) r0 (.clk, .go(go[0]), .finished(fin[0]), .checks(ck[0]), .failures(fl[0]), .cycles(cy[0]));
  wl_runner #(.N(32), .PIX_W(3), .IMG(28)) r1 (.clk, .go(go[1]), .finished(fin[1]), .checks(ck[1]), .failures(fl[1]), .cycles(cy[1]));
  wl_runner #(.N(32), .PIX_W(4), .IMG(28)) r2 (.clk, .go(go[2]), .finished(fin[2]), .checks(ck[2]), .failures(fl[2]), .cycles(cy[2]));
  wl_runner #(.N(32), .PIX_W(5), .IMG(28)) r3 (.clk, .go(go[3]), .finished(fin[3]), .checks(ck[3]), .failures(fl[3]), .cycles(cy[3]));
  wl_runner #(.N(64), .PIX_W(2), .IMG(60)) r4 (.clk, .go(go[4]), .finished(fin[4]), .checks(ck[4]), .failures(fl[4]), .cycles(cy[4]));
  wl_runner #(.N(64), .PIX_W(3), .IMG(60)) r5 (.clk, .go(go[5]), .finished(fin[5]), .checks(ck[5]), .failures(fl[5]), .cycles(cy[5]));
  wl_runner #(.N(64), .PIX_W(4), .IMG(60)) r6 (.clk, .go(go[6]), .finished(fin[6]), .checks(ck[6]), .failures(fl[6]), .cycles(cy[6]));
  wl_runner #(.N(64), .PIX_W(5), .IMG(60)) r7 (.clk, .go(go[7]), .finished(fin[7]), .checks(ck[7]), .failures(fl[7]), .cycles(cy[7]));

  int checks = 0, failures = 0;

  initial begin
    for (int i = 0; i < NR; i++) go[i] = 0;
    repeat (2) @(negedge clk);
    for (int i = 0; i < NR; i++) go[i] = 1;
    for (int i = 0; i < NR; i++) wait (fin[i]);
    for (int i = 0; i < NR; i++) begin checks += ck[i]; failures += fl[i]; end
    for (int i = 0; i < NR; i++) begin
      real rb, rn;
      if (i % 4 != 0) begin
        rb = real'(cy[i]) / real'(cy[i - 1]);
        checks++;
        if (rb < 1.5 || rb > 2.5) begin failures++; $display("FAIL: per-bit cycle ratio %f at run %0d", rb, i); end
      end
      if (i >= 4) begin
        rn = real'(cy[i]) / real'(cy[i - 4]);
        checks++;
        if (rn < 3.0 || rn > 5.0) begin failures++; $display("FAIL: per-size cycle ratio %f at run %0d", rn, i); end
        $display("FFT 32 -> 64 at %0d-bit: cycles x%0.2f", i - 2, rn);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
