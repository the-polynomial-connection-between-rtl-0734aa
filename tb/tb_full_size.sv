// tb_full_size - one complete dilation with the core at its default size:
// 1024-point FFTs, 5-bit tonal range, 5x5 filter. A random 1020 x 1020
// image (the largest image of the method's FPGA experiment) is dilated by a
// random non-flat 5x5 filter with its origin at the centre, and every
// output pixel is compared with the direct definition
//   (f (+) b)(x) = max { f(x-y) + b(y) : x-y in F, y in B }.
// The two volume memories hold 2^26 complex words each, so this run needs
// about 2 GB of host memory and several hundred million cycles.
module tb_full_size;
  import morph_pkg::*;
  localparam int N = 1024, PIX_W = 5, FILT = 5, IMG = 1020;
  localparam int LN = 10, FW = 3, FSW = 3, OUT_W = 7, LMAX = 31;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic img_wr_en = 0, filt_wr_en = 0, img_wr_dom = 1, filt_wr_dom = 1, erode = 0, start = 0;
  logic [LN-1:0] img_wr_row, img_wr_col;
  logic [PIX_W-1:0] img_wr_val, filt_wr_val;
  logic [FW-1:0] filt_wr_row, filt_wr_col, org_row, org_col;
  logic [LN:0] img_rows, img_cols;
  logic [FSW-1:0] filt_rows, filt_cols;
  logic busy, done, cfg_err, res_valid, res_hit;
  logic [LN-1:0] res_row, res_col;
  logic signed [OUT_W-1:0] res_value;
  logic fft_in_valid, fft_in_ready, fft_in_last, fft_inverse;
  logic fft_out_valid, fft_out_ready, fft_out_last;
  cplx_t fft_in_data, fft_out_data;
  logic [4:0] fft_log2n;
  int frame_errors, frames;

  morph_fft_top dut (.*);

  fft1d_model #(.MAXLOG(LN), .STALL_PCT(0)) u_fft (
    .clk, .rst_n,
    .in_valid(fft_in_valid), .in_ready(fft_in_ready), .in_data(fft_in_data),
    .in_last(fft_in_last), .log2n(fft_log2n), .inverse(fft_inverse),
    .out_valid(fft_out_valid), .out_ready(fft_out_ready), .out_data(fft_out_data),
    .out_last(fft_out_last), .frame_errors, .frames
  );

  byte img [IMG][IMG];
  int  flt [FILT][FILT];
  byte got [IMG][IMG];
  int  nres = 0, checks = 0, failures = 0;
  longint cycles = 0;

  always @(posedge clk) if (res_valid && rst_n) begin
    got[res_row][res_col] = byte'(res_value);
    nres++;
  end

  initial begin
    for (int r = 0; r < IMG; r++) for (int c = 0; c < IMG; c++) img[r][c] = byte'($urandom_range(LMAX, 0));
    for (int r = 0; r < FILT; r++) for (int c = 0; c < FILT; c++) flt[r][c] = $urandom_range(LMAX, 0);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < IMG; r++) for (int c = 0; c < IMG; c++) begin
      @(negedge clk);
      img_wr_en = 1; img_wr_row = LN'(r); img_wr_col = LN'(c); img_wr_val = PIX_W'(img[r][c]);
    end
    @(negedge clk); img_wr_en = 0;
    for (int r = 0; r < FILT; r++) for (int c = 0; c < FILT; c++) begin
      @(negedge clk);
      filt_wr_en = 1; filt_wr_row = FW'(r); filt_wr_col = FW'(c); filt_wr_val = PIX_W'(flt[r][c]);
    end
    @(negedge clk); filt_wr_en = 0;
    img_rows = IMG; img_cols = IMG; filt_rows = FILT; filt_cols = FILT;
    org_row = 2; org_col = 2; start = 1;
    @(negedge clk); start = 0;
    while (!done) begin @(posedge clk); cycles++; end
    @(negedge clk);
    for (int r = 0; r < IMG; r++) for (int c = 0; c < IMG; c++) begin
      int best;
      best = 0;
      for (int a = 0; a < FILT; a++) for (int b = 0; b < FILT; b++) begin
        int sr, sc;
        sr = r - (a - 2); sc = c - (b - 2);
        if (sr >= 0 && sc >= 0 && sr < IMG && sc < IMG && int'(img[sr][sc]) + flt[a][b] > best)
          best = int'(img[sr][sc]) + flt[a][b];
      end
      checks++;
      if (int'(got[r][c]) != best) begin
        failures++;
        if (failures < 5) $display("FAIL (%0d,%0d): got %0d expected %0d", r, c, got[r][c], best);
      end
    end
    checks++;
    if (nres != IMG * IMG || frame_errors != 0) begin
      failures++;
      $display("FAIL: %0d results, %0d bad FFT frames", nres, frame_errors);
    end
    $display("full size: %0d cycles, %0d FFT frames", cycles, frames);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1_000_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
