// wl_runner - runs one dilation of a random image by a random non-flat
// filter through a core instance of the given size and checks every output
// pixel against the direct definition
//   (f (+) b)(x) = max { f(x-y) + b(y) : x-y in F, y in B }.
// Image and filter values are uniform over the whole tonal range, as in the
// FPGA experiments of the method (random images and 5x5 filters). Used by
// the workload testbench; go starts the run, finished rises at the end with
// the number of checks, failures and the cycle count of the run.
module wl_runner
  import morph_pkg::*;
#(
  parameter int N     = 32,
  parameter int PIX_W = 2,
  parameter int IMG   = 28,
  parameter int FILT  = 5
) (
  input  logic clk,
  input  logic go,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   cycles
);
  localparam int LN = $clog2(N);
  localparam int FW = $clog2(FILT);
  localparam int FSW = $clog2(FILT + 1);
  localparam int OUT_W = PIX_W + 2;
  localparam int LMAX = (1 << PIX_W) - 1;

  logic rst_n = 0;
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

  morph_fft_top #(.N(N), .PIX_W(PIX_W), .FILT_MAX(FILT)) dut (.*);

  fft1d_model #(.MAXLOG(LN > PIX_W + 1 ? LN : PIX_W + 1), .STALL_PCT(0)) u_fft (
    .clk, .rst_n,
    .in_valid(fft_in_valid), .in_ready(fft_in_ready), .in_data(fft_in_data),
    .in_last(fft_in_last), .log2n(fft_log2n), .inverse(fft_inverse),
    .out_valid(fft_out_valid), .out_ready(fft_out_ready), .out_data(fft_out_data),
    .out_last(fft_out_last), .frame_errors, .frames
  );

  int img [IMG][IMG];
  int flt [FILT][FILT];
  int got [IMG][IMG];
  int nres;

  always @(posedge clk) if (res_valid && rst_n) begin
    got[res_row][res_col] = int'(res_value);
    nres++;
  end

  initial begin
    finished = 0; checks = 0; failures = 0; cycles = 0; nres = 0;
    for (int r = 0; r < IMG; r++) for (int c = 0; c < IMG; c++) img[r][c] = $urandom_range(LMAX, 0);
    for (int r = 0; r < FILT; r++) for (int c = 0; c < FILT; c++) flt[r][c] = $urandom_range(LMAX, 0);
    wait (go);
    @(negedge clk); rst_n = 1;
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
    img_rows = (LN+1)'(IMG); img_cols = (LN+1)'(IMG);
    filt_rows = FSW'(FILT); filt_cols = FSW'(FILT);
    org_row = FW'(FILT / 2); org_col = FW'(FILT / 2);
    start = 1;
    @(negedge clk); start = 0;
    while (!done) begin @(posedge clk); cycles++; end
    @(negedge clk);
    for (int r = 0; r < IMG; r++) for (int c = 0; c < IMG; c++) begin
      int best;
      bit any;
      any = 0; best = 0;
      for (int a = 0; a < FILT; a++) for (int b = 0; b < FILT; b++) begin
        int sr, sc;
        sr = r - (a - FILT / 2); sc = c - (b - FILT / 2);
        if (sr >= 0 && sc >= 0 && sr < IMG && sc < IMG)
          if (!any || img[sr][sc] + flt[a][b] > best) begin best = img[sr][sc] + flt[a][b]; any = 1; end
      end
      checks++;
      if (got[r][c] != best) begin
        failures++;
        if (failures < 4) $display("FAIL N=%0d %0d-bit (%0d,%0d): got %0d expected %0d", N, PIX_W, r, c, got[r][c], best);
      end
    end
    checks++;
    if (nres != IMG * IMG || frame_errors != 0) begin
      failures++;
      $display("FAIL N=%0d %0d-bit: %0d results, %0d bad frames", N, PIX_W, nres, frame_errors);
    end
    $display("workload FFT %0d, %0d-bit, %0dx%0d image, %0dx%0d filter: %0d cycles, %0d FFT frames, %0d failures",
             N, PIX_W, IMG, IMG, FILT, FILT, cycles, frames, failures);
    finished = 1;
  end
endmodule
