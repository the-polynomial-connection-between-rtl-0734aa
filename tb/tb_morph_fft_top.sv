// tb_morph_fft_top - end-to-end test of the dilation/erosion core.
//
// Runs the core with the behavioural FFT model (30% input stalls) on a
// 16 x 16 grid with a 3-bit tonal range and compares every output pixel with
// a direct evaluation of the definitions:
//   dilation (f (+) b)(x) = max { f(x-y) + b(y) : x-y in F, y in B }, else 0
//   erosion  (f (-) b)(x) = min { f(x+y) - b(y) : x+y in F, y in B }, else l
// Cases: the 1-D example of the method (f = 3 0 7 6 2 7, b = 1 2 X 0,
// expected 5 8 9 8 8 9), random full 5x5 filters in both modes, images
// and filters with domain gaps and an off-centre origin, a filter that
// leaves pixels outside the dilated domain, and a refused configuration.
// Each mechanism (dilation, erosion, FFT stall, filter gap, image gap,
// pixel outside the dilated domain, refused start) is counted and must occur.
module tb_morph_fft_top;
  import morph_pkg::*;

  localparam int N = 16;
  localparam int PIX_W = 3;
  localparam int FILT_MAX = 5;
  localparam int LN = $clog2(N);
  localparam int FW = $clog2(FILT_MAX);
  localparam int FSW = $clog2(FILT_MAX + 1);
  localparam int OUT_W = PIX_W + 2;
  localparam int LMAX = (1 << PIX_W) - 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    img_wr_en = 0, filt_wr_en = 0;
  logic [LN-1:0]           img_wr_row, img_wr_col;
  logic [PIX_W-1:0]        img_wr_val, filt_wr_val;
  logic                    img_wr_dom, filt_wr_dom;
  logic [FW-1:0]           filt_wr_row, filt_wr_col;
  logic [LN:0]             img_rows, img_cols;
  logic [FSW-1:0]          filt_rows, filt_cols;
  logic [FW-1:0]           org_row, org_col;
  logic                    erode = 0, start = 0;
  logic                    busy, done, cfg_err;
  logic                    res_valid, res_hit;
  logic [LN-1:0]           res_row, res_col;
  logic signed [OUT_W-1:0] res_value;
  logic                    fft_in_valid, fft_in_ready, fft_in_last, fft_inverse;
  logic                    fft_out_valid, fft_out_ready, fft_out_last;
  cplx_t                   fft_in_data, fft_out_data;
  logic [4:0]              fft_log2n;
  int                      frame_errors, frames;

  morph_fft_top #(.N(N), .PIX_W(PIX_W), .FILT_MAX(FILT_MAX)) dut (.*);

  fft1d_model #(.MAXLOG(LN > PIX_W + 1 ? LN : PIX_W + 1), .STALL_PCT(30)) u_fft (
    .clk, .rst_n,
    .in_valid(fft_in_valid), .in_ready(fft_in_ready), .in_data(fft_in_data),
    .in_last(fft_in_last), .log2n(fft_log2n), .inverse(fft_inverse),
    .out_valid(fft_out_valid), .out_ready(fft_out_ready), .out_data(fft_out_data),
    .out_last(fft_out_last), .frame_errors, .frames
  );

  int checks = 0, failures = 0;
  int n_dil = 0, n_ero = 0, n_stall = 0, n_fgap = 0, n_igap = 0, n_nohit = 0, n_cfgerr = 0;

  always @(posedge clk) if (fft_in_valid && !fft_in_ready) n_stall++;

  // test data
  int img_v [N][N];
  bit img_d [N][N];
  int flt_v [FILT_MAX][FILT_MAX];
  bit flt_d [FILT_MAX][FILT_MAX];
  int got   [N][N];
  bit ghit  [N][N];
  int seen  [N][N];
  int n_res;
  int exp_row, exp_col;

  always @(posedge clk) begin
    if (res_valid) begin
      if (int'(res_row) != exp_row || int'(res_col) != exp_col) begin
        failures++;
        $display("FAIL order: got (%0d,%0d) expected (%0d,%0d)", res_row, res_col, exp_row, exp_col);
      end
      got[res_row][res_col]  = int'(res_value);
      ghit[res_row][res_col] = res_hit;
      seen[res_row][res_col]++;
      n_res++;
      if (exp_col == int'(img_cols) - 1) begin exp_col = 0; exp_row++; end
      else exp_col++;
    end
  end

  task automatic load(input int ir, input int ic, input int fr, input int fc);
    for (int r = 0; r < ir; r++)
      for (int c = 0; c < ic; c++) begin
        @(negedge clk);
        img_wr_en = 1; img_wr_row = LN'(r); img_wr_col = LN'(c);
        img_wr_val = PIX_W'(img_v[r][c]); img_wr_dom = img_d[r][c];
      end
    @(negedge clk); img_wr_en = 0;
    for (int r = 0; r < fr; r++)
      for (int c = 0; c < fc; c++) begin
        @(negedge clk);
        filt_wr_en = 1; filt_wr_row = FW'(r); filt_wr_col = FW'(c);
        filt_wr_val = PIX_W'(flt_v[r][c]); filt_wr_dom = flt_d[r][c];
      end
    @(negedge clk); filt_wr_en = 0;
  endtask

  task automatic run_case(input string name, input int ir, input int ic,
                          input int fr, input int fc, input int orr, input int oc,
                          input bit ero);
    int best, v, cyc, bad;
    bit any;
    load(ir, ic, fr, fc);
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) seen[r][c] = 0;
    n_res = 0; exp_row = 0; exp_col = 0;
    @(negedge clk);
    img_rows = (LN+1)'(ir); img_cols = (LN+1)'(ic);
    filt_rows = FSW'(fr); filt_cols = FSW'(fc);
    org_row = FW'(orr); org_col = FW'(oc); erode = ero; start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin @(posedge clk); cyc++; end
    @(negedge clk);
    bad = 0;
    for (int r = 0; r < ir; r++)
      for (int c = 0; c < ic; c++) begin
        any = 0; best = 0;
        for (int a = 0; a < fr; a++)
          for (int b = 0; b < fc; b++) begin
            int dy, dx, sr, sc;
            if (!flt_d[a][b]) continue;
            dy = a - orr; dx = b - oc;
            if (!ero) begin sr = r - dy; sc = c - dx; end
            else      begin sr = r + dy; sc = c + dx; end
            if (sr < 0 || sc < 0 || sr >= ir || sc >= ic) continue;
            if (!img_d[sr][sc]) continue;
            v = ero ? img_v[sr][sc] - flt_v[a][b] : img_v[sr][sc] + flt_v[a][b];
            if (!any) best = v;
            else if (!ero && v > best) best = v;
            else if (ero && v < best) best = v;
            any = 1;
          end
        if (!any) best = ero ? LMAX : 0;
        if (!any) n_nohit++;
        checks++;
        if (seen[r][c] != 1 || got[r][c] != best || ghit[r][c] != any) begin
          failures++; bad++;
          if (bad < 6)
            $display("FAIL %s (%0d,%0d): got %0d hit %0b seen %0d, expected %0d hit %0b",
                     name, r, c, got[r][c], ghit[r][c], seen[r][c], best, any);
        end
      end
    checks++;
    if (n_res != ir * ic) begin
      failures++;
      $display("FAIL %s: %0d results, expected %0d", name, n_res, ir * ic);
    end
    if (ero) n_ero++; else n_dil++;
    $display("case %-22s %0dx%0d filter %0dx%0d %s: %0d cycles, %0d mismatches",
             name, ir, ic, fr, fc, ero ? "erosion " : "dilation", cyc, bad);
  endtask

  task automatic rand_image(input int ir, input int ic, input int gap_pct);
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        img_v[r][c] = $urandom_range(LMAX, 0);
        img_d[r][c] = ($urandom % 100) >= gap_pct;
        if (r < ir && c < ic && !img_d[r][c]) n_igap++;
      end
  endtask

  task automatic rand_filter(input int fr, input int fc, input int gap_pct);
    for (int a = 0; a < FILT_MAX; a++)
      for (int b = 0; b < FILT_MAX; b++) begin
        flt_v[a][b] = $urandom_range(LMAX, 0);
        flt_d[a][b] = ($urandom % 100) >= gap_pct;
        if (a < fr && b < fc && !flt_d[a][b]) n_fgap++;
      end
  endtask

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // 1-D example: f = [3 0 7 6 2 7], b = [1 2 X 0] with origin at index 1
    begin
      int fv[6] = '{3, 0, 7, 6, 2, 7};
      int bv[4] = '{1, 2, 0, 0};
      int ex[6] = '{5, 8, 9, 8, 8, 9};
      for (int c = 0; c < 6; c++) begin img_v[0][c] = fv[c]; img_d[0][c] = 1; end
      for (int b = 0; b < 4; b++) begin flt_v[0][b] = bv[b]; flt_d[0][b] = (b != 2); end
      n_fgap++;
      run_case("paper 1-D example", 1, 6, 1, 4, 0, 1, 0);
      for (int c = 0; c < 6; c++) begin
        checks++;
        if (got[0][c] != ex[c]) begin
          failures++;
          $display("FAIL example pixel %0d: got %0d expected %0d", c, got[0][c], ex[c]);
        end
      end
    end

    rand_image(12, 12, 0); rand_filter(5, 5, 0);
    run_case("random full 5x5", 12, 12, 5, 5, 2, 2, 0);
    run_case("random full 5x5", 12, 12, 5, 5, 2, 2, 1);

    rand_image(10, 11, 15); rand_filter(4, 3, 30);
    run_case("gaps, off-centre origin", 10, 11, 4, 3, 1, 0, 0);
    run_case("gaps, off-centre origin", 10, 11, 4, 3, 1, 0, 1);

    // only the top-left filter pixel is in the domain, origin at (2,2):
    // the last two rows and columns lie outside the dilated domain
    rand_image(9, 9, 0);
    for (int a = 0; a < FILT_MAX; a++) for (int b = 0; b < FILT_MAX; b++) begin
      flt_d[a][b] = (a == 0 && b == 0); flt_v[a][b] = 1;
    end
    n_fgap += 24;
    run_case("outside dilated domain", 9, 9, 5, 5, 2, 2, 0);

    // refused: 13 + 5 - 1 > 16
    @(negedge clk);
    img_rows = 13; img_cols = 12; filt_rows = 5; filt_cols = 5;
    org_row = 2; org_col = 2; start = 1;
    @(negedge clk); start = 0;
    checks++;
    if (!cfg_err || busy) begin failures++; $display("FAIL: oversize start not refused"); end
    else n_cfgerr++;
    repeat (3) @(negedge clk);

    checks++;
    if (frame_errors != 0) begin failures++; $display("FAIL: %0d FFT frames with bad last", frame_errors); end

    $display("mechanisms: dilation=%0d erosion=%0d fft_stall_cycles=%0d filter_gaps=%0d image_gaps=%0d outside_domain=%0d refused_start=%0d",
             n_dil, n_ero, n_stall, n_fgap, n_igap, n_nohit, n_cfgerr);
    checks += 7;
    if (n_dil == 0)    begin failures++; $display("FAIL: no dilation run"); end
    if (n_ero == 0)    begin failures++; $display("FAIL: no erosion run"); end
    if (n_stall == 0)  begin failures++; $display("FAIL: no FFT stall"); end
    if (n_fgap == 0)   begin failures++; $display("FAIL: no filter gap"); end
    if (n_igap == 0)   begin failures++; $display("FAIL: no image gap"); end
    if (n_nohit == 0)  begin failures++; $display("FAIL: no pixel outside the dilated domain"); end
    if (n_cfgerr == 0) begin failures++; $display("FAIL: no refused start"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
