// tb_fft3d_pass - one-axis FFT passes over an 8 x 8 x 4 volume.
// The testbench plays the volume memory (one-cycle read latency) and uses
// the behavioural FFT model with 40% input stalls. After a forward pass
// along each axis (range, column, row) every volume entry is compared with
// a direct O(L^2) DFT of the previous contents along that axis, computed in
// double precision. A final inverse range pass with a 3 x 4 window sent to
// the projector port must emit exactly the window's lines, in raster order,
// with correct first/last flags, tags and inverse-DFT values, and must not
// write the volume.
module tb_fft3d_pass;
  import morph_pkg::*;
  localparam int N = 8, R = 4, LN = 3, LR = 2;
  localparam real S = real'(longint'(1) << FRAC);
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, inverse = 0, to_proj = 0;
  axis_e axis = AX_Z;
  logic [LN-1:0] win_row0 = '0, win_col0 = '0;
  logic [LN:0]   win_rows = '0, win_cols = '0;
  logic busy, done, rd_en, wr_en;
  logic [LN-1:0] rd_row, rd_col, wr_row, wr_col, proj_row, proj_col;
  logic [LR-1:0] rd_z, wr_z;
  cplx_t rd_data, wr_data;
  logic fft_in_valid, fft_in_ready, fft_in_last, fft_inverse;
  logic fft_out_valid, fft_out_ready, fft_out_last;
  cplx_t fft_in_data, fft_out_data;
  logic [4:0] fft_log2n;
  logic proj_valid, proj_first, proj_last;
  fx_t proj_re;
  int frame_errors, frames;

  fft3d_pass #(.N(N), .R(R)) dut (.*);

  fft1d_model #(.MAXLOG(3), .STALL_PCT(40)) u_fft (
    .clk, .rst_n,
    .in_valid(fft_in_valid), .in_ready(fft_in_ready), .in_data(fft_in_data),
    .in_last(fft_in_last), .log2n(fft_log2n), .inverse(fft_inverse),
    .out_valid(fft_out_valid), .out_ready(fft_out_ready), .out_data(fft_out_data),
    .out_last(fft_out_last), .frame_errors, .frames
  );

  cplx_t vol [N][N][R];
  real   er [N][N][R];
  real   ei [N][N][R];
  int    n_wr;

  always @(posedge clk) begin
    if (rd_en) rd_data <= vol[rd_row][rd_col][rd_z];
    if (wr_en) begin vol[wr_row][wr_col][wr_z] <= wr_data; n_wr++; end
  end

  int checks = 0, failures = 0;

  function automatic real rv(input fx_t v);
    return real'(longint'(v)) / S;
  endfunction

  // expected = DFT of the current volume along one axis
  task automatic ref_dft(input axis_e ax, input bit inv);
    int L;
    L = (ax == AX_Z) ? R : N;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        for (int z = 0; z < R; z++) begin
          real sr, si;
          int k;
          sr = 0.0; si = 0.0;
          k = (ax == AX_Z) ? z : (ax == AX_COL) ? c : r;
          for (int m = 0; m < L; m++) begin
            real xr, xi, ang;
            if (ax == AX_Z)        begin xr = rv(vol[r][c][m].re); xi = rv(vol[r][c][m].im); end
            else if (ax == AX_COL) begin xr = rv(vol[r][m][z].re); xi = rv(vol[r][m][z].im); end
            else                   begin xr = rv(vol[m][c][z].re); xi = rv(vol[m][c][z].im); end
            ang = (inv ? 2.0 : -2.0) * PI * real'(k * m) / real'(L);
            sr += xr * $cos(ang) - xi * $sin(ang);
            si += xr * $sin(ang) + xi * $cos(ang);
          end
          if (inv) begin sr /= real'(L); si /= real'(L); end
          er[r][c][z] = sr; ei[r][c][z] = si;
        end
  endtask

  function automatic bit close(input real a, input real b);
    return (a - b < 0.01) && (b - a < 0.01);
  endfunction

  task automatic run_pass(input axis_e ax, input bit inv, input bit proj);
    int cyc;
    @(negedge clk);
    axis = ax; inverse = inv; to_proj = proj; start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin @(posedge clk); cyc++; end
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL: busy after done"); end
  endtask

  // projector stream checking
  int pj_cnt, pj_bad;
  always @(posedge clk) begin
    if (proj_valid) begin
      int l1, l2, z;
      l1 = pj_cnt / (4 * R); l2 = (pj_cnt / R) % 4; z = pj_cnt % R;
      if (int'(proj_row) != l1 || int'(proj_col) != l2 ||
          proj_first != (z == 0) || proj_last != (z == R - 1) ||
          !close(rv(proj_re), er[2 + l1][1 + l2][z])) begin
        pj_bad++;
        if (pj_bad < 5)
          $display("FAIL proj #%0d: tag (%0d,%0d) first %0b last %0b re %f expected %f",
                   pj_cnt, proj_row, proj_col, proj_first, proj_last, rv(proj_re),
                   er[2 + l1][1 + l2][z]);
      end
      pj_cnt++;
    end
  end

  initial begin
    axis_e axes [3] = '{AX_Z, AX_COL, AX_ROW};
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        for (int z = 0; z < R; z++) begin
          vol[r][c][z].re = fx_t'($signed($urandom_range(100000, 0)) - 50000);
          vol[r][c][z].im = fx_t'($signed($urandom_range(100000, 0)) - 50000);
        end
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (axes[i]) begin
      int bad;
      ref_dft(axes[i], 0);
      n_wr = 0;
      run_pass(axes[i], 0, 0);
      bad = 0;
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++)
          for (int z = 0; z < R; z++) begin
            checks++;
            if (!close(rv(vol[r][c][z].re), er[r][c][z]) || !close(rv(vol[r][c][z].im), ei[r][c][z])) begin
              failures++; bad++;
              if (bad < 4) $display("FAIL axis %0d (%0d,%0d,%0d): %f %f expected %f %f", i, r, c, z,
                                    rv(vol[r][c][z].re), rv(vol[r][c][z].im), er[r][c][z], ei[r][c][z]);
            end
          end
      checks++;
      if (n_wr != N * N * R) begin failures++; $display("FAIL axis %0d: %0d writes", i, n_wr); end
    end
    // inverse range pass into the projector port, 3x4 window at (2,1)
    ref_dft(AX_Z, 1);
    win_row0 = 2; win_col0 = 1; win_rows = 3; win_cols = 4;
    pj_cnt = 0; pj_bad = 0; n_wr = 0;
    run_pass(AX_Z, 1, 1);
    checks += 3;
    if (pj_cnt != 3 * 4 * R) begin failures++; $display("FAIL: %0d projector samples", pj_cnt); end
    if (pj_bad != 0) failures++;
    if (n_wr != 0) begin failures++; $display("FAIL: volume written in projector pass"); end
    checks++;
    if (frame_errors != 0) begin failures++; $display("FAIL: %0d bad FFT frames", frame_errors); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
