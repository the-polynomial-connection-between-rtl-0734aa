// morph_fft_top - exact grey-value dilation and erosion by umbra convolution.
//
// Dilation (f (+) b)(x) = max_y f(x-y) + b(y) is a max-plus "sum of
// products". Mapping every grey value a to the monomial x^a turns max into
// the degree of a polynomial sum and + into polynomial product, so the
// dilation at x is the degree of sum_y x^f(x-y) * x^b(y). Written as arrays
// of coefficients, that is a plain linear convolution in one more dimension
// (the range, or grey-value, axis), which an FFT computes fast. The result
// is exact because the coefficients are non-negative integers and only the
// position of the highest non-zero one is needed.
//
// Data flow of one run (sequenced by morph_ctrl):
//   1. The host loads the image into the image buffer and the structuring
//      element into the filter buffer (value + domain flag per pixel).
//   2. Forward 3-D FFT of the image umbra into volume A and of the filter
//      umbra into volume B (N x N x R volumes, R = 2^(PIX_W+1)). Each 3-D
//      FFT is three passes of 1-D FFTs (fft3d_pass) on the external FFT core;
//      the umbra generator supplies the samples of the first pass.
//   3. Volume A := A * B point-wise (cmul).
//   4. Inverse 3-D FFT of A; its last pass runs along the range axis only for
//      the output pixels and feeds the projector, which emits the dilated
//      value of each image pixel in raster order.
// Erosion (erode = 1) uses the duality f (-) b = l - ((l - f) (+) b'):
// the image is inverted while its umbra is formed, the filter is read
// reflected about its origin and the projector inverts the result.
//
// Geometry: image and filter sit at the top-left of the N x N grid; the
// output pixel (i, j) is the full convolution at (i + origin_row,
// j + origin_col). For the linear convolution not to wrap around,
// img_rows + filt_rows - 1 <= N must hold (same for columns); a start with
// a size outside the limits is refused with cfg_err.
//
// Interfaces:
//  - Load ports write one pixel per cycle while the core is idle.
//  - start (one cycle, while idle) latches the sizes, origin and mode;
//    busy is high until done pulses.
//  - res_valid marks one result pixel (res_row, res_col, res_value); res_hit
//    is low for a pixel outside the dilated domain (value 0, or l when
//    eroding).
//  - fft_*: stream interface of the external 1-D FFT core. Forward
//    transforms are unscaled, inverse transforms scaled by 1/L, natural
//    order on both sides; one frame of 2^fft_log2n samples per line.
//
// Follows the paper: the three steps of the method, the 3-D FFT composed of
// 1-D forward/inverse FFTs of a separate core, 2-D and 3-D arrays held in
// on-chip memory, tonal ranges up to 5 bits, FFT sizes up to 1024, a 5x5
// structuring element. This design's own choices: the fixed-point format,
// the FFT stream protocol and scaling, the pass order, the on-the-fly
// umbra, the reuse of volume A, the 0.5 threshold and the erosion mode
// hardware.
module morph_fft_top
  import morph_pkg::*;
#(
  parameter int unsigned N        = 1024,  // FFT size along rows and columns
  parameter int unsigned PIX_W    = 5,     // tonal range in bits
  parameter int unsigned FILT_MAX = 5,     // largest filter edge
  localparam int unsigned R   = 1 << (PIX_W + 1),  // range-axis length
  localparam int unsigned LN  = $clog2(N),
  localparam int unsigned LR  = PIX_W + 1,
  localparam int unsigned FW  = (FILT_MAX > 1) ? $clog2(FILT_MAX) : 1,
  localparam int unsigned FSW = $clog2(FILT_MAX + 1),
  localparam int unsigned OUT_W = PIX_W + 2,
  localparam int unsigned DEPTH = N * N * R,
  localparam int unsigned AW  = 2 * LN + LR
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // image load
  input  logic                    img_wr_en,
  input  logic [LN-1:0]           img_wr_row,
  input  logic [LN-1:0]           img_wr_col,
  input  logic [PIX_W-1:0]        img_wr_val,
  input  logic                    img_wr_dom,
  // structuring element load
  input  logic                    filt_wr_en,
  input  logic [FW-1:0]           filt_wr_row,
  input  logic [FW-1:0]           filt_wr_col,
  input  logic [PIX_W-1:0]        filt_wr_val,
  input  logic                    filt_wr_dom,
  // run configuration and control
  input  logic [LN:0]             img_rows,
  input  logic [LN:0]             img_cols,
  input  logic [FSW-1:0]          filt_rows,
  input  logic [FSW-1:0]          filt_cols,
  input  logic [FW-1:0]           org_row,
  input  logic [FW-1:0]           org_col,
  input  logic                    erode,
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  output logic                    cfg_err,
  // result stream
  output logic                    res_valid,
  output logic [LN-1:0]           res_row,
  output logic [LN-1:0]           res_col,
  output logic signed [OUT_W-1:0] res_value,
  output logic                    res_hit,
  // external 1-D FFT core
  output logic                    fft_in_valid,
  input  logic                    fft_in_ready,
  output cplx_t                   fft_in_data,
  output logic                    fft_in_last,
  output logic [4:0]              fft_log2n,
  output logic                    fft_inverse,
  input  logic                    fft_out_valid,
  output logic                    fft_out_ready,
  input  cplx_t                   fft_out_data,
  input  logic                    fft_out_last
);

  // ------------------------------------------------------------------
  // Run configuration, latched at start.
  // ------------------------------------------------------------------
  logic [LN:0]    irows_q, icols_q;
  logic [FSW-1:0] frows_q, fcols_q;
  logic [FW-1:0]  orow_q, ocol_q;
  logic           erode_q;
  logic           cfg_ok, ctrl_start;

  always_comb begin
    cfg_ok = (img_rows != '0) && (img_cols != '0) &&
             (filt_rows != '0) && (filt_cols != '0) &&
             (32'(filt_rows) <= FILT_MAX) && (32'(filt_cols) <= FILT_MAX) &&
             (32'(org_row) < 32'(filt_rows)) && (32'(org_col) < 32'(filt_cols)) &&
             (32'(img_rows) + 32'(filt_rows) - 1 <= N) &&
             (32'(img_cols) + 32'(filt_cols) - 1 <= N);
  end

  assign ctrl_start = start && !busy && cfg_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      irows_q <= '0; icols_q <= '0;
      frows_q <= '0; fcols_q <= '0;
      orow_q  <= '0; ocol_q  <= '0;
      erode_q <= 1'b0;
      cfg_err <= 1'b0;
    end else begin
      cfg_err <= start && !busy && !cfg_ok;
      if (ctrl_start) begin
        irows_q <= img_rows;  icols_q <= img_cols;
        frows_q <= filt_rows; fcols_q <= filt_cols;
        erode_q <= erode;
        // eroding uses the filter reflected about its origin
        orow_q  <= erode ? FW'(filt_rows - 1'b1 - FSW'(org_row)) : org_row;
        ocol_q  <= erode ? FW'(filt_cols - 1'b1 - FSW'(org_col)) : org_col;
      end
    end
  end

  // ------------------------------------------------------------------
  // Sequencer
  // ------------------------------------------------------------------
  phase_e        phase;
  logic          pass_start, pass_inverse, pass_to_proj;
  logic          pass_src_umbra, pass_src_filt, pass_vol_b, pass_done;
  axis_e         pass_axis;
  logic          mul_rd_en, mul_wr_en;
  logic [AW-1:0] mul_rd_addr, mul_wr_addr;

  morph_ctrl #(.DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n,
    .start(ctrl_start), .busy, .done, .phase,
    .pass_start, .pass_axis, .pass_inverse, .pass_to_proj,
    .pass_src_umbra, .pass_src_filt, .pass_vol_b, .pass_done,
    .mul_rd_en, .mul_rd_addr, .mul_wr_en, .mul_wr_addr
  );

  // ------------------------------------------------------------------
  // FFT pass engine
  // ------------------------------------------------------------------
  logic          p_rd_en, p_wr_en, p_busy;
  logic [LN-1:0] p_rd_row, p_rd_col, p_wr_row, p_wr_col;
  logic [LR-1:0] p_rd_z, p_wr_z;
  cplx_t         p_rd_data, p_wr_data;
  logic          pj_valid, pj_first, pj_last;
  fx_t           pj_re;
  logic [LN-1:0] pj_row, pj_col;

  fft3d_pass #(.N(N), .R(R)) u_pass (
    .clk, .rst_n,
    .start(pass_start), .axis(pass_axis), .inverse(pass_inverse),
    .to_proj(pass_to_proj),
    .win_row0(LN'(orow_q)), .win_col0(LN'(ocol_q)),
    .win_rows(irows_q), .win_cols(icols_q),
    .busy(p_busy), .done(pass_done),
    .rd_en(p_rd_en), .rd_row(p_rd_row), .rd_col(p_rd_col), .rd_z(p_rd_z),
    .rd_data(p_rd_data),
    .fft_in_valid, .fft_in_ready, .fft_in_data, .fft_in_last,
    .fft_log2n, .fft_inverse,
    .fft_out_valid, .fft_out_ready, .fft_out_data, .fft_out_last,
    .wr_en(p_wr_en), .wr_row(p_wr_row), .wr_col(p_wr_col), .wr_z(p_wr_z),
    .wr_data(p_wr_data),
    .proj_valid(pj_valid), .proj_first(pj_first), .proj_last(pj_last),
    .proj_re(pj_re), .proj_row(pj_row), .proj_col(pj_col)
  );

  // ------------------------------------------------------------------
  // Image and filter buffers, umbra generator (one-cycle read path)
  // ------------------------------------------------------------------
  logic [PIX_W:0]  img_rd_pix, filt_rd_pix;
  logic [FW-1:0]   f_rd_row, f_rd_col;
  logic            img_in_t, filt_in_t, img_in_q, filt_in_q;
  logic [LR-1:0]   z_q;
  logic            pix_dom;
  logic [PIX_W-1:0] pix_val;
  cplx_t           umbra_sample;

  pixel_buffer #(.ROWS(N), .COLS(N), .PIX_W(PIX_W)) u_img_buf (
    .clk,
    .wr_en(img_wr_en && !busy), .wr_row(img_wr_row), .wr_col(img_wr_col),
    .wr_pix({img_wr_dom, img_wr_val}),
    .rd_row(p_rd_row), .rd_col(p_rd_col), .rd_pix(img_rd_pix)
  );

  always_comb begin
    img_in_t  = (32'(p_rd_row) < 32'(irows_q)) && (32'(p_rd_col) < 32'(icols_q));
    filt_in_t = (32'(p_rd_row) < 32'(frows_q)) && (32'(p_rd_col) < 32'(fcols_q));
    if (erode_q) begin
      f_rd_row = FW'(32'(frows_q) - 1 - 32'(p_rd_row));
      f_rd_col = FW'(32'(fcols_q) - 1 - 32'(p_rd_col));
    end else begin
      f_rd_row = FW'(p_rd_row);
      f_rd_col = FW'(p_rd_col);
    end
  end

  pixel_buffer #(.ROWS(FILT_MAX), .COLS(FILT_MAX), .PIX_W(PIX_W)) u_filt_buf (
    .clk,
    .wr_en(filt_wr_en && !busy), .wr_row(filt_wr_row), .wr_col(filt_wr_col),
    .wr_pix({filt_wr_dom, filt_wr_val}),
    .rd_row(f_rd_row), .rd_col(f_rd_col), .rd_pix(filt_rd_pix)
  );

  always_ff @(posedge clk) begin
    img_in_q  <= img_in_t;
    filt_in_q <= filt_in_t;
    z_q       <= p_rd_z;
  end

  always_comb begin
    if (pass_src_filt) begin
      pix_val = filt_rd_pix[PIX_W-1:0];
      pix_dom = filt_rd_pix[PIX_W] && filt_in_q;
    end else begin
      pix_val = img_rd_pix[PIX_W-1:0];
      pix_dom = img_rd_pix[PIX_W] && img_in_q;
    end
  end

  umbra_gen #(.PIX_W(PIX_W), .ZW(LR)) u_umbra (
    .pix_val, .pix_in_dom(pix_dom),
    .invert(erode_q && !pass_src_filt),
    .z(z_q), .sample(umbra_sample)
  );

  // ------------------------------------------------------------------
  // Volumes A (image spectrum, then product) and B (filter spectrum)
  // ------------------------------------------------------------------
  logic          a_wr_en, b_wr_en, a_rd_en, b_rd_en;
  logic [AW-1:0] a_wr_addr, b_wr_addr, a_rd_addr, b_rd_addr, p_rd_addr, p_wr_addr;
  cplx_t         a_wr_data, b_wr_data, a_rd_data, b_rd_data, prod;
  logic          in_mul;

  assign in_mul    = (phase == PH_MUL);
  assign p_rd_addr = {p_rd_row, p_rd_col, p_rd_z};
  assign p_wr_addr = {p_wr_row, p_wr_col, p_wr_z};

  cmul u_cmul (.a(a_rd_data), .b(b_rd_data), .p(prod));

  always_comb begin
    a_rd_en   = in_mul ? mul_rd_en   : (p_rd_en && !pass_vol_b && !pass_src_umbra);
    a_rd_addr = in_mul ? mul_rd_addr : p_rd_addr;
    b_rd_en   = in_mul ? mul_rd_en   : (p_rd_en && pass_vol_b && !pass_src_umbra);
    b_rd_addr = in_mul ? mul_rd_addr : p_rd_addr;
    a_wr_en   = in_mul ? mul_wr_en   : (p_wr_en && !pass_vol_b);
    a_wr_addr = in_mul ? mul_wr_addr : p_wr_addr;
    a_wr_data = in_mul ? prod        : p_wr_data;
    b_wr_en   = !in_mul && p_wr_en && pass_vol_b;
    b_wr_addr = p_wr_addr;
    b_wr_data = p_wr_data;
    if (pass_src_umbra)  p_rd_data = umbra_sample;
    else if (pass_vol_b) p_rd_data = b_rd_data;
    else                 p_rd_data = a_rd_data;
  end

  volume_ram #(.DEPTH(DEPTH), .WIDTH(CPLX_W)) u_vol_a (
    .clk, .wr_en(a_wr_en), .wr_addr(a_wr_addr), .wr_data(a_wr_data),
    .rd_en(a_rd_en), .rd_addr(a_rd_addr), .rd_data(a_rd_data)
  );

  volume_ram #(.DEPTH(DEPTH), .WIDTH(CPLX_W)) u_vol_b (
    .clk, .wr_en(b_wr_en), .wr_addr(b_wr_addr), .wr_data(b_wr_data),
    .rd_en(b_rd_en), .rd_addr(b_rd_addr), .rd_data(b_rd_data)
  );

  // ------------------------------------------------------------------
  // Projector (Step 3)
  // ------------------------------------------------------------------
  logic [2*LN-1:0] res_tag;

  projector #(.PIX_W(PIX_W), .ZW(LR), .TAG_W(2 * LN)) u_proj (
    .clk, .rst_n, .erode(erode_q),
    .in_valid(pj_valid), .in_first(pj_first), .in_last(pj_last),
    .in_re(pj_re), .in_tag({pj_row, pj_col}),
    .out_valid(res_valid), .out_value(res_value), .out_hit(res_hit),
    .out_tag(res_tag)
  );

  assign res_row = res_tag[2*LN-1:LN];
  assign res_col = res_tag[LN-1:0];

  // p_busy mirrors the pass engine and is only observed in assertions.
  a_pass_in_phase: assert property (@(posedge clk) disable iff (!rst_n)
    p_busy |-> (phase != PH_IDLE && phase != PH_MUL));

endmodule
