// fft1d_model - behavioural model of the external 1-D FFT core (simulation
// only, not synthesizable).
//
// Stands in for the vendor FFT core that the dilation core drives. It takes
// one frame of 2^log2n complex fixed-point samples (natural order) on the
// input stream, computes the transform in double precision with an
// iterative radix-2 FFT, rounds the result back to the fixed-point format
// and returns the frame on the output stream in natural order. Forward
// transforms are unscaled; inverse transforms use the conjugate twiddles and
// are scaled by 1/L. While it returns one frame it already accepts the
// next; a second complete frame waits (in_ready low) until the first has
// left.
//
// STALL_PCT makes in_ready drop at random in that share of cycles, so the
// back-pressure path of the client is exercised. Frames whose in_last does
// not fall on sample L-1 are counted in frame_errors.
module fft1d_model
  import morph_pkg::*;
#(
  parameter int unsigned MAXLOG    = 10,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  cplx_t      in_data,
  input  logic       in_last,
  input  logic [4:0] log2n,
  input  logic       inverse,
  output logic       out_valid,
  input  logic       out_ready,
  output cplx_t      out_data,
  output logic       out_last,
  output int         frame_errors,
  output int         frames
);

  localparam int MAXN = 1 << MAXLOG;
  localparam real PI = 3.14159265358979323846;
  localparam real SCALE = real'(longint'(1) << FRAC);

  real xr [MAXN];
  real xi [MAXN];
  fx_t yr [MAXN];
  fx_t yi [MAXN];

  int  cnt, len;
  logic outputting;
  logic stall;

  function automatic fx_t to_fx(input real v);
    real s;
    longint q;
    longint lim;
    // A real-to-integer cast already rounds to nearest (ties away from
    // zero); adding 0.5 first would bias every sample by one LSB, and that
    // bias adds up coherently over the lines of a transform.
    s = v * SCALE;
    q = longint'(s);
    lim = (longint'(1) <<< (CW - 1)) - 1;
    if (q > lim) q = lim;
    if (q < -lim - 1) q = -lim - 1;
    return fx_t'(q);
  endfunction

  task automatic run_fft(input int n, input int lg, input logic inv);
    int j, m, half, k, s;
    real tr, ti, wr, wi, ang, ur, ui, vr, vi;
    // bit reversal
    for (int i = 0; i < n; i++) begin
      j = 0;
      for (int b = 0; b < lg; b++) if (i[b]) j = j | (1 << (lg - 1 - b));
      if (j > i) begin
        tr = xr[i]; xr[i] = xr[j]; xr[j] = tr;
        ti = xi[i]; xi[i] = xi[j]; xi[j] = ti;
      end
    end
    m = 2;
    for (s = 0; s < lg; s++) begin
      half = m / 2;
      for (k = 0; k < half; k++) begin
        ang = (inv ? 2.0 : -2.0) * PI * real'(k) / real'(m);
        wr = $cos(ang);
        wi = $sin(ang);
        for (int b = 0; b < n; b += m) begin
          ur = xr[b + k];
          ui = xi[b + k];
          vr = xr[b + k + half] * wr - xi[b + k + half] * wi;
          vi = xr[b + k + half] * wi + xi[b + k + half] * wr;
          xr[b + k] = ur + vr;
          xi[b + k] = ui + vi;
          xr[b + k + half] = ur - vr;
          xi[b + k + half] = ui - vi;
        end
      end
      m = m * 2;
    end
    for (int i = 0; i < n; i++) begin
      if (inv) begin
        xr[i] = xr[i] / real'(n);
        xi[i] = xi[i] / real'(n);
      end
      yr[i] = to_fx(xr[i]);
      yi[i] = to_fx(xi[i]);
    end
  endtask

  logic pending;
  int   icnt, plen;
  logic pinv;

  assign in_ready      = rst_n && !pending && !stall;
  assign out_valid     = outputting;
  assign out_data.re   = yr[cnt];
  assign out_data.im   = yi[cnt];
  assign out_last      = outputting && (cnt == len - 1);

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt          <= 0;
      icnt         <= 0;
      len          <= 1;
      plen         <= 1;
      pinv         <= 1'b0;
      outputting   <= 1'b0;
      pending      <= 1'b0;
      stall        <= 1'b0;
      frame_errors <= 0;
      frames       <= 0;
    end else begin
      logic out_free;
      stall <= (STALL_PCT != 0) && (($urandom % 100) < STALL_PCT);
      // output side
      out_free = !outputting;
      if (outputting && out_ready) begin
        if (cnt == len - 1) begin
          cnt        <= 0;
          outputting <= 1'b0;
          out_free   = 1'b1;
        end else begin
          cnt <= cnt + 1;
        end
      end
      // a finished input frame moves to the output once it is free
      if (pending && out_free) begin
        run_fft(plen, $clog2(plen), pinv);
        len        <= plen;
        cnt        <= 0;
        outputting <= 1'b1;
        pending    <= 1'b0;
        frames     <= frames + 1;
      end
      // input side
      if (in_valid && in_ready) begin
        xr[icnt] = real'(longint'(in_data.re)) / SCALE;
        xi[icnt] = real'(longint'(in_data.im)) / SCALE;
        if (in_last != (icnt == (1 << log2n) - 1)) frame_errors <= frame_errors + 1;
        if (icnt == (1 << log2n) - 1) begin
          icnt    <= 0;
          plen    <= 1 << log2n;
          pinv    <= inverse;
          pending <= 1'b1;
        end else begin
          icnt <= icnt + 1;
        end
      end
    end
  end

endmodule
