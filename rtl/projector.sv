// projector - turns a convolved umbra line back into a grey value (Step 3).
//
// After the inverse 3-D FFT every spatial position holds the coefficient
// vector of a polynomial sum_y c_y x^y along the range axis. Its degree is
// the dilated value:
//   (f (+) b)(x) = max { y | c_y >= 1 },   or 0 when no coefficient is >= 1
// (x outside the dilated domain). The coefficients come from a fixed-point
// FFT, so they are exact integers only up to rounding error; a coefficient
// counts as >= 1 when it is at least 0.5 (it rounds to 1 or more).
//
// The line arrives as a stream, z = 0 first, one sample per in_valid. The
// block keeps the last z that passed the threshold. One cycle after the
// sample flagged in_last it raises out_valid for one cycle with the result,
// out_hit (some coefficient passed) and the tag given with in_last.
// In erosion mode the result is L_MAX - degree: erosion computed as the
// negative of the dilation of the negative image by the reflected filter.
// The result is signed because an erosion by a non-flat element can go
// below zero.
//
// The threshold of 0.5 is this design's choice; the paper states the
// criterion for exact integer coefficients (">= 1").
module projector
  import morph_pkg::*;
#(
  parameter int unsigned PIX_W = 5,
  parameter int unsigned ZW    = PIX_W + 1,
  parameter int unsigned TAG_W = 20,
  localparam int unsigned OUT_W = PIX_W + 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    erode,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic                    in_last,
  input  fx_t                     in_re,
  input  logic [TAG_W-1:0]        in_tag,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_value,
  output logic                    out_hit,
  output logic [TAG_W-1:0]        out_tag
);

  localparam logic signed [OUT_W-1:0] L_MAX = OUT_W'((1 << PIX_W) - 1);

  logic [ZW-1:0] z_q, best_q;
  logic          hit_q;

  // Combinational view of the line including the current sample.
  logic [ZW-1:0] z_cur, best_nx;
  logic          hit_nx, pass;

  always_comb begin
    z_cur   = in_first ? '0 : z_q;
    pass    = (in_re >= FX_HALF);
    best_nx = in_first ? '0 : best_q;
    hit_nx  = in_first ? 1'b0 : hit_q;
    if (pass) begin
      best_nx = z_cur;   // samples arrive in rising z, so the last pass wins
      hit_nx  = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      z_q       <= '0;
      best_q    <= '0;
      hit_q     <= 1'b0;
      out_valid <= 1'b0;
      out_value <= '0;
      out_hit   <= 1'b0;
      out_tag   <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        z_q    <= z_cur + ZW'(1);
        best_q <= best_nx;
        hit_q  <= hit_nx;
        if (in_last) begin
          out_valid <= 1'b1;
          out_hit   <= hit_nx;
          out_tag   <= in_tag;
          if (erode) out_value <= L_MAX - OUT_W'(hit_nx ? best_nx : '0);
          else       out_value <= OUT_W'(hit_nx ? best_nx : '0);
        end
      end
    end
  end

endmodule
