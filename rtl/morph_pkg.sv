// morph_pkg - types and constants shared by the FFT-based dilation core.
//
// The core computes exact grey-value dilation by convolving "umbras": every
// pixel becomes a one-hot vector along a range axis, the two volumes are
// convolved with a 3-D FFT, and the dilated value is the highest range index
// whose coefficient is at least one. All complex samples that move between
// the volume memories, the 1-D FFT core and the multiplier use the signed
// fixed-point format defined here (CW bits per component, FRAC fraction
// bits). The word widths are this design's choice; the method itself does
// not fix them.
package morph_pkg;

  // Bits per real/imaginary component and fraction bits of the fixed-point
  // format. 40/10 leaves 29 integer bits: the image spectrum is bounded by
  // the pixel count (2^20 for a 1024x1024 grid) and the spectral product by
  // that times the filter pixel count.
  localparam int unsigned CW   = 40;
  localparam int unsigned FRAC = 10;

  typedef logic signed [CW-1:0] fx_t;

  typedef struct packed {
    fx_t re;
    fx_t im;
  } cplx_t;

  localparam int unsigned CPLX_W = 2 * CW;

  localparam fx_t FX_ONE  = fx_t'(1) <<< FRAC;
  // A coefficient counts as "at least one" when it rounds to one or more.
  localparam fx_t FX_HALF = fx_t'(1) <<< (FRAC - 1);

  // Axis along which one pass of the 3-D FFT runs.
  typedef enum logic [1:0] {
    AX_Z   = 2'd0,   // range (grey-value) axis
    AX_COL = 2'd1,   // image column axis
    AX_ROW = 2'd2    // image row axis
  } axis_e;

  // Phases of one dilation/erosion run.
  typedef enum logic [3:0] {
    PH_IDLE = 4'd0,
    PH_F_Z  = 4'd1,  // forward FFT of the image umbra, range axis
    PH_F_C  = 4'd2,
    PH_F_R  = 4'd3,
    PH_B_Z  = 4'd4,  // forward FFT of the filter umbra
    PH_B_C  = 4'd5,
    PH_B_R  = 4'd6,
    PH_MUL  = 4'd7,  // point-wise product of the spectra
    PH_I_R  = 4'd8,  // inverse FFT, rows first
    PH_I_C  = 4'd9,
    PH_I_Z  = 4'd10, // last inverse pass streams into the projector
    PH_DONE = 4'd11
  } phase_e;

endpackage
