// morph_ctrl - phase sequencer of the dilation core.
//
// One run of the core is the three steps of the umbra method:
//   Step 1+2a  forward 3-D FFT of the image umbra  (range, column, row pass)
//              forward 3-D FFT of the filter umbra (range, column, row pass)
//   Step 2b    point-wise product of the two spectra
//   Step 2c+3  inverse 3-D FFT of the product (row, column, range pass);
//              the last pass streams each range line into the projector.
// The umbras are never stored: the first pass of each forward transform
// reads its samples from the umbra generator. The forward passes write the
// image spectrum into volume A and the filter spectrum into volume B; the
// product overwrites volume A and the inverse passes work in place there.
//
// For every FFT pass this block raises pass_start for one cycle while the
// pass configuration outputs (decoded from the phase) are valid, and waits
// for pass_done. During the product phase it walks every volume address
// itself: mul_rd_en reads both volumes, and one cycle later mul_wr_en
// writes the product (formed outside, in cmul) at the same address.
// start is taken only in PH_IDLE; done pulses once when the run ends.
//
// The order of the passes and the reuse of volume A are this design's
// choices; the paper gives the three steps and that the 3-D transforms are
// built from 1-D FFTs.
module morph_ctrl
  import morph_pkg::*;
#(
  parameter int unsigned DEPTH = 1024 * 1024 * 64,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output phase_e        phase,
  // FFT pass control
  output logic          pass_start,
  output axis_e         pass_axis,
  output logic          pass_inverse,
  output logic          pass_to_proj,
  output logic          pass_src_umbra,  // samples come from the umbra generator
  output logic          pass_src_filt,   // ... of the filter (else of the image)
  output logic          pass_vol_b,      // pass reads/writes volume B (else A)
  input  logic          pass_done,
  // product walk
  output logic          mul_rd_en,
  output logic [AW-1:0] mul_rd_addr,
  output logic          mul_wr_en,
  output logic [AW-1:0] mul_wr_addr
);

  phase_e        ph_q;
  logic          start_q;
  logic [AW-1:0] maddr_q;
  logic          mrd_q;
  logic          mlast_q;

  assign phase      = ph_q;
  assign busy       = (ph_q != PH_IDLE);
  assign pass_start = start_q;

  // Pass configuration decoded from the phase.
  always_comb begin
    pass_axis      = AX_Z;
    pass_inverse   = 1'b0;
    pass_to_proj   = 1'b0;
    pass_src_umbra = 1'b0;
    pass_src_filt  = 1'b0;
    pass_vol_b     = 1'b0;
    unique case (ph_q)
      PH_F_Z: pass_src_umbra = 1'b1;
      PH_F_C: pass_axis = AX_COL;
      PH_F_R: pass_axis = AX_ROW;
      PH_B_Z: begin pass_src_umbra = 1'b1; pass_src_filt = 1'b1; pass_vol_b = 1'b1; end
      PH_B_C: begin pass_axis = AX_COL; pass_vol_b = 1'b1; end
      PH_B_R: begin pass_axis = AX_ROW; pass_vol_b = 1'b1; end
      PH_I_R: begin pass_axis = AX_ROW; pass_inverse = 1'b1; end
      PH_I_C: begin pass_axis = AX_COL; pass_inverse = 1'b1; end
      PH_I_Z: begin pass_inverse = 1'b1; pass_to_proj = 1'b1; end
      default: ;
    endcase
  end

  assign mul_rd_en   = (ph_q == PH_MUL) && mrd_q;
  assign mul_rd_addr = maddr_q;

  function automatic phase_e next_pass(input phase_e p);
    unique case (p)
      PH_F_Z: return PH_F_C;
      PH_F_C: return PH_F_R;
      PH_F_R: return PH_B_Z;
      PH_B_Z: return PH_B_C;
      PH_B_C: return PH_B_R;
      PH_B_R: return PH_MUL;
      PH_I_R: return PH_I_C;
      PH_I_C: return PH_I_Z;
      default: return PH_DONE;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph_q        <= PH_IDLE;
      start_q     <= 1'b0;
      maddr_q     <= '0;
      mrd_q       <= 1'b0;
      mlast_q     <= 1'b0;
      mul_wr_en   <= 1'b0;
      mul_wr_addr <= '0;
      done        <= 1'b0;
    end else begin
      start_q   <= 1'b0;
      done      <= 1'b0;
      mul_wr_en <= 1'b0;
      unique case (ph_q)
        PH_IDLE: if (start) begin
          ph_q    <= PH_F_Z;
          start_q <= 1'b1;
        end
        PH_MUL: begin
          // read at maddr, write the product one cycle later
          if (mrd_q) begin
            mul_wr_en   <= 1'b1;
            mul_wr_addr <= maddr_q;
            if (maddr_q == AW'(DEPTH - 1)) mrd_q <= 1'b0;
            else maddr_q <= maddr_q + AW'(1);
            mlast_q <= (maddr_q == AW'(DEPTH - 1));
          end else if (mlast_q) begin
            mlast_q <= 1'b0;
            ph_q    <= PH_I_R;
            start_q <= 1'b1;
          end
        end
        PH_DONE: begin
          ph_q <= PH_IDLE;
          done <= 1'b1;
        end
        default: if (pass_done) begin
          ph_q <= next_pass(ph_q);
          if (next_pass(ph_q) == PH_MUL) begin
            maddr_q <= '0;
            mrd_q   <= 1'b1;
          end else if (next_pass(ph_q) != PH_DONE) begin
            start_q <= 1'b1;
          end
        end
      endcase
    end
  end

endmodule
