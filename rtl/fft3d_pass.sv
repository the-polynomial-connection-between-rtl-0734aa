// fft3d_pass - one axis pass of a 3-D FFT built from a 1-D FFT core.
//
// A 3-D DFT is separable: transforming every line along the range axis,
// then every line along the column axis, then every line along the row
// axis (in any order) gives the 3-D transform. This block performs one such
// pass over a ROWS=N x COLS=N x R volume. For every line it reads the L
// samples (L = R on the range axis, N otherwise) through a generic read
// port, streams them into the external 1-D FFT core, and takes the L
// transformed samples back. They are written to the same positions through
// the write port, or, with to_proj set, sent to the projector instead.
//
// On the range axis with to_proj set, only the lines of a window
// (win_rows x win_cols lines starting at win_row0, win_col0) are processed;
// the window selects the output pixels of the dilation. Elsewhere every
// line of the volume is processed.
//
// Sending and receiving run independently, so the next line is read while
// the previous one is still coming back. Reads go through a two-entry FIFO
// so the FFT input can be stalled (fft_in_ready low) at any cycle without
// losing a sample. Lines are walked in the same order on both sides.
//
// Interface timing:
//  - start (one cycle) latches axis, inverse, to_proj and the window;
//    busy stays high until done pulses after the last returned sample.
//  - rd_data must hold the sample addressed by rd_row/rd_col/rd_z one cycle
//    after rd_en.
//  - FFT input: valid/ready stream, fft_in_last on the last sample of a
//    line; fft_log2n and fft_inverse are stable for the whole pass.
//  - FFT output: valid stream in natural order, always accepted while busy;
//    fft_out_last must mark the last sample of a line.
//
// The paper says the 3-D FFTs are composed of 1-D FFTs of the vendor core;
// the walk order, the FIFO and the overlap of lines are this design's
// choices.
module fft3d_pass
  import morph_pkg::*;
#(
  parameter int unsigned N = 1024,
  parameter int unsigned R = 64,
  localparam int unsigned LN = $clog2(N),
  localparam int unsigned LR = $clog2(R)
) (
  input  logic          clk,
  input  logic          rst_n,
  // control
  input  logic          start,
  input  axis_e         axis,
  input  logic          inverse,
  input  logic          to_proj,
  input  logic [LN-1:0] win_row0,
  input  logic [LN-1:0] win_col0,
  input  logic [LN:0]   win_rows,
  input  logic [LN:0]   win_cols,
  output logic          busy,
  output logic          done,
  // sample source (volume or umbra generator)
  output logic          rd_en,
  output logic [LN-1:0] rd_row,
  output logic [LN-1:0] rd_col,
  output logic [LR-1:0] rd_z,
  input  cplx_t         rd_data,
  // 1-D FFT core
  output logic          fft_in_valid,
  input  logic          fft_in_ready,
  output cplx_t         fft_in_data,
  output logic          fft_in_last,
  output logic [4:0]    fft_log2n,
  output logic          fft_inverse,
  input  logic          fft_out_valid,
  output logic          fft_out_ready,
  input  cplx_t         fft_out_data,
  input  logic          fft_out_last,
  // write-back to the volume
  output logic          wr_en,
  output logic [LN-1:0] wr_row,
  output logic [LN-1:0] wr_col,
  output logic [LR-1:0] wr_z,
  output cplx_t         wr_data,
  // stream to the projector
  output logic          proj_valid,
  output logic          proj_first,
  output logic          proj_last,
  output fx_t           proj_re,
  output logic [LN-1:0] proj_row,
  output logic [LN-1:0] proj_col
);

  localparam int unsigned KW = (LN > LR) ? LN : LR;
  typedef logic [KW-1:0] ctr_t;

  // Latched pass configuration.
  axis_e         ax_q;
  logic          inv_q, proj_q;
  logic [LN-1:0] row0_q, col0_q;
  ctr_t          l1_max, l2_max, s_max;

  // Walk counters: l1/l2 select the line, s the sample within it.
  typedef struct packed {
    ctr_t l1;
    ctr_t l2;
    ctr_t s;
  } walk_t;

  walk_t snd_q, rcv_q;
  logic  snd_act_q, rcv_act_q;

  function automatic walk_t walk_next(input walk_t w, input ctr_t m2,
                                      input ctr_t ms);
    walk_t n;
    n = w;
    if (w.s != ms) n.s = w.s + ctr_t'(1);
    else begin
      n.s = '0;
      if (w.l2 != m2) n.l2 = w.l2 + ctr_t'(1);
      else begin
        n.l2 = '0;
        n.l1 = w.l1 + ctr_t'(1);
      end
    end
    return n;
  endfunction

  function automatic logic walk_end(input walk_t w, input ctr_t m1,
                                    input ctr_t m2, input ctr_t ms);
    return (w.s == ms) && (w.l2 == m2) && (w.l1 == m1);
  endfunction

  // Map a walk position to volume coordinates for the latched axis.
  typedef struct packed {
    logic [LN-1:0] row;
    logic [LN-1:0] col;
    logic [LR-1:0] z;
  } coord_t;

  function automatic coord_t walk_coord(input walk_t w);
    coord_t c;
    unique case (ax_q)
      AX_COL: begin
        c.row = LN'(w.l1); c.z = LR'(w.l2); c.col = LN'(w.s);
      end
      AX_ROW: begin
        c.col = LN'(w.l1); c.z = LR'(w.l2); c.row = LN'(w.s);
      end
      default: begin
        c.row = LN'(w.l1) + (proj_q ? row0_q : '0);
        c.col = LN'(w.l2) + (proj_q ? col0_q : '0);
        c.z   = LR'(w.s);
      end
    endcase
    return c;
  endfunction

  // ------------------------------------------------------------------
  // Send side: read issue, two-entry FIFO, FFT input stream.
  // ------------------------------------------------------------------
  logic [CPLX_W:0] fifo_q [2];
  logic            wp_q, rp_q;
  logic [1:0]      cnt_q;
  logic            pend_q, pend_last_q;
  logic            pop, issue;
  coord_t          rd_c;

  assign pop   = fft_in_valid && fft_in_ready;
  assign issue = snd_act_q && ((3'(cnt_q) + 3'(pend_q) - 3'(pop)) < 3'd2);
  assign rd_c  = walk_coord(snd_q);

  assign rd_en  = issue;
  assign rd_row = rd_c.row;
  assign rd_col = rd_c.col;
  assign rd_z   = rd_c.z;

  assign fft_in_valid = (cnt_q != 2'd0);
  assign fft_in_data  = fifo_q[rp_q][CPLX_W-1:0];
  assign fft_in_last  = fifo_q[rp_q][CPLX_W];
  assign fft_log2n    = (ax_q == AX_Z) ? 5'(LR) : 5'(LN);
  assign fft_inverse  = inv_q;

  // ------------------------------------------------------------------
  // Receive side.
  // ------------------------------------------------------------------
  coord_t wr_c;
  logic   rcv_fire, rcv_end;

  assign fft_out_ready = rcv_act_q;
  assign rcv_fire = fft_out_valid && rcv_act_q;
  assign rcv_end  = walk_end(rcv_q, l1_max, l2_max, s_max);
  assign wr_c     = walk_coord(rcv_q);

  assign wr_en   = rcv_fire && !proj_q;
  assign wr_row  = wr_c.row;
  assign wr_col  = wr_c.col;
  assign wr_z    = wr_c.z;
  assign wr_data = fft_out_data;

  assign proj_valid = rcv_fire && proj_q;
  assign proj_first = (rcv_q.s == '0);
  assign proj_last  = (rcv_q.s == s_max);
  assign proj_re    = fft_out_data.re;
  assign proj_row   = LN'(rcv_q.l1);
  assign proj_col   = LN'(rcv_q.l2);

  assign busy = snd_act_q || rcv_act_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ax_q        <= AX_Z;
      inv_q       <= 1'b0;
      proj_q      <= 1'b0;
      row0_q      <= '0;
      col0_q      <= '0;
      l1_max      <= '0;
      l2_max      <= '0;
      s_max       <= '0;
      snd_q       <= '0;
      rcv_q       <= '0;
      snd_act_q   <= 1'b0;
      rcv_act_q   <= 1'b0;
      wp_q        <= 1'b0;
      rp_q        <= 1'b0;
      cnt_q       <= '0;
      pend_q      <= 1'b0;
      pend_last_q <= 1'b0;
      done        <= 1'b0;
      fifo_q[0]   <= '0;
      fifo_q[1]   <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        ax_q      <= axis;
        inv_q     <= inverse;
        proj_q    <= to_proj && (axis == AX_Z);
        row0_q    <= win_row0;
        col0_q    <= win_col0;
        snd_q     <= '0;
        rcv_q     <= '0;
        snd_act_q <= 1'b1;
        rcv_act_q <= 1'b1;
        unique case (axis)
          AX_COL, AX_ROW: begin
            l1_max <= ctr_t'(N - 1);
            l2_max <= ctr_t'(R - 1);
            s_max  <= ctr_t'(N - 1);
          end
          default: begin
            l1_max <= to_proj ? ctr_t'(win_rows - 1'b1) : ctr_t'(N - 1);
            l2_max <= to_proj ? ctr_t'(win_cols - 1'b1) : ctr_t'(N - 1);
            s_max  <= ctr_t'(R - 1);
          end
        endcase
      end else begin
        // read issue
        pend_q <= issue;
        if (issue) begin
          pend_last_q <= (snd_q.s == s_max);
          if (walk_end(snd_q, l1_max, l2_max, s_max)) snd_act_q <= 1'b0;
          snd_q <= walk_next(snd_q, l2_max, s_max);
        end
        // FIFO
        if (pend_q) begin
          fifo_q[wp_q] <= {pend_last_q, rd_data};
          wp_q <= ~wp_q;
        end
        if (pop) rp_q <= ~rp_q;
        cnt_q <= cnt_q + 2'(pend_q) - 2'(pop);
        // receive
        if (rcv_fire) begin
          rcv_q <= walk_next(rcv_q, l2_max, s_max);
          if (rcv_end) begin
            rcv_act_q <= 1'b0;
            done      <= 1'b1;
          end
        end
      end
    end
  end

  // Handshake rules of the FFT streams.
  property p_out_last;
    @(posedge clk) disable iff (!rst_n)
      rcv_fire |-> (fft_out_last == (rcv_q.s == s_max));
  endproperty
  a_out_last: assert property (p_out_last)
    else $error("fft3d_pass: fft_out_last does not match the line length");

  property p_in_hold;
    @(posedge clk) disable iff (!rst_n)
      (fft_in_valid && !fft_in_ready) |=> (fft_in_valid && $stable(fft_in_data));
  endproperty
  a_in_hold: assert property (p_in_hold);

endmodule
