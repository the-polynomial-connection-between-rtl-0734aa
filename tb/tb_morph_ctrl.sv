// tb_morph_ctrl - phase sequencing of one run.
// A responder stands in for the pass engine and answers every pass_start
// with pass_done after a random delay. The nine passes must come in the
// order forward image (range, column, row, from the umbra then volume A),
// forward filter (same, volume B), inverse (row, column, range into the
// projector) with the right configuration, and the product phase must read
// every address of the volume once, in order, and write each one exactly
// one cycle after reading it. done must pulse once and busy fall with it.
module tb_morph_ctrl;
  import morph_pkg::*;
  localparam int DEPTH = 64, AW = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done, pass_start, pass_inverse, pass_to_proj;
  logic pass_src_umbra, pass_src_filt, pass_vol_b, pass_done = 0;
  axis_e pass_axis;
  phase_e phase;
  logic mul_rd_en, mul_wr_en;
  logic [AW-1:0] mul_rd_addr, mul_wr_addr;

  morph_ctrl #(.DEPTH(DEPTH)) dut (.*);

  // expected {axis, inverse, to_proj, src_umbra, src_filt, vol_b}
  typedef struct packed {
    axis_e ax; logic inv, proj, um, fl, vb;
  } cfg_t;
  cfg_t expv [9] = '{
    '{AX_Z,   0, 0, 1, 0, 0}, '{AX_COL, 0, 0, 0, 0, 0}, '{AX_ROW, 0, 0, 0, 0, 0},
    '{AX_Z,   0, 0, 1, 1, 1}, '{AX_COL, 0, 0, 0, 0, 1}, '{AX_ROW, 0, 0, 0, 0, 1},
    '{AX_ROW, 1, 0, 0, 0, 0}, '{AX_COL, 1, 0, 0, 0, 0}, '{AX_Z,   1, 1, 0, 0, 0}};

  int checks = 0, failures = 0;
  int npass = 0, nrd = 0, nwr = 0, ndone = 0;
  logic [AW-1:0] last_rd;
  logic rd_prev;

  // sampled at the falling edge, where all outputs of the block are stable
  always @(negedge clk) begin
    if (pass_start) begin
      cfg_t got;
      got = '{pass_axis, pass_inverse, pass_to_proj, pass_src_umbra, pass_src_filt, pass_vol_b};
      checks++;
      if (npass >= 9 || got != expv[npass]) begin
        failures++;
        $display("FAIL pass %0d: got %p", npass, got);
      end
      if (npass == 6 && nwr != DEPTH) begin
        failures++; $display("FAIL: inverse started after %0d product writes", nwr);
      end
      npass++;
      fork begin
        repeat ($urandom_range(20, 1)) @(negedge clk);
        pass_done = 1;
        @(negedge clk);
        pass_done = 0;
      end join_none
    end
    if (mul_rd_en) begin
      checks++;
      if (int'(mul_rd_addr) != nrd || phase != PH_MUL) begin
        failures++; $display("FAIL product read %0d at %0d", nrd, mul_rd_addr);
      end
      nrd++;
    end
    if (mul_wr_en) begin
      checks++;
      if (!rd_prev || mul_wr_addr != last_rd) begin
        failures++; $display("FAIL product write at %0d", mul_wr_addr);
      end
      nwr++;
    end
    rd_prev = mul_rd_en;
    last_rd = mul_rd_addr;
    if (done) ndone++;
  end

  initial begin
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL: busy after reset"); end
    start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 10000) begin @(negedge clk); cyc++; end
    @(negedge clk);
    checks += 4;
    if (npass != 9) begin failures++; $display("FAIL: %0d passes", npass); end
    if (nrd != DEPTH || nwr != DEPTH) begin failures++; $display("FAIL: %0d reads %0d writes", nrd, nwr); end
    if (ndone != 1) begin failures++; $display("FAIL: done pulsed %0d times", ndone); end
    if (busy) begin failures++; $display("FAIL: busy after done"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
