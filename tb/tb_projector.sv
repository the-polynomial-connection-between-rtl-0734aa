// tb_projector - Step 3 projection on random lines.
// Each line has R = 16 coefficients drawn as integers 0..3 plus noise below
// 0.4 in magnitude, as an inverse FFT leaves them. Expected: the highest z
// with an integer part >= 1, 0 and no hit if there is none; in erosion
// mode 7 minus that. Also checks the column (f (+) b)_Um(2) of the paper's
// example, whose highest set entry is 9, and that out_valid comes exactly
// one cycle after the last sample with the tag given there.
module tb_projector;
  import morph_pkg::*;
  localparam int PIX_W = 3, ZW = 4, TAG_W = 8, R = 16, OUT_W = PIX_W + 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic erode = 0, in_valid = 0, in_first = 0, in_last = 0;
  fx_t  in_re;
  logic [TAG_W-1:0] in_tag, out_tag;
  logic out_valid, out_hit;
  logic signed [OUT_W-1:0] out_value;

  projector #(.PIX_W(PIX_W), .ZW(ZW), .TAG_W(TAG_W)) dut (.*);

  int checks = 0, failures = 0;
  localparam real S = real'(longint'(1) << FRAC);

  task automatic send_line(input int coef [R], input bit ero, input int tag, input bit gaps);
    int best; bit any;
    any = 0; best = 0;
    for (int z = 0; z < R; z++) begin
      real noise;
      @(negedge clk);
      noise = (real'($urandom % 801) / 1000.0) - 0.4;
      if (coef[z] == 0 && noise < 0.0) noise = -noise;  // stay clear of -0.5 .. 0.5 edge
      in_valid = gaps ? ($urandom % 3 != 0) : 1'b1;
      while (!in_valid) begin
        @(negedge clk);
        in_valid = 1;
      end
      in_re = fx_t'(longint'((real'(coef[z]) + noise) * S));
      in_first = (z == 0); in_last = (z == R - 1); erode = ero; in_tag = TAG_W'(tag);
      if (coef[z] >= 1) begin best = z; any = 1; end
    end
    @(negedge clk);
    in_valid = 0; in_last = 0;
    checks++;
    if (!out_valid || out_hit != any || out_tag != TAG_W'(tag) ||
        int'(out_value) != (ero ? 7 - best : best)) begin
      failures++;
      $display("FAIL tag %0d: valid=%0b hit=%0b value=%0d, expected hit=%0b value=%0d",
               tag, out_valid, out_hit, out_value, any, ero ? 7 - best : best);
    end
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL: out_valid longer than one cycle"); end
  endtask

  initial begin
    int coef [R];
    repeat (2) @(negedge clk);
    rst_n = 1;
    // paper example, column 2 of (f (+) b)_Um: ones at 0, 2 and 9 (rows 10..15 zero)
    coef = '{1, 0, 1, 0, 0, 0, 0, 0, 0, 1, 0, 0, 0, 0, 0, 0};
    send_line(coef, 0, 2, 0);
    for (int i = 0; i < 300; i++) begin
      for (int z = 0; z < R; z++) coef[z] = ($urandom % 4 == 0) ? $urandom_range(3, 1) : 0;
      if (i % 10 == 0) for (int z = 0; z < R; z++) coef[z] = 0;
      send_line(coef, i[0], i % 256, i % 4 == 3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
