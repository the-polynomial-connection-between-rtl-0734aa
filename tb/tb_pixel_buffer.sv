// tb_pixel_buffer - checks the 2-D pixel buffer against a shadow array.
// Random writes and reads on an 8 x 6 buffer (a column count that is not a
// power of two, to exercise the row*COLS+col addressing); every read is
// compared one cycle later with the shadow, including read-during-write of
// the same entry, which must return the old contents.
module tb_pixel_buffer;
  localparam int ROWS = 8, COLS = 6, PIX_W = 3;
  logic clk = 0;
  always #5 clk = ~clk;

  logic             wr_en = 0;
  logic [2:0]       wr_row, rd_row;
  logic [2:0]       wr_col, rd_col;
  logic [PIX_W:0]   wr_pix, rd_pix;

  pixel_buffer #(.ROWS(ROWS), .COLS(COLS), .PIX_W(PIX_W)) dut (.*);

  logic [PIX_W:0] shadow [ROWS][COLS];
  int checks = 0, failures = 0;

  initial begin
    // fill everything first
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        @(negedge clk);
        wr_en = 1; wr_row = 3'(r); wr_col = 3'(c); wr_pix = (PIX_W+1)'($urandom);
        shadow[r][c] = wr_pix;
      end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 400; i++) begin
      logic [PIX_W:0] expv;
      @(negedge clk);
      rd_row = 3'($urandom_range(ROWS - 1, 0));
      rd_col = 3'($urandom_range(COLS - 1, 0));
      wr_en  = $urandom_range(1, 0);
      if (i % 7 == 0) begin wr_row = rd_row; wr_col = rd_col; end
      else begin
        wr_row = 3'($urandom_range(ROWS - 1, 0));
        wr_col = 3'($urandom_range(COLS - 1, 0));
      end
      wr_pix = (PIX_W+1)'($urandom);
      expv = shadow[rd_row][rd_col];
      @(posedge clk);
      if (wr_en) shadow[wr_row][wr_col] = wr_pix;
      #1;
      checks++;
      if (rd_pix !== expv) begin
        failures++;
        $display("FAIL read (%0d,%0d): got %h expected %h", rd_row, rd_col, rd_pix, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
