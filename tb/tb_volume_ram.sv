// tb_volume_ram - random reads and writes of the volume memory against a
// shadow array: one-cycle read latency, rd_en gating (the output holds when
// rd_en is low) and read-before-write on an address collision.
module tb_volume_ram;
  localparam int DEPTH = 64, WIDTH = 80, AW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic             wr_en = 0, rd_en = 0;
  logic [AW-1:0]    wr_addr, rd_addr;
  logic [WIDTH-1:0] wr_data, rd_data;

  volume_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  logic [WIDTH-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  function automatic logic [WIDTH-1:0] rnd();
    return {$urandom, $urandom, $urandom};
  endfunction

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = AW'(a); wr_data = rnd(); shadow[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 500; i++) begin
      logic [WIDTH-1:0] expv, prev;
      logic re;
      @(negedge clk);
      prev    = rd_data;
      re      = ($urandom % 4) != 0;
      rd_en   = re;
      rd_addr = AW'($urandom);
      wr_en   = $urandom_range(1, 0);
      wr_addr = (i % 5 == 0) ? rd_addr : AW'($urandom);
      wr_data = rnd();
      expv    = re ? shadow[rd_addr] : prev;
      @(posedge clk);
      if (wr_en) shadow[wr_addr] = wr_data;
      #1;
      checks++;
      if (rd_data !== expv) begin
        failures++;
        $display("FAIL i=%0d addr=%0d rd_en=%0b: got %h expected %h", i, rd_addr, re, rd_data, expv);
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
