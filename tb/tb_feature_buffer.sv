// tb_feature_buffer -- self-checking test of the feature buffer: fills all
// entries with random Gaussians, reads them back in random order and checks
// the one-cycle read latency and the capacity (16 KB / record size).
module tb_feature_buffer;
  import nebula_pkg::*;
  import tb_ref_pkg::*;

  localparam int DEPTH = FB_BYTES * 8 / RAST_BITS;
  localparam int AW = $clog2(DEPTH);
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  rast_gauss_t wr_data = '0, rd_data;
  rast_gauss_t model [DEPTH];
  int checks = 0, failures = 0;

  feature_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    checks++;
    if (DEPTH != 819) begin failures++; $display("FAIL depth %0d", DEPTH); end
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(i); wr_data = rand_gauss(i, 5, 5); model[i] = wr_data;
    end
    @(negedge clk);
    wr_en = 0;
    for (int n = 0; n < 3000; n++) begin
      automatic int a = $urandom_range(0, DEPTH - 1);
      @(negedge clk);
      rd_en = 1; rd_addr = AW'(a);
      // overwrite another entry at the same time
      wr_en = ($urandom_range(0, 3) == 0);
      wr_addr = AW'($urandom_range(0, DEPTH - 1));
      if (wr_addr == AW'(a)) wr_en = 0;
      wr_data = rand_gauss(n, 3, 3);
      @(negedge clk);
      if (wr_en) model[wr_addr] = wr_data;
      rd_en = 0; wr_en = 0;
      checks++;
      if (rd_data !== model[a]) begin failures++; $display("FAIL addr %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
