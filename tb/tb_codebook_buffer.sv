// tb_codebook_buffer -- self-checking test of the codebook buffer: loads 256
// random codewords, reads them back in random order with one-cycle latency,
// and checks that the read data holds while no read is issued.
module tb_codebook_buffer;
  import nebula_pkg::*;

  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [7:0] wr_addr = '0, rd_addr = '0;
  rgb_t wr_data = '0, rd_data;
  rgb_t model [256];
  int checks = 0, failures = 0;

  codebook_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 8'(i); wr_data = rgb_t'(24'($urandom)); model[i] = wr_data;
    end
    @(negedge clk);
    wr_en = 0;
    for (int n = 0; n < 2000; n++) begin
      automatic int a = $urandom_range(0, 255);
      @(negedge clk);
      rd_en = 1; rd_addr = 8'(a);
      @(negedge clk);
      rd_en = 0; rd_addr = 8'(a + 1);
      checks++;
      if (rd_data !== model[a]) begin failures++; $display("FAIL addr %0d", a); end
      @(negedge clk);
      checks++;
      if (rd_data !== model[a]) begin failures++; $display("FAIL hold addr %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
