// tb_global_double_buffer -- self-checking test of the global double buffer.
// Fills one half while the four read ports read the other half at random
// addresses, swaps the halves and repeats; checks every read (one-cycle
// latency) and the half capacity (72 KB / record size).
module tb_global_double_buffer;
  import nebula_pkg::*;
  import tb_ref_pkg::*;

  localparam int DEPTH = GBUF_BYTES / 2 * 8 / PROJ_BITS;
  localparam int AW = $clog2(DEPTH);
  logic clk = 0, wr_half = 0, wr_en = 0, rd_half = 1;
  logic [AW-1:0] wr_addr = '0;
  proj_gauss_t wr_data = '0;
  logic [N_SU-1:0] rd_en = '0;
  logic [AW-1:0] rd_addr [N_SU];
  proj_gauss_t rd_data [N_SU];
  proj_gauss_t model [2][DEPTH];
  int checks = 0, failures = 0;

  global_double_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic proj_gauss_t rnd(int i);
    proj_gauss_t p;
    p.g = rand_gauss(i, 9, 9);
    p.radius = 8'($urandom);
    return p;
  endfunction

  initial begin
    int a [N_SU];
    checks++;
    if (DEPTH != 3510) begin failures++; $display("FAIL depth %0d", DEPTH); end
    for (int p = 0; p < N_SU; p++) rd_addr[p] = '0;
    // first fill of half 1, nothing to read yet
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      wr_half = 1; wr_en = 1; wr_addr = AW'(i); wr_data = rnd(i); model[1][i] = wr_data;
    end
    for (int frame = 0; frame < 4; frame++) begin
      @(negedge clk);
      wr_en = 0;
      rd_half = wr_half;
      wr_half = ~wr_half;
      for (int i = 0; i < DEPTH; i++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = AW'(i); wr_data = rnd(frame * DEPTH + i);
        model[wr_half][i] = wr_data;
        for (int p = 0; p < N_SU; p++) begin
          a[p] = $urandom_range(0, DEPTH - 1);
          rd_addr[p] = AW'(a[p]);
        end
        rd_en = '1;
        @(posedge clk);
        #1;
        for (int p = 0; p < N_SU; p++) begin
          checks++;
          if (rd_data[p] !== model[rd_half][a[p]]) begin
            failures++;
            $display("FAIL port %0d half %0d addr %0d", p, rd_half, a[p]);
          end
        end
      end
      @(negedge clk);
      rd_en = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
