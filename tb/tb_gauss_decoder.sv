// tb_gauss_decoder -- self-checking test of the Gaussian decoder. Loads a
// random codebook, streams random compressed Gaussians with random input
// gaps and output back-pressure, and checks every decoded Gaussian (position
// and scale widening, codeword look-up, order) and the one-per-cycle rate
// when the output is always ready.
module tb_gauss_decoder;
  import nebula_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, out_ready = 0, cb_wr_en = 0;
  logic in_ready, out_valid;
  comp_gauss_t in_data = '0;
  dec_gauss_t out_data;
  logic [7:0] cb_wr_addr = '0;
  rgb_t cb_wr_data = '0;
  rgb_t cbk [256];
  dec_gauss_t exp_q [$];
  int checks = 0, failures = 0, n_out = 0;
  bit bp = 1;

  gauss_decoder dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic comp_gauss_t rnd(int i);
    comp_gauss_t c;
    c.id = 16'(i);
    c.pos_x = 16'($urandom); c.pos_y = 16'($urandom); c.pos_z = 16'($urandom);
    c.sx = 16'($urandom); c.sy = 16'($urandom); c.sz = 16'($urandom);
    c.opacity = 8'($urandom); c.cb_idx = 8'($urandom);
    return c;
  endfunction

  // output monitor
  always @(posedge clk) if (rst_n) begin
    out_ready <= bp ? ($urandom_range(0, 2) != 0) : 1'b1;
    if (out_valid && out_ready) begin
      checks++;
      n_out++;
      if (exp_q.size() == 0 || out_data !== exp_q[0]) begin
        failures++;
        $display("FAIL output %0d", n_out);
      end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
  end

  initial begin
    int t0, t1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      cb_wr_en = 1; cb_wr_addr = 8'(i); cb_wr_data = rgb_t'(24'($urandom)); cbk[i] = cb_wr_data;
    end
    @(negedge clk);
    cb_wr_en = 0;
    for (int i = 0; i < 2000; i++) begin
      in_data  = rnd(i);
      in_valid = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      while (!(in_valid && in_ready)) begin
        @(negedge clk);
        in_valid = 1;
        @(posedge clk);
      end
      exp_q.push_back(ref_decode(in_data, cbk));
      @(negedge clk);
      in_valid = 0;
    end
    wait (exp_q.size() == 0);
    // rate: 200 back-to-back inputs with the output always ready
    @(negedge clk);
    bp = 0;
    repeat (3) @(negedge clk);
    t0 = n_out;
    for (int i = 0; i < 200; i++) begin
      in_data = rnd(5000 + i);
      in_valid = 1;
      exp_q.push_back(ref_decode(in_data, cbk));
      @(negedge clk);
    end
    in_valid = 0;
    @(negedge clk);
    t1 = n_out;
    checks++;
    if (t1 - t0 != 200) begin
      failures++;
      $display("FAIL rate: %0d outputs in 201 cycles", t1 - t0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
