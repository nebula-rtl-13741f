// tb_sorting_unit -- self-checking test of the sorting unit. A behavioural
// global-buffer half (one-cycle read) holds random projected Gaussians over a
// small 8x6-tile area; random tile requests for both eyes must return exactly
// the reference list (footprint overlap, ascending {depth, id}, the nearest
// LIST_MAX kept), closed by one end-of-list entry, with the overflow counter
// advanced by the number of Gaussians left out. The output is stalled at
// random. LIST_MAX is reduced to 16 so that overflow happens often.
module tb_sorting_unit;
  import nebula_pkg::*;
  import tb_ref_pkg::*;

  localparam int LMAX = 16;
  localparam int GBD  = 64;
  localparam int GAW  = $clog2(GBD);

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, req_right = 0;
  logic [15:0] req_tx = 0, req_ty = 0;
  logic [GAW:0] n_gauss = 0;
  logic gb_rd_en;
  logic [GAW-1:0] gb_rd_addr;
  proj_gauss_t gb_rd_data;
  logic out_valid, out_ready = 1;
  sb_entry_t out_data;
  logic [31:0] overflow_count;

  proj_gauss_t mem [GBD];
  int checks = 0, failures = 0;

  sorting_unit #(.LIST_MAX(LMAX), .GB_DEPTH(GBD)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) if (gb_rd_en) gb_rd_data <= mem[gb_rd_addr];
  always_ff @(posedge clk) out_ready <= ($urandom_range(0, 3) != 0);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_ovf = 0;
    gb_rd_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      automatic proj_gauss_t all [$];
      automatic glist_t exp_l, got;
      automatic int hits;
      automatic int tx = $urandom_range(0, 7), ty = $urandom_range(0, 5);
      automatic bit rt = $urandom_range(0, 1);
      automatic int n = (it % 7 == 0) ? 0 : $urandom_range(1, GBD);
      automatic bit eol_seen = 0;
      if (it % 20 == 0) begin
        for (int i = 0; i < GBD; i++) begin
          mem[i].g = rand_gauss(i, $urandom_range(0, (it % 40 < 20) ? 31 : 7), $urandom_range(0, (it % 40 < 20) ? 23 : 7));
          mem[i].g.depth = 16'($urandom_range(0, 40));   // many equal depths
          mem[i].radius = 8'($urandom_range(0, 6));
        end
      end
      for (int i = 0; i < n; i++) all.push_back(mem[i]);
      exp_l = ref_list(all, tx, ty, rt, 1 << 20);
      hits = exp_l.size();
      if (hits > LMAX) exp_ovf += hits - LMAX;
      while (exp_l.size() > LMAX) void'(exp_l.pop_back());
      n_gauss = (GAW+1)'(n);
      @(negedge clk);
      req_valid = 1; req_right = rt; req_tx = 16'(tx); req_ty = 16'(ty);
      @(posedge clk);
      while (!req_ready) @(posedge clk);
      @(negedge clk);
      req_valid = 0;
      while (!eol_seen) begin
        @(posedge clk);
        if (out_valid && out_ready) begin
          if (out_data.eol) eol_seen = 1;
          else got.push_back(out_data.g);
        end
      end
      checks++;
      if (got.size() != exp_l.size()) begin
        failures++;
        $display("FAIL it %0d tile (%0d,%0d,%0d): %0d entries, expected %0d", it, tx, ty, rt, got.size(), exp_l.size());
      end else begin
        foreach (got[i]) begin
          checks++;
          if (got[i] !== exp_l[i]) begin
            failures++;
            $display("FAIL it %0d entry %0d", it, i);
          end
        end
      end
      checks++;
      if (overflow_count != 32'(exp_ovf)) begin
        failures++;
        $display("FAIL overflow count %0d expected %0d", overflow_count, exp_ovf);
      end
    end
    $display("overflowed entries=%0d", exp_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
