// tb_merge_unit -- self-checking test of the four-way merge unit.
// Builds four sorted lists per right-eye tile from a shared pool (so some
// Gaussians appear in several lists), presents them as stereo-buffer row
// heads, sometimes with a row still empty for a while, and checks the merged
// output against the sorted union without duplicates, the duplicate counter,
// and the cycle count (one cycle per list entry plus two) when no row stalls.
module tb_merge_unit;
  import nebula_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  sb_entry_t head [SB_ROWS];
  logic [SB_ROWS-1:0] empty, pop;
  logic out_valid, done, busy;
  rast_gauss_t out_g;
  logic [31:0] dup_count;
  int checks = 0, failures = 0, total_dups = 0, n_wait_tiles = 0;

  sb_entry_t q [SB_ROWS][$];
  int hold [SB_ROWS];
  rast_gauss_t got [$];

  merge_unit dut (.*);
  always #5 clk = ~clk;

  always_comb
    for (int r = 0; r < SB_ROWS; r++) begin
      empty[r] = (q[r].size() == 0) || (hold[r] > 0);
      head[r]  = (q[r].size() != 0) ? q[r][0] : '0;
    end

  always @(posedge clk) begin
    for (int r = 0; r < SB_ROWS; r++) begin
      if (pop[r]) void'(q[r].pop_front());
      if (hold[r] > 0) hold[r]--;
    end
    if (out_valid) got.push_back(out_g);
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < SB_ROWS; r++) hold[r] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int tile = 0; tile < 200; tile++) begin
      automatic rast_gauss_t pool [$];
      automatic glist_t lists [SB_ROWS];
      automatic glist_t expect_l;
      automatic int n_entries = 0, dups = 0, cyc = 0;
      automatic bit stall = (tile % 3 == 2);
      for (int j = 0; j < 30; j++) pool.push_back(rand_gauss(tile * 100 + j, 8, 8));
      for (int r = 0; r < SB_ROWS; r++) begin
        for (int j = 0; j < pool.size(); j++)
          if ($urandom_range(0, 3) == 0) begin
            insert_sorted(lists[r], pool[j]);
          end
      end
      for (int r = 0; r < SB_ROWS; r++) begin
        foreach (lists[r][j]) begin
          automatic bit seen = 0;
          foreach (expect_l[m]) if (key_of(expect_l[m]) == key_of(lists[r][j])) seen = 1;
          if (seen) dups++; else insert_sorted(expect_l, lists[r][j]);
          q[r].push_back('{eol: 1'b0, g: lists[r][j]});
          n_entries++;
        end
        q[r].push_back('{eol: 1'b1, g: '0});
        hold[r] = stall ? int'($urandom_range(0, 12)) : 0;
      end
      if (stall) n_wait_tiles++;
      got.delete();
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) begin
        @(negedge clk);
        cyc++;
      end
      total_dups += dups;
      checks++;
      if (got.size() != expect_l.size()) begin
        failures++;
        $display("FAIL tile %0d: %0d merged, expected %0d", tile, got.size(), expect_l.size());
      end else begin
        foreach (got[i]) if (got[i] !== expect_l[i]) begin
          failures++;
          $display("FAIL tile %0d: entry %0d differs", tile, i);
          break;
        end
      end
      if (!stall) begin
        checks++;
        if (cyc != n_entries + 1) begin
          failures++;
          $display("FAIL tile %0d: %0d cycles for %0d entries", tile, cyc, n_entries);
        end
      end
    end
    checks++;
    if (dup_count != 32'(total_dups) || total_dups == 0) begin
      failures++;
      $display("FAIL duplicates %0d expected %0d", dup_count, total_dups);
    end
    $display("duplicates removed=%0d", dup_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
