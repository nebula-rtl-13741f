// tb_stereo_buffer -- self-checking test of the four-row stereo buffer.
// Random writes (single rows and several rows at once, as the end-of-list
// marks are written) and pops against four reference queues; checks head
// order, empty/full/near_full flags and circular wrap-around.
module tb_stereo_buffer;
  import nebula_pkg::*;
  import tb_ref_pkg::*;

  localparam int DEPTH = SB_BANK_BYTES * 8 / SBE_BITS;
  logic clk = 0, rst_n = 0;
  logic [SB_ROWS-1:0] wr_en = '0, pop = '0, full, near_full, empty;
  sb_entry_t wr_data = '0;
  sb_entry_t head [SB_ROWS];
  int checks = 0, failures = 0, n_full = 0, n_wrap = 0;
  sb_entry_t q [SB_ROWS][$];
  int wrote [SB_ROWS];

  stereo_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_flags();
    for (int r = 0; r < SB_ROWS; r++) begin
      checks++;
      if (empty[r] !== (q[r].size() == 0) || full[r] !== (q[r].size() == DEPTH) ||
          near_full[r] !== (q[r].size() >= DEPTH - SB_ROWS)) begin
        failures++;
        $display("FAIL flags row %0d size %0d e%b f%b nf%b", r, q[r].size(), empty[r], full[r], near_full[r]);
      end
      if (q[r].size() != 0) begin
        checks++;
        if (head[r] !== q[r][0]) begin
          failures++;
          $display("FAIL head row %0d", r);
        end
      end
    end
  endtask

  initial begin
    for (int r = 0; r < SB_ROWS; r++) wrote[r] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      automatic int phase = (cyc / 700) % 2;   // alternate filling and draining
      @(negedge clk);
      check_flags();
      wr_data = '{eol: 1'($urandom_range(0, 7) == 0), g: rand_gauss(cyc, 8, 8)};
      for (int r = 0; r < SB_ROWS; r++) begin
        wr_en[r] = !full[r] && ($urandom_range(0, 99) < (phase == 0 ? 70 : 25));
        pop[r]   = !empty[r] && ($urandom_range(0, 99) < (phase == 0 ? 25 : 70));
      end
      @(posedge clk);
      for (int r = 0; r < SB_ROWS; r++) begin
        if (pop[r]) void'(q[r].pop_front());
        if (wr_en[r]) begin
          q[r].push_back(wr_data);
          wrote[r]++;
        end
        if (q[r].size() == DEPTH) n_full++;
      end
    end
    @(negedge clk);
    wr_en = '0; pop = '0;
    for (int r = 0; r < SB_ROWS; r++) if (wrote[r] > DEPTH) n_wrap++;
    checks++;
    if (n_full == 0 || n_wrap != SB_ROWS) begin
      failures++;
      $display("FAIL full never reached (%0d) or no wrap-around (%0d rows)", n_full, n_wrap);
    end
    $display("depth=%0d full_events=%0d", DEPTH, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
