// tb_stereo_reproj_unit -- self-checking test of the stereo re-projection
// unit. Random Gaussians, alpha-check vectors, tile positions and row
// states; checks, one cycle later, which row is written (row 3 - floor(d/4px)),
// that nothing is written when no pixel used the Gaussian or the target
// right-eye tile is outside 3..W-1, that end-of-list marks go to every valid
// row, and the write/drop counters.
module tb_stereo_reproj_unit;
  import nebula_pkg::*;
  import tb_ref_pkg::*;

  localparam int W = 10;
  logic clk = 0, rst_n = 0, stereo_en = 0, g_valid = 0, close_list = 0;
  logic [15:0] tile_x = 0, tiles_w = 16'(W);
  rast_gauss_t g = '0;
  logic [M_RU-1:0] used_vec = '0;
  logic [SB_ROWS-1:0] sb_wr_en, sb_full = '0, sb_near_full = '0;
  sb_entry_t sb_wr_data;
  logic [31:0] write_count, drop_count;
  int checks = 0, failures = 0, exp_w = 0, exp_d = 0;
  int n_row [SB_ROWS];

  stereo_reproj_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < SB_ROWS; r++) n_row[r] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      logic [SB_ROWS-1:0] exp_en;
      bit exp_eol;
      @(negedge clk);
      stereo_en  = ($urandom_range(0, 9) != 0);
      close_list = ($urandom_range(0, 9) == 0);
      g_valid    = !close_list && ($urandom_range(0, 4) != 0);
      tile_x     = 16'($urandom_range(0, W - 1));
      g          = rand_gauss(cyc, 4, 4);
      used_vec   = ($urandom_range(0, 3) == 0) ? '0 : M_RU'($urandom);
      // expected registered write request
      exp_en  = '0;
      exp_eol = 0;
      if (stereo_en && close_list) begin
        exp_eol = 1;
        for (int r = 0; r < SB_ROWS; r++)
          if (int'(tile_x) + (3 - r) >= 3 && int'(tile_x) + (3 - r) < W) exp_en[r] = 1;
      end else if (stereo_en && g_valid && used_vec != 0) begin
        int k;
        k = disp_tile(g);
        if (int'(tile_x) + k >= 3 && int'(tile_x) + k < W) exp_en[3 - k] = 1;
      end
      @(negedge clk);
      // row states seen during the write cycle
      sb_full      = SB_ROWS'($urandom_range(0, 15) == 0 ? $urandom : 0);
      sb_near_full = sb_full | SB_ROWS'($urandom_range(0, 7) == 0 ? $urandom : 0);
      g_valid = 0; close_list = 0;
      #1;
      checks++;
      if (exp_eol) begin
        if (sb_wr_en !== (exp_en & ~sb_full) || (exp_en != 0 && !sb_wr_data.eol)) begin
          failures++;
          $display("FAIL eol write %b expected %b", sb_wr_en, exp_en & ~sb_full);
        end
      end else begin
        if (sb_wr_en !== (exp_en & ~sb_near_full) ||
            (exp_en != 0 && (sb_wr_data.eol || sb_wr_data.g !== g))) begin
          failures++;
          $display("FAIL write %b expected %b (cycle %0d)", sb_wr_en, exp_en & ~sb_near_full, cyc);
        end
        if (exp_en != 0) begin
          if ((exp_en & sb_near_full) != 0) exp_d++;
          else exp_w++;
          for (int r = 0; r < SB_ROWS; r++) if (exp_en[r]) n_row[r]++;
        end
      end
      @(posedge clk);
    end
    @(negedge clk);
    checks++;
    if (write_count != 32'(exp_w) || drop_count != 32'(exp_d)) begin
      failures++;
      $display("FAIL counters w=%0d/%0d d=%0d/%0d", write_count, exp_w, drop_count, exp_d);
    end
    for (int r = 0; r < SB_ROWS; r++) begin
      checks++;
      if (n_row[r] == 0) begin failures++; $display("FAIL row %0d never targeted", r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
