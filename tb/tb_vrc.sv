// tb_vrc -- self-checking test of one volume rendering core on a 6-tile-wide
// row. The testbench plays the sorting unit: each list request is answered
// with the reference list of that tile and eye, streamed with random gaps and
// closed by an end-of-list entry. Every finished tile must arrive in the
// documented order (R0 R1 R2 L0 L1 L2 L3 R3 L4 R4 L5 R5), and its 16 pixels
// must equal the reference render: left tiles and the first three right
// tiles from their sorted lists, the later right tiles from the list merged
// out of the Gaussians that passed an alpha check in left tiles N-3..N.
// Also checks the tile, broadcast, duplicate and drop counters. The output
// is stalled at random.
module tb_vrc;
  import nebula_pkg::*;
  import tb_ref_pkg::*;

  localparam int TW = 6;
  localparam int FBD = FB_BYTES * 8 / RAST_BITS;

  logic clk = 0, rst_n = 0;
  logic [7:0] alpha_th = 0;
  logic row_valid = 0, row_ready, row_done;
  logic [15:0] row_ty = 0;
  logic req_valid, req_ready = 1, req_right;
  logic [15:0] req_tx, req_ty;
  logic in_valid = 0, in_ready;
  sb_entry_t in_data = '0;
  logic tile_valid, tile_ready = 1, tile_right;
  logic [15:0] tile_tx, tile_ty;
  rgb_t tile_px [M_RU];
  logic [31:0] n_left_tiles, n_indep_tiles, n_stereo_tiles, n_sru_writes, n_sru_drops;
  logic [31:0] n_merge_dups, n_left_bcast, n_right_bcast;

  vrc #(.TILES_W(TW)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) tile_ready <= ($urandom_range(0, 4) != 0);

  typedef struct {
    bit   right;
    int   tx, ty;
    rgb_t px [M_RU];
  } exp_tile_t;

  proj_gauss_t all [$];
  exp_tile_t   expq [$];
  int checks = 0, failures = 0;
  longint exp_left_bc = 0, exp_right_bc = 0, exp_dups = 0, stereo_skipped = 0;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sorting-unit model
  initial begin
    forever begin
      @(posedge clk);
      if (req_valid && req_ready && rst_n) begin
        automatic glist_t l = ref_list(all, int'(req_tx), int'(req_ty), req_right, FBD);
        foreach (l[i]) begin
          @(negedge clk);
          while ($urandom_range(0, 3) == 0) @(negedge clk);
          in_valid = 1;
          in_data = '{eol: 1'b0, g: l[i]};
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          @(negedge clk);
          in_valid = 0;
        end
        @(negedge clk);
        in_valid = 1;
        in_data = '{eol: 1'b1, g: '0};
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk);
        in_valid = 0;
      end
    end
  end

  // tile checker
  always @(posedge clk) begin
    if (rst_n && tile_valid && tile_ready) begin
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL unexpected tile");
      end else begin
        automatic exp_tile_t e = expq.pop_front();
        if (e.right != tile_right || e.tx != int'(tile_tx) || e.ty != int'(tile_ty)) begin
          failures++;
          $display("FAIL tile order: got (%0d,%0d,%0d) expected (%0d,%0d,%0d)",
                   tile_right, tile_tx, tile_ty, e.right, e.tx, e.ty);
        end else begin
          for (int i = 0; i < M_RU; i++) begin
            checks++;
            if (tile_px[i] !== e.px[i]) begin
              failures++;
              $display("FAIL tile (%0d,%0d,%0d) pixel %0d got %h expected %h",
                       e.right, e.tx, e.ty, i, tile_px[i], e.px[i]);
            end
          end
        end
      end
    end
  end

  function automatic exp_tile_t mk(input bit right, input int tx, input int ty, input glist_t l);
    exp_tile_t e;
    bit used [$];
    e.right = right; e.tx = tx; e.ty = ty;
    ref_tile(l, tx, ty, right, int'(alpha_th), e.px, used);
    return e;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int row = 0; row < 12; row++) begin
      automatic int ty = row % 3;
      automatic int ng = (row % 4 == 3) ? 0 : $urandom_range(5, 60);
      alpha_th = (row % 3 == 0) ? 8'd0 : 8'($urandom_range(1, 40));
      all.delete();
      for (int i = 0; i < ng; i++) begin
        automatic proj_gauss_t p;
        p.g = rand_gauss(i, $urandom_range(0, TW * 4 - 1), ty * 4 + $urandom_range(0, 3));
        p.radius = 8'($urandom_range(3, 9));
        all.push_back(p);
      end
      // expected tile order and contents
      for (int t = 0; t < 3; t++) expq.push_back(mk(1, t, ty, ref_list(all, t, ty, 1, FBD)));
      for (int t = 0; t < TW; t++) begin
        automatic glist_t ll = ref_list(all, t, ty, 0, FBD);
        exp_left_bc += ll.size();
        expq.push_back(mk(0, t, ty, ll));
        if (t >= 3) begin
          automatic int d;
          automatic glist_t sl = ref_stereo_list(all, t, ty, int'(alpha_th), FBD, d);
          automatic glist_t rl = ref_list(all, t, ty, 1, FBD);
          exp_dups += d;
          exp_right_bc += sl.size();
          stereo_skipped += rl.size() - sl.size();
          expq.push_back(mk(1, t, ty, sl));
        end
      end
      @(negedge clk);
      row_valid = 1; row_ty = 16'(ty);
      @(posedge clk);
      while (!row_ready) @(posedge clk);
      @(negedge clk);
      row_valid = 0;
      @(posedge clk);
      while (!row_done) @(posedge clk);
      checks++;
      if (expq.size() != 0) begin
        failures++;
        $display("FAIL row %0d: %0d tiles missing", row, expq.size());
        expq.delete();
      end
    end
    checks += 6;
    if (n_left_tiles != 32'(12 * TW)) begin failures++; $display("FAIL left tiles %0d", n_left_tiles); end
    if (n_indep_tiles != 32'(12 * 3)) begin failures++; $display("FAIL indep tiles %0d", n_indep_tiles); end
    if (n_stereo_tiles != 32'(12 * (TW - 3))) begin failures++; $display("FAIL stereo tiles %0d", n_stereo_tiles); end
    if (n_sru_drops != 0) begin failures++; $display("FAIL sru drops %0d", n_sru_drops); end
    if (n_merge_dups != 32'(exp_dups)) begin failures++; $display("FAIL dups %0d exp %0d", n_merge_dups, exp_dups); end
    if (n_left_bcast != 32'(exp_left_bc) || n_right_bcast != 32'(exp_right_bc)) begin
      failures++;
      $display("FAIL broadcasts left %0d/%0d right %0d/%0d", n_left_bcast, exp_left_bc, n_right_bcast, exp_right_bc);
    end
    $display("left bcast=%0d merged right bcast=%0d (right-eye list entries skipped=%0d) sru writes=%0d",
             n_left_bcast, n_right_bcast, stereo_skipped, n_sru_writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
