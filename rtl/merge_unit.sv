// merge_unit -- builds the sorted Gaussian list of right-eye tile T_N from the
// four lists the stereo buffer holds for it: T_(N-3)-T_N, T_(N-2)-T_N,
// T_(N-1)-T_N and T_N-T_N, one at the head of each row.
//
// Each list is already in depth order (it is a filtered copy of a sorted
// left-eye list), so no re-sort is needed: like the merge phase of a merge
// sort, the unit compares the four row heads and emits the smallest key each
// cycle. A Gaussian that sits in more than one list (it covered several
// left-eye tiles) arrives with equal keys on consecutive picks; the second
// copy is dropped. The key is {depth, id}, which makes every Gaussian's key
// unique. When all four heads are end-of-list marks the marks are popped
// together and `done` pulses.
//
// Interface: `start` (pulse) begins a tile; the unit pops the stereo buffer
// through `pop`; merged Gaussians leave on `out_valid`/`out_g`, registered,
// one per cycle at most, without back-pressure (the rendering units take one
// Gaussian per cycle). While a row is still empty the unit waits, since its
// list may not be complete yet.
//
// Follows the published merge unit (read the four heads, select the minimum,
// remove duplicates). Tie-breaking by id and the output register are this
// design's choices.
module merge_unit
  import nebula_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  sb_entry_t          head [SB_ROWS],
  input  logic [SB_ROWS-1:0] empty,
  output logic [SB_ROWS-1:0] pop,
  output logic               out_valid,
  output rast_gauss_t        out_g,
  output logic               done,
  output logic               busy,
  output logic [31:0]        dup_count       // duplicates removed
);

  logic        have_last;
  logic [31:0] last_key;

  logic               all_eol, can_go;
  logic [1:0]         sel;
  logic [31:0]        best;
  logic               found;

  always_comb begin
    all_eol = 1'b1;
    can_go  = ~|empty;
    found   = 1'b0;
    sel     = '0;
    best    = '1;
    for (int r = 0; r < SB_ROWS; r++) begin
      if (!head[r].eol) begin
        all_eol = 1'b0;
        if (!found || sort_key(head[r].g) < best) begin
          found = 1'b1;
          sel   = 2'(r);
          best  = sort_key(head[r].g);
        end
      end
    end
    pop = '0;
    if (busy && can_go) begin
      if (all_eol) pop = '1;
      else         pop[sel] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      have_last <= 1'b0;
      last_key  <= '0;
      out_valid <= 1'b0;
      out_g     <= '0;
      done      <= 1'b0;
      dup_count <= '0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      if (start) begin
        busy      <= 1'b1;
        have_last <= 1'b0;
      end else if (busy && can_go) begin
        if (all_eol) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else if (have_last && best == last_key) begin
          dup_count <= dup_count + 1;
        end else begin
          out_valid <= 1'b1;
          out_g     <= head[sel].g;
          have_last <= 1'b1;
          last_key  <= best;
        end
      end
    end
  end

endmodule
