// stereo_buffer -- the per-VRC stereo buffer: a line buffer of four rows, one
// row (one 4 KB bank) per disparity category, so the stereo re-projection
// unit and the merge unit never collide on a bank.
//
// Row r holds the lists "T_k - T_(k+3-r)": Gaussians that left-eye tile T_k
// passes to right-eye tile T_(k+3-r). Row 0 is therefore the largest
// disparity (3 tiles, 12 px and more), row 3 the same tile. Each list ends
// with an end-of-list entry (eol = 1). Each row is a circular buffer: the
// writer appends at the tail, the merge unit reads the head and pops.
//
// Interface: per-row write enables with one shared write word (the
// re-projection unit writes one Gaussian into one row, or end-of-list marks
// into several rows in the same cycle); per-row head word, empty, full and
// pop. Reads are show-ahead (the head is visible while not empty); writes and
// pops take effect at the clock edge. `near_full` tells the writer that only
// the room kept for end-of-list marks is left. Writing a full row or popping an empty
// row is a protocol error (checked by assertions).
//
// Follows the published line-buffer organisation (four rows, one disparity
// category per row, circular rows, end-of-list marks, 16 KB in 4 KB banks).
// The entry format and hence the row depth are this design's choice.
module stereo_buffer
  import nebula_pkg::*;
#(
  parameter int unsigned BANK_BYTES = SB_BANK_BYTES,
  parameter int unsigned DEPTH      = BANK_BYTES * 8 / SBE_BITS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [SB_ROWS-1:0]   wr_en,
  input  sb_entry_t            wr_data,
  output logic [SB_ROWS-1:0]   full,
  output logic [SB_ROWS-1:0]   near_full,   // fewer than SB_ROWS free entries
  output logic [SB_ROWS-1:0]   empty,
  output sb_entry_t            head [SB_ROWS],
  input  logic [SB_ROWS-1:0]   pop
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  for (genvar r = 0; r < SB_ROWS; r++) begin : g_row
    sb_entry_t        mem [DEPTH];
    logic [AW-1:0]    rd_ptr, wr_ptr;
    logic [AW:0]      count;

    function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
      return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
    endfunction

    always_ff @(posedge clk) begin
      if (wr_en[r] && !full[r]) mem[wr_ptr] <= wr_data;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rd_ptr <= '0;
        wr_ptr <= '0;
        count  <= '0;
      end else begin
        if (wr_en[r] && !full[r]) wr_ptr <= inc(wr_ptr);
        if (pop[r] && !empty[r])  rd_ptr <= inc(rd_ptr);
        count <= count + (AW+1)'(wr_en[r] && !full[r]) - (AW+1)'(pop[r] && !empty[r]);
      end
    end

    assign full[r]  = (count == (AW+1)'(DEPTH));
    assign empty[r] = (count == '0);
    assign near_full[r] = (count >= (AW+1)'(DEPTH - SB_ROWS));
    assign head[r]  = mem[rd_ptr];

    // Handshake rules of a row.
    a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en[r] && full[r]));
    a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop[r] && empty[r]));
  end

endmodule
