// sorting_unit -- builds the depth-sorted Gaussian list of one tile and
// streams it to a volume rendering core.
//
// A request names a tile (tx, ty) and an eye. The unit scans the projected
// Gaussians of the current frame in the global double buffer, one per cycle,
// and keeps those whose footprint square (mean +/- radius) overlaps the tile.
// For a right-eye request the mean is moved right by the Gaussian's
// disparity, which is how the first three right-eye tiles of a tile row,
// rendered on their own, get their lists. Each hit is placed into a list
// memory of {key, buffer index} entries kept in ascending key order, key =
// {depth, id} (nearest first; id breaks ties, so keys are unique), by an
// insertion step that walks from the tail, moving larger entries one place
// up. After the scan the list is streamed out, each entry fetched again from
// the global buffer, and closed by an end-of-list entry.
//
// Interface: request valid/ready (`req_*`), the number of Gaussians in the
// buffer half being read (`n_gauss`), a read port of the global buffer
// (one-cycle latency) and a valid/ready output stream of sb_entry_t.
// Timing: one cycle per scanned Gaussian, plus 2 cycles per entry moved and
// 3 cycles per hit for an insertion; 3 cycles per emitted entry, 1 for the
// end-of-list mark. A tile with more than LIST_MAX Gaussians keeps the
// LIST_MAX nearest and counts the rest in `overflow_count`.
//
// The published design has four "hierarchical sorting units" taken from the
// base accelerator without describing them; this unit is a simple sorter
// that gives the same list (an insertion sort in a one-read, one-write
// memory), not that hierarchy. LIST_MAX defaults to the feature buffer's
// capacity.
module sorting_unit
  import nebula_pkg::*;
#(
  parameter int unsigned LIST_MAX = FB_BYTES * 8 / RAST_BITS,
  parameter int unsigned GB_DEPTH = GBUF_BYTES / 2 * 8 / PROJ_BITS,
  localparam int unsigned GAW     = $clog2(GB_DEPTH),
  localparam int unsigned LAW     = $clog2(LIST_MAX),
  localparam int unsigned LCW     = $clog2(LIST_MAX + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            req_valid,
  output logic            req_ready,
  input  logic            req_right,
  input  logic [15:0]     req_tx,
  input  logic [15:0]     req_ty,
  input  logic [GAW:0]    n_gauss,
  output logic            gb_rd_en,
  output logic [GAW-1:0]  gb_rd_addr,
  input  proj_gauss_t     gb_rd_data,
  output logic            out_valid,
  input  logic            out_ready,
  output sb_entry_t       out_data,
  output logic [31:0]     overflow_count
);

  typedef struct packed {
    logic [31:0]    key;
    logic [GAW-1:0] idx;
  } item_t;

  typedef enum logic [2:0] {S_IDLE, S_SCAN, S_INS_RD, S_INS_CMP, S_EMIT_RD, S_EMIT_GB,
                            S_EMIT, S_EOL} state_t;
  state_t state;

  // ---------------- list memory: one synchronous read, one write port --------
  item_t          lmem [LIST_MAX];
  logic           lm_we, lm_re;
  logic [LAW-1:0] lm_waddr, lm_raddr;
  item_t          lm_wdata, lm_rdata;

  always_ff @(posedge clk) begin
    if (lm_we) lmem[lm_waddr] <= lm_wdata;
    if (lm_re) lm_rdata <= lmem[lm_raddr];
  end

  logic [LCW-1:0] cnt, ins_j, emit_j;
  logic           right_q;
  logic [15:0]    tx_q, ty_q;
  logic [GAW:0]   scan_i;
  logic           rd_v;          // a scan read is returning this cycle
  logic [GAW-1:0] rd_idx;
  item_t          new_q;         // the Gaussian being inserted

  // ---------------- overlap test of the returning Gaussian ---------------
  logic hit;
  always_comb begin
    logic signed [23:0] mxe, myv, r16, x0, y0;
    mxe = 24'(gb_rd_data.g.mx) + (right_q ? 24'($unsigned(gb_rd_data.g.disp)) : 24'sd0);
    myv = 24'(gb_rd_data.g.my);
    r16 = $signed({12'd0, gb_rd_data.radius, 4'd0});
    x0  = $signed({2'b00, tx_q, 6'd0});           // tile origin, Q.4 px
    y0  = $signed({2'b00, ty_q, 6'd0});
    hit = (mxe + r16 >= x0) && (mxe - r16 < x0 + 24'sd64)
       && (myv + r16 >= y0) && (myv - r16 < y0 + 24'sd64);
  end

  // insertion step: entry ins_j-1 (just read) against the new key
  logic move_up;
  assign move_up = (ins_j != '0) && (lm_rdata.key > new_q.key);

  always_comb begin
    lm_re    = 1'b0;
    lm_raddr = '0;
    lm_we    = 1'b0;
    lm_waddr = '0;
    lm_wdata = new_q;
    unique case (state)
      S_INS_RD: begin
        lm_re    = (ins_j != '0);
        lm_raddr = LAW'(ins_j - 1'b1);
      end
      S_INS_CMP: begin
        lm_we    = (ins_j < LCW'(LIST_MAX));
        lm_waddr = LAW'(ins_j);
        lm_wdata = move_up ? lm_rdata : new_q;
      end
      S_EMIT_RD: begin
        lm_re    = (emit_j != cnt);
        lm_raddr = LAW'(emit_j);
      end
      default: ;
    endcase
  end

  assign req_ready  = (state == S_IDLE);
  assign gb_rd_en   = (state == S_SCAN && scan_i < n_gauss && !(rd_v && hit)) || (state == S_EMIT_GB);
  assign gb_rd_addr = (state == S_EMIT_GB) ? lm_rdata.idx : scan_i[GAW-1:0];
  assign out_valid  = (state == S_EMIT) || (state == S_EOL);
  always_comb begin
    out_data.eol = (state == S_EOL);
    out_data.g   = (state == S_EMIT) ? gb_rd_data.g : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      cnt            <= '0;
      ins_j          <= '0;
      emit_j         <= '0;
      right_q        <= 1'b0;
      tx_q           <= '0;
      ty_q           <= '0;
      scan_i         <= '0;
      rd_v           <= 1'b0;
      rd_idx         <= '0;
      new_q          <= '0;
      overflow_count <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (req_valid) begin
          right_q <= req_right;
          tx_q    <= req_tx;
          ty_q    <= req_ty;
          cnt     <= '0;
          scan_i  <= '0;
          rd_v    <= 1'b0;
          state   <= S_SCAN;
        end
        S_SCAN: begin
          if (rd_v && hit) begin
            // pause the scan; the read issued this cycle is dropped and redone
            new_q  <= '{key: sort_key(gb_rd_data.g), idx: rd_idx};
            ins_j  <= cnt;
            scan_i <= (GAW+1)'(rd_idx) + 1'b1;
            rd_v   <= 1'b0;
            state  <= S_INS_RD;
          end else begin
            rd_v   <= (scan_i < n_gauss);
            rd_idx <= scan_i[GAW-1:0];
            if (scan_i < n_gauss) scan_i <= scan_i + 1'b1;
            if (!rd_v && scan_i >= n_gauss) begin
              emit_j <= '0;
              state  <= S_EMIT_RD;
            end
          end
        end
        S_INS_RD: state <= S_INS_CMP;
        S_INS_CMP: begin
          if (move_up) begin
            ins_j <= ins_j - 1'b1;
            state <= S_INS_RD;
          end else begin
            if (cnt == LCW'(LIST_MAX)) overflow_count <= overflow_count + 1;
            else                       cnt <= cnt + 1'b1;
            state <= S_SCAN;
          end
        end
        S_EMIT_RD: state <= (emit_j == cnt) ? S_EOL : S_EMIT_GB;
        S_EMIT_GB: state <= S_EMIT;
        S_EMIT: if (out_ready) begin
          emit_j <= emit_j + 1'b1;
          state  <= S_EMIT_RD;
        end
        S_EOL: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
