// scan_gen: scanned-index generator of one tracer chain, with region
// segmentation and fast forward (paper, Sec. 3.4 and Fig. 7(a), 7(b)).
//
// A pass scans rows row_start..row_end, columns 0..IMG_COLS-1, in raster
// order, one index per cycle (R pointer / C pointer with "+1" and "+1 at
// end"). A table of target-forward pairs, held in a local memory written by
// the host, lists the background segments of the pass in scan order, starting
// at entry ff_base, ff_count entries long. When the next index equals the
// current entry's target (the first background pixel of the segment), the
// forward index (the first pixel after the segment) is issued instead in the
// same cycle and the pointer continues from there: skipped pixels cost no
// cycles. A forward index that is not after its target means "the segment
// runs to the end of the pass": the pass ends there.
// Timing: `start` (one cycle), one cycle to prefetch the table, then one
// index per cycle on idx_valid/row/col (registered), the first valid 3 cycles
// after start;
// `done` one cycle after the last index. The table entry format and the
// end-of-pass rule are this design's choices.
module scan_gen
  import decalcion_pkg::*;
#(
  parameter int FF_DEPTH = 1024,
  parameter int COLS     = IMG_COLS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  idx_t        row_start,
  input  idx_t        row_end,
  input  logic [$clog2(FF_DEPTH)-1:0] ff_base,
  input  logic [$clog2(FF_DEPTH):0]   ff_count,
  output logic        idx_valid,
  output idx_t        row,
  output idx_t        col,
  output logic        ff_jump,     // one per fast-forward taken
  output logic        busy,
  output logic        done,
  // host write port of the target-forward table
  input  logic        tab_we,
  input  logic [$clog2(FF_DEPTH)-1:0] tab_addr,
  input  ff_entry_t   tab_wdata
);
  localparam int AW = $clog2(FF_DEPTH);

  typedef enum logic [1:0] {S_IDLE, S_PRIME0, S_SCAN} state_e;
  state_e state;

  ff_entry_t tab [FF_DEPTH];
  ff_entry_t tab_q;          // registered read data (prefetched next entry)
  logic [AW-1:0] rd_addr;

  ff_entry_t cur;            // entry being watched
  logic [AW:0] left;         // entries not yet consumed, including cur
  idx_t pr, pc;              // R pointer, C pointer (next candidate)
  idx_t r_end;

  always_ff @(posedge clk) begin
    if (tab_we) tab[tab_addr] <= tab_wdata;
    tab_q <= tab[rd_addr];
  end

  // candidate and fast-forward decision
  logic hit, fwd_end, last_idx;
  idx_t er, ec;              // index issued this cycle
  always_comb begin
    hit     = (state == S_SCAN) && (left != 0) && (pr == cur.tr) && (pc == cur.tc);
    fwd_end = hit && ({cur.fr, cur.fc} <= {cur.tr, cur.tc});
    er      = hit ? cur.fr : pr;
    ec      = hit ? cur.fc : pc;
    last_idx = (er == r_end) && (ec == idx_t'(COLS - 1));
  end

  always_comb begin
    rd_addr = ff_base;
    if (state != S_IDLE) rd_addr = ff_base + AW'(ff_count - left) + AW'(hit ? 2 : 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; idx_valid <= 1'b0; row <= '0; col <= '0; done <= 1'b0;
      ff_jump <= 1'b0; pr <= '0; pc <= '0; left <= '0; cur <= '0; r_end <= '0;
    end else begin
      idx_valid <= 1'b0;
      done      <= 1'b0;
      ff_jump   <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= S_PRIME0;
          pr <= row_start; pc <= '0; r_end <= row_end; left <= ff_count;
        end
        S_PRIME0: begin                     // tab_q = entry[base]
          cur   <= tab_q;
          state <= S_SCAN;
        end
        S_SCAN: begin
          if (hit) begin
            cur     <= tab_q;
            left    <= left - 1'b1;
            ff_jump <= 1'b1;
          end
          if (fwd_end) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            idx_valid <= 1'b1;
            row <= er;
            col <= ec;
            if (last_idx) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else if (ec == idx_t'(COLS - 1)) begin
              pr <= er + 1'b1;
              pc <= '0;
            end else begin
              pr <= er;
              pc <= ec + 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
