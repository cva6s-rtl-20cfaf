// bht2lvl -- two-level branch predictor with a private history per entry.
//
// The table has NR_ENTRIES entries (128).  Each entry keeps its own
// HISTORY_LENGTH-bit (3-bit) shift register of the last outcomes of the
// branch that maps to it, and its own set of 2**HISTORY_LENGTH two-bit
// saturating counters; the history selects the counter whose upper bit is
// the prediction.  This lets one branch learn a repeating pattern such as
// taken-taken-not-taken, which a bimodal (one counter per entry) predictor
// cannot.  Entry count, history length and "private history per entry"
// follow the paper; the private counter set per entry, the counter width,
// the reset values and the indexing are this design's choices.
//
// Organisation: the front end fetches 64 bits per cycle, which holds up to
// four 16-bit instructions, so the table is laid out as NR_ENTRIES /
// INSTR_PER_FETCH rows of INSTR_PER_FETCH columns.  A lookup with the fetch
// address vpc_i reads one row and returns one prediction per 16-bit slot
// (pred_o[i] belongs to address vpc_i aligned to 8 bytes plus 2*i).
// Lookup is combinational.  A resolved branch (update_i) writes its entry at
// the next clock edge: the selected counter moves toward the outcome and the
// outcome is shifted into the history.  valid says that the entry has been
// trained at least once since reset or flush.
module bht2lvl
  import cva6sp_pkg::*;
#(
  parameter int unsigned NR_ENTRIES      = 128,
  parameter int unsigned HISTORY_LENGTH  = 3,
  parameter int unsigned INSTR_PER_FETCH = 4
) (
  input  logic                             clk_i,
  input  logic                             rst_ni,
  input  logic                             flush_i,
  input  logic [XLEN-1:0]                  vpc_i,
  input  bht_update_t                      update_i,
  output bht_pred_t [INSTR_PER_FETCH-1:0]  pred_o
);

  localparam int unsigned NR_ROWS  = NR_ENTRIES / INSTR_PER_FETCH;
  localparam int unsigned OFFSET   = 1;                          // 16-bit granularity
  localparam int unsigned COL_BITS = $clog2(INSTR_PER_FETCH);
  localparam int unsigned ROW_BITS = $clog2(NR_ROWS);
  localparam int unsigned NR_CNT   = 2 ** HISTORY_LENGTH;

  typedef struct packed {
    logic                              valid;
    logic [HISTORY_LENGTH-1:0]         hist;
    logic [NR_CNT-1:0][1:0]            cnt;
  } entry_t;

  entry_t [NR_ROWS-1:0][INSTR_PER_FETCH-1:0] bht_q, bht_d;

  logic [ROW_BITS-1:0] lookup_row, update_row;
  logic [COL_BITS-1:0] update_col;

  assign lookup_row = vpc_i[OFFSET + COL_BITS +: ROW_BITS];
  assign update_row = update_i.pc[OFFSET + COL_BITS +: ROW_BITS];
  assign update_col = update_i.pc[OFFSET +: COL_BITS];

  always_comb begin
    for (int i = 0; i < INSTR_PER_FETCH; i++) begin
      pred_o[i].valid = bht_q[lookup_row][i].valid;
      pred_o[i].taken = bht_q[lookup_row][i].cnt[bht_q[lookup_row][i].hist][1];
    end
  end

  always_comb begin
    entry_t e;
    logic [1:0] c;
    bht_d = bht_q;
    e = bht_q[update_row][update_col];
    c = e.cnt[e.hist];
    if (update_i.valid) begin
      if (update_i.taken) begin
        if (c != 2'b11) c = c + 2'd1;
      end else begin
        if (c != 2'b00) c = c - 2'd1;
      end
      e.cnt[e.hist] = c;
      e.hist        = {e.hist[HISTORY_LENGTH-2:0], update_i.taken};
      e.valid       = 1'b1;
      bht_d[update_row][update_col] = e;
    end
  end

  // Reset / flush: every history cleared, every counter weakly not-taken.
  localparam entry_t RESET_ENTRY = '{valid: 1'b0, hist: '0, cnt: {NR_CNT{2'b01}}};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      bht_q <= {(NR_ROWS * INSTR_PER_FETCH){RESET_ENTRY}};
    end else if (flush_i) begin
      bht_q <= {(NR_ROWS * INSTR_PER_FETCH){RESET_ENTRY}};
    end else begin
      bht_q <= bht_d;
    end
  end

endmodule
