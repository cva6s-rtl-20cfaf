// scoreboard -- in-order ring of in-flight instructions for a dual-issue core.
//
// Every issued instruction takes the next free entry of a ring of
// NR_SB_ENTRIES entries; its index is the instruction's tag.  An entry
// records the destination register and, once a functional unit writes back,
// the result.  Results stay in the entry until commit, so a younger
// instruction can read its operand from here (through the tag it got from
// the rename table) before the register file is written.  Up to two entries
// are allocated per cycle (slot 0 gets the tail, slot 1 the entry after it)
// and up to two finished entries leave from the head per cycle, in program
// order.  Dual issue and in-order commit follow the dual-issue CVA6 pipeline
// the paper builds on; the ring size and the port set are this design's
// choices, since the paper does not describe the scoreboard.
//
// Timing: allocation, write-back and commit take effect at the clock edge;
// a write-back may name an entry allocated in the same cycle (the ALUs
// finish in their issue cycle);
// read ports and commit outputs are combinational from the stored state, so
// an instruction that commits in cycle t is reported in cycle t and is gone
// in t+1.  issue_valid_i[1] may only be set together with issue_valid_i[0];
// space_o says whether one and two entries are free.
module scoreboard
  import cva6sp_pkg::*;
#(
  parameter int unsigned NR_SB_ENTRIES = 8,
  parameter int unsigned NR_READ       = 4,
  localparam int unsigned TAG_W        = $clog2(NR_SB_ENTRIES)
) (
  input  logic                           clk_i,
  input  logic                           rst_ni,
  input  logic                           flush_i,
  // allocation at issue
  input  logic       [1:0]               issue_valid_i,
  input  reg_t       [1:0]               issue_rd_i,
  input  logic       [1:0]               issue_we_i,
  output logic       [1:0][TAG_W-1:0]    alloc_tag_o,
  output logic       [1:0]               space_o,      // [0]: >=1 free, [1]: >=2 free
  // write-back ports
  input  logic       [1:0]               wb_valid_i,
  input  logic       [1:0][TAG_W-1:0]    wb_tag_i,
  input  logic       [1:0][XLEN-1:0]     wb_data_i,
  // operand read ports
  input  logic       [NR_READ-1:0][TAG_W-1:0] rd_tag_i,
  output logic       [NR_READ-1:0]            rd_done_o,
  output logic       [NR_READ-1:0][XLEN-1:0]  rd_data_o,
  // commit (oldest first)
  output logic       [1:0]               commit_valid_o,
  output logic       [1:0][TAG_W-1:0]    commit_tag_o,
  output reg_t       [1:0]               commit_rd_o,
  output logic       [1:0]               commit_we_o,
  output logic       [1:0][XLEN-1:0]     commit_data_o
);

  typedef struct packed {
    logic            valid;
    logic            done;
    reg_t            rd;
    logic            we;
    logic [XLEN-1:0] data;
  } sb_entry_t;

  sb_entry_t [NR_SB_ENTRIES-1:0] mem_q, mem_d;
  logic [TAG_W-1:0]  head_q, tail_q;
  logic [TAG_W:0]    cnt_q;
  logic [TAG_W-1:0]  head1;
  logic [1:0]        n_alloc, n_commit;

  assign alloc_tag_o[0] = tail_q;
  assign alloc_tag_o[1] = TAG_W'((32'(tail_q) + 1) % NR_SB_ENTRIES);
  assign head1          = TAG_W'((32'(head_q) + 1) % NR_SB_ENTRIES);
  assign space_o[0]     = 32'(cnt_q) < NR_SB_ENTRIES;
  assign space_o[1]     = 32'(cnt_q) + 2 <= NR_SB_ENTRIES;

  always_comb begin
    for (int p = 0; p < NR_READ; p++) begin
      rd_done_o[p] = mem_q[rd_tag_i[p]].done;
      rd_data_o[p] = mem_q[rd_tag_i[p]].data;
    end
  end

  // in-order commit of up to two finished entries
  assign commit_valid_o[0] = mem_q[head_q].valid && mem_q[head_q].done;
  assign commit_valid_o[1] = commit_valid_o[0] && mem_q[head1].valid && mem_q[head1].done;
  assign commit_tag_o[0]   = head_q;
  assign commit_tag_o[1]   = head1;
  assign commit_rd_o[0]    = mem_q[head_q].rd;
  assign commit_rd_o[1]    = mem_q[head1].rd;
  assign commit_we_o[0]    = mem_q[head_q].we;
  assign commit_we_o[1]    = mem_q[head1].we;
  assign commit_data_o[0]  = mem_q[head_q].data;
  assign commit_data_o[1]  = mem_q[head1].data;

  assign n_alloc  = 2'(issue_valid_i[0]) + 2'(issue_valid_i[0] && issue_valid_i[1]);
  assign n_commit = 2'(commit_valid_o[0]) + 2'(commit_valid_o[1]);

  always_comb begin
    mem_d = mem_q;
    for (int p = 0; p < 2; p++) begin
      if (commit_valid_o[p]) mem_d[commit_tag_o[p]].valid = 1'b0;
    end
    for (int p = 0; p < 2; p++) begin
      if (issue_valid_i[p] && issue_valid_i[0]) begin
        mem_d[alloc_tag_o[p]].valid = 1'b1;
        mem_d[alloc_tag_o[p]].done  = 1'b0;
        mem_d[alloc_tag_o[p]].rd    = issue_rd_i[p];
        mem_d[alloc_tag_o[p]].we    = issue_we_i[p];
        mem_d[alloc_tag_o[p]].data  = '0;
      end
    end
    // single-cycle units write back in their issue cycle: after allocation
    for (int p = 0; p < 2; p++) begin
      if (wb_valid_i[p] && mem_d[wb_tag_i[p]].valid) begin
        mem_d[wb_tag_i[p]].done = 1'b1;
        mem_d[wb_tag_i[p]].data = wb_data_i[p];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mem_q  <= '0;
      head_q <= '0;
      tail_q <= '0;
      cnt_q  <= '0;
    end else if (flush_i) begin
      mem_q  <= '0;
      head_q <= '0;
      tail_q <= '0;
      cnt_q  <= '0;
    end else begin
      mem_q  <= mem_d;
      head_q <= TAG_W'((32'(head_q) + 32'(n_commit)) % NR_SB_ENTRIES);
      tail_q <= TAG_W'((32'(tail_q) + 32'(n_alloc)) % NR_SB_ENTRIES);
      cnt_q  <= cnt_q + (TAG_W+1)'(n_alloc) - (TAG_W+1)'(n_commit);
    end
  end

  // Allocation must never overrun the ring.
  a_no_overflow : assert property (@(posedge clk_i) disable iff (!rst_ni)
    32'(cnt_q) + 32'(n_alloc) - 32'(n_commit) <= NR_SB_ENTRIES);

endmodule
