// rename_table -- latest-writer table for the integer and floating-point registers.
//
// With two instructions issued per cycle, several in-flight instructions may
// write the same architectural register (a write-after-write pattern).  Rather
// than stalling the younger writer, this table remembers, for each of the 64
// registers (32 integer, 32 floating-point), whether an in-flight instruction
// writes it and the scoreboard tag of the *latest* such instruction.  A reader
// looks its source registers up here and takes the operand from that
// scoreboard entry, never from an older writer, so operand forwarding stays
// correct while WAW hazards cost nothing.  Tracking the latest writer of both
// register files is what the paper describes; the table layout, the ports and
// the release rule are this design's choices.
//
// Ports and timing:
//   lookup  NR_LOOKUP combinational read ports: pending_o/tag_o for a register.
//           Integer x0 is never pending.  Lookups see the state before this
//           cycle's claims; the issue logic handles dependencies between the
//           two instructions of one issue bundle itself.
//   claim   two ports, written at the clock edge; port 1 (the younger slot)
//           wins when both name the same register.  waw_o flags a claim on a
//           register that already had a pending writer.
//   release two ports from commit: the entry is cleared only if it still holds
//           the committing tag and is not claimed again in the same cycle.
//   flush_i clears the whole table.
module rename_table
  import cva6sp_pkg::*;
#(
  parameter int unsigned NR_SB_ENTRIES = 8,
  parameter int unsigned NR_LOOKUP     = 4,
  localparam int unsigned TAG_W        = $clog2(NR_SB_ENTRIES)
) (
  input  logic                           clk_i,
  input  logic                           rst_ni,
  input  logic                           flush_i,
  // lookup
  input  reg_t       [NR_LOOKUP-1:0]     lookup_reg_i,
  output logic       [NR_LOOKUP-1:0]     pending_o,
  output logic       [NR_LOOKUP-1:0][TAG_W-1:0] tag_o,
  // claim at issue
  input  logic       [1:0]               claim_valid_i,
  input  reg_t       [1:0]               claim_reg_i,
  input  logic       [1:0][TAG_W-1:0]    claim_tag_i,
  output logic       [1:0]               waw_o,
  // release at commit
  input  logic       [1:0]               release_valid_i,
  input  reg_t       [1:0]               release_reg_i,
  input  logic       [1:0][TAG_W-1:0]    release_tag_i
);

  typedef struct packed {
    logic             pending;
    logic [TAG_W-1:0] tag;
  } rn_entry_t;

  rn_entry_t [63:0] table_q, table_d;

  function automatic logic is_x0(reg_t r);
    return !r.fp && (r.idx == 5'd0);
  endfunction

  always_comb begin
    for (int p = 0; p < NR_LOOKUP; p++) begin
      pending_o[p] = table_q[lookup_reg_i[p]].pending && !is_x0(lookup_reg_i[p]);
      tag_o[p]     = table_q[lookup_reg_i[p]].tag;
    end
  end

  always_comb begin
    table_d = table_q;
    waw_o   = '0;
    // release first, so that a claim in the same cycle overrides it
    for (int p = 0; p < 2; p++) begin
      if (release_valid_i[p] && table_q[release_reg_i[p]].pending &&
          table_q[release_reg_i[p]].tag == release_tag_i[p]) begin
        table_d[release_reg_i[p]].pending = 1'b0;
      end
    end
    for (int p = 0; p < 2; p++) begin
      if (claim_valid_i[p] && !is_x0(claim_reg_i[p])) begin
        waw_o[p] = table_q[claim_reg_i[p]].pending ||
                   (p == 1 && claim_valid_i[0] && claim_reg_i[0] == claim_reg_i[1]);
        table_d[claim_reg_i[p]].pending = 1'b1;
        table_d[claim_reg_i[p]].tag     = claim_tag_i[p];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      table_q <= '0;
    end else if (flush_i) begin
      table_q <= '0;
    end else begin
      table_q <= table_d;
    end
  end

endmodule
