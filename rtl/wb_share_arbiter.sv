// wb_share_arbiter -- write-back port shared by the FPU and the secondary ALU.
//
// To save area the FPU has no write-back port of its own: it writes its
// results through the port of the secondary ALU.  The FPU is pipelined and
// cannot be held once a result leaves it, so it always wins the port; in a
// cycle where an FPU result is present, alu1_stall_o tells the issue logic
// not to issue an instruction to the secondary ALU (which would write back
// in that same cycle).  Sharing the port and needing hazard logic for it
// follows the paper; giving the FPU fixed priority and stalling the ALU in
// the issue stage is this design's choice, as the paper does not say which
// side yields.
//
// Interface: each source presents valid/tag/data; the port carries the
// granted one.  Combinational; an assertion checks that the issue logic
// never presents an ALU result in a cycle it was told to stall.
module wb_share_arbiter
  import cva6sp_pkg::*;
#(
  parameter int unsigned TAG_W = 3
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  // secondary ALU
  input  logic             alu1_valid_i,
  input  logic [TAG_W-1:0] alu1_tag_i,
  input  logic [XLEN-1:0]  alu1_data_i,
  output logic             alu1_stall_o,
  // FPU result
  input  logic             fpu_valid_i,
  input  logic [TAG_W-1:0] fpu_tag_i,
  input  logic [XLEN-1:0]  fpu_data_i,
  // shared write-back port
  output logic             wb_valid_o,
  output logic [TAG_W-1:0] wb_tag_o,
  output logic [XLEN-1:0]  wb_data_o,
  output logic             wb_from_fpu_o
);

  assign alu1_stall_o  = fpu_valid_i;
  assign wb_from_fpu_o = fpu_valid_i;
  assign wb_valid_o    = fpu_valid_i || alu1_valid_i;
  assign wb_tag_o      = fpu_valid_i ? fpu_tag_i  : alu1_tag_i;
  assign wb_data_o     = fpu_valid_i ? fpu_data_i : alu1_data_i;

  // The issue logic must honour the stall: two results never meet.
  a_no_contention : assert property (@(posedge clk_i) disable iff (!rst_ni)
    !(alu1_valid_i && fpu_valid_i));

endmodule
