// alu_fwd_pair -- primary and secondary ALU with same-cycle ALU-to-ALU forwarding.
//
// When both issue slots hold ALU instructions in the same cycle and the
// second one reads the register the first one writes, the second instruction
// would otherwise wait a cycle for the first result to reach the scoreboard.
// This block removes that bubble: it detects the dependency from the register
// names and routes the primary ALU's result straight into the secondary ALU's
// operand input, so both results are ready in the same cycle (the two ALUs
// are chained combinationally).  The forwarding itself, and that it applies
// only between two ALU instructions, follows the paper; detecting it from
// register names with x0 excluded, and forwarding only into register
// operands (never into an immediate operand b), is this design's choice.
//
// Interface: slot 0 and slot 1 operands as read from the register file or
// scoreboard; valid0_i/valid1_i say that the slot holds an ALU instruction
// being considered for issue.  fwd_a_o/fwd_b_o report which operand of
// slot 1 was replaced; the issue logic treats such an operand as ready.
// All outputs are combinational.
module alu_fwd_pair
  import cva6sp_pkg::*;
(
  // slot 0 (primary ALU)
  input  logic            valid0_i,
  input  alu_op_t         op0_i,
  input  reg_t            rd0_i,
  input  logic            we0_i,
  input  logic [XLEN-1:0] a0_i,
  input  logic [XLEN-1:0] b0_i,
  output logic [XLEN-1:0] result0_o,
  output logic            cmp0_o,
  // slot 1 (secondary ALU)
  input  logic            valid1_i,
  input  alu_op_t         op1_i,
  input  reg_t            rs1_1_i,
  input  reg_t            rs2_1_i,
  input  logic            use_imm1_i,
  input  logic [XLEN-1:0] a1_i,
  input  logic [XLEN-1:0] b1_i,
  output logic [XLEN-1:0] result1_o,
  output logic            fwd_a_o,
  output logic            fwd_b_o
);

  logic            rd0_real;
  logic [XLEN-1:0] a1_sel, b1_sel;
  logic            cmp1_unused;

  // slot 0 writes a register other than x0
  assign rd0_real = valid0_i && we0_i && (rd0_i.fp || (rd0_i.idx != 5'd0));

  assign fwd_a_o = valid1_i && rd0_real && (rs1_1_i == rd0_i);
  assign fwd_b_o = valid1_i && rd0_real && !use_imm1_i && (rs2_1_i == rd0_i);

  assign a1_sel = fwd_a_o ? result0_o : a1_i;
  assign b1_sel = fwd_b_o ? result0_o : b1_i;

  alu i_alu0 (
    .op_i     (op0_i),
    .a_i      (a0_i),
    .b_i      (b0_i),
    .result_o (result0_o),
    .cmp_o    (cmp0_o)
  );

  alu i_alu1 (
    .op_i     (op1_i),
    .a_i      (a1_sel),
    .b_i      (b1_sel),
    .result_o (result1_o),
    .cmp_o    (cmp1_unused)
  );

endmodule
