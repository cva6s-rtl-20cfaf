// tb_alu_fwd_pair -- self-checking testbench of the ALU pair with same-cycle forwarding.
//
// Drives two ALU instructions at once with random register names drawn from
// a small set (so that slot 1 often reads slot 0's destination) and checks:
// the forwarding flags against the register-name rule (x0 and immediate
// operands never forwarded, only when both slots hold ALU instructions), the
// primary result, and that the secondary result equals what the secondary
// ALU computes from slot 0's result wherever a flag is set.  Expected values
// use a small add/xor/sub/shift reference model of this file.
module tb_alu_fwd_pair;
  import cva6sp_pkg::*;

  logic        valid0, valid1, we0, use_imm1, cmp0, fwd_a, fwd_b;
  alu_op_t     op0, op1;
  reg_t        rd0, rs1_1, rs2_1;
  logic [31:0] a0, b0, a1, b1, res0, res1;
  int          checks = 0, failures = 0, n_fwd = 0;

  alu_fwd_pair dut (
    .valid0_i(valid0), .op0_i(op0), .rd0_i(rd0), .we0_i(we0), .a0_i(a0), .b0_i(b0),
    .result0_o(res0), .cmp0_o(cmp0),
    .valid1_i(valid1), .op1_i(op1), .rs1_1_i(rs1_1), .rs2_1_i(rs2_1), .use_imm1_i(use_imm1),
    .a1_i(a1), .b1_i(b1), .result1_o(res1), .fwd_a_o(fwd_a), .fwd_b_o(fwd_b));

  function automatic logic [31:0] calc(alu_op_t o, logic [31:0] x, logic [31:0] y);
    case (o)
      ALU_ADD: return x + y;
      ALU_SUB: return x - y;
      ALU_XOR: return x ^ y;
      ALU_SLL: return x << y[4:0];
      default: return 32'hDEAD_BEEF;
    endcase
  endfunction

  function automatic alu_op_t rnd_op();
    case ($urandom % 4)
      0: return ALU_ADD;
      1: return ALU_SUB;
      2: return ALU_XOR;
      default: return ALU_SLL;
    endcase
  endfunction

  function automatic reg_t rnd_reg();
    reg_t r;
    r.fp  = ($urandom % 8) == 0;
    r.idx = 5'($urandom % 3);
    return r;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic        e_fa, e_fb, rd0_real;
    logic [31:0] e0, e1;
    for (int t = 0; t < 3000; t++) begin
      valid0 = ($urandom % 8) != 0;  valid1 = ($urandom % 8) != 0;
      we0 = ($urandom % 6) != 0;     use_imm1 = ($urandom % 3) == 0;
      op0 = rnd_op(); op1 = rnd_op();
      rd0 = rnd_reg(); rs1_1 = rnd_reg(); rs2_1 = rnd_reg();
      a0 = $urandom; b0 = $urandom; a1 = $urandom; b1 = $urandom;
      #1;
      rd0_real = valid0 && we0 && (rd0.fp || rd0.idx != 0);
      e_fa = valid1 && rd0_real && rs1_1 == rd0;
      e_fb = valid1 && rd0_real && !use_imm1 && rs2_1 == rd0;
      e0   = calc(op0, a0, b0);
      e1   = calc(op1, e_fa ? e0 : a1, e_fb ? e0 : b1);
      if (e_fa || e_fb) n_fwd++;
      checks++;
      if (fwd_a !== e_fa || fwd_b !== e_fb || res0 !== e0 || res1 !== e1) begin
        failures++;
        if (failures < 10)
          $display("FAIL t=%0d fwd=%b%b exp=%b%b res0=%h/%h res1=%h/%h",
                   t, fwd_a, fwd_b, e_fa, e_fb, res0, e0, res1, e1);
      end
    end
    // the forwarding path must actually have been exercised
    checks++;
    if (n_fwd < 100) begin
      failures++;
      $display("FAIL forwarding exercised only %0d times", n_fwd);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
