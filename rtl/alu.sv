// alu -- single-cycle RV32 integer ALU.
//
// Computes one result per cycle, purely combinationally, from operands a_i
// and b_i and the operation op_i.  It covers the RV32I register/immediate
// operations, the six conditional-branch comparisons (result 1 = branch
// taken, also on cmp_o) and the bit-manipulation extensions Zba (shift-add),
// Zbb (basic bit manipulation), Zbc (carry-less multiply) and Zbs
// (single-bit operations), which is the instruction set the core is
// evaluated with.  The core instantiates two of these: the primary ALU and
// the secondary ALU of the second issue slot.  The internal structure is a
// plain case statement; how the original core builds its adder and shifters
// is not described, so this is the simplest form of the same function.
module alu
  import cva6sp_pkg::*;
(
  input  alu_op_t         op_i,
  input  logic [XLEN-1:0] a_i,
  input  logic [XLEN-1:0] b_i,
  output logic [XLEN-1:0] result_o,
  output logic            cmp_o     // comparison outcome (branch taken)
);

  localparam int unsigned SHW = $clog2(XLEN);

  logic [SHW-1:0]    shamt;
  logic              lt_s, lt_u;
  logic [2*XLEN-1:0] clmul_full;
  logic [XLEN-1:0]   clz_v, ctz_v, cpop_v;

  assign shamt = b_i[SHW-1:0];
  assign lt_s  = $signed(a_i) < $signed(b_i);
  assign lt_u  = a_i < b_i;

  // Carry-less product, count of leading/trailing zeros and population count.
  always_comb begin
    clmul_full = '0;
    for (int i = 0; i < XLEN; i++) begin
      if (b_i[i]) clmul_full = clmul_full ^ ({{XLEN{1'b0}}, a_i} << i);
    end
    clz_v = XLEN;
    for (int i = 0; i < XLEN; i++) begin
      if (a_i[i]) clz_v = XLEN - 1 - i;
    end
    ctz_v = XLEN;
    for (int i = XLEN - 1; i >= 0; i--) begin
      if (a_i[i]) ctz_v = i;
    end
    cpop_v = '0;
    for (int i = 0; i < XLEN; i++) begin
      cpop_v = cpop_v + XLEN'(a_i[i]);
    end
  end

  always_comb begin
    cmp_o = 1'b0;
    unique case (op_i)
      ALU_EQ:  cmp_o = (a_i == b_i);
      ALU_NE:  cmp_o = (a_i != b_i);
      ALU_LT:  cmp_o = lt_s;
      ALU_GE:  cmp_o = !lt_s;
      ALU_LTU: cmp_o = lt_u;
      ALU_GEU: cmp_o = !lt_u;
      default: cmp_o = 1'b0;
    endcase
  end

  always_comb begin
    result_o = '0;
    unique case (op_i)
      ALU_ADD:    result_o = a_i + b_i;
      ALU_SUB:    result_o = a_i - b_i;
      ALU_XOR:    result_o = a_i ^ b_i;
      ALU_OR:     result_o = a_i | b_i;
      ALU_AND:    result_o = a_i & b_i;
      ALU_SLL:    result_o = a_i << shamt;
      ALU_SRL:    result_o = a_i >> shamt;
      ALU_SRA:    result_o = XLEN'($signed(a_i) >>> shamt);
      ALU_SLT:    result_o = XLEN'(lt_s);
      ALU_SLTU:   result_o = XLEN'(lt_u);
      ALU_EQ, ALU_NE, ALU_LT, ALU_GE, ALU_LTU, ALU_GEU:
                  result_o = XLEN'(cmp_o);
      ALU_SH1ADD: result_o = (a_i << 1) + b_i;
      ALU_SH2ADD: result_o = (a_i << 2) + b_i;
      ALU_SH3ADD: result_o = (a_i << 3) + b_i;
      ALU_ANDN:   result_o = a_i & ~b_i;
      ALU_ORN:    result_o = a_i | ~b_i;
      ALU_XNOR:   result_o = ~(a_i ^ b_i);
      ALU_CLZ:    result_o = clz_v;
      ALU_CTZ:    result_o = ctz_v;
      ALU_CPOP:   result_o = cpop_v;
      ALU_MAX:    result_o = lt_s ? b_i : a_i;
      ALU_MAXU:   result_o = lt_u ? b_i : a_i;
      ALU_MIN:    result_o = lt_s ? a_i : b_i;
      ALU_MINU:   result_o = lt_u ? a_i : b_i;
      ALU_SEXTB:  result_o = {{(XLEN-8){a_i[7]}}, a_i[7:0]};
      ALU_SEXTH:  result_o = {{(XLEN-16){a_i[15]}}, a_i[15:0]};
      ALU_ZEXTH:  result_o = {{(XLEN-16){1'b0}}, a_i[15:0]};
      ALU_ROL:    result_o = (a_i << shamt) | (a_i >> ((XLEN - 32'(shamt)) % XLEN));
      ALU_ROR:    result_o = (a_i >> shamt) | (a_i << ((XLEN - 32'(shamt)) % XLEN));
      ALU_ORCB:   for (int i = 0; i < XLEN / 8; i++) result_o[8*i +: 8] = {8{|a_i[8*i +: 8]}};
      ALU_REV8:   for (int i = 0; i < XLEN / 8; i++) result_o[8*i +: 8] = a_i[XLEN-8-8*i +: 8];
      ALU_CLMUL:  result_o = clmul_full[XLEN-1:0];
      ALU_CLMULH: result_o = clmul_full[2*XLEN-1:XLEN];
      ALU_CLMULR: result_o = clmul_full[2*XLEN-2:XLEN-1];
      ALU_BCLR:   result_o = a_i & ~(XLEN'(1) << shamt);
      ALU_BEXT:   result_o = XLEN'((a_i >> shamt) & XLEN'(1));
      ALU_BINV:   result_o = a_i ^ (XLEN'(1) << shamt);
      ALU_BSET:   result_o = a_i | (XLEN'(1) << shamt);
      default:    result_o = '0;
    endcase
  end

endmodule
