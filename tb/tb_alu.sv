// tb_alu -- self-checking testbench of the integer ALU.
//
// Applies every operation to directed corner operands and to random ones and
// compares the result with a reference model written bit by bit in this
// file (loops over bits rather than the operators the ALU uses).  The ALU is
// combinational: each vector is checked 1 ns after it is applied.
module tb_alu;
  import cva6sp_pkg::*;

  alu_op_t     op;
  logic [31:0] a, b, res;
  logic        cmp;
  int          checks = 0, failures = 0;

  alu dut (.op_i(op), .a_i(a), .b_i(b), .result_o(res), .cmp_o(cmp));

  function automatic logic [31:0] ref_model(alu_op_t o, logic [31:0] x, logic [31:0] y);
    logic [31:0] r;
    logic [63:0] cl;
    int          sh, n;
    logic        slt, sltu;
    sh   = int'(y[4:0]);
    // signed / unsigned less-than by subtraction with 33 bits
    sltu = ({1'b0, x} - {1'b0, y}) >> 32 != 0;
    slt  = (x[31] != y[31]) ? x[31] : sltu;
    r    = '0;
    case (o)
      ALU_ADD:  for (int i = 0, c = 0; i < 32; i++) begin r[i] = x[i] ^ y[i] ^ c[0]; c = (x[i] & y[i]) | (c[0] & (x[i] ^ y[i])); end
      ALU_SUB:  r = x + (~y) + 32'd1;
      ALU_XOR:  for (int i = 0; i < 32; i++) r[i] = x[i] != y[i];
      ALU_OR:   for (int i = 0; i < 32; i++) r[i] = x[i] | y[i];
      ALU_AND:  for (int i = 0; i < 32; i++) r[i] = x[i] & y[i];
      ALU_SLL:  for (int i = 0; i < 32; i++) r[i] = (i >= sh) ? x[i-sh] : 1'b0;
      ALU_SRL:  for (int i = 0; i < 32; i++) r[i] = (i + sh < 32) ? x[i+sh] : 1'b0;
      ALU_SRA:  for (int i = 0; i < 32; i++) r[i] = (i + sh < 32) ? x[i+sh] : x[31];
      ALU_SLT:  r = {31'b0, slt};
      ALU_SLTU: r = {31'b0, sltu};
      ALU_EQ:   r = {31'b0, x == y};
      ALU_NE:   r = {31'b0, x != y};
      ALU_LT:   r = {31'b0, slt};
      ALU_GE:   r = {31'b0, !slt};
      ALU_LTU:  r = {31'b0, sltu};
      ALU_GEU:  r = {31'b0, !sltu};
      ALU_SH1ADD: r = x * 2 + y;
      ALU_SH2ADD: r = x * 4 + y;
      ALU_SH3ADD: r = x * 8 + y;
      ALU_ANDN: r = x & (32'hFFFF_FFFF ^ y);
      ALU_ORN:  r = x | (32'hFFFF_FFFF ^ y);
      ALU_XNOR: r = 32'hFFFF_FFFF ^ x ^ y;
      ALU_CLZ:  begin n = 0; for (int i = 31; i >= 0 && !x[i]; i--) n++; r = n; end
      ALU_CTZ:  begin n = 0; for (int i = 0; i < 32 && !x[i]; i++) n++; r = n; end
      ALU_CPOP: begin n = 0; for (int i = 0; i < 32; i++) n += x[i]; r = n; end
      ALU_MAX:  r = slt ? y : x;
      ALU_MAXU: r = sltu ? y : x;
      ALU_MIN:  r = slt ? x : y;
      ALU_MINU: r = sltu ? x : y;
      ALU_SEXTB: for (int i = 0; i < 32; i++) r[i] = x[i < 8 ? i : 7];
      ALU_SEXTH: for (int i = 0; i < 32; i++) r[i] = x[i < 16 ? i : 15];
      ALU_ZEXTH: for (int i = 0; i < 16; i++) r[i] = x[i];
      ALU_ROL:  for (int i = 0; i < 32; i++) r[i] = x[(i - sh + 32) % 32];
      ALU_ROR:  for (int i = 0; i < 32; i++) r[i] = x[(i + sh) % 32];
      ALU_ORCB: for (int i = 0; i < 32; i++) r[i] = x[8*(i/8)+:8] != 8'h00;
      ALU_REV8: r = {x[7:0], x[15:8], x[23:16], x[31:24]};
      ALU_CLMUL, ALU_CLMULH, ALU_CLMULR: begin
        cl = '0;
        for (int i = 0; i < 32; i++)
          for (int j = 0; j < 32; j++)
            cl[i+j] = cl[i+j] ^ (x[i] & y[j]);
        r = (o == ALU_CLMUL) ? cl[31:0] : (o == ALU_CLMULH) ? cl[63:32] : cl[62:31];
      end
      ALU_BCLR: begin r = x; r[sh] = 1'b0; end
      ALU_BEXT: r = {31'b0, x[sh]};
      ALU_BINV: begin r = x; r[sh] = !x[sh]; end
      ALU_BSET: begin r = x; r[sh] = 1'b1; end
      default:  r = '0;
    endcase
    return r;
  endfunction

  function automatic logic is_cmp(alu_op_t o);
    return o inside {ALU_EQ, ALU_NE, ALU_LT, ALU_GE, ALU_LTU, ALU_GEU};
  endfunction

  task automatic apply(alu_op_t o, logic [31:0] x, logic [31:0] y);
    logic [31:0] exp;
    op = o; a = x; b = y;
    #1;
    exp = ref_model(o, x, y);
    checks++;
    if (res !== exp || cmp !== (is_cmp(o) ? exp[0] : 1'b0)) begin
      failures++;
      if (failures < 10)
        $display("FAIL op=%s a=%h b=%h res=%h cmp=%b exp=%h", o.name(), x, y, res, cmp, exp);
    end
  endtask

  localparam logic [31:0] CORNER [6] = '{32'h0, 32'h1, 32'hFFFF_FFFF, 32'h8000_0000,
                                         32'h7FFF_FFFF, 32'h0000_00FF};

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alu_op_t o;
    o = o.first();
    forever begin
      foreach (CORNER[i]) foreach (CORNER[j]) apply(o, CORNER[i], CORNER[j]);
      for (int k = 0; k < 200; k++) apply(o, $urandom, (k % 4 == 0) ? $urandom % 40 : $urandom);
      if (o == o.last()) break;
      o = o.next();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
