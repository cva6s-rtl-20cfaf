// tb_cva6sp_dual_issue -- end-to-end testbench of the dual-issue slice.
//
// The slice runs at its default parameters (8 scoreboard entries, 128-entry
// predictor with 3-bit histories) with the behavioural FPU model attached.
//
// Program: a loop body of BODY instructions is generated once and run ITER
// times, so its branches recur at the same addresses and the predictor can
// learn them.  Each body holds random ALU and FPU instructions over few
// registers (many dependencies and repeated writers) and two conditional
// branches: one taken in the repeating pattern taken-taken-not-taken, one
// always taken.  A branch outcome is set up by the instruction just before
// it (x6 = pattern bit, then "bne x6, x0").  The front end is modelled here:
// it shows the next two instructions of the trace, shifts by issue_o, and
// looks the branch prediction up through the slice's predictor port.
//
// The fetch ports get four directed 64-bit blocks right after reset (four
// compressed, two 32-bit, and a 32-bit instruction split over two blocks);
// every instruction the realigner outputs is checked.
//
// Checks: (1) a directed start: a dependent ALU pair issues in one cycle
// (ALU-to-ALU forwarding) and commits the right values; (2) every commit is
// compared, in order, with an architectural reference model of this file;
// (3) branch resolutions match the trace and, after warm-up, no branch is
// mispredicted (the pattern branch needs the per-entry history); (4) every
// mechanism of the slice happened at least once: dual issue, ALU-to-ALU
// forwarding, renaming of a pending register, the FPU / secondary-ALU port
// conflict, FPU write-back, operand stall, full scoreboard, a slot-1 hold on
// slot 0, branches, mispredictions, two-wide commit, a four-instruction
// fetch block and a block-straddling instruction.  IPC is printed.
module tb_cva6sp_dual_issue;
  import cva6sp_pkg::*;

  localparam int BODY  = 40;
  localparam int ITER  = 60;
  localparam int NINST = BODY * ITER;
  localparam int TAG_W = 3;
  localparam int FPU_LAT = 4;

  logic              clk = 0, rst_n = 0, flush = 0;
  logic [1:0]        ivalid, issue;
  instr_t [1:0]      instr;
  logic [31:0]       vpc;
  bht_pred_t [3:0]   pred;
  bp_resolve_t       res;
  logic              fq_valid, fq_ready, fr_valid;
  logic [3:0]        fq_op;
  logic [31:0]       fq_a, fq_b, fr_data;
  logic [TAG_W-1:0]  fq_tag, fr_tag;
  logic [1:0]        cvalid, cwe;
  reg_t [1:0]        crd;
  logic [1:0][31:0]  cdata;
  perf_t             perf;
  logic              f_flush = 0, f_valid = 0;
  logic [31:0]       f_addr = 0;
  logic [63:0]       f_data = 0;
  logic [3:0]        f_ivalid;
  logic [3:0][31:0]  f_instr, f_iaddr;

  cva6sp_dual_issue dut (
    .clk_i(clk), .rst_ni(rst_n), .flush_i(flush),
    .fetch_flush_i(f_flush), .fetch_valid_i(f_valid), .fetch_addr_i(f_addr), .fetch_data_i(f_data),
    .fetch_instr_valid_o(f_ivalid), .fetch_instr_o(f_instr), .fetch_instr_addr_o(f_iaddr),
    .instr_valid_i(ivalid), .instr_i(instr), .issue_o(issue),
    .bht_vpc_i(vpc), .bht_pred_o(pred), .resolve_o(res),
    .fpu_req_valid_o(fq_valid), .fpu_req_ready_i(fq_ready), .fpu_req_op_o(fq_op),
    .fpu_req_a_o(fq_a), .fpu_req_b_o(fq_b), .fpu_req_tag_o(fq_tag),
    .fpu_resp_valid_i(fr_valid), .fpu_resp_tag_i(fr_tag), .fpu_resp_data_i(fr_data),
    .commit_valid_o(cvalid), .commit_rd_o(crd), .commit_we_o(cwe), .commit_data_o(cdata),
    .perf_o(perf));

  fpu_model #(.TAG_W(TAG_W), .LATENCY(FPU_LAT), .STALL_DIV(5)) i_fpu (
    .clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(fq_valid), .req_ready_o(fq_ready), .req_op_i(fq_op),
    .req_a_i(fq_a), .req_b_i(fq_b), .req_tag_i(fq_tag),
    .resp_valid_o(fr_valid), .resp_tag_o(fr_tag), .resp_data_o(fr_data));

  always #5 clk = !clk;

  int checks = 0, failures = 0;
  int cycles = 0;

  // ------------------------------------------------------------------
  // reference arithmetic (independent of the RTL)
  // ------------------------------------------------------------------
  function automatic logic [31:0] ref_alu(alu_op_t op, logic [31:0] a, logic [31:0] b);
    case (op)
      ALU_ADD:    return a + b;
      ALU_SUB:    return a - b;
      ALU_XOR:    return a ^ b;
      ALU_AND:    return a & b;
      ALU_OR:     return a | b;
      ALU_SLL:    return a << b[4:0];
      ALU_SH1ADD: return a * 2 + b;
      ALU_MAXU:   return (a > b) ? a : b;
      ALU_NE:     return {31'b0, a != b};
      default:    return 32'hBAD0_BAD0;
    endcase
  endfunction

  function automatic logic [31:0] ref_fpu(logic [3:0] op, logic [31:0] a, logic [31:0] b);
    case (op[1:0])
      2'd0:    return a + b;
      2'd1:    return a ^ (b << 1);
      2'd2:    return a - b;
      default: return {a[15:0], b[15:0]};
    endcase
  endfunction

  // ------------------------------------------------------------------
  // program generation and reference execution
  // ------------------------------------------------------------------
  instr_t      body [BODY];
  instr_t      prog [NINST];
  logic [31:0] exp_data [NINST];
  logic        exp_taken [NINST];
  logic [31:0] m_int [32], m_fp [32];

  function automatic reg_t ireg(int i);
    reg_t r; r.fp = 1'b0; r.idx = 5'(i); return r;
  endfunction
  function automatic reg_t freg(int i);
    reg_t r; r.fp = 1'b1; r.idx = 5'(i); return r;
  endfunction

  function automatic alu_op_t rnd_alu_op();
    case ($urandom % 8)
      0: return ALU_ADD;  1: return ALU_SUB;  2: return ALU_XOR;   3: return ALU_AND;
      4: return ALU_OR;   5: return ALU_SLL;  6: return ALU_SH1ADD; default: return ALU_MAXU;
    endcase
  endfunction

  task automatic gen_body();
    instr_t in;
    for (int i = 0; i < BODY; i++) begin
      in = '0;
      in.pc = 32'h0000_1000 + 32'(4 * i);
      if (i == 10 || i == 30) begin
        // set-up instruction, patched per iteration: x6 = outcome bit
        in.fu = FU_ALU; in.alu_op = ALU_ADD; in.rs1 = ireg(0); in.rd = ireg(6);
        in.we = 1; in.use_imm = 1;
      end else if (i == 11 || i == 31) begin
        in.fu = FU_ALU; in.alu_op = ALU_NE; in.rs1 = ireg(6); in.rs2 = ireg(0);
        in.is_branch = 1; in.imm = 32'hFFFF_FF80;
      end else if (($urandom % 10) < 3) begin
        in.fu = FU_FPU; in.fpu_op = 4'($urandom % 4);
        in.rs1 = ($urandom % 3 == 0) ? ireg(1 + $urandom % 5) : freg($urandom % 4);
        in.rs2 = freg($urandom % 4);
        in.rd  = ($urandom % 4 == 0) ? ireg(1 + $urandom % 5) : freg($urandom % 4);
        in.we  = 1;
      end else begin
        in.fu = FU_ALU; in.alu_op = rnd_alu_op();
        in.rs1 = ireg($urandom % 6); in.rs2 = ireg($urandom % 6);
        in.rd  = ireg(1 + $urandom % 5); in.we = 1;
        in.use_imm = ($urandom % 4) == 0;
        in.imm = 32'($urandom % 64);
      end
      body[i] = in;
    end
  endtask

  task automatic gen_program();
    logic [31:0] a, b;
    for (int r = 0; r < 32; r++) begin m_int[r] = 0; m_fp[r] = 0; end
    for (int it = 0; it < ITER; it++) begin
      for (int i = 0; i < BODY; i++) begin
        int n;
        instr_t in;
        n  = it * BODY + i;
        in = body[i];
        if (i == 10) in.imm = ((it % 3) != 2) ? 32'd1 : 32'd0;   // taken, taken, not taken
        if (i == 30) in.imm = 32'd1;                             // always taken
        a = in.rs1.fp ? m_fp[in.rs1.idx] : m_int[in.rs1.idx];
        b = in.rs2.fp ? m_fp[in.rs2.idx] : m_int[in.rs2.idx];
        if (in.fu == FU_ALU) begin
          exp_data[n] = ref_alu(in.alu_op, a, in.use_imm ? in.imm : b);
        end else begin
          exp_data[n] = ref_fpu(in.fpu_op, a, b);
        end
        exp_taken[n] = in.is_branch && exp_data[n][0];
        if (in.we) begin
          if (in.rd.fp) m_fp[in.rd.idx] = exp_data[n];
          else if (in.rd.idx != 0) m_int[in.rd.idx] = exp_data[n];
        end
        prog[n] = in;
      end
    end
  endtask

  // ------------------------------------------------------------------
  // event counters
  // ------------------------------------------------------------------
  int n_issue0, n_dual, n_fwd, n_waw, n_wbc, n_fpuwb, n_opst, n_sbfull, n_intra,
      n_branch, n_mispred, n_mispred_late, n_commit2, n_commit, n_fetch4, n_straddle;

  always @(posedge clk) if (rst_n) begin
    cycles++;
    n_issue0  += int'(perf.issue0);
    n_dual    += int'(perf.issue1);
    n_fwd     += int'(perf.alu_fwd);
    n_waw     += int'(perf.waw_rename);
    n_wbc     += int'(perf.wb_conflict);
    n_fpuwb   += int'(perf.fpu_wb);
    n_opst    += int'(perf.operand_stall);
    n_sbfull  += int'(perf.sb_full);
    n_intra   += int'(perf.intra_stall);
    n_branch  += int'(perf.branch);
    n_mispred += int'(perf.mispredict);
    n_commit2 += int'(perf.commit2);
    n_fetch4  += int'(perf.fetch4);
    n_straddle += int'(perf.fetch_straddle);
  end

  // ------------------------------------------------------------------
  // fetch realignment: four directed 64-bit blocks at 0x2000
  //   A: four compressed  B: two 32-bit  C: 16 + 32 + lower half of a 32
  //   D: upper half (joined) + three compressed
  // ------------------------------------------------------------------
  task automatic fetch_check(logic [31:0] a, logic [63:0] d, logic [3:0] ev,
                             logic [3:0][31:0] ew, logic [3:0][31:0] ea);
    @(negedge clk);
    f_valid = 1; f_addr = a; f_data = d;
    #1;
    checks++;
    if (f_ivalid !== ev) begin
      failures++; $display("FAIL fetch %h valid=%b exp %b", a, f_ivalid, ev);
    end
    for (int i = 0; i < 4; i++) if (ev[i]) begin
      checks++;
      if (f_instr[i] !== ew[i] || f_iaddr[i] !== ea[i]) begin
        failures++;
        $display("FAIL fetch %h slot %0d %h@%h exp %h@%h", a, i, f_instr[i], f_iaddr[i], ew[i], ea[i]);
      end
    end
  endtask

  initial begin
    @(posedge rst_n);
    fetch_check(32'h2000, 64'h4440_3332_2221_1110, 4'b1111,
                {32'h4440, 32'h3332, 32'h2221, 32'h1110}, {32'h2006, 32'h2004, 32'h2002, 32'h2000});
    fetch_check(32'h2008, 64'hBBBB_6667_AAAA_5553, 4'b0011,
                {32'h0, 32'h0, 32'hBBBB_6667, 32'hAAAA_5553}, {32'h0, 32'h0, 32'h200C, 32'h2008});
    fetch_check(32'h2010, 64'h8883_CCCC_7777_0001, 4'b0011,
                {32'h0, 32'h0, 32'hCCCC_7777, 32'h0001}, {32'h0, 32'h0, 32'h2012, 32'h2010});
    fetch_check(32'h2018, 64'h0020_0010_0002_DDDD, 4'b1111,
                {32'h0020, 32'h0010, 32'h0002, 32'hDDDD_8883}, {32'h201E, 32'h201C, 32'h201A, 32'h2016});
    @(negedge clk);
    f_valid = 0;
  end

  // ------------------------------------------------------------------
  // commit checker
  // ------------------------------------------------------------------
  int cptr = 0;
  logic chk_en = 1'b0;
  always @(negedge clk) if (rst_n && chk_en && cptr < NINST) begin
    for (int p = 0; p < 2; p++) begin
      if (cvalid[p]) begin
        checks++;
        if (cwe[p] !== prog[cptr].we || crd[p] !== prog[cptr].rd ||
            (prog[cptr].we && cdata[p] !== exp_data[cptr])) begin
          failures++;
          if (failures < 10)
            $display("FAIL commit #%0d pc=%h rd=%0d/%0d data=%h exp=%h", cptr, prog[cptr].pc,
                     crd[p].idx, prog[cptr].rd.idx, cdata[p], exp_data[cptr]);
        end
        cptr++;
        n_commit++;
      end
    end
  end

  // ------------------------------------------------------------------
  // watchdog
  // ------------------------------------------------------------------
  initial begin
    #(20 * NINST * 10 + 10000);
    failures++;
    $display("watchdog: %0d of %0d instructions committed", cptr, NINST);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------
  // front end and directed start
  // ------------------------------------------------------------------
  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    int ptr;
    int start_cycle;
    instr_t d0, d1;
    ivalid = 0; instr = '0; vpc = 0;
    gen_body();
    gen_program();
    repeat (3) @(posedge clk);
    rst_n = 1;

    // (1) directed: x1 = 5; x2 = x1 + x1 issue together
    @(negedge clk);
    d0 = '0; d0.fu = FU_ALU; d0.alu_op = ALU_ADD; d0.rs1 = ireg(0); d0.rd = ireg(1);
    d0.we = 1; d0.use_imm = 1; d0.imm = 5;
    d1 = '0; d1.fu = FU_ALU; d1.alu_op = ALU_ADD; d1.rs1 = ireg(1); d1.rs2 = ireg(1);
    d1.rd = ireg(2); d1.we = 1;
    instr[0] = d0; instr[1] = d1; ivalid = 2'b11;
    #1;
    check(issue == 2'b11 && perf.alu_fwd, "dependent ALU pair did not issue in one cycle");
    @(posedge clk); #1;
    ivalid = 0;
    check(cvalid == 2'b11 && cdata[0] == 5 && cdata[1] == 10, "directed pair commit values");
    // clear x1, x2 back to zero so the reference model's start state holds
    @(negedge clk);
    d0.imm = 0; d1.rs1 = ireg(0); d1.rs2 = ireg(0);
    instr[0] = d0; instr[1] = d1; ivalid = 2'b11;
    @(posedge clk); #1;
    ivalid = 0;
    check(cvalid == 2'b11 && cdata[0] == 0 && cdata[1] == 0, "directed clearing pair commit");
    @(posedge clk); #1;
    chk_en = 1'b1;
    {n_issue0, n_dual, n_fwd, n_waw, n_wbc, n_fpuwb, n_opst, n_sbfull, n_intra} = '0;
    // (the fetch counters are kept: the fetch test runs right after reset)
    {n_branch, n_mispred, n_mispred_late, n_commit2, n_commit} = '0;

    // (2) the random program
    ptr = 0;
    start_cycle = cycles;
    while (ptr < NINST) begin
      @(negedge clk);
      vpc = prog[ptr].pc & ~32'h7;
      #1;
      instr[0] = prog[ptr];
      instr[0].pred_taken = pred[prog[ptr].pc[2:1]].valid && pred[prog[ptr].pc[2:1]].taken;
      instr[1] = (ptr + 1 < NINST) ? prog[ptr + 1] : '0;
      ivalid   = {ptr + 1 < NINST, 1'b1};
      #1;
      if (res.valid) begin
        check(res.pc == prog[ptr].pc && res.taken == exp_taken[ptr], "branch outcome");
        if (res.mispredict && ptr >= NINST / 2) n_mispred_late++;
      end
      @(posedge clk);
      ptr += int'(issue[0]) + int'(issue[1]);
    end
    @(negedge clk); ivalid = 0;
    while (cptr < NINST) @(negedge clk);
    repeat (2) @(negedge clk);

    check(n_mispred_late == 0, "branches still mispredicted after warm-up");
    check(n_dual    > 0, "no dual issue");
    check(n_fwd     > 0, "no ALU-to-ALU forwarding");
    check(n_waw     > 0, "no renaming of a pending register");
    check(n_wbc     > 0, "no FPU / secondary ALU write-back conflict");
    check(n_fpuwb   > 0, "no FPU write-back");
    check(n_opst    > 0, "no operand stall");
    check(n_sbfull  > 0, "scoreboard never full");
    check(n_intra   > 0, "slot 1 never held on slot 0");
    check(n_branch == 2 * ITER, "branch count");
    check(n_mispred > 0, "no misprediction");
    check(n_commit2 > 0, "no two-wide commit");
    check(n_fetch4 > 0, "no fetch block with four instructions");
    check(n_straddle > 0, "no instruction joined across fetch blocks");
    $display("instructions=%0d cycles=%0d IPC=%0.3f", NINST, cycles - start_cycle,
             real'(NINST) / real'(cycles - start_cycle));
    $display("events: dual=%0d fwd=%0d waw=%0d wb_conflict=%0d fpu_wb=%0d operand_stall=%0d",
             n_dual, n_fwd, n_waw, n_wbc, n_fpuwb, n_opst);
    $display("        sb_full=%0d intra_stall=%0d branches=%0d mispredicts=%0d (late %0d) commit2=%0d",
             n_sbfull, n_intra, n_branch, n_mispred, n_mispred_late, n_commit2);
    $display("        fetch4=%0d fetch_straddle=%0d", n_fetch4, n_straddle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
