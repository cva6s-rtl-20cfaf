// cva6sp_dual_issue -- dual-issue issue / execute / commit slice of the core.
//
// The front end's 64-bit fetch blocks pass through instr_realign, which
// splits each into up to four instructions (two 32-bit or four 16-bit) for
// the decoders outside this block (fetch_* ports).  The decoders hand back
// two decoded instructions per cycle (slot 0 is the older).  Each cycle
// this block issues none, slot 0 alone, or both, in program order, and
// reports that on issue_o so the front end can shift its queue.  The
// mechanisms it puts together are the four improvements of the
// superscalar core over its dual-issue predecessor:
//
//  * Register renaming (rename_table): every register write records the
//    scoreboard tag of its instruction as the register's latest writer.  A
//    source operand is read from the register file when no writer is in
//    flight, or from the latest writer's scoreboard entry once that has
//    written back.  Writers of the same register never wait for each other.
//  * Two-level branch prediction (bht2lvl): the front end looks the table up
//    with its fetch address through bht_vpc_i / bht_pred_o (a separate
//    port, so that lookup and fetch can be driven independently);
//    conditional branches, resolved in the primary ALU in their issue
//    cycle, train it and are reported on resolve_o.  On a misprediction
//    the younger slot is not issued.
//  * ALU-to-ALU forwarding (alu_fwd_pair): if both slots are ALU instructions
//    and slot 1 reads slot 0's destination, slot 1 still issues in the same
//    cycle, taking the primary ALU's result directly.  Any other dependency
//    of slot 1 on slot 0 holds slot 1 back for a cycle.
//  * FPU on a shared write-back port (wb_share_arbiter): the FPU is reached
//    through the fpu_* ports and writes back through the secondary ALU's
//    port.  While an FPU result is on that port, an ALU instruction in slot 1
//    is not issued.
//
// Write-back port 0 belongs to the primary ALU.  Results wait in the
// scoreboard (8 entries) and commit in order, up to two per cycle, into the
// integer or floating-point register file (regfile); commit_* shows them.
//
// Choices of this design, not given by the paper: branches execute only in
// slot 0; slot 1 takes the secondary ALU even if the primary one is idle;
// results become readable by other instructions one cycle after write-back
// (through the scoreboard); an instruction has at most two source registers
// (no fused multiply-add third operand); loads, stores, CSRs and exceptions
// are handled by parts of the core outside this block.
//
// Interface rules: fpu_req_ready_i must not depend on fpu_req_valid_o; the
// FPU returns each request's tag with its result, at most one per cycle;
// flush_i clears all in-flight state and may only be raised while the FPU
// holds no request.
module cva6sp_dual_issue
  import cva6sp_pkg::*;
#(
  parameter int unsigned NR_SB_ENTRIES   = 8,
  parameter int unsigned BHT_ENTRIES     = 128,
  parameter int unsigned BHT_HISTORY     = 3,
  parameter int unsigned INSTR_PER_FETCH = 4,
  localparam int unsigned TAG_W          = $clog2(NR_SB_ENTRIES)
) (
  input  logic                                 clk_i,
  input  logic                                 rst_ni,
  input  logic                                 flush_i,
  // 64-bit fetch block from the instruction cache, split for the decoders
  input  logic                                 fetch_flush_i,
  input  logic                                 fetch_valid_i,
  input  logic        [XLEN-1:0]               fetch_addr_i,
  input  logic        [16*INSTR_PER_FETCH-1:0] fetch_data_i,
  output logic        [INSTR_PER_FETCH-1:0]    fetch_instr_valid_o,
  output logic        [INSTR_PER_FETCH-1:0][31:0] fetch_instr_o,
  output logic        [INSTR_PER_FETCH-1:0][XLEN-1:0] fetch_instr_addr_o,
  // decoded instructions from the decoders
  input  logic        [1:0]                    instr_valid_i,
  input  instr_t      [1:0]                    instr_i,
  output logic        [1:0]                    issue_o,
  // branch prediction lookup and resolution
  input  logic        [XLEN-1:0]               bht_vpc_i,
  output bht_pred_t   [INSTR_PER_FETCH-1:0]    bht_pred_o,
  output bp_resolve_t                          resolve_o,
  // FPU request and result
  output logic                                 fpu_req_valid_o,
  input  logic                                 fpu_req_ready_i,
  output logic        [FPU_OP_W-1:0]           fpu_req_op_o,
  output logic        [FLEN-1:0]               fpu_req_a_o,
  output logic        [FLEN-1:0]               fpu_req_b_o,
  output logic        [TAG_W-1:0]              fpu_req_tag_o,
  input  logic                                 fpu_resp_valid_i,
  input  logic        [TAG_W-1:0]              fpu_resp_tag_i,
  input  logic        [XLEN-1:0]               fpu_resp_data_i,
  // commit
  output logic        [1:0]                    commit_valid_o,
  output reg_t        [1:0]                    commit_rd_o,
  output logic        [1:0]                    commit_we_o,
  output logic        [1:0][XLEN-1:0]          commit_data_o,
  // events
  output perf_t                                perf_o
);

  // ---------------------------------------------------------------------
  // fetch realignment (front end); the decoders sit outside this block
  // ---------------------------------------------------------------------
  logic fetch_straddle;

  instr_realign #(.INSTR_PER_FETCH(INSTR_PER_FETCH)) i_realign (
    .clk_i         (clk_i),
    .rst_ni        (rst_ni),
    .flush_i       (fetch_flush_i),
    .valid_i       (fetch_valid_i),
    .addr_i        (fetch_addr_i),
    .data_i        (fetch_data_i),
    .instr_valid_o (fetch_instr_valid_o),
    .instr_o       (fetch_instr_o),
    .addr_o        (fetch_instr_addr_o),
    .straddle_o    (fetch_straddle)
  );

  // ---------------------------------------------------------------------
  // operand lookup: port 2*s+k is source k (rs1, rs2) of slot s
  // ---------------------------------------------------------------------
  reg_t       [3:0]             src_reg;
  logic       [3:0]             rn_pending;
  logic       [3:0][TAG_W-1:0]  rn_tag;
  logic       [3:0]             sb_done;
  logic       [3:0][XLEN-1:0]   sb_data;
  logic       [3:0][XLEN-1:0]   irf_data, frf_data;
  logic       [3:0]             src_used, src_ready;
  logic       [3:0][XLEN-1:0]   src_val;

  assign src_reg[0] = instr_i[0].rs1;
  assign src_reg[1] = instr_i[0].rs2;
  assign src_reg[2] = instr_i[1].rs1;
  assign src_reg[3] = instr_i[1].rs2;

  // rs2 is unused by an ALU instruction with an immediate operand
  for (genvar s = 0; s < 2; s++) begin : g_used
    assign src_used[2*s]   = 1'b1;
    assign src_used[2*s+1] = !(instr_i[s].fu == FU_ALU && instr_i[s].use_imm);
  end

  always_comb begin
    for (int p = 0; p < 4; p++) begin
      src_val[p]   = rn_pending[p] ? sb_data[p]
                   : (src_reg[p].fp ? frf_data[p] : irf_data[p]);
      src_ready[p] = !src_used[p] || !rn_pending[p] || sb_done[p];
    end
  end

  // ---------------------------------------------------------------------
  // dependencies of slot 1 on slot 0 within the bundle
  // ---------------------------------------------------------------------
  logic rd0_real;
  logic [1:0] intra_dep;          // slot 1 source k is written by slot 0
  logic [1:0] fwd_ok;             // ... and the ALU pair forwards it
  logic fwd_a, fwd_b;

  assign rd0_real     = instr_i[0].we && (instr_i[0].rd.fp || instr_i[0].rd.idx != 5'd0);
  assign intra_dep[0] = src_used[2] && rd0_real && (instr_i[1].rs1 == instr_i[0].rd);
  assign intra_dep[1] = src_used[3] && rd0_real && (instr_i[1].rs2 == instr_i[0].rd);
  assign fwd_ok[0]    = fwd_a;
  assign fwd_ok[1]    = fwd_b;

  // ---------------------------------------------------------------------
  // execution: ALU pair with same-cycle forwarding
  // ---------------------------------------------------------------------
  logic            alu0_sel, alu1_sel;
  logic [XLEN-1:0] alu0_res, alu1_res;
  logic            cmp0;

  assign alu0_sel = instr_valid_i[0] && instr_i[0].fu == FU_ALU;
  assign alu1_sel = instr_valid_i[1] && instr_i[1].fu == FU_ALU;

  alu_fwd_pair i_alu_pair (
    .valid0_i   (alu0_sel),
    .op0_i      (instr_i[0].alu_op),
    .rd0_i      (instr_i[0].rd),
    .we0_i      (instr_i[0].we),
    .a0_i       (src_val[0]),
    .b0_i       (instr_i[0].use_imm ? instr_i[0].imm : src_val[1]),
    .result0_o  (alu0_res),
    .cmp0_o     (cmp0),
    .valid1_i   (alu1_sel),
    .op1_i      (instr_i[1].alu_op),
    .rs1_1_i    (instr_i[1].rs1),
    .rs2_1_i    (instr_i[1].rs2),
    .use_imm1_i (instr_i[1].use_imm),
    .a1_i       (src_val[2]),
    .b1_i       (instr_i[1].use_imm ? instr_i[1].imm : src_val[3]),
    .result1_o  (alu1_res),
    .fwd_a_o    (fwd_a),
    .fwd_b_o    (fwd_b)
  );

  // ---------------------------------------------------------------------
  // issue decision
  // ---------------------------------------------------------------------
  logic [1:0]            sb_space;
  logic [1:0][TAG_W-1:0] alloc_tag;
  logic                  alu1_stall;
  logic                  ready0, ready1, fu1_free, issue0, issue1, mispredict0;

  assign ready0 = src_ready[0] && src_ready[1];
  assign ready1 = (intra_dep[0] ? fwd_ok[0] : src_ready[2]) &&
                  (intra_dep[1] ? fwd_ok[1] : src_ready[3]);

  assign issue0 = !flush_i && instr_valid_i[0] && ready0 && sb_space[0] &&
                  (instr_i[0].fu == FU_ALU || fpu_req_ready_i);

  assign mispredict0 = issue0 && instr_i[0].is_branch && (cmp0 != instr_i[0].pred_taken);

  assign fu1_free = (instr_i[1].fu == FU_ALU) ? !alu1_stall
                  : (instr_i[0].fu != FU_FPU && fpu_req_ready_i);

  assign issue1 = issue0 && instr_valid_i[1] && ready1 && sb_space[1] &&
                  !instr_i[1].is_branch && !mispredict0 && fu1_free;

  assign issue_o = {issue1, issue0};

  // ---------------------------------------------------------------------
  // FPU request
  // ---------------------------------------------------------------------
  logic fpu_from0;
  assign fpu_from0       = instr_i[0].fu == FU_FPU;
  assign fpu_req_valid_o = (issue0 && fpu_from0) || (issue1 && instr_i[1].fu == FU_FPU);
  assign fpu_req_op_o    = fpu_from0 ? instr_i[0].fpu_op : instr_i[1].fpu_op;
  assign fpu_req_a_o     = fpu_from0 ? src_val[0] : src_val[2];
  assign fpu_req_b_o     = fpu_from0 ? src_val[1] : src_val[3];
  assign fpu_req_tag_o   = fpu_from0 ? alloc_tag[0] : alloc_tag[1];

  // ---------------------------------------------------------------------
  // write-back: port 0 primary ALU, port 1 shared FPU / secondary ALU
  // ---------------------------------------------------------------------
  logic       [1:0]            wb_valid;
  logic       [1:0][TAG_W-1:0] wb_tag;
  logic       [1:0][XLEN-1:0]  wb_data;
  logic                        wb1_from_fpu;

  assign wb_valid[0] = issue0 && instr_i[0].fu == FU_ALU;
  assign wb_tag[0]   = alloc_tag[0];
  assign wb_data[0]  = alu0_res;

  wb_share_arbiter #(.TAG_W(TAG_W)) i_wb_arb (
    .clk_i         (clk_i),
    .rst_ni        (rst_ni),
    .alu1_valid_i  (issue1 && instr_i[1].fu == FU_ALU),
    .alu1_tag_i    (alloc_tag[1]),
    .alu1_data_i   (alu1_res),
    .alu1_stall_o  (alu1_stall),
    .fpu_valid_i   (fpu_resp_valid_i),
    .fpu_tag_i     (fpu_resp_tag_i),
    .fpu_data_i    (fpu_resp_data_i),
    .wb_valid_o    (wb_valid[1]),
    .wb_tag_o      (wb_tag[1]),
    .wb_data_o     (wb_data[1]),
    .wb_from_fpu_o (wb1_from_fpu)
  );

  // ---------------------------------------------------------------------
  // scoreboard, rename table, register files
  // ---------------------------------------------------------------------
  logic       [1:0]            cm_valid, cm_we;
  logic       [1:0][TAG_W-1:0] cm_tag;
  reg_t       [1:0]            cm_rd;
  logic       [1:0][XLEN-1:0]  cm_data;
  logic       [1:0]            waw;

  scoreboard #(.NR_SB_ENTRIES(NR_SB_ENTRIES), .NR_READ(4)) i_sb (
    .clk_i          (clk_i),
    .rst_ni         (rst_ni),
    .flush_i        (flush_i),
    .issue_valid_i  ({issue1, issue0}),
    .issue_rd_i     ({instr_i[1].rd, instr_i[0].rd}),
    .issue_we_i     ({instr_i[1].we, instr_i[0].we}),
    .alloc_tag_o    (alloc_tag),
    .space_o        (sb_space),
    .wb_valid_i     (wb_valid),
    .wb_tag_i       (wb_tag),
    .wb_data_i      (wb_data),
    .rd_tag_i       (rn_tag),
    .rd_done_o      (sb_done),
    .rd_data_o      (sb_data),
    .commit_valid_o (cm_valid),
    .commit_tag_o   (cm_tag),
    .commit_rd_o    (cm_rd),
    .commit_we_o    (cm_we),
    .commit_data_o  (cm_data)
  );

  rename_table #(.NR_SB_ENTRIES(NR_SB_ENTRIES), .NR_LOOKUP(4)) i_rename (
    .clk_i           (clk_i),
    .rst_ni          (rst_ni),
    .flush_i         (flush_i),
    .lookup_reg_i    (src_reg),
    .pending_o       (rn_pending),
    .tag_o           (rn_tag),
    .claim_valid_i   ({issue1 && instr_i[1].we, issue0 && instr_i[0].we}),
    .claim_reg_i     ({instr_i[1].rd, instr_i[0].rd}),
    .claim_tag_i     (alloc_tag),
    .waw_o           (waw),
    .release_valid_i (cm_valid & cm_we),
    .release_reg_i   (cm_rd),
    .release_tag_i   (cm_tag)
  );

  logic [3:0][4:0] rf_raddr;
  for (genvar p = 0; p < 4; p++) begin : g_raddr
    assign rf_raddr[p] = src_reg[p].idx;
  end

  regfile #(.DATA_W(XLEN), .NR_READ(4), .NR_WRITE(2), .ZERO_REG(1'b1)) i_int_rf (
    .clk_i   (clk_i),
    .rst_ni  (rst_ni),
    .raddr_i (rf_raddr),
    .rdata_o (irf_data),
    .we_i    ({cm_valid[1] && cm_we[1] && !cm_rd[1].fp, cm_valid[0] && cm_we[0] && !cm_rd[0].fp}),
    .waddr_i ({cm_rd[1].idx, cm_rd[0].idx}),
    .wdata_i (cm_data)
  );

  regfile #(.DATA_W(FLEN), .NR_READ(4), .NR_WRITE(2), .ZERO_REG(1'b0)) i_fp_rf (
    .clk_i   (clk_i),
    .rst_ni  (rst_ni),
    .raddr_i (rf_raddr),
    .rdata_o (frf_data),
    .we_i    ({cm_valid[1] && cm_we[1] && cm_rd[1].fp, cm_valid[0] && cm_we[0] && cm_rd[0].fp}),
    .waddr_i ({cm_rd[1].idx, cm_rd[0].idx}),
    .wdata_i (cm_data)
  );

  assign commit_valid_o = cm_valid;
  assign commit_rd_o    = cm_rd;
  assign commit_we_o    = cm_we;
  assign commit_data_o  = cm_data;

  // ---------------------------------------------------------------------
  // branch resolution and prediction
  // ---------------------------------------------------------------------
  bht_update_t bht_update;

  assign resolve_o.valid      = issue0 && instr_i[0].is_branch;
  assign resolve_o.pc         = instr_i[0].pc;
  assign resolve_o.taken      = cmp0;
  assign resolve_o.target     = instr_i[0].pc + instr_i[0].imm;
  assign resolve_o.mispredict = mispredict0;

  assign bht_update.valid = resolve_o.valid;
  assign bht_update.pc    = resolve_o.pc;
  assign bht_update.taken = resolve_o.taken;

  bht2lvl #(
    .NR_ENTRIES      (BHT_ENTRIES),
    .HISTORY_LENGTH  (BHT_HISTORY),
    .INSTR_PER_FETCH (INSTR_PER_FETCH)
  ) i_bht (
    .clk_i    (clk_i),
    .rst_ni   (rst_ni),
    .flush_i  (1'b0),
    .vpc_i    (bht_vpc_i),
    .update_i (bht_update),
    .pred_o   (bht_pred_o)
  );

  // ---------------------------------------------------------------------
  // events
  // ---------------------------------------------------------------------
  logic slot1_blocked_by_wb;
  assign slot1_blocked_by_wb = issue0 && instr_valid_i[1] && instr_i[1].fu == FU_ALU &&
                               ready1 && sb_space[1] && !instr_i[1].is_branch &&
                               !mispredict0 && alu1_stall;

  assign perf_o.issue0        = issue0;
  assign perf_o.issue1        = issue1;
  assign perf_o.alu_fwd       = issue1 && (fwd_a || fwd_b);
  assign perf_o.waw_rename    = |waw;
  assign perf_o.wb_conflict   = slot1_blocked_by_wb;
  assign perf_o.fpu_wb        = wb1_from_fpu;
  assign perf_o.operand_stall = !flush_i && instr_valid_i[0] && !ready0;
  assign perf_o.sb_full       = !flush_i && instr_valid_i[0] && ready0 && !sb_space[0];
  assign perf_o.intra_stall   = issue0 && instr_valid_i[1] &&
                                ((intra_dep[0] && !fwd_ok[0]) || (intra_dep[1] && !fwd_ok[1]));
  assign perf_o.branch        = resolve_o.valid;
  assign perf_o.mispredict    = mispredict0;
  assign perf_o.commit2       = cm_valid[1];
  assign perf_o.fetch4        = &fetch_instr_valid_o;
  assign perf_o.fetch_straddle = fetch_straddle;

  // a request is only raised when the FPU can take it
  a_fpu_req_ready : assert property (@(posedge clk_i) disable iff (!rst_ni)
    fpu_req_valid_o |-> fpu_req_ready_i);

endmodule
