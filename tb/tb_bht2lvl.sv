// tb_bht2lvl -- self-checking testbench of the two-level branch predictor.
//
// A reference model in this file keeps, per 16-bit branch address slot
// (address bits [7:1], 128 entries), a 3-bit history and eight 2-bit
// counters.  The test (1) checks that nothing is predicted valid after
// reset, (2) applies random updates at random addresses and compares all
// four slot predictions of random fetch addresses with the model every
// cycle, and (3) trains one branch with the repeating pattern
// taken-taken-not-taken and requires every prediction after warm-up to be
// right, which needs the per-entry history (a single counter per entry gets
// a third of them wrong).  Updates take effect one clock edge later.
module tb_bht2lvl;
  import cva6sp_pkg::*;

  logic              clk = 0, rst_n = 0, flush = 0;
  logic [31:0]       vpc;
  bht_update_t       upd;
  bht_pred_t [3:0]   pred;
  int                checks = 0, failures = 0;

  logic [2:0]        m_hist  [128];
  logic [1:0]        m_cnt   [128][8];
  logic              m_valid [128];

  bht2lvl dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .vpc_i(vpc),
               .update_i(upd), .pred_o(pred));

  always #5 clk = !clk;

  task automatic model_reset();
    for (int e = 0; e < 128; e++) begin
      m_hist[e] = 0; m_valid[e] = 0;
      for (int k = 0; k < 8; k++) m_cnt[e][k] = 2'd1;
    end
  endtask

  task automatic model_update(logic [31:0] pc, logic tk);
    int e;
    e = int'(pc[7:1]);
    if (tk && m_cnt[e][m_hist[e]] < 3) m_cnt[e][m_hist[e]]++;
    if (!tk && m_cnt[e][m_hist[e]] > 0) m_cnt[e][m_hist[e]]--;
    m_hist[e]  = {m_hist[e][1:0], tk};
    m_valid[e] = 1;
  endtask

  task automatic compare_all(logic [31:0] fetch_pc);
    int e;
    for (int i = 0; i < 4; i++) begin
      e = int'({fetch_pc[7:3], 2'(i)});
      checks++;
      if (pred[i].valid !== m_valid[e] || pred[i].taken !== m_cnt[e][m_hist[e]][1]) begin
        failures++;
        if (failures < 10) $display("FAIL pc=%h slot %0d pred=%b%b exp=%b%b", fetch_pc, i,
                                    pred[i].valid, pred[i].taken, m_valid[e], m_cnt[e][m_hist[e]][1]);
      end
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] pc;
    logic        tk, pattern [3];
    int          wrong;
    upd = '0; vpc = 0;
    model_reset();
    repeat (2) @(posedge clk);
    rst_n = 1;
    // (1) after reset nothing is valid
    for (int r = 0; r < 32; r++) begin
      @(negedge clk); vpc = r << 3; #1; compare_all(vpc);
    end
    // (2) random training over a few rows, so entries are hit repeatedly
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      pc  = {$urandom, 1'b0} & 32'hFFFF_003E;   // rows 0..3, any column, upper bits alias
      tk  = ($urandom % 3) != 0;
      upd = '{valid: ($urandom % 4) != 0, pc: pc, taken: tk};
      vpc = {$urandom} & 32'h0000_00F8;
      #1;
      compare_all(vpc);
      @(posedge clk);
      if (upd.valid) model_update(pc, tk);
    end
    @(negedge clk); upd = '0;
    // (3) a period-3 pattern is learned exactly
    pattern = '{1'b1, 1'b1, 1'b0};
    pc = 32'h0000_0086;   // row 16, slot 3
    wrong = 0;
    for (int t = 0; t < 60; t++) begin
      @(negedge clk);
      vpc = pc & ~32'h7;
      #1;
      if (t >= 30) begin
        checks++;
        if (pred[3].taken !== pattern[t % 3] || !pred[3].valid) begin
          failures++; wrong++;
        end
      end
      upd = '{valid: 1'b1, pc: pc, taken: pattern[t % 3]};
      @(posedge clk);
      model_update(pc, pattern[t % 3]);
      #1 upd = '0;
    end
    // flush clears the table
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    model_reset();
    vpc = pc & ~32'h7; #1; compare_all(vpc);
    $display("pattern mispredictions after warm-up: %0d", wrong);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
