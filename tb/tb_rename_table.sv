// tb_rename_table -- self-checking testbench of the latest-writer table.
//
// Random claims (two per cycle, often to the same register, so that both the
// write-after-write case and the same-cycle case occur), releases with
// matching and stale tags, occasional flushes, and random lookups.  A model
// in this file tracks pending/tag per register; every lookup port and the
// WAW flags are compared each cycle.  Integer x0 must never become pending.
module tb_rename_table;
  import cva6sp_pkg::*;

  logic                 clk = 0, rst_n = 0, flush = 0;
  reg_t      [3:0]      lk_reg;
  logic      [3:0]      pend;
  logic      [3:0][2:0] tag;
  logic      [1:0]      cl_v, waw, rl_v;
  reg_t      [1:0]      cl_reg, rl_reg;
  logic      [1:0][2:0] cl_tag, rl_tag;
  logic                 m_pend [64];
  logic      [2:0]      m_tag  [64];
  int                   checks = 0, failures = 0, n_waw = 0, n_rel = 0;

  rename_table #(.NR_SB_ENTRIES(8), .NR_LOOKUP(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .flush_i(flush),
    .lookup_reg_i(lk_reg), .pending_o(pend), .tag_o(tag),
    .claim_valid_i(cl_v), .claim_reg_i(cl_reg), .claim_tag_i(cl_tag), .waw_o(waw),
    .release_valid_i(rl_v), .release_reg_i(rl_reg), .release_tag_i(rl_tag));

  always #5 clk = !clk;

  function automatic reg_t rnd_reg();
    reg_t r;
    r.fp  = $urandom % 2;
    r.idx = 5'($urandom % 4);
    return r;
  endfunction

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] e_waw;
    int         ri;
    for (int r = 0; r < 64; r++) begin m_pend[r] = 0; m_tag[r] = 0; end
    cl_v = 0; rl_v = 0; cl_reg = 0; rl_reg = 0; cl_tag = 0; rl_tag = 0; lk_reg = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      flush = (t % 997) == 500;
      for (int p = 0; p < 4; p++) lk_reg[p] = rnd_reg();
      for (int p = 0; p < 2; p++) begin
        cl_v[p] = $urandom % 2; cl_reg[p] = rnd_reg(); cl_tag[p] = 3'($urandom);
        rl_v[p] = $urandom % 2; rl_reg[p] = rnd_reg();
        ri = int'({rl_reg[p].fp, rl_reg[p].idx});
        rl_tag[p] = ($urandom % 3 == 0) ? 3'($urandom) : m_tag[ri];
      end
      #1;
      for (int p = 0; p < 4; p++) begin
        ri = int'({lk_reg[p].fp, lk_reg[p].idx});
        checks++;
        if (ri == 0) begin
          if (pend[p] !== 1'b0) failures++;
        end else if (pend[p] !== m_pend[ri] || (m_pend[ri] && tag[p] !== m_tag[ri])) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d lookup %0d reg %0d pend=%b/%b tag=%0d/%0d",
                                      t, p, ri, pend[p], m_pend[ri], tag[p], m_tag[ri]);
        end
      end
      // expected WAW flags
      for (int p = 0; p < 2; p++) begin
        ri = int'({cl_reg[p].fp, cl_reg[p].idx});
        e_waw[p] = cl_v[p] && ri != 0 &&
                   (m_pend[ri] || (p == 1 && cl_v[0] && cl_reg[0] == cl_reg[1]));
      end
      checks++;
      if (waw !== e_waw) failures++;
      if (|waw) n_waw++;
      @(posedge clk);
      if (flush) begin
        for (int r = 0; r < 64; r++) m_pend[r] = 0;
      end else begin
        for (int p = 0; p < 2; p++) begin
          ri = int'({rl_reg[p].fp, rl_reg[p].idx});
          if (rl_v[p] && m_pend[ri] && m_tag[ri] == rl_tag[p]) begin m_pend[ri] = 0; n_rel++; end
        end
        for (int p = 0; p < 2; p++) begin
          ri = int'({cl_reg[p].fp, cl_reg[p].idx});
          if (cl_v[p] && ri != 0) begin m_pend[ri] = 1; m_tag[ri] = cl_tag[p]; end
        end
      end
    end
    checks++;
    if (n_waw < 50 || n_rel < 50) failures++;
    $display("waw=%0d releases=%0d", n_waw, n_rel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
