// tb_scoreboard -- self-checking testbench of the in-order instruction ring.
//
// A queue model in this file mirrors the ring: random issue of zero, one or
// two instructions (only when the block reports space), random out-of-order
// write-backs on both ports to entries not yet finished (also to an entry
// allocated in the same cycle), and random read
// ports.  Checked every cycle: allocated tags, space flags, read-port
// done/data, and that commits leave in issue order with the written result,
// never more than two per cycle and never past an unfinished entry.  Both
// the full ring and two-wide commit must be seen.
module tb_scoreboard;
  import cva6sp_pkg::*;

  localparam int N = 8;

  logic                  clk = 0, rst_n = 0, flush = 0;
  logic [1:0]            iv, iwe, space, wv, cv, cwe;
  reg_t [1:0]            ird, crd;
  logic [1:0][2:0]       atag, wtag, ctag;
  logic [1:0][31:0]      wdata, cdata;
  logic [3:0][2:0]       rtag;
  logic [3:0]            rdone;
  logic [3:0][31:0]      rdata;
  int                    checks = 0, failures = 0, n_full = 0, n_c2 = 0, n_commit = 0, n_same = 0;

  // model: entries in program order
  typedef struct { int tag; reg_t rd; logic we; logic done; logic [31:0] data; } m_t;
  m_t q[$];
  int m_tail = 0;

  scoreboard #(.NR_SB_ENTRIES(N), .NR_READ(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .flush_i(flush),
    .issue_valid_i(iv), .issue_rd_i(ird), .issue_we_i(iwe), .alloc_tag_o(atag), .space_o(space),
    .wb_valid_i(wv), .wb_tag_i(wtag), .wb_data_i(wdata),
    .rd_tag_i(rtag), .rd_done_o(rdone), .rd_data_o(rdata),
    .commit_valid_o(cv), .commit_tag_o(ctag), .commit_rd_o(crd), .commit_we_o(cwe),
    .commit_data_o(cdata));

  always #5 clk = !clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nexp, k, pend[$];
    iv = 0; iwe = 0; ird = 0; wv = 0; wtag = 0; wdata = 0; rtag = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      // space and tags
      checks++;
      if (space[0] !== (q.size() < N) || space[1] !== (q.size() + 2 <= N) ||
          atag[0] !== 3'(m_tail) || atag[1] !== 3'((m_tail + 1) % N)) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d space=%b size=%0d atag=%0d/%0d", t, space, q.size(), atag[0], m_tail);
      end
      if (q.size() == N) n_full++;
      // expected commits
      nexp = 0;
      if (q.size() > 0 && q[0].done) nexp = 1;
      if (nexp == 1 && q.size() > 1 && q[1].done) nexp = 2;
      checks++;
      if (cv !== ((nexp == 2) ? 2'b11 : (nexp == 1) ? 2'b01 : 2'b00)) failures++;
      for (int p = 0; p < nexp; p++) begin
        checks++;
        if (ctag[p] !== 3'(q[p].tag) || crd[p] !== q[p].rd || cwe[p] !== q[p].we ||
            cdata[p] !== q[p].data) failures++;
      end
      // read ports on random live entries
      for (int p = 0; p < 4; p++) rtag[p] = 3'($urandom);
      #1;
      for (int p = 0; p < 4; p++) begin
        k = -1;
        foreach (q[i]) if (q[i].tag == int'(rtag[p])) k = i;
        if (k >= 0) begin
          checks++;
          if (rdone[p] !== q[k].done || (q[k].done && rdata[p] !== q[k].data)) failures++;
        end
      end
      // write-backs to unfinished entries (distinct)
      pend.delete();
      foreach (q[i]) if (!q[i].done) pend.push_back(i);
      wv = 0;
      for (int p = 0; p < 2; p++) begin
        if (pend.size() > 0 && ($urandom % 3) != 0) begin
          k = $urandom % pend.size();
          wv[p] = 1; wtag[p] = 3'(q[pend[k]].tag); wdata[p] = $urandom;
          pend.delete(k);
        end
      end
      // issue
      iv[0] = space[0] && ($urandom % 4) != 0;
      iv[1] = iv[0] && space[1] && ($urandom % 2);
      for (int p = 0; p < 2; p++) begin
        ird[p].fp = $urandom % 2; ird[p].idx = 5'($urandom); iwe[p] = $urandom % 2;
      end
      // a single-cycle unit may write back the entry it is allocated now
      if (iv[0] && !wv[1] && ($urandom % 3) == 0) begin
        wv[1] = 1; wtag[1] = atag[0]; wdata[1] = $urandom;
        n_same++;
      end
      @(posedge clk);
      // model update: commit, issue, write-back
      if (nexp == 2) n_c2++;
      n_commit += nexp;
      for (int p = 0; p < nexp; p++) void'(q.pop_front());
      for (int p = 0; p < 2; p++) if (iv[p]) begin
        q.push_back('{tag: m_tail, rd: ird[p], we: iwe[p], done: 1'b0, data: 32'h0});
        m_tail = (m_tail + 1) % N;
      end
      for (int p = 0; p < 2; p++) if (wv[p])
        foreach (q[i]) if (q[i].tag == int'(wtag[p])) begin q[i].done = 1; q[i].data = wdata[p]; end
    end
    // flush empties the ring
    @(negedge clk); iv = 0; wv = 0; flush = 1;
    @(negedge clk); flush = 0; #1;
    checks++;
    if (cv !== 2'b00 || space !== 2'b11 || atag[0] !== 3'd0) failures++;
    checks++;
    if (n_full == 0 || n_c2 == 0 || n_same == 0) failures++;
    $display("commits=%0d two-wide=%0d full=%0d", n_commit, n_c2, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
