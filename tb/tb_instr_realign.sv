// tb_instr_realign -- self-checking testbench of the 64-bit fetch realigner.
//
// Builds a random program image of mixed 16-bit and 32-bit instructions
// (every instruction has distinct random contents) and remembers the start
// address and word of each.  The test fetches 64-bit blocks in order with
// random idle cycles and now and then jumps (flush, then fetch from the
// block holding the target, which may sit mid-block).  Every instruction
// the block outputs is compared, in order, with the expected one.  Cycles
// with four compressed instructions, with two 32-bit ones, and with an
// instruction joined across a block boundary must all occur.
module tb_instr_realign;
  import cva6sp_pkg::*;

  localparam int NHW = 4096;   // program size in halfwords

  logic              clk = 0, rst_n = 0, flush = 0, valid = 0, straddle;
  logic [31:0]       addr;
  logic [63:0]       data;
  logic [3:0]        ivalid;
  logic [3:0][31:0]  iword, iaddr;
  int                checks = 0, failures = 0, n_four = 0, n_two32 = 0, n_straddle = 0, n_jump = 0;

  logic [15:0]       mem [NHW];
  logic [31:0]       exp_addr [$];
  logic [31:0]       exp_word [$];
  int                next;              // index of the next expected instruction
  logic              flush_pending = 0; // first fetch after a jump uses the target address

  instr_realign dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .valid_i(valid),
                     .addr_i(addr), .data_i(data), .instr_valid_o(ivalid), .instr_o(iword),
                     .addr_o(iaddr), .straddle_o(straddle));

  always #5 clk = !clk;

  localparam logic [31:0] BASE = 32'h0000_8000;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int h, n32, cnt;
    logic [31:0] w, blk;
    // program image
    h = 0;
    while (h < NHW - 2) begin
      if (($urandom % 2) != 0) begin
        w = {16'h0, 16'($urandom)};
        w[1:0] = 2'($urandom % 3);
        mem[h] = w[15:0];
        h += 1;
      end else begin
        w = $urandom;
        w[1:0] = 2'b11;
        mem[h] = w[15:0]; mem[h+1] = w[31:16];
        h += 2;
      end
      exp_addr.push_back(BASE + 32'(2 * (h - ((w[1:0] == 2'b11) ? 2 : 1))));
      exp_word.push_back(w);
    end
    for (; h < NHW; h++) mem[h] = 16'h0001;

    repeat (2) @(posedge clk);
    rst_n = 1;
    next = 0;
    blk  = BASE;
    addr = BASE;
    while (next < exp_addr.size() - 4 && blk + 8 < BASE + 2 * NHW) begin
      @(negedge clk);
      flush = 0;
      // occasionally jump to a random instruction
      if (($urandom % 50) == 0 && next > 8) begin
        int target;
        target = next + int'($urandom % 40);
        if (target >= exp_addr.size() - 8) target = next;
        valid = 0;
        flush = 1;
        next  = target;
        addr  = exp_addr[target];
        blk   = addr & ~32'h7;
        flush_pending = 1;
        n_jump++;
        continue;
      end
      valid = ($urandom % 4) != 0;
      if (!flush_pending) addr = blk;
      for (int i = 0; i < 4; i++) data[16*i +: 16] = mem[(blk - BASE) / 2 + i];
      #1;
      if (valid) begin
        cnt = 0; n32 = 0;
        for (int i = 0; i < 4; i++) if (ivalid[i]) begin
          checks++;
          if (iaddr[i] !== exp_addr[next] || iword[i] !== exp_word[next]) begin
            failures++;
            if (failures < 10) $display("FAIL slot %0d addr=%h/%h word=%h/%h", i, iaddr[i],
                                        exp_addr[next], iword[i], exp_word[next]);
          end
          if (iword[i][1:0] == 2'b11) n32++;
          next++;
          cnt++;
        end
        // thermometer code
        checks++;
        if (ivalid != 4'b0000 && ivalid != 4'b0001 && ivalid != 4'b0011 &&
            ivalid != 4'b0111 && ivalid != 4'b1111) failures++;
        if (cnt == 4 && n32 == 0) n_four++;
        if (n32 == 2 && cnt == 2) n_two32++;
        if (straddle) n_straddle++;
        blk = blk + 8;   // the next fetch address is applied after this clock edge
        flush_pending = 0;
      end
    end
    checks++;
    if (n_four == 0 || n_two32 == 0 || n_straddle == 0 || n_jump == 0) failures++;
    $display("four-compressed=%0d two-32bit=%0d straddling=%0d jumps=%0d instructions=%0d",
             n_four, n_two32, n_straddle, n_jump, next);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
