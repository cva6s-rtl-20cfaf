// instr_realign -- splits a 64-bit fetch block into RISC-V instructions.
//
// The front end fetches 64 bits per cycle, which holds two 32-bit or four
// 16-bit (compressed) instructions, or a mix.  This block walks the four
// 16-bit halfwords of the block: a halfword whose two low bits are not 2'b11
// starts a compressed instruction, otherwise it starts a 32-bit one that also
// takes the next halfword.  A 32-bit instruction that starts in the last
// halfword is cut by the block boundary: its lower half is kept in a
// register and joined with the first halfword of the next block, so the
// joined instruction comes out first in the next cycle with the address of
// its lower half.  After a redirect the block address may point into the
// middle of the block (fetch_addr_i[2:1] != 0); the halfwords below it are
// skipped.  The fetch width and the two-or-four instructions per cycle are
// given by the paper; the halfword walk and the boundary register are this
// design's way of doing it.
//
// Interface and timing: valid_i/addr_i/data_i present one fetch block; the
// outputs are combinational and list up to INSTR_PER_FETCH instructions in
// program order in the low slots (instr_valid_o is a thermometer code),
// each with its 32-bit word (upper half zero for compressed ones) and
// address.  The boundary register is updated at the clock edge when valid_i
// is high; flush_i (taken branch, redirect) clears it.  Instructions that
// straddle a block are expected to be fetched from consecutive blocks.
module instr_realign
  import cva6sp_pkg::*;
#(
  parameter int unsigned INSTR_PER_FETCH = 4
) (
  input  logic                                  clk_i,
  input  logic                                  rst_ni,
  input  logic                                  flush_i,
  input  logic                                  valid_i,
  input  logic [XLEN-1:0]                       addr_i,
  input  logic [16*INSTR_PER_FETCH-1:0]         data_i,
  output logic [INSTR_PER_FETCH-1:0]            instr_valid_o,
  output logic [INSTR_PER_FETCH-1:0][31:0]      instr_o,
  output logic [INSTR_PER_FETCH-1:0][XLEN-1:0]  addr_o,
  output logic                                  straddle_o     // a joined instruction is output
);

  localparam int unsigned HW_BITS = $clog2(INSTR_PER_FETCH);

  logic            pend_q, pend_d;
  logic [15:0]     pend_hw_q, pend_hw_d;
  logic [XLEN-1:0] pend_addr_q, pend_addr_d;

  logic [XLEN-1:0] base;
  assign base = {addr_i[XLEN-1:HW_BITS+1], {(HW_BITS+1){1'b0}}};

  always_comb begin
    int unsigned p, k;
    logic [15:0] hw;
    instr_valid_o = '0;
    instr_o       = '0;
    addr_o        = '0;
    straddle_o    = 1'b0;
    hw            = '0;
    pend_d        = pend_q;
    pend_hw_d     = pend_hw_q;
    pend_addr_d   = pend_addr_q;
    p = 32'(addr_i[HW_BITS:1]);
    k = 0;
    if (valid_i) begin
      // finish an instruction cut by the previous block boundary
      if (pend_q) begin
        instr_valid_o[0] = 1'b1;
        instr_o[0]       = {data_i[15:0], pend_hw_q};
        addr_o[0]        = pend_addr_q;
        straddle_o       = 1'b1;
        p = 1;
        k = 1;
      end
      pend_d = 1'b0;
      for (int unsigned step = 0; step < INSTR_PER_FETCH; step++) begin
        if (p < INSTR_PER_FETCH) begin
          hw = data_i[16*p +: 16];
          if (hw[1:0] != 2'b11) begin
            instr_valid_o[k] = 1'b1;
            instr_o[k]       = {16'h0, hw};
            addr_o[k]        = base + XLEN'(2 * p);
            k = k + 1;
            p = p + 1;
          end else if (p + 1 < INSTR_PER_FETCH) begin
            instr_valid_o[k] = 1'b1;
            instr_o[k]       = data_i[16*p +: 32];
            addr_o[k]        = base + XLEN'(2 * p);
            k = k + 1;
            p = p + 2;
          end else begin
            pend_d      = 1'b1;
            pend_hw_d   = hw;
            pend_addr_d = base + XLEN'(2 * p);
            p = p + 1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pend_q      <= 1'b0;
      pend_hw_q   <= '0;
      pend_addr_q <= '0;
    end else if (flush_i) begin
      pend_q      <= 1'b0;
    end else if (valid_i) begin
      pend_q      <= pend_d;
      pend_hw_q   <= pend_hw_d;
      pend_addr_q <= pend_addr_d;
    end
  end

endmodule
