// regfile -- multi-ported architectural register file.
//
// 32 registers of DATA_W bits with NR_READ combinational read ports and
// NR_WRITE write ports written at the clock edge.  When ZERO_REG is set,
// register 0 always reads zero and ignores writes (the integer file, x0);
// otherwise all 32 registers are ordinary (the floating-point file).  If two
// write ports name the same register in one cycle, the higher-numbered port
// wins; the core commits in program order on ports 0 then 1, so the younger
// value is kept.  A read in the cycle of a write returns the old value.
// The core holds one integer and one floating-point file, as the paper's
// 32-bit core with the F extension has; the port counts (two reads per issue
// slot, one write per commit port) are this design's choice.
module regfile #(
  parameter int unsigned DATA_W   = 32,
  parameter int unsigned NR_READ  = 4,
  parameter int unsigned NR_WRITE = 2,
  parameter bit          ZERO_REG = 1'b1
) (
  input  logic                              clk_i,
  input  logic                              rst_ni,
  input  logic [NR_READ-1:0][4:0]           raddr_i,
  output logic [NR_READ-1:0][DATA_W-1:0]    rdata_o,
  input  logic [NR_WRITE-1:0]               we_i,
  input  logic [NR_WRITE-1:0][4:0]          waddr_i,
  input  logic [NR_WRITE-1:0][DATA_W-1:0]   wdata_i
);

  logic [31:0][DATA_W-1:0] mem_q;

  always_comb begin
    for (int p = 0; p < NR_READ; p++) begin
      rdata_o[p] = (ZERO_REG && raddr_i[p] == 5'd0) ? '0 : mem_q[raddr_i[p]];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mem_q <= '0;
    end else begin
      for (int p = 0; p < NR_WRITE; p++) begin
        if (we_i[p] && !(ZERO_REG && waddr_i[p] == 5'd0)) mem_q[waddr_i[p]] <= wdata_i[p];
      end
    end
  end

endmodule
