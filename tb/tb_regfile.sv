// tb_regfile -- self-checking testbench of the multi-ported register file.
//
// Runs both configurations side by side: the integer file (register 0 reads
// zero) and the floating-point file (all 32 registers ordinary).  Random
// writes on both ports, including both ports to the same register, are
// mirrored in arrays of this file; all read ports are compared every cycle.
module tb_regfile;

  logic              clk = 0, rst_n = 0;
  logic [3:0][4:0]   raddr;
  logic [3:0][31:0]  rdata_i, rdata_f;
  logic [1:0]        we;
  logic [1:0][4:0]   waddr;
  logic [1:0][31:0]  wdata;
  logic [31:0]       m_i [32], m_f [32];
  int                checks = 0, failures = 0;

  regfile #(.DATA_W(32), .NR_READ(4), .NR_WRITE(2), .ZERO_REG(1'b1)) dut_int (
    .clk_i(clk), .rst_ni(rst_n), .raddr_i(raddr), .rdata_o(rdata_i),
    .we_i(we), .waddr_i(waddr), .wdata_i(wdata));
  regfile #(.DATA_W(32), .NR_READ(4), .NR_WRITE(2), .ZERO_REG(1'b0)) dut_fp (
    .clk_i(clk), .rst_ni(rst_n), .raddr_i(raddr), .rdata_o(rdata_f),
    .we_i(we), .waddr_i(waddr), .wdata_i(wdata));

  always #5 clk = !clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 32; r++) begin m_i[r] = 0; m_f[r] = 0; end
    we = 0; waddr = 0; wdata = 0; raddr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      for (int p = 0; p < 4; p++) raddr[p] = 5'($urandom);
      if (t % 7 == 0) raddr[0] = 0;
      #1;
      for (int p = 0; p < 4; p++) begin
        checks += 2;
        if (rdata_i[p] !== m_i[raddr[p]]) failures++;
        if (rdata_f[p] !== m_f[raddr[p]]) failures++;
      end
      for (int p = 0; p < 2; p++) begin
        we[p] = $urandom % 2; waddr[p] = 5'($urandom % 8); wdata[p] = $urandom;
      end
      if (t % 5 == 0) waddr[1] = waddr[0];
      @(posedge clk);
      for (int p = 0; p < 2; p++) if (we[p]) begin
        if (waddr[p] != 0) m_i[waddr[p]] = wdata[p];
        m_f[waddr[p]] = wdata[p];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
