// tb_wb_share_arbiter -- self-checking testbench of the shared write-back port.
//
// Each cycle the FPU presents a result at random; the secondary ALU presents
// one only when the arbiter did not ask it to stall (as the issue logic
// does).  Checks per cycle: the stall equals the FPU's presence, the port
// carries the FPU result when there is one and the ALU result otherwise, and
// it is idle when neither is present.  Both FPU-only and ALU-only cycles
// must occur.
module tb_wb_share_arbiter;
  import cva6sp_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        alu1_valid, alu1_stall, fpu_valid, wb_valid, wb_from_fpu;
  logic [2:0]  alu1_tag, fpu_tag, wb_tag;
  logic [31:0] alu1_data, fpu_data, wb_data;
  int          checks = 0, failures = 0, n_fpu = 0, n_alu = 0, n_blocked = 0;

  wb_share_arbiter #(.TAG_W(3)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .alu1_valid_i(alu1_valid), .alu1_tag_i(alu1_tag), .alu1_data_i(alu1_data), .alu1_stall_o(alu1_stall),
    .fpu_valid_i(fpu_valid), .fpu_tag_i(fpu_tag), .fpu_data_i(fpu_data),
    .wb_valid_o(wb_valid), .wb_tag_o(wb_tag), .wb_data_o(wb_data), .wb_from_fpu_o(wb_from_fpu));

  always #5 clk = !clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic want_alu;
    alu1_valid = 0; fpu_valid = 0; alu1_tag = 0; fpu_tag = 0; alu1_data = 0; fpu_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      fpu_valid = ($urandom % 3) == 0;
      fpu_tag = 3'($urandom); fpu_data = $urandom;
      alu1_tag = 3'($urandom); alu1_data = $urandom;
      want_alu = ($urandom % 2) == 0;
      alu1_valid = 0;
      #1;
      checks++;
      if (alu1_stall !== fpu_valid) failures++;
      alu1_valid = want_alu && !alu1_stall;
      if (want_alu && alu1_stall) n_blocked++;
      #1;
      checks++;
      if (fpu_valid) begin
        n_fpu++;
        if (!(wb_valid && wb_from_fpu && wb_tag == fpu_tag && wb_data == fpu_data)) failures++;
      end else if (alu1_valid) begin
        n_alu++;
        if (!(wb_valid && !wb_from_fpu && wb_tag == alu1_tag && wb_data == alu1_data)) failures++;
      end else if (wb_valid) failures++;
    end
    checks++;
    if (n_fpu == 0 || n_alu == 0 || n_blocked == 0) failures++;
    $display("fpu=%0d alu=%0d blocked=%0d", n_fpu, n_alu, n_blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
