// fpu_model -- behavioural stand-in for the floating-point unit (testbench only).
//
// The real FPU is an existing pipelined floating-point unit that the core
// integrates but does not design.  This model has the same request/result
// handshake as the core's FPU port: a request is taken when valid and ready
// are high at a clock edge, and its result appears LATENCY cycles later with
// the request's tag, for exactly one cycle.  Results leave in request order,
// at most one per cycle.  ready is a registered pseudo-random value (so it
// never depends on valid), low about one cycle in STALL_DIV.  The arithmetic
// is not IEEE floating point but a cheap stand-in (see fpu_calc), which the
// end-to-end testbench reproduces in its own reference model.
module fpu_model
  import cva6sp_pkg::*;
#(
  parameter int unsigned TAG_W     = 3,
  parameter int unsigned LATENCY   = 4,
  parameter int unsigned STALL_DIV = 5
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                req_valid_i,
  output logic                req_ready_o,
  input  logic [FPU_OP_W-1:0] req_op_i,
  input  logic [FLEN-1:0]     req_a_i,
  input  logic [FLEN-1:0]     req_b_i,
  input  logic [TAG_W-1:0]    req_tag_i,
  output logic                resp_valid_o,
  output logic [TAG_W-1:0]    resp_tag_o,
  output logic [XLEN-1:0]     resp_data_o
);

  logic [LATENCY-1:0]             v_q;
  logic [LATENCY-1:0][TAG_W-1:0]  t_q;
  logic [LATENCY-1:0][XLEN-1:0]   d_q;

  function automatic logic [XLEN-1:0] fpu_calc(logic [FPU_OP_W-1:0] op, logic [FLEN-1:0] a,
                                               logic [FLEN-1:0] b);
    case (op[1:0])
      2'd0:    return a + b;
      2'd1:    return a ^ (b << 1);
      2'd2:    return a - b;
      default: return {a[15:0], b[15:0]};
    endcase
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      v_q         <= '0;
      t_q         <= '0;
      d_q         <= '0;
      req_ready_o <= 1'b0;
    end else begin
      v_q[0] <= req_valid_i && req_ready_o;
      t_q[0] <= req_tag_i;
      d_q[0] <= fpu_calc(req_op_i, req_a_i, req_b_i);
      for (int i = 1; i < LATENCY; i++) begin
        v_q[i] <= v_q[i-1];
        t_q[i] <= t_q[i-1];
        d_q[i] <= d_q[i-1];
      end
      req_ready_o <= ($urandom % STALL_DIV) != 0;
    end
  end

  assign resp_valid_o = v_q[LATENCY-1];
  assign resp_tag_o   = t_q[LATENCY-1];
  assign resp_data_o  = d_q[LATENCY-1];

endmodule
