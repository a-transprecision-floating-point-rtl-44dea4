// ADDMUL operation group of a shared FPU: FMA, FNMSUB, ADD/SUB and MUL.
//
// The group holds two vector lanes. Lane 1 is 32 bits wide and computes float, float16 and
// bfloat16 as well as the multi-format operation (16-bit product, float accumulator and
// result). Lane 2 is 16 bits wide and computes float16 and bfloat16 only; it is used for
// the upper element of a packed-SIMD operation. "Vector disassembly" splits each 32-bit
// operand into the two 16-bit elements, "vector assembly" joins the two lane results again
// and ORs their status flags. A 16-bit scalar result is NaN-boxed (upper half all ones).
// The result leaves through PIPE_REGS ready/valid register stages (0, 1 or 2 in the
// paper's design space), so the latency is PIPE_REGS cycles and the throughput one
// operation per cycle. The tag travels with the operation.
//
// Lane structure, formats and the 0-2 register pipeline follow the paper's FPU figure; the
// register position (after the lanes) and NaN-boxing are our choices. A packed-SIMD request
// with src_fmt different from dst_fmt is executed as a scalar.
module fpu_addmul
  import tp_pkg::*;
#(
  parameter int unsigned PIPE_REGS = 1
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     in_valid_i,
  output logic     in_ready_o,
  input  fpu_req_t req_i,
  output logic     out_valid_o,
  input  logic     out_ready_i,
  output fpu_rsp_t rsp_o
);

  logic        vec;
  logic [31:0] l1_res, l2_res;
  fp_status_t  l1_st, l2_st;
  logic [31:0] a_hi, b_hi, c_hi;
  fpu_rsp_t    rsp_d;

  assign vec = req_i.vectorial && (req_i.src_fmt == req_i.dst_fmt) && (req_i.dst_fmt != FP32);

  // vector disassembly; lane 2 is silenced unless a packed-SIMD operation is present
  assign a_hi = vec ? {16'b0, req_i.operands[0][31:16]} : '0;
  assign b_hi = vec ? {16'b0, req_i.operands[1][31:16]} : '0;
  assign c_hi = vec ? {16'b0, req_i.operands[2][31:16]} : '0;

  fp_fma i_lane1 (
    .op_i(req_i.op), .op_mod_i(req_i.op_mod),
    .src_fmt_i(req_i.src_fmt), .dst_fmt_i(req_i.dst_fmt), .rnd_i(req_i.rnd),
    .a_i(req_i.src_fmt == FP32 ? req_i.operands[0] : {16'b0, req_i.operands[0][15:0]}),
    .b_i(req_i.src_fmt == FP32 ? req_i.operands[1] : {16'b0, req_i.operands[1][15:0]}),
    .c_i(req_i.dst_fmt == FP32 ? req_i.operands[2] : {16'b0, req_i.operands[2][15:0]}),
    .result_o(l1_res), .status_o(l1_st)
  );

  fp_fma i_lane2 (
    .op_i(req_i.op), .op_mod_i(req_i.op_mod),
    .src_fmt_i(req_i.dst_fmt), .dst_fmt_i(req_i.dst_fmt), .rnd_i(req_i.rnd),
    .a_i(a_hi), .b_i(b_hi), .c_i(c_hi),
    .result_o(l2_res), .status_o(l2_st)
  );

  // vector assembly
  always_comb begin
    rsp_d.tag = req_i.tag;
    if (vec) begin
      rsp_d.result = {l2_res[15:0], l1_res[15:0]};
      rsp_d.status = l1_st | l2_st;
    end else begin
      rsp_d.result = box(req_i.dst_fmt, l1_res);
      rsp_d.status = l1_st;
    end
  end

  fpu_pipe #(.NUM_REGS(PIPE_REGS), .T(fpu_rsp_t)) i_pipe (
    .clk_i, .rst_ni,
    .in_valid_i, .in_ready_o, .in_data_i(rsp_d),
    .out_valid_o, .out_ready_i, .out_data_o(rsp_o)
  );

endmodule
