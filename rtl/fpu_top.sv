// One shared FPU instance (FPnew-style top level) without divide/square root.
//
// An incoming request is steered by its operation to one of three operation groups:
// ADDMUL (FMA, add, multiply), COMP (sign injection, min/max, compare, classify) and CONV
// (conversions, cast-and-pack). The operands of the two groups that are not selected are
// forced to zero ("silencing"), so their logic does not toggle. Each group has PIPE_REGS
// pipeline registers. The group outputs meet in a fair round-robin arbiter, which gives
// the single result port to one group per cycle and stalls the others, so results keep
// their tag but may leave in a different order than they entered. Division and square root
// are not in this unit; the shared DIV-SQRT block serves them.
//
// Interface: ready/valid request (fpu_req_t) and response (fpu_rsp_t). A request is taken
// when in_valid_i && in_ready_o; a result when out_valid_o && out_ready_i. Latency is
// PIPE_REGS cycles for every operation (0 = combinational). The structure follows the
// paper's FPU figure; operation encodings and silencing by zeroing are our choices.
module fpu_top
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

  localparam int unsigned NG = 3;

  op_group_e       grp;
  logic [NG-1:0]   g_in_valid, g_in_ready, g_out_valid, g_out_ready, gnt;
  fpu_req_t [NG-1:0] g_req;
  fpu_rsp_t [NG-1:0] g_rsp;
  logic [1:0]      idx;
  logic            any;

  assign grp = op_group(req_i.op);

  // distribution and silencing of unused operands
  always_comb begin
    for (int g = 0; g < NG; g++) begin
      g_in_valid[g] = in_valid_i && (int'(grp) == g);
      g_req[g]      = (int'(grp) == g) ? req_i : '0;
    end
  end
  assign in_ready_o = (grp == GRP_DIVSQRT) ? 1'b0 : g_in_ready[grp];

  fpu_addmul  #(.PIPE_REGS(PIPE_REGS)) i_addmul (
    .clk_i, .rst_ni, .in_valid_i(g_in_valid[0]), .in_ready_o(g_in_ready[0]), .req_i(g_req[0]),
    .out_valid_o(g_out_valid[0]), .out_ready_i(g_out_ready[0]), .rsp_o(g_rsp[0]));
  fpu_noncomp #(.PIPE_REGS(PIPE_REGS)) i_comp (
    .clk_i, .rst_ni, .in_valid_i(g_in_valid[1]), .in_ready_o(g_in_ready[1]), .req_i(g_req[1]),
    .out_valid_o(g_out_valid[1]), .out_ready_i(g_out_ready[1]), .rsp_o(g_rsp[1]));
  fpu_conv    #(.PIPE_REGS(PIPE_REGS)) i_conv (
    .clk_i, .rst_ni, .in_valid_i(g_in_valid[2]), .in_ready_o(g_in_ready[2]), .req_i(g_req[2]),
    .out_valid_o(g_out_valid[2]), .out_ready_i(g_out_ready[2]), .rsp_o(g_rsp[2]));

  // fair round-robin arbitration of outputs
  rr_arbiter #(.N(NG)) i_out_arb (
    .clk_i, .rst_ni, .req_i(g_out_valid), .advance_i(out_ready_i),
    .gnt_o(gnt), .idx_o(idx), .valid_o(any));

  assign out_valid_o = any;
  assign rsp_o       = g_rsp[idx];
  assign g_out_ready = gnt & {NG{out_ready_i}};

  // division and square root belong to the separate DIV-SQRT unit
  assert property (@(posedge clk_i) disable iff (!rst_ni) in_valid_i |-> grp != GRP_DIVSQRT)
    else $error("fpu_top: DIV/SQRT request sent to an FPU instance");

endmodule
