// Self-checking testbench of the DIV-SQRT unit.
// Random divisions and square roots in float, float16 and bfloat16 with every rounding
// mode are compared with a real-number reference (exactness of the double result is
// established by multiplying back). The latency from acceptance to result must be 11, 7
// and 6 cycles, and the unit must refuse a second operation while busy.
`timescale 1ns/1ps
module tb_fpu_divsqrt;
  import tp_pkg::*;
  `include "tb_fp_ref.svh"

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  fpu_req_t req; fpu_rsp_t rsp;
  int checks = 0, failures = 0;

  fpu_divsqrt dut (.clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .req_i(req), .out_valid_o(out_valid), .out_ready_i(out_ready), .rsp_o(rsp));

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp_v);
    checks++;
    if (got !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h exp %h (a=%h b=%h fmt=%0d rm=%0d)", what, got,
                                  exp_v, req.operands[0], req.operands[1], req.dst_fmt, req.rnd);
    end
  endtask

  // tail of a quotient / root: sign of (exact - r), found by multiplying back in double
  function automatic int div_tail(real a, real b, real q);
    real p, err;
    p = q * b;              // exact enough: q and b have few bits for 16-bit formats
    err = a - p;
    if (b < 0.0) err = -err;
    return (err > 0.0) ? 1 : (err < 0.0) ? -1 : 0;
  endfunction

  initial begin
    int f, lat, tail;
    logic [31:0] a, b, boxm;
    logic [32:0] rr;
    real va, vb, q;
    in_valid = 0; req = '0; out_ready = 1;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      f = n % 3;
      boxm = (f == 0) ? 32'h0 : 32'hFFFF_0000;
      a = ref_rand_fp(f); b = ref_rand_fp(f);
      req = '0; req.src_fmt = fp_fmt_e'(f); req.dst_fmt = fp_fmt_e'(f);
      req.rnd = roundmode_e'($urandom_range(4, 0));
      req.op = (n % 2 == 0) ? OP_DIV : OP_SQRT;
      if (req.op == OP_SQRT) a = a & ~(32'd1 << ((f == 0) ? 31 : 15));
      req.operands[0] = a; req.operands[1] = b; req.tag = TAG_W'(n);
      va = ref_val(f, a); vb = ref_val(f, b);
      @(negedge clk); in_valid = 1;
      @(posedge clk); while (!in_ready) @(posedge clk);
      #1 in_valid = 0;
      lat = 0;
      // a second request while busy must not be accepted
      checks++;
      if (in_ready) begin failures++; $display("FAIL ready while busy"); end
      while (!out_valid) begin @(posedge clk); #1 lat++; end
      checks++;
      if (lat != ((f == 0) ? 11 : (f == 1) ? 7 : 6)) begin
        failures++; $display("FAIL latency fmt %0d: %0d", f, lat);
      end
      if (req.op == OP_DIV) begin
        q = va / vb;
        tail = div_tail(va, vb, q);
      end else begin
        q = $sqrt(va);
        tail = (q * q < va) ? 1 : (q * q > va) ? -1 : 0;
      end
      // a quotient or root is never exactly half-way between two float values, so the
      // tail only has to be right when the double result is exact
      rr = ref_round(q, (req.op == OP_DIV) && (va < 0.0) != (vb < 0.0) && q == 0.0, f, int'(req.rnd), tail);
      chk(req.op == OP_DIV ? "div" : "sqrt", rsp.result, rr[31:0] | boxm);
      checks++;
      if (rsp.tag !== TAG_W'(n)) failures++;
      @(posedge clk);
    end
    // specials
    req = '0; req.op = OP_DIV; req.dst_fmt = FP32; req.operands[0] = 32'h3F80_0000; req.operands[1] = 0;
    @(negedge clk); in_valid = 1; @(posedge clk); #1 in_valid = 0;
    while (!out_valid) @(posedge clk);
    chk("1/0", rsp.result, 32'h7F80_0000); chk("1/0 dz", 32'(rsp.status.dz), 1);
    @(posedge clk);
    req.op = OP_SQRT; req.operands[0] = 32'hBF80_0000;
    @(negedge clk); in_valid = 1; @(posedge clk); #1 in_valid = 0;
    while (!out_valid) @(posedge clk);
    chk("sqrt(-1)", rsp.result, 32'h7FC0_0000); chk("sqrt(-1) nv", 32'(rsp.status.nv), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
