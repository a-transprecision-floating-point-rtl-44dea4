// Self-checking testbench of the CONV operation group.
// Random conversions between float, float16 and bfloat16 in every rounding mode, float to
// signed/unsigned integer, integer to each format, and cast-and-pack of two floats into a
// packed 16-bit pair are checked against a real-number reference, plus saturation cases.
`timescale 1ns/1ps
module tb_fpu_conv;
  import tp_pkg::*;
  `include "tb_fp_ref.svh"

  localparam int unsigned PIPE_REGS = 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid;
  fpu_req_t req; fpu_rsp_t rsp;
  int checks = 0, failures = 0;

  fpu_conv #(.PIPE_REGS(PIPE_REGS)) dut (.clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid),
    .in_ready_o(in_ready), .req_i(req), .out_valid_o(out_valid), .out_ready_i(1'b1), .rsp_o(rsp));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(output fpu_rsp_t r);
    @(negedge clk); in_valid = 1;
    @(posedge clk); while (!in_ready) @(posedge clk);
    #1 in_valid = 0;
    while (!out_valid) @(posedge clk);
    r = rsp;
    @(posedge clk);
  endtask

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp_v);
    checks++;
    if (got !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h exp %h (op=%h sf=%0d df=%0d rm=%0d)", what, got,
                                  exp_v, req.operands[0], req.src_fmt, req.dst_fmt, req.rnd);
    end
  endtask

  // reference float -> integer with real arithmetic
  function automatic logic [31:0] ref_f2i(real v, bit uns, int rm);
    real q, fr, x; bit s, inc;
    s = v < 0.0; x = s ? -v : v;
    q = $floor(x); fr = x - q;
    case (rm)
      0: inc = fr > 0.5 || (fr == 0.5 && q - 2.0 * $floor(q / 2.0) == 1.0);
      1: inc = 0;
      2: inc = s && fr > 0.0;
      3: inc = !s && fr > 0.0;
      default: inc = fr >= 0.5;
    endcase
    if (inc) q = q + 1.0;
    if (uns) begin
      if (s && q != 0.0) return 0;
      if (q > 4294967295.0) return 32'hFFFF_FFFF;
      return 32'($rtoi(q / 65536.0)) << 16 | 32'($rtoi(q - 65536.0 * $floor(q / 65536.0)));
    end
    if (!s && q > 2147483647.0) return 32'h7FFF_FFFF;
    if (s && q > 2147483648.0) return 32'h8000_0000;
    if (s) return -(32'($rtoi(q / 65536.0)) << 16 | 32'($rtoi(q - 65536.0 * $floor(q / 65536.0))));
    return 32'($rtoi(q / 65536.0)) << 16 | 32'($rtoi(q - 65536.0 * $floor(q / 65536.0)));
  endfunction

  initial begin
    fpu_rsp_t r; int sf, df, rm;
    logic [31:0] a, b, e, e2, boxm;
    logic [32:0] rr;
    real v;
    in_valid = 0; req = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      sf = int'($urandom_range(2, 0)); df = int'($urandom_range(2, 0)); rm = int'($urandom_range(4, 0));
      boxm = (df == 0) ? 32'h0 : 32'hFFFF_0000;
      req = '0; req.src_fmt = fp_fmt_e'(sf); req.dst_fmt = fp_fmt_e'(df); req.rnd = roundmode_e'(rm);
      case (n % 4)
        0: begin
          req.op = OP_F2F; a = ref_rand_fp(sf); req.operands[0] = a;
          run(r);
          rr = ref_round(ref_val(sf, a), a[(sf == 0) ? 31 : 15], df, rm);
          chk("f2f", r.result, rr[31:0] | boxm);
        end
        1: begin
          req.op = OP_F2I; req.op_mod = $urandom_range(1, 0);
          a = ref_rand_fp(sf);
          if ($urandom_range(1, 0) == 1)   // keep many values in the integer range
            a = (sf == 0) ? {a[31], 8'(127 + $urandom_range(34, 0) - 3), a[22:0]}
                          : (sf == 1) ? {a[15], 5'(15 + $urandom_range(14, 0) - 3), a[9:0]}
                                      : {a[15], 8'(127 + $urandom_range(34, 0) - 3), a[6:0]};
          req.operands[0] = a;
          run(r);
          chk("f2i", r.result, ref_f2i(ref_val(sf, a), req.op_mod, rm));
        end
        2: begin
          req.op = OP_I2F; req.op_mod = $urandom_range(1, 0);
          a = $urandom >> $urandom_range(31, 0);
          if (!req.op_mod && $urandom_range(1, 0) == 1) a = -a;
          req.operands[0] = a;
          run(r);
          v = req.op_mod ? real'(a[31:16]) * 65536.0 + real'(a[15:0])
                         : real'($signed(a[31:16])) * 65536.0 + real'(a[15:0]);
          rr = ref_round(v, 0, df, rm);
          chk("i2f", r.result, rr[31:0] | boxm);
        end
        default: begin
          if (df == 0) df = 1;
          req.dst_fmt = fp_fmt_e'(df);
          req.op = OP_CPK; a = ref_rand_fp(0); b = ref_rand_fp(0);
          req.operands[0] = a; req.operands[1] = b;
          run(r);
          rr = ref_round(ref_val(0, a), a[31], df, rm); e = rr[31:0];
          rr = ref_round(ref_val(0, b), b[31], df, rm); e2 = rr[31:0];
          chk("cast-and-pack", r.result, {e2[15:0], e[15:0]});
        end
      endcase
    end
    // saturation and invalid
    req = '0; req.op = OP_F2I; req.src_fmt = FP32; req.operands[0] = 32'h7FC0_0000; run(r);
    chk("nan->int", r.result, 32'h7FFF_FFFF); chk("nan->int nv", 32'(r.status.nv), 1);
    req.operands[0] = 32'hCF80_0000; run(r);   // -2^32
    chk("-2^32->int", r.result, 32'h8000_0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
