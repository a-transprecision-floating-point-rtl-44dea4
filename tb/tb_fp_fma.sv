// Self-checking testbench of the fused multiply-add lane.
// Random operands in every format (and the multi-format float16/bfloat16 x -> float case),
// every operation and every rounding mode are compared with a real-number reference that
// rounds the exact double-precision result; a few special cases (NaN, inf*0, inf-inf,
// exact cancellation) are checked directly.
`timescale 1ns/1ps
module tb_fp_fma;
  import tp_pkg::*;
  `include "tb_fp_ref.svh"

  fpu_op_e op; logic op_mod; fp_fmt_e sf, df; roundmode_e rnd;
  logic [31:0] a, b, c, res; fp_status_t st;
  int checks = 0, failures = 0;

  fp_fma dut (.op_i(op), .op_mod_i(op_mod), .src_fmt_i(sf), .dst_fmt_i(df), .rnd_i(rnd),
              .a_i(a), .b_i(b), .c_i(c), .result_o(res), .status_o(st));

  task automatic check(string what, logic [31:0] exp_v, logic exp_nx, bit chk_nx);
    checks++;
    if (res !== exp_v || (chk_nx && st.nx !== exp_nx)) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s op=%0d mod=%0d sf=%0d df=%0d rm=%0d a=%h b=%h c=%h got=%h nx=%b exp=%h nx=%b",
                 what, op, op_mod, sf, df, rnd, a, b, c, res, st.nx, exp_v, exp_nx);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real va, vb, vc, r;
    logic [32:0] e;
    int fi, k, mf, tail;
    for (int n = 0; n < 12000; n++) begin
      mf = n % 5;   // 0..2: same format, 3: f16->f32, 4: bf16->f32
      case (mf)
        0: begin sf = FP32; df = FP32; end
        1: begin sf = FP16; df = FP16; end
        2: begin sf = BF16; df = BF16; end
        3: begin sf = FP16; df = FP32; end
        default: begin sf = BF16; df = FP32; end
      endcase
      k   = int'($urandom_range(3, 0));
      op  = fpu_op_e'(k);
      op_mod = $urandom_range(1, 0) == 1;
      if (op == OP_MUL) op_mod = 0;
      rnd = roundmode_e'($urandom_range(4, 0));
      a = ref_rand_fp(int'(sf)); b = ref_rand_fp(int'(sf)); c = ref_rand_fp(int'(df));
      #1;
      va = ref_val(int'(sf), a); vb = ref_val(int'(sf), b); vc = ref_val(int'(df), c);
      tail = 0;
      case (op)
        OP_FMADD:  tail = two_sum_tail(va * vb, op_mod ? -vc : vc, r);
        OP_FNMSUB: tail = two_sum_tail(-(va * vb), op_mod ? -vc : vc, r);
        OP_ADD:    tail = two_sum_tail(vb, op_mod ? -vc : vc, r);
        default:   r = va * vb;
      endcase
      if (r == 0.0 && !(op == OP_MUL)) continue;   // signed-zero cases are directed below
      e = ref_round(r, (op == OP_MUL) && (a[fmt_width(sf)-1] ^ b[fmt_width(sf)-1]), int'(df), int'(rnd), tail);
      check("random", e[31:0], e[32], 1);
    end

    // directed special cases, float
    sf = FP32; df = FP32; rnd = RNE; op_mod = 0;
    op = OP_FMADD; a = 32'h7F80_0000; b = 32'h0000_0000; c = 32'h3F80_0000; #1;
    check("inf*0", 32'h7FC0_0000, 0, 0);
    if (!st.nv) begin failures++; $display("FAIL inf*0 nv"); end
    op = OP_ADD; b = 32'h7F80_0000; c = 32'hFF80_0000; #1;
    check("inf-inf", 32'h7FC0_0000, 0, 0);
    op = OP_MUL; a = 32'h7FC1_2345; b = 32'h3F80_0000; #1;
    check("nan", 32'h7FC0_0000, 0, 0);
    op = OP_ADD; b = 32'h3FC0_0000; c = 32'hBFC0_0000; #1;
    check("x-x RNE", 32'h0000_0000, 0, 0);
    rnd = RDN; #1;
    check("x-x RDN", 32'h8000_0000, 0, 0);
    rnd = RNE; op = OP_MUL; a = 32'h7F00_0000; b = 32'h4000_0000; #1;
    check("overflow", 32'h7F80_0000, 1, 1);
    if (!st.of) begin failures++; $display("FAIL of flag"); end
    // float16: 1.0 + 2^-11 rounds to even (1.0); smallest subnormal * 0.5 -> 0 with RNE
    sf = FP16; df = FP16; op = OP_ADD; b = 32'h3C00; c = 32'h1000; #1;
    check("f16 tie", 32'h3C00, 1, 1);
    op = OP_MUL; a = 32'h0001; b = 32'h3800; #1;
    check("f16 subnormal tie", 32'h0000, 1, 1);
    rnd = RUP; #1;
    check("f16 subnormal RUP", 32'h0001, 1, 1);
    // multi-format: float16 1.5 * 1.5 + float 0.25 = 2.5
    sf = FP16; df = FP32; rnd = RNE; op = OP_FMADD; a = 32'h3E00; b = 32'h3E00; c = 32'h3E80_0000; #1;
    check("multi-format", 32'h4020_0000, 0, 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
