// Self-checking testbench of the COMP operation group.
// Random float, float16 and bfloat16 operands (including NaNs, zeros of both signs and
// infinities) go through compare, min/max, sign injection and classify, one operation at a
// time; results and the invalid flag are checked against a real-number reference.
// Packed-SIMD comparisons are checked per element, and the latency of PIPE_REGS cycles.
`timescale 1ns/1ps
module tb_fpu_noncomp;
  import tp_pkg::*;
  `include "tb_fp_ref.svh"

  localparam int unsigned PIPE_REGS = 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid;
  fpu_req_t req; fpu_rsp_t rsp;
  int checks = 0, failures = 0;

  fpu_noncomp #(.PIPE_REGS(PIPE_REGS)) dut (.clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid),
    .in_ready_o(in_ready), .req_i(req), .out_valid_o(out_valid), .out_ready_i(1'b1), .rsp_o(rsp));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(output fpu_rsp_t r, output int lat);
    @(negedge clk); in_valid = 1;
    @(posedge clk); while (!in_ready) @(posedge clk);
    lat = 0;
    #1 in_valid = 0;
    while (!out_valid) begin @(posedge clk); #1 lat++; end
    r = rsp;
    @(posedge clk);
  endtask

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp_v);
    checks++;
    if (got !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h exp %h (a=%h b=%h fmt=%0d)", what, got, exp_v,
                                  req.operands[0], req.operands[1], req.dst_fmt);
    end
  endtask

  function automatic logic [31:0] special(int f);
    logic [31:0] v;
    int m = ref_m(f), eb = ref_e(f);
    case ($urandom_range(7, 0))
      0: v = 32'((1 << eb) - 1) << m | 32'(1 << (m - 1));   // qNaN
      1: v = 32'((1 << eb) - 1) << m | 1;                   // sNaN
      2: v = 32'((1 << eb) - 1) << m;                       // inf
      3: v = 0;
      default: v = ref_rand_fp(f);
    endcase
    if ($urandom_range(1, 0) == 1) v = v | (32'd1 << (eb + m));
    return v;
  endfunction

  initial begin
    fpu_rsp_t r; int lat, f, w;
    logic [31:0] a, b, e, boxm;
    real va, vb;
    bit na, nb, sa, sb, nv;
    in_valid = 0; req = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      f = n % 3; w = (f == 0) ? 32 : 16;
      boxm = (f == 0) ? 32'h0 : 32'hFFFF_0000;
      a = special(f); b = special(f);
      req = '0; req.src_fmt = fp_fmt_e'(f); req.dst_fmt = fp_fmt_e'(f);
      req.operands[0] = a; req.operands[1] = b;
      va = ref_val(f, a); vb = ref_val(f, b);
      na = ref_is_nan(f, a); nb = ref_is_nan(f, b);
      sa = a[w-1]; sb = b[w-1];
      case (n % 4)
        0: begin  // compare
          req.op = OP_CMP; req.rnd = roundmode_e'($urandom_range(2, 0));
          run(r, lat);
          case (req.rnd)
            RNE: e = (na || nb) ? 0 : 32'(va <= vb);
            RTZ: e = (na || nb) ? 0 : 32'(va < vb);
            default: e = (na || nb) ? 0 : 32'(va == vb);
          endcase
          chk("cmp", r.result, e);
          nv = (req.rnd == RDN) ? ((na && !a[ref_m(f)-1]) || (nb && !b[ref_m(f)-1])) : (na || nb);
          chk("cmp nv", 32'(r.status.nv), 32'(nv));
        end
        1: begin  // min / max
          req.op = OP_MINMAX; req.rnd = roundmode_e'($urandom_range(1, 0));
          run(r, lat);
          if (na && nb) e = canonical_nan(fp_fmt_e'(f));
          else if (na) e = b;
          else if (nb) e = a;
          else if (va == vb) e = (req.rnd == RNE) ? (sa ? a : b) : (sa ? b : a);
          else if (req.rnd == RNE) e = (va < vb) ? a : b;
          else e = (va > vb) ? a : b;
          chk("minmax", r.result, e | boxm);
        end
        2: begin  // sign injection
          req.op = OP_SGNJ; req.rnd = roundmode_e'($urandom_range(2, 0));
          run(r, lat);
          case (req.rnd)
            RNE: e = (a & ~(32'd1 << (w - 1))) | (32'(sb) << (w - 1));
            RTZ: e = (a & ~(32'd1 << (w - 1))) | (32'(!sb) << (w - 1));
            default: e = a ^ (32'(sb) << (w - 1));
          endcase
          chk("sgnj", r.result, e | boxm);
        end
        default: begin  // classify
          req.op = OP_CLASSIFY;
          run(r, lat);
          if (na) e = a[ref_m(f)-1] ? 32'h200 : 32'h100;
          else if (va == 0.0) e = sa ? 32'h008 : 32'h010;
          else if (((a >> ref_m(f)) & ((1 << ref_e(f)) - 1)) == (1 << ref_e(f)) - 1) e = sa ? 32'h001 : 32'h080;
          else if (((a >> ref_m(f)) & ((1 << ref_e(f)) - 1)) == 0) e = sa ? 32'h004 : 32'h020;
          else e = sa ? 32'h002 : 32'h040;
          chk("classify", r.result, e);
        end
      endcase
      checks++;
      if (lat + 1 != PIPE_REGS) begin failures++; $display("FAIL latency %0d", lat + 1); end
    end
    // packed-SIMD float16 lt: {1.0 < 2.0, 3.0 < 1.0} -> {1, 0}
    req = '0; req.op = OP_CMP; req.rnd = RTZ; req.src_fmt = FP16; req.dst_fmt = FP16; req.vectorial = 1;
    req.operands[0] = {16'h3C00, 16'h4200}; req.operands[1] = {16'h4000, 16'h3C00};
    run(r, lat);
    chk("vector cmp", r.result, 32'h0001_0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
