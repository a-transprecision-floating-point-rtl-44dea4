// COMP operation group of a shared FPU: sign injection, min/max, comparisons and classify.
//
// Operations (the rnd field selects the variant, as in the RISC-V F extension):
//   OP_SGNJ     rnd 0 sgnj, 1 sgnjn, 2 sgnjx: magnitude of a, sign from b
//   OP_MINMAX   rnd 0 min, 1 max; one NaN input returns the other, -0 < +0
//   OP_CMP      rnd 0 le, 1 lt, 2 eq; result 1/0; le/lt signal invalid on any NaN,
//               eq only on a signalling NaN
//   OP_CLASSIFY 10-bit RISC-V class mask of a
// Packed-SIMD 16-bit requests are computed per element, each element result (also 0/1 or
// the class mask) sits in its 16-bit half. Scalar 16-bit results are NaN-boxed, except
// comparison and classify results, which are integers. Results leave through PIPE_REGS
// ready/valid registers. The paper names this group (COMP) and its place in the FPU; the
// exact operation list and encodings are this design's choice, modelled on RISC-V.
module fpu_noncomp
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

  function automatic logic [31:0] elem(fpu_op_e op, logic [2:0] v, fp_fmt_e f,
                                       logic [31:0] a, logic [31:0] b, output fp_status_t st);
    fp_unpacked_t ua, ub;
    int unsigned  w = fmt_width(f);
    logic [31:0]  ma, mb, res;
    logic         lt, eq, a_lt_b;
    ua = unpack(f, a);
    ub = unpack(f, b);
    ma = a & ((32'd1 << (w - 1)) - 1);
    mb = b & ((32'd1 << (w - 1)) - 1);
    st = '0;
    res = '0;
    eq = (ua.is_zero && ub.is_zero) || (a == b);
    if (ua.sign != ub.sign) a_lt_b = ua.sign && !(ua.is_zero && ub.is_zero);
    else if (!ua.sign)      a_lt_b = ma < mb;
    else                    a_lt_b = ma > mb;
    // -0 < +0 for min/max
    lt = (ua.is_zero && ub.is_zero) ? (ua.sign && !ub.sign) : a_lt_b;
    case (op)
      OP_SGNJ: begin
        case (v)
          3'd0:    res = ma | (32'(ub.sign) << (w - 1));
          3'd1:    res = ma | (32'(!ub.sign) << (w - 1));
          default: res = ma | (32'(ua.sign ^ ub.sign) << (w - 1));
        endcase
      end
      OP_MINMAX: begin
        st.nv = ua.is_snan | ub.is_snan;
        if (ua.is_nan && ub.is_nan) res = canonical_nan(f);
        else if (ua.is_nan)         res = b;
        else if (ub.is_nan)         res = a;
        else if (v == 3'd0)         res = lt ? a : b;
        else                        res = lt ? b : a;
      end
      OP_CMP: begin
        if (ua.is_nan || ub.is_nan) begin
          st.nv = (v == 3'd2) ? (ua.is_snan | ub.is_snan) : 1'b1;
          res   = '0;
        end else begin
          case (v)
            3'd0:    res = 32'(a_lt_b || eq);
            3'd1:    res = 32'(a_lt_b && !eq);
            default: res = 32'(eq);
          endcase
        end
      end
      default: begin  // OP_CLASSIFY
        res[0] = ua.sign && ua.is_inf;
        res[1] = ua.sign && !ua.is_inf && !ua.is_nan && !ua.is_zero && !ua.is_subnormal;
        res[2] = ua.sign && ua.is_subnormal;
        res[3] = ua.sign && ua.is_zero;
        res[4] = !ua.sign && ua.is_zero;
        res[5] = !ua.sign && ua.is_subnormal;
        res[6] = !ua.sign && !ua.is_inf && !ua.is_nan && !ua.is_zero && !ua.is_subnormal;
        res[7] = !ua.sign && ua.is_inf;
        res[8] = ua.is_snan;
        res[9] = ua.is_nan && !ua.is_snan;
      end
    endcase
    return res;
  endfunction

  logic       vec, int_res;
  fp_status_t st_lo, st_hi;
  logic [31:0] r_lo, r_hi;
  fpu_rsp_t   rsp_d;

  assign vec     = req_i.vectorial && (req_i.dst_fmt != FP32);
  assign int_res = (req_i.op == OP_CMP) || (req_i.op == OP_CLASSIFY);

  always_comb begin
    logic [31:0] a_lo, b_lo;
    a_lo = (req_i.dst_fmt == FP32) ? req_i.operands[0] : {16'b0, req_i.operands[0][15:0]};
    b_lo = (req_i.dst_fmt == FP32) ? req_i.operands[1] : {16'b0, req_i.operands[1][15:0]};
    r_lo = elem(req_i.op, req_i.rnd, req_i.dst_fmt, a_lo, b_lo, st_lo);
    r_hi = '0;
    st_hi = '0;
    if (vec)
      r_hi = elem(req_i.op, req_i.rnd, req_i.dst_fmt, {16'b0, req_i.operands[0][31:16]},
                  {16'b0, req_i.operands[1][31:16]}, st_hi);
    rsp_d.tag = req_i.tag;
    rsp_d.status = st_lo | st_hi;
    if (vec)          rsp_d.result = {r_hi[15:0], r_lo[15:0]};
    else if (int_res) rsp_d.result = r_lo;
    else              rsp_d.result = box(req_i.dst_fmt, r_lo);
  end

  fpu_pipe #(.NUM_REGS(PIPE_REGS), .T(fpu_rsp_t)) i_pipe (
    .clk_i, .rst_ni,
    .in_valid_i, .in_ready_o, .in_data_i(rsp_d),
    .out_valid_o, .out_ready_i, .out_data_o(rsp_o)
  );

endmodule
