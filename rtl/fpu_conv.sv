// CONV operation group of a shared FPU: conversions and cast-and-pack.
//
// Operations:
//   OP_F2F  operand a from src_fmt to dst_fmt, rounded with rnd; packed-SIMD between
//           float16 and bfloat16 converts both elements
//   OP_F2I  operand a (src_fmt) to a 32-bit integer, signed, or unsigned with op_mod;
//           out-of-range values and NaN saturate and raise invalid
//   OP_I2F  32-bit integer a (signed, or unsigned with op_mod) to dst_fmt
//   OP_CPK  cast-and-pack: the float operands a and b are converted to the 16-bit dst_fmt
//           and packed into one register, a in bits [15:0], b in bits [31:16]
// All rounding goes through the shared IEEE rounding helper. Results leave through
// PIPE_REGS ready/valid registers. The paper names the CONV group and describes
// cast-and-pack (two float scalars into two adjacent entries of a packed vector); the
// operand order of cast-and-pack and the saturation values (RISC-V) are our choices.
module fpu_conv
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

  function automatic logic [31:0] f2f(fp_fmt_e sf, fp_fmt_e df, roundmode_e rm,
                                      logic [31:0] a, output fp_status_t st);
    fp_unpacked_t u = unpack(sf, a);
    fp_packed_t   p;
    st = '0;
    if (u.is_nan) begin
      st.nv = u.is_snan;
      return canonical_nan(df);
    end
    if (u.is_inf)  return signed_inf(df, u.sign);
    if (u.is_zero) return signed_zero(df, u.sign);
    p  = round_pack(u.sign, int'($signed(u.exp)), {u.mant, 40'b0}, 1'b0, df, rm);
    st = p.status;
    return p.bits;
  endfunction

  function automatic logic [31:0] i2f(fp_fmt_e df, roundmode_e rm, logic uns,
                                      logic [31:0] a, output fp_status_t st);
    logic        s = !uns && a[31];
    logic [31:0] mag = s ? -a : a;
    logic [63:0] x;
    int unsigned lz;
    fp_packed_t  p;
    st = '0;
    if (mag == 0) return '0;
    x  = {mag, 32'b0};
    lz = lzc64(x);
    p  = round_pack(s, 31 - int'(lz), x << lz, 1'b0, df, rm);
    st = p.status;
    return p.bits;
  endfunction

  function automatic logic [31:0] f2i(fp_fmt_e sf, roundmode_e rm, logic uns,
                                      logic [31:0] a, output fp_status_t st);
    fp_unpacked_t u = unpack(sf, a);
    int           e = int'($signed(u.exp));
    logic [63:0]  fx;
    logic [32:0]  ip;
    logic         rb, sb, inc;
    st = '0;
    if (u.is_nan || (u.is_inf && !u.sign) || (!u.is_zero && !u.sign && e > 31)) begin
      st.nv = 1'b1;
      return uns ? 32'hFFFF_FFFF : 32'h7FFF_FFFF;
    end
    if ((u.is_inf || e > 31) && u.sign) begin
      st.nv = 1'b1;
      return uns ? 32'h0 : 32'h8000_0000;
    end
    if (u.is_zero) return '0;
    fx = {u.mant, 40'b0};
    if (e < -1) begin
      ip = '0; rb = 1'b0; sb = 1'b1;
    end else if (e == -1) begin
      ip = '0; rb = 1'b1; sb = fx[62:0] != 0;
    end else begin
      ip = 33'(fx >> (63 - e));
      rb = fx[62 - e];
      sb = (fx & ((64'd1 << (62 - e)) - 1)) != 0;
    end
    case (rm)
      RNE:     inc = rb & (sb | ip[0]);
      RTZ:     inc = 1'b0;
      RDN:     inc = u.sign & (rb | sb);
      RUP:     inc = !u.sign & (rb | sb);
      default: inc = rb;
    endcase
    ip = ip + 33'(inc);
    if (uns) begin
      if (u.sign && ip != 0) begin st.nv = 1'b1; return 32'h0; end
      if (ip[32])            begin st.nv = 1'b1; return 32'hFFFF_FFFF; end
      st.nx = rb | sb;
      return ip[31:0];
    end
    if (!u.sign && ip > 33'h0_7FFF_FFFF) begin st.nv = 1'b1; return 32'h7FFF_FFFF; end
    if (u.sign && ip > 33'h0_8000_0000)  begin st.nv = 1'b1; return 32'h8000_0000; end
    st.nx = rb | sb;
    return u.sign ? -ip[31:0] : ip[31:0];
  endfunction

  fpu_rsp_t    rsp_d;
  fp_status_t  s0, s1;
  logic [31:0] r0, r1;
  logic        vec;

  assign vec = req_i.vectorial && (req_i.src_fmt != FP32) && (req_i.dst_fmt != FP32);

  always_comb begin
    logic [31:0] a_lo;
    a_lo = (req_i.src_fmt == FP32) ? req_i.operands[0] : {16'b0, req_i.operands[0][15:0]};
    s0 = '0; s1 = '0; r0 = '0; r1 = '0;
    rsp_d.tag = req_i.tag;
    case (req_i.op)
      OP_F2I: begin
        r0 = f2i(req_i.src_fmt, req_i.rnd, req_i.op_mod, a_lo, s0);
        rsp_d.result = r0;
      end
      OP_I2F: begin
        r0 = i2f(req_i.dst_fmt, req_i.rnd, req_i.op_mod, req_i.operands[0], s0);
        rsp_d.result = box(req_i.dst_fmt, r0);
      end
      OP_CPK: begin
        r0 = f2f(FP32, req_i.dst_fmt, req_i.rnd, req_i.operands[0], s0);
        r1 = f2f(FP32, req_i.dst_fmt, req_i.rnd, req_i.operands[1], s1);
        rsp_d.result = {r1[15:0], r0[15:0]};
      end
      default: begin  // OP_F2F
        r0 = f2f(req_i.src_fmt, req_i.dst_fmt, req_i.rnd, a_lo, s0);
        if (vec) begin
          r1 = f2f(req_i.src_fmt, req_i.dst_fmt, req_i.rnd,
                   {16'b0, req_i.operands[0][31:16]}, s1);
          rsp_d.result = {r1[15:0], r0[15:0]};
        end else begin
          rsp_d.result = box(req_i.dst_fmt, r0);
        end
      end
    endcase
    rsp_d.status = s0 | s1;
  end

  fpu_pipe #(.NUM_REGS(PIPE_REGS), .T(fpu_rsp_t)) i_pipe (
    .clk_i, .rst_ni,
    .in_valid_i, .in_ready_o, .in_data_i(rsp_d),
    .out_valid_o, .out_ready_i, .out_data_o(rsp_o)
  );

endmodule
