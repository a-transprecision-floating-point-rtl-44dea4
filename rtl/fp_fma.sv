// Fused multiply-add lane: result = (+/-)(a*b) (+/-) c, rounded once.
//
// One lane of the ADDMUL operation group. It supports float, float16 and bfloat16, and the
// multi-format case where a and b are 16-bit values (src_fmt) while c and the result are
// float (dst_fmt), so that 16-bit products can be accumulated in single precision without
// an intermediate rounding. ADD and SUB are executed as b*1 +/- c, MUL as a*b + (-0).
//
// How it works: both factors are unpacked to 24-bit normalised significands; their 48-bit
// product and the addend are placed in a 76-bit window at a common scale, the operand with
// the smaller exponent is shifted right with the shifted-out bits folded into a sticky bit,
// the two are added or subtracted, the sum is normalised by a leading-zero count and
// finally rounded and packed (tp_pkg::round_pack) into dst_fmt with the requested rounding
// mode. NaN inputs give the canonical NaN; inf*0 and inf-inf raise invalid.
//
// Interface: purely combinational; operands are right-aligned encodings (a 16-bit value in
// bits [15:0]); the result is right-aligned and not NaN-boxed. The surrounding operation
// group adds the 0-2 pipeline registers the paper makes configurable.
// The formats, FMA semantics and multi-format operation follow the paper; the window
// width and the sticky-bit alignment scheme are this design's own.
module fp_fma
  import tp_pkg::*;
(
  input  fpu_op_e     op_i,        // OP_FMADD, OP_FNMSUB, OP_ADD or OP_MUL
  input  logic        op_mod_i,
  input  fp_fmt_e     src_fmt_i,   // format of a and b
  input  fp_fmt_e     dst_fmt_i,   // format of c and of the result
  input  roundmode_e  rnd_i,
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  input  logic [31:0] c_i,
  output logic [31:0] result_o,
  output fp_status_t  status_o
);

  localparam int unsigned W = 76;

  fp_unpacked_t ua, ub, uc;
  logic         neg_prod, neg_c;

  always_comb begin
    ua = unpack(src_fmt_i, a_i);
    ub = unpack(src_fmt_i, b_i);
    uc = unpack(dst_fmt_i, c_i);
    neg_prod = 1'b0;
    neg_c    = 1'b0;
    case (op_i)
      OP_FMADD:  neg_c = op_mod_i;
      OP_FNMSUB: begin neg_prod = 1'b1; neg_c = op_mod_i; end
      OP_ADD: begin
        // b*1 + c: the factor a becomes 1.0
        ua = unpack(src_fmt_i, b_i);
        ub = '0;
        ub.mant = 24'h80_0000;
        uc = unpack(dst_fmt_i, c_i);
        neg_c = op_mod_i;
      end
      OP_MUL: begin
        // a*b + (-0)
        uc = '0;
        uc.is_zero = 1'b1;
        uc.sign = 1'b1;
      end
      default: ;
    endcase
  end

  logic          sp, sc, prod_zero, prod_inf;
  int            ep, ec, eb, d, e_res;
  logic [47:0]   mp;
  logic [W-1:0]  xp, xc, big, sml, sum;
  logic          sbig, ssmall, sticky, sres, nv;
  int unsigned   sh, lz;
  logic [W-1:0]  norm;
  fp_packed_t    rp;

  always_comb begin
    sp        = ua.sign ^ ub.sign ^ neg_prod;
    sc        = uc.sign ^ neg_c;
    prod_zero = ua.is_zero | ub.is_zero;
    prod_inf  = ua.is_inf  | ub.is_inf;
    nv        = ua.is_snan | ub.is_snan | uc.is_snan |
                (prod_inf & prod_zero) |
                (prod_inf & uc.is_inf & (sp != sc) & !ua.is_nan & !ub.is_nan);
    ep  = int'($signed(ua.exp)) + int'($signed(ub.exp));
    ec  = int'($signed(uc.exp));
    mp  = ua.mant * ub.mant;
    // common scale: value = x * 2^(E - 72)
    xp  = W'({mp, 26'b0});
    xc  = W'({uc.mant, 49'b0});
    big = '0; sml = '0; sbig = 1'b0; ssmall = 1'b0; eb = 0;
    sticky = 1'b0; sh = 0; sum = '0; sres = 1'b0; lz = 0; norm = '0; e_res = 0;
    result_o = '0;
    status_o = '0;
    rp = '0;
    d = 0;

    if (ua.is_nan | ub.is_nan | uc.is_nan | nv) begin
      result_o = canonical_nan(dst_fmt_i);
    end else if (prod_inf) begin
      result_o = signed_inf(dst_fmt_i, sp);
    end else if (uc.is_inf) begin
      result_o = signed_inf(dst_fmt_i, sc);
    end else if (prod_zero) begin
      if (uc.is_zero)
        result_o = signed_zero(dst_fmt_i, (sp == sc) ? sp : (rnd_i == RDN));
      else
        // exact: c is already a dst_fmt value
        result_o = c_i ^ (32'(neg_c) << (fmt_width(dst_fmt_i) - 1));
    end else begin
      d = uc.is_zero ? 1000 : ep - ec;
      if (d >= 0) begin
        big = xp; sbig = sp; eb = ep; sml = xc; ssmall = sc;
        sh = (d > int'(W)) ? W : d;
      end else begin
        big = xc; sbig = sc; eb = ec; sml = xp; ssmall = sp;
        sh = (-d > int'(W)) ? W : -d;
      end
      if (uc.is_zero) sml = '0;
      if (sh >= W) begin
        sticky = (sml != 0);
        sml  = '0;
      end else begin
        sticky = ((sml & ((W'(1) << sh) - 1)) != 0);
        sml  = sml >> sh;
      end
      sml[0] = sml[0] | sticky;
      if (sbig == ssmall) begin
        sum  = big + sml;
        sres = sbig;
      end else if (big >= sml) begin
        sum  = big - sml;
        sres = sbig;
      end else begin
        sum  = sml - big;
        sres = ssmall;
      end
      if (sum == 0) begin
        result_o = signed_zero(dst_fmt_i, rnd_i == RDN);
      end else begin
        lz = 0;
        for (int i = 0; i < int'(W); i++) if (sum[i]) lz = W - 1 - i;
        norm  = sum << lz;
        e_res = eb - 72 + (int'(W) - 1 - int'(lz));
        rp = round_pack(sres, e_res, norm[W-1 -: 64], norm[W-65:0] != 0, dst_fmt_i, rnd_i);
        result_o = rp.bits;
        status_o = rp.status;
      end
    end
    status_o.nv = nv;
  end

endmodule
