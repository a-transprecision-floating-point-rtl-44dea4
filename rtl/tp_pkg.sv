// Shared definitions of the transprecision cluster.
//
// The cluster computes on three floating-point formats: float (8-bit exponent, 23-bit
// mantissa), float16 (5, 10) and bfloat16 (8, 7). Sixteen-bit values can be handled as
// scalars or as packed-SIMD pairs in one 32-bit register. This package holds the format and
// operation encodings, the request/response structs of the auxiliary processing unit (APU)
// port through which cores issue work to the shared FPUs, the structs of the TCDM
// (tightly-coupled data memory) port, and the arithmetic helpers every FP datapath uses:
// unpacking of an encoding into sign/exponent/significand and classification, and
// IEEE-754 rounding and packing with all five RISC-V rounding modes.
//
// What follows the paper: the three formats, packed-SIMD on 16-bit types, multi-format
// operations (16-bit product, 32-bit result), cast-and-pack, a ready/valid handshake with a
// tag on every in-flight operation. Our own choices: the numeric encodings of operations and
// formats, the tag width, NaN-boxing of 16-bit scalar results (upper half all ones), and
// tininess detection before rounding for the underflow flag.
package tp_pkg;

  // ---------------------------------------------------------------- formats
  typedef enum logic [1:0] {
    FP32 = 2'd0,   // float
    FP16 = 2'd1,   // float16 (IEEE binary16)
    BF16 = 2'd2    // bfloat16 ("FP16alt")
  } fp_fmt_e;

  // RISC-V rounding mode encoding
  typedef enum logic [2:0] {
    RNE = 3'd0, RTZ = 3'd1, RDN = 3'd2, RUP = 3'd3, RMM = 3'd4
  } roundmode_e;

  // ---------------------------------------------------------------- operations
  typedef enum logic [3:0] {
    OP_FMADD    = 4'd0,   // a*b+c   (op_mod: a*b-c)
    OP_FNMSUB   = 4'd1,   // -a*b+c  (op_mod: -a*b-c)
    OP_ADD      = 4'd2,   // b+c     (op_mod: b-c)
    OP_MUL      = 4'd3,   // a*b
    OP_DIV      = 4'd4,   // a/b     (DIV-SQRT unit)
    OP_SQRT     = 4'd5,   // sqrt(a) (DIV-SQRT unit)
    OP_SGNJ     = 4'd6,   // rnd field: 0 sgnj, 1 sgnjn, 2 sgnjx
    OP_MINMAX   = 4'd7,   // rnd field: 0 min, 1 max
    OP_CMP      = 4'd8,   // rnd field: 0 le, 1 lt, 2 eq
    OP_CLASSIFY = 4'd9,
    OP_F2F      = 4'd10,  // src_fmt -> dst_fmt
    OP_F2I      = 4'd11,  // op_mod: unsigned
    OP_I2F      = 4'd12,  // op_mod: unsigned
    OP_CPK      = 4'd13   // cast-and-pack: two float operands -> packed dst_fmt pair
  } fpu_op_e;

  typedef enum logic [1:0] {
    GRP_ADDMUL = 2'd0, GRP_COMP = 2'd1, GRP_CONV = 2'd2, GRP_DIVSQRT = 2'd3
  } op_group_e;

  typedef struct packed {
    logic nv;  // invalid
    logic dz;  // divide by zero
    logic of;  // overflow
    logic uf;  // underflow
    logic nx;  // inexact
  } fp_status_t;

  // ---------------------------------------------------------------- APU port
  localparam int unsigned CORE_TAG_W = 5;               // tag chosen by the core (e.g. rd)
  localparam int unsigned CORE_ID_W  = 4;               // up to 16 cores
  localparam int unsigned TAG_W      = CORE_TAG_W + CORE_ID_W;

  typedef struct packed {
    fpu_op_e         op;
    logic            op_mod;
    fp_fmt_e         src_fmt;
    fp_fmt_e         dst_fmt;
    logic            vectorial;   // packed-SIMD on two 16-bit elements
    roundmode_e      rnd;
    logic [2:0][31:0] operands;   // operands[0..2] = a, b, c
    logic [TAG_W-1:0] tag;
  } fpu_req_t;

  typedef struct packed {
    logic [31:0]      result;
    fp_status_t       status;
    logic [TAG_W-1:0] tag;
  } fpu_rsp_t;

  function automatic op_group_e op_group(fpu_op_e op);
    case (op)
      OP_FMADD, OP_FNMSUB, OP_ADD, OP_MUL:          return GRP_ADDMUL;
      OP_DIV, OP_SQRT:                              return GRP_DIVSQRT;
      OP_SGNJ, OP_MINMAX, OP_CMP, OP_CLASSIFY:      return GRP_COMP;
      default:                                      return GRP_CONV;
    endcase
  endfunction

  // ---------------------------------------------------------------- TCDM port
  typedef struct packed {
    logic        req;
    logic [31:0] addr;   // byte address
    logic        wen;    // 1 = write
    logic [3:0]  be;
    logic [31:0] wdata;
  } tcdm_req_t;

  typedef struct packed {
    logic        gnt;      // request accepted this cycle
    logic        r_valid;  // one cycle after the grant
    logic [31:0] r_rdata;
  } tcdm_rsp_t;

  // ---------------------------------------------------------------- performance events
  typedef enum int unsigned {
    EV_CYCLES = 0, EV_ACTIVE, EV_INSTR, EV_MEM_STALL, EV_TCDM_CONT,
    EV_FPU_STALL, EV_FPU_CONT, EV_FPU_WB_STALL, EV_IMISS, NB_PERF_EVENTS
  } perf_event_e;

  // ---------------------------------------------------------------- format helpers
  function automatic int unsigned exp_bits(fp_fmt_e f);
    return (f == FP16) ? 5 : 8;
  endfunction

  function automatic int unsigned man_bits(fp_fmt_e f);
    case (f)
      FP16:    return 10;
      BF16:    return 7;
      default: return 23;
    endcase
  endfunction

  function automatic int unsigned fmt_width(fp_fmt_e f);
    return (f == FP32) ? 32 : 16;
  endfunction

  function automatic logic [31:0] canonical_nan(fp_fmt_e f);
    case (f)
      FP16:    return 32'h0000_7E00;
      BF16:    return 32'h0000_7FC0;
      default: return 32'h7FC0_0000;
    endcase
  endfunction

  // 16-bit scalar results are NaN-boxed into the 32-bit register
  function automatic logic [31:0] box(fp_fmt_e f, logic [31:0] v);
    return (f == FP32) ? v : {16'hFFFF, v[15:0]};
  endfunction

  // Unpacked operand: value = (-1)^sign * mant/2^23 * 2^exp, with mant[23] = 1 for
  // every nonzero finite value (subnormals are normalised).
  typedef struct packed {
    logic        sign;
    logic [11:0] exp;      // signed, unbiased
    logic [23:0] mant;
    logic        is_zero;
    logic        is_inf;
    logic        is_nan;
    logic        is_snan;
    logic        is_subnormal;
  } fp_unpacked_t;

  function automatic int unsigned lzc24(logic [23:0] v);
    int unsigned n = 24;
    for (int i = 0; i < 24; i++) if (v[i]) n = 23 - i;
    return n;
  endfunction

  function automatic int unsigned lzc64(logic [63:0] v);
    int unsigned n = 64;
    for (int i = 0; i < 64; i++) if (v[i]) n = 63 - i;
    return n;
  endfunction

  function automatic fp_unpacked_t unpack(fp_fmt_e f, logic [31:0] v);
    fp_unpacked_t u;
    int unsigned m  = man_bits(f);
    int unsigned eb = exp_bits(f);
    int          bias = (1 << (eb - 1)) - 1;
    logic [31:0] e_field = (v >> m) & ((32'd1 << eb) - 1);
    logic [31:0] frac    = v & ((32'd1 << m) - 1);
    logic        e_max   = (e_field == (32'd1 << eb) - 1);
    int unsigned lz;
    u = '0;
    u.sign = v[eb + m];
    u.is_zero = (e_field == 0) && (frac == 0);
    u.is_subnormal = (e_field == 0) && (frac != 0);
    u.is_inf  = e_max && (frac == 0);
    u.is_nan  = e_max && (frac != 0);
    u.is_snan = u.is_nan && !frac[m - 1];
    if (e_field != 0) begin
      u.mant = 24'((frac | (32'd1 << m)) << (23 - m));
      u.exp  = 12'(int'(e_field) - bias);
    end else if (frac != 0) begin
      lz     = lzc24(24'(frac << (23 - m)));
      u.mant = 24'(frac << (23 - m + lz));
      u.exp  = 12'(1 - bias - int'(lz));
    end
    return u;
  endfunction

  typedef struct packed {
    logic [31:0] bits;    // right-aligned encoding
    fp_status_t  status;
  } fp_packed_t;

  // Round a finite nonzero value (-1)^sign * mant/2^63 * 2^e (mant[63] = 1) plus a
  // sticky bit for anything below mant[0], into format f with rounding mode rm.
  function automatic fp_packed_t round_pack(logic sign, int e, logic [63:0] mant,
                                            logic sticky_in, fp_fmt_e f, roundmode_e rm);
    fp_packed_t  r;
    int unsigned m    = man_bits(f);
    int unsigned eb   = exp_bits(f);
    int          bias = (1 << (eb - 1)) - 1;
    int          emin = 1 - bias;
    int          ebase;
    int unsigned sh;
    logic [63:0] sig;
    logic        st, rbit, tiny, inc;
    logic [63:0] kept, rounded;
    int          efield;
    logic [31:0] frac;
    r = '0;
    st = sticky_in;
    tiny = (e < emin);
    if (tiny) begin
      sh = int'(emin - e);
      if (sh > 63) begin
        st  = st | (mant != 0);
        sig = '0;
      end else begin
        st  = st | ((mant & ((64'd1 << sh) - 1)) != 0);
        sig = mant >> sh;
      end
      ebase = 1;
    end else begin
      sig   = mant;
      ebase = e + bias;
    end
    kept = sig >> (63 - m);
    rbit = sig[62 - m];
    st   = st | ((sig & ((64'd1 << (62 - m)) - 1)) != 0);
    case (rm)
      RNE:     inc = rbit & (st | kept[0]);
      RTZ:     inc = 1'b0;
      RDN:     inc = sign & (rbit | st);
      RUP:     inc = !sign & (rbit | st);
      RMM:     inc = rbit;
      default: inc = rbit & (st | kept[0]);
    endcase
    rounded = kept + 64'(inc);
    if (rounded[m + 1]) begin
      efield = ebase + 1;
      frac   = '0;
    end else if (rounded[m]) begin
      efield = ebase;
      frac   = 32'(rounded) & ((32'd1 << m) - 1);
    end else begin
      efield = 0;
      frac   = 32'(rounded) & ((32'd1 << m) - 1);
    end
    r.status.nx = rbit | st;
    r.status.uf = tiny & (rbit | st);
    if (efield >= (1 << eb) - 1) begin
      r.status.of = 1'b1;
      r.status.nx = 1'b1;
      if (rm == RTZ || (rm == RDN && !sign) || (rm == RUP && sign))
        r.bits = (32'(sign) << (eb + m)) | (((32'd1 << (eb + m)) - 1) & ~(32'd1 << m));
      else
        r.bits = (32'(sign) << (eb + m)) | (((32'd1 << eb) - 1) << m);
    end else begin
      r.bits = (32'(sign) << (eb + m)) | (32'(efield) << m) | frac;
    end
    return r;
  endfunction

  function automatic logic [31:0] signed_zero(fp_fmt_e f, logic s);
    return 32'(s) << (fmt_width(f) - 1);
  endfunction

  function automatic logic [31:0] signed_inf(fp_fmt_e f, logic s);
    return (32'(s) << (fmt_width(f) - 1)) |
           (((32'd1 << exp_bits(f)) - 1) << man_bits(f));
  endfunction

endpackage
