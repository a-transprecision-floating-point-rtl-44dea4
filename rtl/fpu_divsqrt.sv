// Shared iterative divide / square-root unit (DIV-SQRT).
//
// Computes a/b (OP_DIV) or sqrt(a) (OP_SQRT) on float, float16 or bfloat16 scalars with
// any rounding mode. The unit is iterative and not pipelined: it accepts a new operation
// only when the previous result has been delivered (in_ready_o is low while busy), so
// back-to-back operations are impossible, as the paper states.
//
// How it works: in the cycle after acceptance the operands are unpacked and normalised and
// special cases (NaN, infinities, zeros, negative square roots, division by zero) are
// resolved. Then a restoring digit recurrence produces three result bits per cycle (radix 8,
// done as three radix-2 steps); the number of iterations is ceil((man_bits + 3) / 3):
// 9 for float, 5 for float16, 4 for bfloat16. A last cycle rounds and packs the result,
// using the final remainder as the sticky bit. Latency from acceptance to out_valid_o is
// therefore 11 (float), 7 (float16) and 6 (bfloat16) cycles, the fixed latencies the
// paper gives. The radix and the split into pre-, iteration- and rounding-cycles are our
// reconstruction of how those latencies come about. Packed-SIMD requests are executed on
// the lower element only (the paper gives no vector latency for this unit).
module fpu_divsqrt
  import tp_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     in_valid_i,
  output logic     in_ready_o,
  input  fpu_req_t req_i,
  output logic     out_valid_o,
  input  logic     out_ready_i,
  output fpu_rsp_t rsp_o
);

  typedef enum logic [2:0] {IDLE, PRE, ITER, ROUND, DONE} state_e;

  state_e      state_q;
  fpu_req_t    req_q;
  logic [3:0]  cnt_q;
  logic [55:0] rem_q, root_q, one_q, div_q;   // recurrence state
  logic [27:0] quo_q;
  logic        special_q, sign_q;
  logic [31:0] special_res_q;
  fp_status_t  special_st_q;
  logic [11:0] exp_q;
  fpu_rsp_t    rsp_q;

  function automatic int unsigned iters(fp_fmt_e f);
    return (man_bits(f) + 3 + 2) / 3;
  endfunction

  assign in_ready_o  = (state_q == IDLE);
  assign out_valid_o = (state_q == DONE);
  assign rsp_o       = rsp_q;

  // one iteration = three radix-2 steps of the division or square-root recurrence
  logic [55:0] rem_n, root_n, one_n;
  logic [27:0] quo_n;
  always_comb begin
    rem_n = rem_q; root_n = root_q; one_n = one_q; quo_n = quo_q;
    for (int s = 0; s < 3; s++) begin
      if (req_q.op == OP_DIV) begin
        if (rem_n >= div_q) begin
          rem_n = rem_n - div_q;
          quo_n = {quo_n[26:0], 1'b1};
        end else begin
          quo_n = {quo_n[26:0], 1'b0};
        end
        rem_n = rem_n << 1;
      end else if (one_n != 0) begin
        if (rem_n >= root_n + one_n) begin
          rem_n  = rem_n - (root_n + one_n);
          root_n = (root_n >> 1) + one_n;
        end else begin
          root_n = root_n >> 1;
        end
        one_n = one_n >> 2;
      end
    end
  end

  // final rounding
  fp_packed_t  rp;
  always_comb begin
    int unsigned qb, lz;
    logic [63:0] m64;
    int          e;
    qb  = 3 * iters(req_q.dst_fmt);
    lz  = 0;
    e   = int'($signed(exp_q));
    if (req_q.op == OP_DIV) begin
      m64 = 64'(quo_q) << (64 - qb);
      lz  = m64[63] ? 0 : 1;
      m64 = m64 << lz;
      e   = e - int'(lz);
      rp  = round_pack(sign_q, e, m64, rem_q != 0, req_q.dst_fmt, req_q.rnd);
    end else begin
      m64 = 64'(root_q) << (64 - qb);
      rp  = round_pack(1'b0, e, m64, rem_q != 0, req_q.dst_fmt, req_q.rnd);
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= IDLE;
      req_q <= '0; cnt_q <= '0; rem_q <= '0; root_q <= '0; one_q <= '0; div_q <= '0;
      quo_q <= '0; special_q <= 1'b0; sign_q <= 1'b0; special_res_q <= '0;
      special_st_q <= '0; exp_q <= '0; rsp_q <= '0;
    end else begin
      case (state_q)
        IDLE: if (in_valid_i) begin
          req_q   <= req_i;
          state_q <= PRE;
        end
        PRE: begin : pre
          fp_unpacked_t ua, ub;
          fp_fmt_e      f;
          int           ea, sh;
          logic [55:0]  rad;
          f  = req_q.dst_fmt;
          ua = unpack(f, (f == FP32) ? req_q.operands[0] : {16'b0, req_q.operands[0][15:0]});
          ub = unpack(f, (f == FP32) ? req_q.operands[1] : {16'b0, req_q.operands[1][15:0]});
          special_q    <= 1'b1;
          special_st_q <= '0;
          sign_q       <= ua.sign ^ ub.sign;
          quo_q        <= '0;
          cnt_q        <= 4'(iters(f));
          if (req_q.op == OP_DIV) begin
            special_st_q.nv <= ua.is_snan | ub.is_snan | (ua.is_zero & ub.is_zero) |
                               (ua.is_inf & ub.is_inf);
            if (ua.is_nan | ub.is_nan | (ua.is_zero & ub.is_zero) | (ua.is_inf & ub.is_inf))
              special_res_q <= canonical_nan(f);
            else if (ua.is_inf | ub.is_zero) begin
              special_res_q <= signed_inf(f, ua.sign ^ ub.sign);
              special_st_q.dz <= ub.is_zero & !ua.is_inf;
            end else if (ua.is_zero | ub.is_inf)
              special_res_q <= signed_zero(f, ua.sign ^ ub.sign);
            else
              special_q <= 1'b0;
            rem_q <= 56'(ua.mant);
            div_q <= 56'(ub.mant);
            exp_q <= 12'(int'($signed(ua.exp)) - int'($signed(ub.exp)));
          end else begin
            special_st_q.nv <= ua.is_snan | (ua.sign & !ua.is_zero & !ua.is_nan);
            if (ua.is_nan | (ua.sign & !ua.is_zero))
              special_res_q <= canonical_nan(f);
            else if (ua.is_zero)
              special_res_q <= signed_zero(f, ua.sign);
            else if (ua.is_inf)
              special_res_q <= signed_inf(f, 1'b0);
            else
              special_q <= 1'b0;
            ea = int'($signed(ua.exp));
            // radicand in [1,4): mant (or 2*mant for an odd exponent) / 2^23
            rad = ea[0] ? 56'(ua.mant) << 1 : 56'(ua.mant);
            // integer square root of rad * 2^(2*(qb-1) - 23) gives qb result bits
            sh = 2 * (3 * int'(iters(f)) - 1) - 23;
            rem_q  <= (sh >= 0) ? rad << sh : rad >> (-sh);
            root_q <= '0;
            one_q  <= 56'd1 << (2 * (3 * int'(iters(f)) - 1));
            exp_q  <= 12'(ea >>> 1);
          end
          state_q <= ITER;
        end
        ITER: begin
          rem_q <= rem_n; root_q <= root_n; one_q <= one_n; quo_q <= quo_n;
          cnt_q <= cnt_q - 1'b1;
          if (cnt_q == 4'd1) state_q <= ROUND;
        end
        ROUND: begin
          rsp_q.tag    <= req_q.tag;
          rsp_q.result <= box(req_q.dst_fmt, special_q ? special_res_q : rp.bits);
          rsp_q.status <= special_q ? special_st_q : rp.status;
          state_q      <= DONE;
        end
        DONE: if (out_ready_i) state_q <= IDLE;
        default: state_q <= IDLE;
      endcase
    end
  end

  // the unit never starts an operation while one is in flight
  assert property (@(posedge clk_i) disable iff (!rst_ni) (state_q != IDLE) |-> !in_ready_o);

endmodule
