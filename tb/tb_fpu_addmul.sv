// Self-checking testbench of the ADDMUL operation group.
// Streams random scalar float, packed float16 and packed bfloat16 FMA/ADD/MUL operations
// through the group with random output back-pressure and checks every result (each 16-bit
// element separately, against the real-number reference), the order of the tags, NaN-boxing
// of 16-bit scalars and the latency of PIPE_REGS cycles.
`timescale 1ns/1ps
module tb_fpu_addmul;
  import tp_pkg::*;
  `include "tb_fp_ref.svh"

  localparam int unsigned PIPE_REGS = 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  fpu_req_t req; fpu_rsp_t rsp;
  int checks = 0, failures = 0;

  fpu_addmul #(.PIPE_REGS(PIPE_REGS)) dut (.clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid),
    .in_ready_o(in_ready), .req_i(req), .out_valid_o(out_valid), .out_ready_i(out_ready),
    .rsp_o(rsp));

  logic [31:0] exp_q[$];
  logic [TAG_W-1:0] tag_q[$];

  function automatic logic [31:0] ref_elem(fpu_op_e op, logic md, int sf, int df, int rm,
                                           logic [31:0] a, logic [31:0] b, logic [31:0] c);
    real va, vb, vc, r; int tail; logic [32:0] e;
    va = ref_val(sf, a); vb = ref_val(sf, b); vc = ref_val(df, c);
    tail = 0;
    case (op)
      OP_FMADD:  tail = two_sum_tail(va * vb, md ? -vc : vc, r);
      OP_FNMSUB: tail = two_sum_tail(-(va * vb), md ? -vc : vc, r);
      OP_ADD:    tail = two_sum_tail(vb, md ? -vc : vc, r);
      default:   r = va * vb;
    endcase
    if (r == 0.0) begin
      // operands are drawn so that exact zeros only come from MUL underflow
      e = ref_round(r, ((a >> (ref_e(sf) + ref_m(sf))) & 1) != ((b >> (ref_e(sf) + ref_m(sf))) & 1),
                    df, rm, tail);
    end else e = ref_round(r, 0, df, rm, tail);
    return e[31:0];
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // response checker with random back-pressure
  always @(posedge clk) begin
    out_ready <= ($urandom_range(3, 0) != 0);
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0 || rsp.result !== exp_q[0] || rsp.tag !== tag_q[0]) begin
        failures++;
        if (failures < 10) $display("FAIL got %h tag %h exp %h tag %h", rsp.result, rsp.tag,
                                    exp_q.size() ? exp_q[0] : 0, tag_q.size() ? tag_q[0] : 0);
      end
      if (exp_q.size()) begin void'(exp_q.pop_front()); void'(tag_q.pop_front()); end
    end
  end

  initial begin
    int kind, n_sent, lat;
    logic [31:0] e, a, b, c;
    in_valid = 0; req = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // latency: one FMA into an empty pipeline with the output ready
    @(negedge clk);
    req = '0; req.op = OP_FMADD; req.src_fmt = FP32; req.dst_fmt = FP32; req.rnd = RNE;
    req.operands[0] = 32'h4000_0000; req.operands[1] = 32'h4040_0000; req.operands[2] = 32'h3F80_0000;
    req.tag = 9'h55;
    exp_q.push_back(32'h40E0_0000); tag_q.push_back(9'h55);   // 2*3+1 = 7
    force out_ready = 1'b1;
    in_valid = 1;
    @(posedge clk); #1 in_valid = 0;
    lat = 0;
    while (!out_valid) begin @(posedge clk); #1 lat++; end
    checks++;
    if (lat + 1 != PIPE_REGS) begin failures++; $display("FAIL latency %0d", lat + 1); end
    @(posedge clk); release out_ready;
    // random stream
    n_sent = 0;
    while (n_sent < 3000) begin
      @(negedge clk);
      kind = n_sent % 4;
      req = '0;
      req.op = fpu_op_e'($urandom_range(3, 0));
      req.op_mod = (req.op != OP_MUL) && ($urandom_range(1, 0) == 1);
      req.rnd = roundmode_e'($urandom_range(4, 0));
      req.tag = TAG_W'(n_sent);
      case (kind)
        0: begin
          req.src_fmt = FP32; req.dst_fmt = FP32;
          for (int i = 0; i < 3; i++) req.operands[i] = ref_rand_fp(0);
          e = ref_elem(req.op, req.op_mod, 0, 0, req.rnd, req.operands[0], req.operands[1], req.operands[2]);
        end
        1, 2: begin
          req.src_fmt = fp_fmt_e'(kind); req.dst_fmt = fp_fmt_e'(kind); req.vectorial = 1;
          for (int i = 0; i < 3; i++) req.operands[i] = {ref_rand_fp(kind) << 16} | ref_rand_fp(kind);
          e[15:0]  = ref_elem(req.op, req.op_mod, kind, kind, req.rnd, req.operands[0] & 32'hFFFF,
                              req.operands[1] & 32'hFFFF, req.operands[2] & 32'hFFFF);
          e[31:16] = 16'(ref_elem(req.op, req.op_mod, kind, kind, req.rnd, req.operands[0] >> 16,
                              req.operands[1] >> 16, req.operands[2] >> 16));
        end
        default: begin
          // scalar float16: NaN-boxed result
          req.src_fmt = FP16; req.dst_fmt = FP16;
          a = ref_rand_fp(1); b = ref_rand_fp(1); c = ref_rand_fp(1);
          req.operands[0] = {16'h1234, a[15:0]}; req.operands[1] = {16'h0, b[15:0]};
          req.operands[2] = {16'hFFFF, c[15:0]};
          e = {16'hFFFF, 16'(ref_elem(req.op, req.op_mod, 1, 1, req.rnd, a, b, c))};
        end
      endcase
      // skip draws whose exact result is zero by cancellation (sign depends on mode)
      if (req.op != OP_MUL && (e[14:0] == 0 || (kind != 0 && kind != 3 && e[30:16] == 0))) continue;
      in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      exp_q.push_back(e); tag_q.push_back(req.tag);
      n_sent++;
      #1 in_valid = 0;
      if ($urandom_range(3, 0) == 0) @(posedge clk);
    end
    while (exp_q.size() != 0) @(posedge clk);
    checks++;
    if (n_sent != 3000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
