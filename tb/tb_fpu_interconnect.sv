// Self-checking testbench of the shared-FPU interconnect.
// Eight traffic generators (one per core) send FMA and division requests with random gaps
// and random result back-pressure through the interconnect to four real FPU instances and
// one DIV-SQRT unit. Checked: every request reaches FPU (core mod 4) and carries its core
// index, every result returns to the core that issued it with the core's own tag and the
// right value, a lone core sees no stall, and two cores competing for one FPU are served in
// alternation (fair round-robin) and see contention.
`timescale 1ns/1ps
module tb_fpu_interconnect;
  import tp_pkg::*;

  localparam int unsigned N = 8, K = 4, OPS = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] c_req_v, c_req_r, c_rsp_v, c_rsp_r, cont;
  fpu_req_t [N-1:0] c_req; fpu_rsp_t [N-1:0] c_rsp;
  logic [K-1:0] f_req_v, f_req_r, f_rsp_v, f_rsp_r;
  fpu_req_t [K-1:0] f_req; fpu_rsp_t [K-1:0] f_rsp;
  logic d_req_v, d_req_r, d_rsp_v, d_rsp_r;
  fpu_req_t d_req; fpu_rsp_t d_rsp;

  fpu_interconnect #(.NB_CORES(N), .NB_FPUS(K)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_valid_i(c_req_v), .core_req_ready_o(c_req_r), .core_req_i(c_req),
    .core_rsp_valid_o(c_rsp_v), .core_rsp_ready_i(c_rsp_r), .core_rsp_o(c_rsp),
    .fpu_contention_o(cont),
    .fpu_req_valid_o(f_req_v), .fpu_req_ready_i(f_req_r), .fpu_req_o(f_req),
    .fpu_rsp_valid_i(f_rsp_v), .fpu_rsp_ready_o(f_rsp_r), .fpu_rsp_i(f_rsp),
    .ds_req_valid_o(d_req_v), .ds_req_ready_i(d_req_r), .ds_req_o(d_req),
    .ds_rsp_valid_i(d_rsp_v), .ds_rsp_ready_o(d_rsp_r), .ds_rsp_i(d_rsp));

  for (genvar k = 0; k < K; k++) begin : g_fpu
    fpu_top #(.PIPE_REGS(1)) i_fpu (.clk_i(clk), .rst_ni(rst_n), .in_valid_i(f_req_v[k]),
      .in_ready_o(f_req_r[k]), .req_i(f_req[k]), .out_valid_o(f_rsp_v[k]),
      .out_ready_i(f_rsp_r[k]), .rsp_o(f_rsp[k]));
  end
  fpu_divsqrt i_ds (.clk_i(clk), .rst_ni(rst_n), .in_valid_i(d_req_v), .in_ready_o(d_req_r),
    .req_i(d_req), .out_valid_o(d_rsp_v), .out_ready_i(d_rsp_r), .rsp_o(d_rsp));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // small integers are exact in float: a*b+c
  function automatic logic [31:0] itof(int v);
    int e = 0;
    if (v == 0) return 0;
    for (int i = 0; i < 24; i++) if (v >= (1 << i)) e = i;
    return (32'(127 + e) << 23) | ((32'(v) << (23 - e)) & 32'h7F_FFFF);
  endfunction

  // mapping check on the FPU side
  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < K; k++) if (f_req_v[k] && f_req_r[k]) begin
      checks++;
      if (int'(f_req[k].tag[TAG_W-1 -: CORE_ID_W]) % K != k) begin
        failures++; $display("FAIL core %0d reached FPU %0d", f_req[k].tag[TAG_W-1 -: CORE_ID_W], k);
      end
    end
  end

  logic [31:0] expect_v [N][32];
  bit          pending  [N][32];
  int          done_cnt [N];
  int          sent_cnt [N];
  bit          traffic;   // random phase on

  for (genvar c = 0; c < N; c++) begin : g_core
    initial begin
      int n = 0;
      c_req_v[c] = 0; c_req[c] = '0;
      wait (traffic);
      while (n < OPS) begin
        @(negedge clk);
        if (pending[c][n % 32]) continue;
        c_req[c] = '0;
        c_req[c].dst_fmt = FP32; c_req[c].src_fmt = FP32; c_req[c].rnd = RNE;
        c_req[c].tag = TAG_W'(n % 32);
        if (n % 10 == 9) begin
          c_req[c].op = OP_DIV;
          c_req[c].operands[0] = itof((c + 1) * (n % 7 + 1)); c_req[c].operands[1] = itof(n % 7 + 1);
          expect_v[c][n % 32] = itof(c + 1);
        end else begin
          c_req[c].op = OP_FMADD;
          c_req[c].operands[0] = itof(c + 1); c_req[c].operands[1] = itof(n % 13);
          c_req[c].operands[2] = itof(n);
          expect_v[c][n % 32] = itof((c + 1) * (n % 13) + n);
        end
        c_req_v[c] = 1;
        @(posedge clk); while (!c_req_r[c]) @(posedge clk);
        pending[c][n % 32] = 1;
        n++;
        sent_cnt[c]++;
        #1 c_req_v[c] = 0;
        repeat ($urandom_range(2, 0)) @(posedge clk);
      end
    end
    always @(posedge clk) begin
      c_rsp_r[c] <= ($urandom_range(3, 0) != 0);
      if (rst_n && traffic && c_rsp_v[c] && c_rsp_r[c]) begin
        checks++;
        if (!pending[c][c_rsp[c].tag[4:0]] || c_rsp[c].result !== expect_v[c][c_rsp[c].tag[4:0]] ||
            c_rsp[c].tag[TAG_W-1:CORE_TAG_W] != 0) begin
          failures++;
          if (failures < 10) $display("FAIL core %0d tag %h got %h exp %h", c, c_rsp[c].tag,
                                      c_rsp[c].result, expect_v[c][c_rsp[c].tag[4:0]]);
        end
        pending[c][c_rsp[c].tag[4:0]] = 0;
        done_cnt[c]++;
      end
    end
  end

  initial begin
    int g0, g4, stall_alone, cont_seen, alt_err, last;
    traffic = 0;
    for (int c = 0; c < N; c++) begin done_cnt[c] = 0; sent_cnt[c] = 0;
      for (int t = 0; t < 32; t++) pending[c][t] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    @(posedge clk);
    // directed: core 0 alone is never stalled; cores 0 and 4 together alternate
    force c_rsp_r = '1;
    @(negedge clk);
    force c_req[0] = '{op: OP_FMADD, op_mod: 0, src_fmt: FP32, dst_fmt: FP32, vectorial: 0,
                       rnd: RNE, operands: '{32'h0, 32'h0, 32'h0}, tag: '0};
    force c_req[4] = '{op: OP_FMADD, op_mod: 0, src_fmt: FP32, dst_fmt: FP32, vectorial: 0,
                       rnd: RNE, operands: '{32'h0, 32'h0, 32'h0}, tag: '0};
    force c_req_v[0] = 1;
    stall_alone = 0;
    repeat (10) begin @(posedge clk); #1 if (!c_req_r[0]) stall_alone++; end
    checks++;
    if (stall_alone != 0) begin failures++; $display("FAIL lone core stalled"); end
    force c_req_v[4] = 1;
    g0 = 0; g4 = 0; cont_seen = 0; alt_err = 0; last = -1;
    repeat (20) begin
      #1;
      if (c_req_r[0] && c_req_r[4]) alt_err++;
      if (c_req_r[0]) begin g0++; if (last == 0) alt_err++; last = 0; end
      if (c_req_r[4]) begin g4++; if (last == 4) alt_err++; last = 4; end
      if (cont[0] || cont[4]) cont_seen++;
      @(posedge clk);
    end
    checks++;
    if (g0 != 10 || g4 != 10 || alt_err != 0 || cont_seen != 20) begin
      failures++; $display("FAIL fairness g0=%0d g4=%0d alt_err=%0d cont=%0d", g0, g4, alt_err, cont_seen);
    end
    release c_req_v[0]; release c_req_v[4]; release c_req[0]; release c_req[4];
    @(negedge clk); c_req_v[0] = 0; c_req_v[4] = 0;
    repeat (20) @(posedge clk);
    release c_rsp_r;
    // random traffic from all cores
    traffic = 1;
    for (int c = 0; c < N; c++) wait (done_cnt[c] == OPS);
    for (int c = 0; c < N; c++) begin
      checks++;
      if (sent_cnt[c] != OPS) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
