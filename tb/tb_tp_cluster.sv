// End-to-end testbench of the transprecision cluster at its default parameters
// (8 cores, 4 shared FPUs with one pipeline stage, 16 TCDM banks, 64 kB TCDM, 512 kB L2
// with 15-cycle latency). The eight cores are behavioural stand-ins that run one small
// kernel each, the way a core's load/store unit and APU port would:
//   1. the DMA copies an input vector of small integers (as float) from L2 to the TCDM;
//   2. after a barrier every core loads NOPS inputs from the TCDM (all cores hit the same
//      bank in the same cycle), runs a mix of FPU operations on them - scalar float FMA,
//      packed-SIMD float16 ADD, multi-format FMA (float16 product, float accumulator),
//      float DIV and float SQRT - and stores the results to the TCDM, holding its result
//      ready low at random (write-back stalls);
//   3. all cores increment one shared TCDM word under the event unit's mutex, meet at a
//      barrier, and the DMA copies results and counter back to L2, where they are checked.
// Operands are small integers so every expected result is exact and computed here without
// the design's arithmetic. The performance counters are compared with counts taken here.
// Each mechanism is counted; one that never happens counts as a failure.
`timescale 1ns/1ps
module tb_tp_cluster;
  import tp_pkg::*;
  `include "tb_fp_ref.svh"

  localparam int N = 8, NOPS = 20, NIN = 16 * N;
  localparam logic [31:0] TB = 32'h1000_0000;       // TCDM base
  localparam int OUT_W = 512, CNT_W = 1000;         // TCDM word offsets of results / counter

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] f_valid, f_ready, r_valid, r_ready;
  fpu_req_t [N-1:0] f_req;
  fpu_rsp_t [N-1:0] f_rsp;
  tcdm_req_t [N-1:0] d_req, x_req;
  tcdm_rsp_t [N-1:0] d_rsp, x_rsp;
  logic [N-1:0] team, breq, brel, mreq, mgnt, dvalid, ack, dwait, clken;
  logic dpush, dstart, ddir, dbusy, ddone, p_en, p_clr;
  logic [31:0] ddata, dout, dl2, dtc, p_data;
  logic [15:0] dlen;
  logic [N-1:0][4:0] cev;
  logic [2:0] p_core;
  logic [3:0] p_idx;

  tp_cluster dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_fpu_req_valid_i(f_valid), .core_fpu_req_ready_o(f_ready), .core_fpu_req_i(f_req),
    .core_fpu_rsp_valid_o(r_valid), .core_fpu_rsp_ready_i(r_ready), .core_fpu_rsp_o(f_rsp),
    .core_data_req_i(d_req), .core_data_rsp_o(d_rsp), .core_ext_req_o(x_req), .core_ext_rsp_i(x_rsp),
    .team_mask_i(team), .barrier_req_i(breq), .barrier_release_o(brel), .mutex_req_i(mreq),
    .mutex_gnt_o(mgnt), .dispatch_push_i(dpush), .dispatch_data_i(ddata), .dispatch_mask_i(team),
    .disp_valid_o(dvalid), .disp_data_o(dout), .disp_ack_i(ack), .disp_wait_i(dwait),
    .core_clk_en_o(clken),
    .dma_start_i(dstart), .dma_dir_i(ddir), .dma_l2_addr_i(dl2), .dma_tcdm_addr_i(dtc),
    .dma_len_i(dlen), .dma_busy_o(dbusy), .dma_done_o(ddone),
    .core_events_i(cev), .perf_enable_i(p_en), .perf_clear_i(p_clr), .perf_core_i(p_core),
    .perf_idx_i(p_idx), .perf_data_o(p_data));

  int checks = 0, failures = 0, cyc = 0;
  // mechanism counters
  int n_fpu_stall = 0, n_fpu_share = 0, n_divsqrt = 0, n_vec = 0, n_mf = 0, n_tcdm_cont = 0,
      n_wb_stall = 0, n_dma_in = 0, n_dma_out = 0, n_barrier = 0, n_mutex = 0, n_perf = 0,
      n_dispatch = 0, n_fma = 0;
  int c_fstall [N], c_tcont [N], c_wb [N];
  int done_cnt = 0;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s (cycle %0d)", msg, cyc); end
  endtask

  function automatic logic [31:0] f32(int n);
    logic [32:0] r = ref_round(real'(n), 1'b0, 0, 0);
    return r[31:0];
  endfunction
  function automatic logic [15:0] f16(int n);
    logic [32:0] r = ref_round(real'(n), 1'b0, 1, 0);
    return r[15:0];
  endfunction

  // event bookkeeping done here, independent of the design's counters
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    for (int c = 0; c < N; c++) begin
      if (f_valid[c] && !f_ready[c]) begin c_fstall[c]++; n_fpu_stall++; end
      if (r_valid[c] && !r_ready[c]) begin c_wb[c]++; n_wb_stall++; end
      if (d_req[c].req && !d_rsp[c].gnt) begin c_tcont[c]++; n_tcdm_cont++; end
      if (c < 4 && f_valid[c] && f_valid[c + 4]) n_fpu_share++;
    end
  end
  always_comb
    for (int c = 0; c < N; c++) cev[c] = {1'b0, f_valid[c] && !f_ready[c], d_req[c].req && !d_rsp[c].gnt, 1'b0, 1'b1};

  // ---------------------------------------------------------------- core helpers
  task automatic tcdm_access(int c, bit wr, int word, logic [31:0] wd, output logic [31:0] rd);
    logic g;
    @(negedge clk);
    d_req[c].req = 1'b1; d_req[c].wen = wr; d_req[c].addr = TB + 32'(word * 4);
    d_req[c].be = 4'hF; d_req[c].wdata = wd;
    forever begin
      #1 g = d_rsp[c].gnt;
      @(posedge clk);
      if (g) break;
      @(negedge clk);
    end
    #1;
    chk(d_rsp[c].r_valid, "TCDM response one cycle after grant");
    rd = d_rsp[c].r_rdata;
    @(negedge clk) d_req[c].req = 1'b0;
  endtask

  task automatic fpu_op(int c, fpu_req_t r, output logic [31:0] res);
    logic g;
    int t0;
    @(negedge clk);
    f_valid[c] = 1'b1; f_req[c] = r;
    forever begin
      #1 g = f_ready[c];
      @(posedge clk);
      if (g) break;
      @(negedge clk);
    end
    @(negedge clk) f_valid[c] = 1'b0;
    forever begin
      r_ready[c] = ($urandom_range(2, 0) != 0);
      #1 g = r_valid[c] && r_ready[c];
      if (g) begin
        res = f_rsp[c].result;
        chk(f_rsp[c].tag == r.tag, "result tag");
      end
      @(posedge clk);
      if (g) break;
      @(negedge clk);
    end
    @(negedge clk) r_ready[c] = 1'b0;
  endtask

  task automatic barrier(int c);
    @(negedge clk) breq[c] = 1'b1;
    @(negedge clk) breq[c] = 1'b0;
    while (!brel[c]) begin
      chk(!clken[c], "core waiting at barrier is clock gated");
      @(negedge clk);
    end
    if (c == 0) n_barrier++;
  endtask

  task automatic core(int c);
    logic [31:0] x_bits, res, exp_r, dummy;
    int x;
    fpu_req_t r;
    barrier(c);
    for (int k = 0; k < NOPS; k++) begin
      // all cores load from bank k at once
      tcdm_access(c, 1'b0, 16 * c + (k % 16), '0, x_bits);
      x = int'(ref_val(0, x_bits));
      r = '0;
      r.rnd = RNE; r.src_fmt = FP32; r.dst_fmt = FP32;
      r.tag = TAG_W'(k);
      case (k % 5)
        0: begin r.op = OP_FMADD; r.operands = {f32(1), f32(x), f32(x)}; exp_r = f32(x * x + 1); end
        1: begin
          r.op = OP_ADD; r.src_fmt = FP16; r.dst_fmt = FP16; r.vectorial = 1'b1;
          r.operands[1] = {f16(2), f16(x)}; r.operands[2] = {f16(x), f16(3)};
          exp_r = {f16(x + 2), f16(x + 3)};
        end
        2: begin
          r.op = OP_FMADD; r.src_fmt = FP16; r.dst_fmt = FP32;
          r.operands = {f32(x), 16'hFFFF, f16(x), 16'hFFFF, f16(x)}; exp_r = f32(x * x + x);
        end
        3: begin r.op = OP_DIV; r.operands = {f32(0), f32(3), f32(3 * x)}; exp_r = f32(x); end
        default: begin r.op = OP_SQRT; r.operands = {f32(0), f32(0), f32(x * x)}; exp_r = f32(x); end
      endcase
      fpu_op(c, r, res);
      chk(res == exp_r, $sformatf("core %0d op %0d x=%0d res %h exp %h", c, k, x, res, exp_r));
      case (k % 5)
        0: n_fma++;
        1: n_vec++;
        2: n_mf++;
        default: n_divsqrt++;
      endcase
      tcdm_access(c, 1'b1, OUT_W + c * NOPS + k, res, dummy);
    end
    // shared counter under the mutex
    @(negedge clk) mreq[c] = 1'b1;
    while (!mgnt[c]) @(negedge clk);
    n_mutex++;
    tcdm_access(c, 1'b0, CNT_W, '0, x_bits);
    tcdm_access(c, 1'b1, CNT_W, x_bits + 1, dummy);
    @(negedge clk) mreq[c] = 1'b0;
    barrier(c);
    // wait for the dispatched "kernel done" word
    @(negedge clk) dwait[c] = 1'b1;
    while (!dvalid[c]) @(negedge clk);
    chk(dout == 32'hC0FFEE, "dispatch word");
    @(negedge clk) begin dwait[c] = 1'b0; ack[c] = 1'b1; end
    @(negedge clk) ack[c] = 1'b0;
    if (c == 0) n_dispatch++;
    done_cnt++;
  endtask

  task automatic dma(bit d, int l2w, int tcw, int n);
    int t = 0;
    @(negedge clk);
    dstart = 1; ddir = d; dl2 = 32'(l2w * 4); dtc = TB + 32'(tcw * 4); dlen = 16'(n);
    @(negedge clk) dstart = 0;
    while (!ddone) begin @(negedge clk); t++; end
    chk(t == 18 * n, $sformatf("DMA time %0d", t));   // 1+15 L2 and 1+1 TCDM cycles per word
    if (d) n_dma_out++; else n_dma_in++;
  endtask

  task automatic perf_read(int c, int idx, output logic [31:0] v);
    @(negedge clk) begin p_core = 3'(c); p_idx = 4'(idx); end
    #1 v = p_data;
  endtask

  initial begin
    logic [31:0] v;
    int en_cycles;
    f_valid = '0; f_req = '0; r_ready = '0; d_req = '0; x_rsp = '0;
    team = '1; breq = '0; mreq = '0; dpush = 0; ddata = 0; ack = '0; dwait = '0;
    dstart = 0; ddir = 0; dl2 = 0; dtc = 0; dlen = 0; p_en = 0; p_clr = 0; p_core = 0; p_idx = 0;
    foreach (c_fstall[c]) begin c_fstall[c] = 0; c_tcont[c] = 0; c_wb[c] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // input data in L2: word i = float(i % 13 + 1)
    for (int i = 0; i < NIN; i++) dut.i_l2.mem[i] = f32(i % 13 + 1);
    dut.g_bank[CNT_W % 16].i_bank.mem[CNT_W / 16] = 0;
    @(negedge clk) p_clr = 1;
    @(negedge clk) begin p_clr = 0; p_en = 1; end
    en_cycles = cyc;
    dma(1'b0, 0, 0, NIN);
    for (int c = 0; c < N; c++) begin
      automatic int cc = c;
      fork core(cc); join_none
    end
    // the cores' first barrier; then wait for their second one
    wait (n_barrier == 2);
    dma(1'b1, 4096, OUT_W, N * NOPS);
    dma(1'b1, 8192, CNT_W, 1);
    @(negedge clk) begin dpush = 1; ddata = 32'hC0FFEE; end
    @(negedge clk) dpush = 0;
    wait (done_cnt == N);
    @(negedge clk) p_en = 0;
    en_cycles = cyc - en_cycles;
    // results in L2
    for (int c = 0; c < N; c++)
      for (int k = 0; k < NOPS; k++) begin
        int x;
        logic [31:0] e;
        x = (16 * c + (k % 16)) % 13 + 1;
        case (k % 5)
          0: e = f32(x * x + 1);
          1: e = {f16(x + 2), f16(x + 3)};
          2: e = f32(x * x + x);
          default: e = f32(x);
        endcase
        chk(dut.i_l2.mem[4096 + c * NOPS + k] == e, $sformatf("L2 result core %0d op %0d", c, k));
      end
    chk(dut.i_l2.mem[8192] == N, "mutex-protected counter");
    // performance counters against our own counts
    for (int c = 0; c < N; c++) begin
      perf_read(c, EV_FPU_CONT, v);      chk(v == c_fstall[c], $sformatf("perf FPU contention core %0d: %0d vs %0d", c, v, c_fstall[c]));
      perf_read(c, EV_FPU_STALL, v);     chk(v == c_fstall[c], "perf FPU stall");
      perf_read(c, EV_TCDM_CONT, v);     chk(v == c_tcont[c], $sformatf("perf TCDM contention core %0d: %0d vs %0d", c, v, c_tcont[c]));
      perf_read(c, EV_FPU_WB_STALL, v);  chk(v == c_wb[c], $sformatf("perf WB stall core %0d: %0d vs %0d", c, v, c_wb[c]));
      perf_read(c, EV_CYCLES, v);        chk(v == en_cycles, $sformatf("perf cycles %0d vs %0d", v, en_cycles));
      n_perf++;
    end
    $display("mechanisms: fma=%0d vector=%0d multiformat=%0d divsqrt=%0d fpu_stall=%0d fpu_shared=%0d",
             n_fma, n_vec, n_mf, n_divsqrt, n_fpu_stall, n_fpu_share);
    $display("            tcdm_contention=%0d wb_stall=%0d dma_in=%0d dma_out=%0d barrier=%0d mutex=%0d dispatch=%0d perf=%0d",
             n_tcdm_cont, n_wb_stall, n_dma_in, n_dma_out, n_barrier, n_mutex, n_dispatch, n_perf);
    chk(n_fma > 0, "no FMA");            chk(n_vec > 0, "no vector op");
    chk(n_mf > 0, "no multi-format op"); chk(n_divsqrt > 0, "no DIV/SQRT");
    chk(n_fpu_stall > 0, "no FPU stall"); chk(n_fpu_share > 0, "no FPU sharing conflict");
    chk(n_tcdm_cont > 0, "no TCDM contention"); chk(n_wb_stall > 0, "no write-back stall");
    chk(n_dma_in > 0, "no DMA in");      chk(n_dma_out > 0, "no DMA out");
    chk(n_barrier > 0, "no barrier");    chk(n_mutex == N, "mutex");
    chk(n_dispatch > 0, "no dispatch");  chk(n_perf > 0, "no perf read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
