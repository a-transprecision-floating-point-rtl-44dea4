// Self-checking testbench of one FPU instance.
// Mixed FMA, compare/min/max, conversion and cast-and-pack requests are streamed with random
// output back-pressure; every result is matched to its request through the tag (groups may
// reorder under back-pressure) and checked against known values. Also checked: the
// operands of unused groups are silenced to zero, an idle FPU answers after PIPE_REGS
// cycles, and three groups with pending results are served round-robin.
`timescale 1ns/1ps
module tb_fpu_top;
  import tp_pkg::*;

  localparam int unsigned PIPE_REGS = 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  fpu_req_t req; fpu_rsp_t rsp;
  int checks = 0, failures = 0;

  fpu_top #(.PIPE_REGS(PIPE_REGS)) dut (.clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid),
    .in_ready_o(in_ready), .req_i(req), .out_valid_o(out_valid), .out_ready_i(out_ready),
    .rsp_o(rsp));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] expect_v [512];
  bit          pending  [512];
  int          got_order[$];
  bit          auto_ready;

  always @(posedge clk) begin
    if (auto_ready) out_ready <= ($urandom_range(2, 0) != 0);
    if (rst_n && out_valid && out_ready) begin
      checks++;
      got_order.push_back(int'(rsp.tag));
      if (!pending[rsp.tag] || rsp.result !== expect_v[rsp.tag]) begin
        failures++;
        if (failures < 10) $display("FAIL tag %0d got %h exp %h", rsp.tag, rsp.result, expect_v[rsp.tag]);
      end
      pending[rsp.tag] = 0;
    end
  end

  // silencing: groups that are not addressed see all-zero operands
  always @(negedge clk) if (rst_n && in_valid) begin
    checks++;
    for (int g = 0; g < 3; g++)
      if (g != int'(op_group(req.op)) && dut.g_req[g] != '0) begin
        failures++; $display("FAIL group %0d not silenced", g);
      end
  end

  task automatic issue(fpu_op_e op, logic [2:0] v, fp_fmt_e sf, fp_fmt_e df, logic [31:0] a,
                       logic [31:0] b, logic [31:0] c, logic [31:0] e, int tag);
    @(negedge clk);
    req = '0; req.op = op; req.rnd = roundmode_e'(v); req.src_fmt = sf; req.dst_fmt = df;
    req.operands[0] = a; req.operands[1] = b; req.operands[2] = c; req.tag = TAG_W'(tag);
    expect_v[tag] = e; pending[tag] = 1;
    in_valid = 1;
    @(posedge clk); while (!in_ready) @(posedge clk);
    #1 in_valid = 0;
  endtask

  initial begin
    int lat, t;
    auto_ready = 0; out_ready = 1; in_valid = 0; req = '0;
    for (int i = 0; i < 512; i++) pending[i] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // latency of an idle FPU: 1.5 * 2 + 1 = 4
    issue(OP_FMADD, 0, FP32, FP32, 32'h3FC0_0000, 32'h4000_0000, 32'h3F80_0000, 32'h4080_0000, 1);
    lat = 1;
    while (!out_valid) begin @(posedge clk); #1 lat++; end
    checks++;
    if (lat != PIPE_REGS) begin failures++; $display("FAIL latency %0d", lat); end
    @(posedge clk);
    // round-robin between groups: stall the output, fill all three groups, then release
    @(negedge clk) out_ready = 0;
    issue(OP_ADD, 0, FP32, FP32, 0, 32'h3F80_0000, 32'h3F80_0000, 32'h4000_0000, 10);      // 1+1
    issue(OP_MINMAX, 1, FP32, FP32, 32'h4040_0000, 32'h4000_0000, 0, 32'h4040_0000, 11);   // max(3,2)
    issue(OP_F2I, 0, FP32, FP32, 32'h40A0_0000, 0, 0, 32'd5, 12);                          // 5.0 -> 5
    repeat (2) @(posedge clk);
    got_order.delete();
    @(negedge clk) out_ready = 1;
    repeat (6) @(posedge clk);
    checks++;
    if (got_order.size() != 3) begin failures++; $display("FAIL rr: %0d results", got_order.size()); end
    else if (got_order[0] == got_order[1] || got_order[1] == got_order[2]) failures++;
    // random mixed stream with back-pressure
    auto_ready = 1;
    for (int n = 0; n < 1500; n++) begin
      t = 20 + (n % 400);
      while (pending[t]) @(posedge clk);
      case (n % 5)
        0: issue(OP_MUL, 0, FP32, FP32, 32'h4000_0000 + (32'(n % 64) << 17), 32'h4000_0000, 0,
                 32'h4080_0000 + (32'(n % 64) << 17), t);                              // x*2
        1: issue(OP_CMP, 1, FP32, FP32, 32'(n), 32'(n + 1), 0, 32'd1, t);               // lt
        2: issue(OP_I2F, 0, FP32, FP16, 32'(n % 1024), 0, 0,
                 (n % 1024 == 0) ? 32'hFFFF_0000 :
                 {16'hFFFF, 1'b0, 5'(15 + $clog2(n % 1024 + 1) - 1),
                  10'(((n % 1024) << (11 - $clog2(n % 1024 + 1))) & 10'h3FF)}, t);
        3: issue(OP_SGNJ, 2, FP32, FP32, 32'h3F80_0000, 32'h8000_0000, 0, 32'hBF80_0000, t);
        default: issue(OP_CPK, 0, FP32, FP16, 32'h3F80_0000, 32'h4000_0000, 0, 32'h4000_3C00, t);
      endcase
    end
    repeat (50) @(posedge clk);
    for (int i = 0; i < 512; i++) if (pending[i]) begin failures++; $display("FAIL lost tag %0d", i); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
