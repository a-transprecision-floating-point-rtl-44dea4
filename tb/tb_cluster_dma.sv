// Self-checking testbench of the cluster DMA. The L2 side is the real l2_mem (15-cycle
// latency), the TCDM side one tcdm_bank behind a single-cycle grant/r_valid model.
// Moves random-length blocks L2 -> TCDM and TCDM -> L2 and checks every word and the
// transfer time: one word costs 1 request cycle + 15 L2 cycles on the read side (or 1 + 1
// on TCDM) plus the same on the write side, i.e. 18 cycles per word in both directions,
// plus one cycle for the done pulse.
`timescale 1ns/1ps
module tb_cluster_dma;
  import tp_pkg::*;
  localparam int unsigned LAT = 15;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  logic start, dir, busy, done;
  logic [31:0] l2a, tca;
  logic [15:0] len;
  tcdm_req_t l2_req, tc_req;
  tcdm_rsp_t l2_rsp, tc_rsp;
  logic [31:0] tc_rdata;
  logic tc_rv;
  int checks = 0, failures = 0;

  cluster_dma dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .dir_i(dir), .l2_addr_i(l2a),
    .tcdm_addr_i(tca), .len_i(len), .busy_o(busy), .done_o(done), .l2_req_o(l2_req),
    .l2_rsp_i(l2_rsp), .tcdm_req_o(tc_req), .tcdm_rsp_i(tc_rsp));
  l2_mem #(.WORDS(4096), .LATENCY(LAT)) i_l2 (.clk_i(clk), .rst_ni(rst_n), .req_i(l2_req), .rsp_o(l2_rsp));
  tcdm_bank #(.WORDS(1024)) i_tc (.clk_i(clk), .req_i(tc_req.req), .we_i(tc_req.wen),
    .addr_i(tc_req.addr[11:2]), .be_i(tc_req.be), .wdata_i(tc_req.wdata), .rdata_o(tc_rdata));
  always_ff @(posedge clk) tc_rv <= tc_req.req;
  assign tc_rsp.gnt = tc_req.req;
  assign tc_rsp.r_valid = tc_rv;
  assign tc_rsp.r_rdata = tc_rdata;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic xfer(bit d, int la, int ta, int n);
    int t0, t;
    @(negedge clk);
    start = 1; dir = d; l2a = 32'(la * 4); tca = 32'(ta * 4); len = 16'(n);
    @(negedge clk); start = 0;
    t = 1;
    while (!done) begin @(negedge clk); t++; end
    checks++;
    if (t != 18 * n + 1) begin failures++; $display("FAIL dma time %0d exp %0d", t, 18 * n + 1); end
    for (int i = 0; i < n; i++) begin
      checks++;
      if (i_l2.mem[la + i] !== i_tc.mem[ta + i]) begin
        failures++;
        if (failures < 10) $display("FAIL word %0d l2 %h tcdm %h", i, i_l2.mem[la + i], i_tc.mem[ta + i]);
      end
    end
  endtask

  initial begin
    int la, ta, n;
    start = 0; dir = 0; l2a = 0; tca = 0; len = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 30; r++) begin
      la = $urandom_range(2000, 0); ta = $urandom_range(900, 0); n = $urandom_range(64, 1);
      for (int i = 0; i < n; i++) i_l2.mem[la + i] = $urandom;
      xfer(1'b0, la, ta, n);
      for (int i = 0; i < n; i++) i_tc.mem[ta + i] = $urandom;
      la = $urandom_range(2000, 0);
      xfer(1'b1, la, ta, n);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
