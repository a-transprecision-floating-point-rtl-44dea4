// Self-checking testbench of the L2 memory model: writes then reads random words and
// checks the data and that every read returns exactly LATENCY (15) cycles after its
// request, also for back-to-back requests.
`timescale 1ns/1ps
module tb_l2_mem;
  import tp_pkg::*;
  localparam int unsigned WORDS = 131072, LAT = 15;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  tcdm_req_t req;
  tcdm_rsp_t rsp;
  int checks = 0, failures = 0, cyc = 0;
  logic [31:0] ref_mem [int];
  int q_t[$];
  logic [31:0] q_d[$];
  bit q_w[$];

  l2_mem #(.WORDS(WORDS), .LATENCY(LAT)) dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && rsp.r_valid) begin
      int t; logic [31:0] d; bit w;
      checks++;
      if (q_t.size() == 0) begin failures++; $display("FAIL spurious r_valid"); end
      else begin
        t = q_t.pop_front(); d = q_d.pop_front(); w = q_w.pop_front();
        if (cyc - t != LAT) begin failures++; $display("FAIL latency %0d", cyc - t); end
        if (!w && rsp.r_rdata !== d) begin
          failures++; $display("FAIL data %h exp %h", rsp.r_rdata, d);
        end
      end
    end
  end

  initial begin
    int a;
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      a = $urandom_range(63, 0) * 2039 % WORDS;
      req.req = ($urandom_range(3, 0) != 0);
      req.wen = (n < 200) || !ref_mem.exists(a) || ($urandom_range(1, 0) == 1);
      req.addr = 32'(a * 4);
      req.be = 4'hF;
      req.wdata = $urandom;
      if (req.req) begin
        q_t.push_back(cyc); q_w.push_back(req.wen);
        if (req.wen) begin ref_mem[a] = req.wdata; q_d.push_back('0); end
        else q_d.push_back(ref_mem[a]);
      end
    end
    @(negedge clk) req = '0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (q_t.size() != 0) begin failures++; $display("FAIL missing responses"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
