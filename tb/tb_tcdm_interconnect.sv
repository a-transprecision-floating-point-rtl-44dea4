// Self-checking testbench of the TCDM logarithmic interconnect with its 16 banks.
// Nine masters (eight cores and the DMA) issue random reads and byte-masked writes to a
// small set of banks so that they collide often. Each master owns a disjoint set of words,
// which makes a per-word reference model exact. Checks: read data, r_valid exactly one
// cycle after the grant (single-cycle TCDM latency), no r_valid without a grant, that
// contention really happened, and fairness (no master waits more than NB_MASTERS-1 cycles
// for a bank with a round-robin arbiter).
`timescale 1ns/1ps
module tb_tcdm_interconnect;
  import tp_pkg::*;
  localparam int unsigned NM = 9, NB = 16, BWORDS = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  tcdm_req_t [NM-1:0] req;
  tcdm_rsp_t [NM-1:0] rsp;
  logic [NM-1:0] cont;
  logic [NB-1:0] b_req, b_we;
  logic [NB-1:0][9:0] b_addr;
  logic [NB-1:0][3:0] b_be;
  logic [NB-1:0][31:0] b_wdata, b_rdata;
  int checks = 0, failures = 0, contention_cycles = 0, max_wait = 0;
  logic [31:0] ref_mem [NB*BWORDS];
  int done_cnt = 0;

  tcdm_interconnect #(.NB_MASTERS(NM), .NB_BANKS(NB), .BANK_WORDS(BWORDS)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp), .contention_o(cont),
    .bank_req_o(b_req), .bank_we_o(b_we), .bank_addr_o(b_addr), .bank_be_o(b_be),
    .bank_wdata_o(b_wdata), .bank_rdata_i(b_rdata));
  for (genvar b = 0; b < NB; b++) begin : g_b
    tcdm_bank #(.WORDS(BWORDS)) i_bank (.clk_i(clk), .req_i(b_req[b]), .we_i(b_we[b]),
      .addr_i(b_addr[b]), .be_i(b_be[b]), .wdata_i(b_wdata[b]), .rdata_o(b_rdata[b]));
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) contention_cycles += $countones(cont);

  function automatic int widx(int bank, int w);
    return w * NB + bank;
  endfunction

  task automatic master(int m, int n_ops);
    int bank, w, wait_c;
    logic g;
    logic [31:0] exp_d;
    bit is_rd;
    for (int n = 0; n < n_ops; n++) begin
      @(negedge clk);
      // first 84 operations initialise the owned words of the four hot banks
      bank  = (n < 84) ? n % 4 : $urandom_range(3, 0);
      w     = m + NM * ((n < 84) ? n / 4 : $urandom_range(20, 0));  // words owned by master m
      is_rd = (n < 84) ? 1'b0 : bit'($urandom_range(1, 0));
      req[m].req   = 1'b1;
      req[m].addr  = 32'((w * NB + bank) * 4);
      req[m].wen   = !is_rd;
      req[m].be    = (n < 84) ? 4'hF : 4'($urandom);
      req[m].wdata = $urandom;
      wait_c = 0;
      forever begin
        #1 g = rsp[m].gnt;
        if (g) begin
          exp_d = ref_mem[widx(bank, w)];
          if (!is_rd)
            for (int b = 0; b < 4; b++)
              if (req[m].be[b]) ref_mem[widx(bank, w)][8*b +: 8] = req[m].wdata[8*b +: 8];
        end
        @(posedge clk);
        #1;
        if (g) break;
        checks++;
        if (rsp[m].r_valid) begin failures++; $display("FAIL m%0d r_valid without grant", m); end
        wait_c++;
        @(negedge clk);
      end
      if (wait_c > max_wait) max_wait = wait_c;
      checks++;
      if (!rsp[m].r_valid) begin failures++; $display("FAIL m%0d no r_valid 1 cycle after gnt", m); end
      if (is_rd) begin
        checks++;
        if (rsp[m].r_rdata !== exp_d) begin
          failures++;
          if (failures < 10) $display("FAIL m%0d rd got %h exp %h", m, rsp[m].r_rdata, exp_d);
        end
      end
      @(negedge clk); req[m].req = 1'b0;
    end
    done_cnt++;
  endtask

  initial begin
    req = '0;
    for (int i = 0; i < NB*BWORDS; i++) ref_mem[i] = 'x;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < NM; m++) begin
      automatic int mm = m;
      fork master(mm, 600); join_none
    end
    wait (done_cnt == NM);
    checks++;
    if (contention_cycles == 0) begin failures++; $display("FAIL no contention seen"); end
    checks++;
    if (max_wait > NM - 1) begin failures++; $display("FAIL unfair: waited %0d cycles", max_wait); end
    $display("contention cycles=%0d max wait=%0d", contention_cycles, max_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
