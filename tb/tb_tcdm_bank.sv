// Self-checking testbench of a TCDM bank: random reads and byte-masked writes against a
// reference array; read data must appear exactly one cycle after the request.
`timescale 1ns/1ps
module tb_tcdm_bank;
  localparam int unsigned WORDS = 1024;
  logic clk = 0;
  always #5 clk = ~clk;
  logic req, we; logic [9:0] addr; logic [3:0] be; logic [31:0] wdata, rdata;
  int checks = 0, failures = 0;
  logic [31:0] ref_mem [WORDS];

  tcdm_bank #(.WORDS(WORDS)) dut (.clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr), .be_i(be),
                                  .wdata_i(wdata), .rdata_o(rdata));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] e;
    req = 0; we = 0; addr = 0; be = 0; wdata = 0;
    // initialise every word
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk); req = 1; we = 1; be = 4'hF; addr = 10'(i); wdata = $urandom; ref_mem[i] = wdata;
    end
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      req = 1; addr = 10'($urandom_range(WORDS - 1, 0));
      we = $urandom_range(1, 0); be = 4'($urandom); wdata = $urandom;
      if (we) begin
        for (int b = 0; b < 4; b++) if (be[b]) ref_mem[addr][8*b +: 8] = wdata[8*b +: 8];
      end else begin
        e = ref_mem[addr];
        @(negedge clk); req = 0;
        checks++;
        if (rdata !== e) begin failures++; if (failures < 10) $display("FAIL rd %h got %h exp %h", addr, rdata, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
