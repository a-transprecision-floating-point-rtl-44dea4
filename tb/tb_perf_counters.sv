// Self-checking testbench of one core's performance counter bank: random event vectors
// with random enable and clear, compared every cycle against reference counts through the
// read port (read is combinational, counts update one cycle after the event).
`timescale 1ns/1ps
module tb_perf_counters;
  localparam int unsigned NE = 9;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  logic en, clr;
  logic [NE-1:0] ev;
  logic [3:0] idx;
  logic [31:0] rd;
  int checks = 0, failures = 0;
  int unsigned ref_c [NE];

  perf_counters #(.NB_EVENTS(NE)) dut (.clk_i(clk), .rst_ni(rst_n), .enable_i(en), .clear_i(clr),
    .event_i(ev), .rd_idx_i(idx), .rd_data_o(rd));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; clr = 0; ev = 0; idx = 0;
    foreach (ref_c[i]) ref_c[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      for (int i = 0; i < NE; i++) begin
        idx = 4'(i); #0.4;
        checks++;
        if (rd !== ref_c[i]) begin
          failures++;
          if (failures < 10) $display("FAIL cnt %0d got %0d exp %0d", i, rd, ref_c[i]);
        end
      end
      en  = ($urandom_range(7, 0) != 0);
      clr = ($urandom_range(499, 0) == 0);
      ev  = NE'($urandom);
      ev[0] = 1'b1;                       // cycle counter event is always on
      if (clr) foreach (ref_c[i]) ref_c[i] = 0;
      else if (en) for (int i = 0; i < NE; i++) if (ev[i]) ref_c[i]++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
