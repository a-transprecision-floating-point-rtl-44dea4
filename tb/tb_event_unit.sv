// Self-checking testbench of the event unit with 8 cores.
// Barrier: the cores of a random team arrive (one-cycle pulse) at random times; the
// release must reach every team member exactly one cycle after the last arrival, never
// earlier, and a waiting core must have its clock enable low. Mutex: random cores request
// and hold the lock; at most one owner at a time, every requester is served within
// NB_CORES grants (round robin). Dispatch: a pushed word reaches exactly the cores of the
// mask and is cleared by their acknowledgements.
`timescale 1ns/1ps
module tb_event_unit;
  localparam int unsigned N = 8;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] team, breq, brel, mreq, mgnt, dmask, dvalid, dack, dwait, clken;
  logic dpush;
  logic [31:0] ddata, dout;
  int checks = 0, failures = 0, cyc = 0;

  event_unit #(.NB_CORES(N)) dut (.clk_i(clk), .rst_ni(rst_n), .team_mask_i(team),
    .barrier_req_i(breq), .barrier_release_o(brel), .mutex_req_i(mreq), .mutex_gnt_o(mgnt),
    .dispatch_push_i(dpush), .dispatch_data_i(ddata), .dispatch_mask_i(dmask),
    .disp_valid_o(dvalid), .disp_data_o(dout), .disp_ack_i(dack), .disp_wait_i(dwait),
    .clk_en_o(clken));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s (cycle %0d)", msg, cyc); end
  endtask

  initial begin
    int arrive [N];
    int last, hold, waits [N];
    logic [N-1:0] prev_gnt = '0;
    team = 0; breq = 0; mreq = 0; dpush = 0; ddata = 0; dmask = 0; dack = 0; dwait = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---------------- barrier ----------------
    for (int r = 0; r < 200; r++) begin
      @(negedge clk);
      team = N'($urandom) | N'(1);
      last = 0;
      for (int c = 0; c < N; c++) begin
        arrive[c] = team[c] ? $urandom_range(10, 0) : -1;
        if (arrive[c] > last) last = arrive[c];
      end
      for (int t = 0; t <= last + 1; t++) begin
        breq = '0;
        for (int c = 0; c < N; c++) if (arrive[c] == t) breq[c] = 1'b1;
        #1;
        if (t <= last) chk(brel == 0, "early release");
        for (int c = 0; c < N; c++)
          if (team[c] && arrive[c] < t && t <= last) chk(!clken[c], "waiting core clocked");
        if (t == last + 1) chk(brel == team, "release mask");
        @(negedge clk);
      end
      breq = '0;
      #1 chk(brel == 0, "release longer than a cycle");
      chk(clken == '1, "clock enable after release");
    end
    // ---------------- mutex ----------------
    foreach (waits[c]) waits[c] = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      #1;
      chk($onehot0(mgnt), "two mutex owners");
      // waits[c] counts the grants that went to other cores while c was waiting
      for (int c = 0; c < N; c++) begin
        if (mreq[c] && !mgnt[c]) begin
          if (mgnt != 0 && mgnt != prev_gnt) waits[c]++;
          chk(!clken[c], "core waiting for mutex is clocked");
        end
        if (mgnt[c]) waits[c] = 0;
        chk(waits[c] <= N - 1, "mutex starvation");
      end
      prev_gnt = mgnt;
      // owners release with probability 1/3, others request with probability 1/2
      for (int c = 0; c < N; c++) begin
        if (mgnt[c]) begin if ($urandom_range(2, 0) == 0) mreq[c] = 1'b0; end
        else if (!mreq[c]) mreq[c] = ($urandom_range(1, 0) == 1);
      end
    end
    @(negedge clk) mreq = '0;
    // ---------------- dispatch ----------------
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      dpush = 1; ddata = $urandom; dmask = N'($urandom) | N'(1); dwait = '1;
      #1 chk(clken == ~dwait | dvalid, "dispatch wait gating");
      @(negedge clk); dpush = 0;
      #1 chk(dvalid == dmask && dout == ddata, "dispatch data");
      chk((clken & dmask) == dmask, "receivers clocked");
      dack = dmask; dwait = '0;
      @(negedge clk); dack = '0;
      #1 chk(dvalid == 0, "dispatch ack");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
