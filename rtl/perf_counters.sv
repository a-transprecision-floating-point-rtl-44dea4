// Per-core performance counters.
//
// NB_EVENTS 32-bit counters, one per event of perf_event_e: total cycles, active cycles,
// executed instructions, L2/TCDM memory stalls, TCDM contention, FPU (data-dependency)
// stalls, FPU contention, FPU write-back stalls and instruction-cache misses. Counter i
// increments in every cycle in which event_i[i] is high and counting is enabled; clear_i
// zeroes all counters. Counting does not disturb the core (non-intrusive). A counter is
// read combinationally by index on rd_idx_i / rd_data_o. The paper lists these events;
// the width, the saturation-free wrap-around and the read port are our choices.
module perf_counters
  import tp_pkg::*;
#(
  parameter int unsigned NB_EVENTS = 9,
  parameter int unsigned IW        = $clog2(NB_EVENTS)
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 enable_i,
  input  logic                 clear_i,
  input  logic [NB_EVENTS-1:0] event_i,
  input  logic [IW-1:0]        rd_idx_i,
  output logic [31:0]          rd_data_o
);

  logic [NB_EVENTS-1:0][31:0] cnt_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q <= '0;
    end else if (clear_i) begin
      cnt_q <= '0;
    end else if (enable_i) begin
      for (int i = 0; i < int'(NB_EVENTS); i++)
        if (event_i[i]) cnt_q[i] <= cnt_q[i] + 32'd1;
    end
  end

  assign rd_data_o = (int'(rd_idx_i) < int'(NB_EVENTS)) ? cnt_q[rd_idx_i] : '0;

endmodule
