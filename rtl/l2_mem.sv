// SoC-level L2 scratchpad memory (512 kB by default) with a fixed access latency.
//
// One request port using the TCDM request/response structs: every request is granted in
// the cycle it is made (gnt = req), is performed at the clock edge, and its response
// (r_valid, and the read data for a read) appears LATENCY cycles later. Requests can be
// issued every cycle; the latency pipeline keeps them in order. The paper gives the size
// (512 kB) and the 15-cycle latency as seen from the cluster; it calls the memory
// multi-banked, which is not modelled here (one port, no bank conflicts). The whole round
// trip of the paper's 15 cycles is placed inside this block; the interconnect to it adds
// none.
module l2_mem
  import tp_pkg::*;
#(
  parameter int unsigned WORDS   = 131072,
  parameter int unsigned LATENCY = 15,
  parameter int unsigned AW      = $clog2(WORDS)
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  tcdm_req_t req_i,
  output tcdm_rsp_t rsp_o
);

  logic [31:0] mem [WORDS];
  logic [LATENCY-1:0] v_q;
  logic [LATENCY-1:0][31:0] d_q;
  logic [AW-1:0] widx;

  assign widx = req_i.addr[2 +: AW];

  always_ff @(posedge clk_i) begin
    if (req_i.req && req_i.wen)
      for (int b = 0; b < 4; b++)
        if (req_i.be[b]) mem[widx][8*b +: 8] <= req_i.wdata[8*b +: 8];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      v_q <= '0;
      d_q <= '0;
    end else begin
      v_q[0] <= req_i.req;
      d_q[0] <= (req_i.req && !req_i.wen) ? mem[widx] : '0;
      for (int i = 1; i < int'(LATENCY); i++) begin
        v_q[i] <= v_q[i-1];
        d_q[i] <= d_q[i-1];
      end
    end
  end

  assign rsp_o.gnt     = req_i.req;
  assign rsp_o.r_valid = v_q[LATENCY-1];
  assign rsp_o.r_rdata = d_q[LATENCY-1];

endmodule
