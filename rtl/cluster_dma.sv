// Cluster DMA unit: copies a block of words between L2 and the TCDM.
//
// Programmed through start_i with a direction (dir_i = 0: L2 to TCDM, 1: TCDM to L2), the
// two start addresses and a length in 32-bit words; busy_o is high while the transfer runs
// and done_o pulses for one cycle at its end. The unit moves one word at a time: it reads
// the source (waiting for the grant and then for r_valid), then writes the word into the
// destination (waiting for the grant), then moves to the next word. The L2 port and the
// TCDM port use the TCDM request/response structs; the TCDM port is one master of the
// logarithmic interconnect. The paper shows a DMA between L2 and TCDM but does not
// describe it; this 1-D, one-word-at-a-time engine is the simplest one that does the job.
module cluster_dma
  import tp_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        start_i,
  input  logic        dir_i,
  input  logic [31:0] l2_addr_i,
  input  logic [31:0] tcdm_addr_i,
  input  logic [15:0] len_i,
  output logic        busy_o,
  output logic        done_o,
  output tcdm_req_t   l2_req_o,
  input  tcdm_rsp_t   l2_rsp_i,
  output tcdm_req_t   tcdm_req_o,
  input  tcdm_rsp_t   tcdm_rsp_i
);

  typedef enum logic [2:0] {IDLE, RD_REQ, RD_WAIT, WR_REQ, WR_WAIT, FINISH} state_e;

  state_e      state_q;
  logic        dir_q;
  logic [31:0] src_q, dst_q, data_q;
  logic [15:0] left_q;
  tcdm_req_t   src_req, dst_req;
  tcdm_rsp_t   src_rsp, dst_rsp;

  always_comb begin
    src_req = '0;
    dst_req = '0;
    src_req.req  = (state_q == RD_REQ);
    src_req.addr = src_q;
    src_req.be   = 4'hF;
    dst_req.req  = (state_q == WR_REQ);
    dst_req.addr = dst_q;
    dst_req.wen  = 1'b1;
    dst_req.be   = 4'hF;
    dst_req.wdata = data_q;
    src_rsp = dir_q ? tcdm_rsp_i : l2_rsp_i;
    dst_rsp = dir_q ? l2_rsp_i : tcdm_rsp_i;
    l2_req_o   = dir_q ? dst_req : src_req;
    tcdm_req_o = dir_q ? src_req : dst_req;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= IDLE;
      dir_q <= 1'b0; src_q <= '0; dst_q <= '0; data_q <= '0; left_q <= '0;
    end else begin
      case (state_q)
        IDLE: if (start_i) begin
          dir_q  <= dir_i;
          src_q  <= dir_i ? tcdm_addr_i : l2_addr_i;
          dst_q  <= dir_i ? l2_addr_i : tcdm_addr_i;
          left_q <= len_i;
          state_q <= (len_i == 0) ? FINISH : RD_REQ;
        end
        RD_REQ:  if (src_rsp.gnt) state_q <= RD_WAIT;
        RD_WAIT: if (src_rsp.r_valid) begin
          data_q  <= src_rsp.r_rdata;
          state_q <= WR_REQ;
        end
        WR_REQ:  if (dst_rsp.gnt) state_q <= WR_WAIT;
        WR_WAIT: if (dst_rsp.r_valid) begin
          src_q  <= src_q + 32'd4;
          dst_q  <= dst_q + 32'd4;
          left_q <= left_q - 16'd1;
          state_q <= (left_q == 16'd1) ? FINISH : RD_REQ;
        end
        FINISH: state_q <= IDLE;
        default: state_q <= IDLE;
      endcase
    end
  end

  assign busy_o = (state_q != IDLE);
  assign done_o = (state_q == FINISH);

endmodule
