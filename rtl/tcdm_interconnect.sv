// Logarithmic interconnect between NB_MASTERS initiators (cores and DMA) and NB_BANKS
// TCDM banks.
//
// Addresses are word-interleaved: byte address bits [BW+1:2] select the bank and the bits
// above them the word inside the bank, so consecutive words fall into consecutive banks.
// Each bank has a fair round-robin arbiter; requests to different banks proceed in
// parallel, a request that loses its bank's arbitration sees gnt low and must retry in the
// next cycle (a TCDM contention stall). A granted read returns its data with r_valid
// exactly one cycle later (single-cycle latency); a granted write also gets an r_valid
// pulse one cycle later. Only the TCDM address window [BASE, BASE + 4*NB_BANKS*BANK_WORDS)
// is decoded; the cluster top routes other addresses elsewhere.
// Word interleaving, single-cycle latency and sharing by all cores follow the paper; the
// combinational all-to-all arbitration per bank (instead of the tree of 2:1 stages that the
// name "logarithmic" suggests) and the write response are our simplifications.
module tcdm_interconnect
  import tp_pkg::*;
#(
  parameter int unsigned NB_MASTERS = 9,
  parameter int unsigned NB_BANKS   = 16,
  parameter int unsigned BANK_WORDS = 1024,
  parameter int unsigned BW  = (NB_BANKS > 1) ? $clog2(NB_BANKS) : 1,
  parameter int unsigned WAW = (BANK_WORDS > 1) ? $clog2(BANK_WORDS) : 1
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  tcdm_req_t [NB_MASTERS-1:0]  req_i,
  output tcdm_rsp_t [NB_MASTERS-1:0]  rsp_o,
  output logic      [NB_MASTERS-1:0]  contention_o,
  // bank side
  output logic      [NB_BANKS-1:0]    bank_req_o,
  output logic      [NB_BANKS-1:0]    bank_we_o,
  output logic      [NB_BANKS-1:0][WAW-1:0] bank_addr_o,
  output logic      [NB_BANKS-1:0][3:0]     bank_be_o,
  output logic      [NB_BANKS-1:0][31:0]    bank_wdata_o,
  input  logic      [NB_BANKS-1:0][31:0]    bank_rdata_i
);

  localparam int unsigned MW = (NB_MASTERS > 1) ? $clog2(NB_MASTERS) : 1;

  logic [NB_MASTERS-1:0][BW-1:0] m_bank;
  logic [NB_BANKS-1:0][NB_MASTERS-1:0] b_req, b_gnt;
  logic [NB_BANKS-1:0][MW-1:0] b_idx;
  logic [NB_MASTERS-1:0] gnt, rvalid_q;
  logic [NB_MASTERS-1:0][BW-1:0] rbank_q;

  for (genvar m = 0; m < NB_MASTERS; m++) begin : g_dec
    assign m_bank[m] = req_i[m].addr[2 +: BW];
  end

  for (genvar b = 0; b < NB_BANKS; b++) begin : g_bank
    logic any;
    for (genvar m = 0; m < NB_MASTERS; m++) begin : g_m
      assign b_req[b][m] = req_i[m].req && (int'(m_bank[m]) == b);
    end
    rr_arbiter #(.N(NB_MASTERS)) i_arb (
      .clk_i, .rst_ni, .req_i(b_req[b]), .advance_i(1'b1),
      .gnt_o(b_gnt[b]), .idx_o(b_idx[b]), .valid_o(any));
    assign bank_req_o[b]   = any;
    assign bank_we_o[b]    = req_i[b_idx[b]].wen;
    assign bank_addr_o[b]  = req_i[b_idx[b]].addr[2 + BW +: WAW];
    assign bank_be_o[b]    = req_i[b_idx[b]].be;
    assign bank_wdata_o[b] = req_i[b_idx[b]].wdata;
  end

  always_comb begin
    gnt = '0;
    for (int b = 0; b < int'(NB_BANKS); b++) gnt = gnt | b_gnt[b];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q <= '0;
      rbank_q  <= '0;
    end else begin
      rvalid_q <= gnt;
      rbank_q  <= m_bank;
    end
  end

  for (genvar m = 0; m < NB_MASTERS; m++) begin : g_rsp
    assign rsp_o[m].gnt     = gnt[m];
    assign rsp_o[m].r_valid = rvalid_q[m];
    assign rsp_o[m].r_rdata = bank_rdata_i[rbank_q[m]];
    assign contention_o[m]  = req_i[m].req && !gnt[m];
  end

  // a bank serves at most one master per cycle
  for (genvar b = 0; b < NB_BANKS; b++) begin : g_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(b_gnt[b]));
  end

endmodule
