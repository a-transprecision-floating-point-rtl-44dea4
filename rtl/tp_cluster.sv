// Transprecision floating-point cluster (top level).
//
// A cluster of NB_CORES processor cores that share NB_FPUS transprecision FPUs and one
// DIV-SQRT unit, a multi-banked TCDM scratchpad, an event unit, a DMA unit and per-core
// performance counters, plus the SoC-level L2 memory that the DMA copies from and to.
// The cores themselves are not part of this RTL: each core's three cluster-side ports are
// ports of this module, so that a core model (or a testbench) can be attached:
//   * the APU port (fpu_req_t/fpu_rsp_t, ready/valid) through which the core's execute
//     stage issues FP operations; the shared-FPU interconnect maps core c to FPU
//     c mod NB_FPUS and sends divisions/square roots to the DIV-SQRT unit;
//   * the data port (tcdm_req_t/tcdm_rsp_t): addresses in the TCDM window
//     [TCDM_BASE, TCDM_BASE+TCDM_SIZE) go through the logarithmic interconnect to the
//     word-interleaved banks (grant in the request cycle, data one cycle later); all other
//     addresses leave the cluster on core_ext_req_o/core_ext_rsp_i, the place of the
//     cluster and SoC interconnects, which are not modelled;
//   * the event-unit signals (barrier, mutex, dispatch, clock enable) and the
//     core-internal performance events (active, instructions, memory stall, FPU
//     dependency stall, I$ miss). TCDM contention, FPU contention and FPU write-back stalls
//     are detected here and counted with them.
// The DMA is started through ports and talks directly to the L2 memory (the one master of
// L2 in this model). The instruction cache is not part of this RTL.
//
// Default parameters are the paper's 8-core, 4-FPU, one-pipeline-stage configuration with
// 64 kB of TCDM, 512 kB of L2 with 15-cycle latency. Every NB_CORES/NB_FPUS/FPU_PIPE_REGS
// combination of the paper's design space (8 or 16 cores; 2 to 16 FPUs; 0 to 2 pipeline
// registers) is a parameter setting; the bank count (16) and address map are our choices.
module tp_cluster
  import tp_pkg::*;
#(
  parameter int unsigned NB_CORES      = 8,
  parameter int unsigned NB_FPUS       = 4,
  parameter int unsigned FPU_PIPE_REGS = 1,
  parameter int unsigned NB_BANKS      = 16,
  parameter int unsigned TCDM_SIZE     = 65536,     // bytes
  parameter int unsigned L2_SIZE       = 524288,    // bytes
  parameter int unsigned L2_LATENCY    = 15,
  parameter logic [31:0] TCDM_BASE     = 32'h1000_0000,
  parameter int unsigned CW            = (NB_CORES > 1) ? $clog2(NB_CORES) : 1
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  // APU ports of the cores
  input  logic     [NB_CORES-1:0] core_fpu_req_valid_i,
  output logic     [NB_CORES-1:0] core_fpu_req_ready_o,
  input  fpu_req_t [NB_CORES-1:0] core_fpu_req_i,
  output logic     [NB_CORES-1:0] core_fpu_rsp_valid_o,
  input  logic     [NB_CORES-1:0] core_fpu_rsp_ready_i,
  output fpu_rsp_t [NB_CORES-1:0] core_fpu_rsp_o,
  // data ports of the cores
  input  tcdm_req_t [NB_CORES-1:0] core_data_req_i,
  output tcdm_rsp_t [NB_CORES-1:0] core_data_rsp_o,
  output tcdm_req_t [NB_CORES-1:0] core_ext_req_o,
  input  tcdm_rsp_t [NB_CORES-1:0] core_ext_rsp_i,
  // event unit
  input  logic [NB_CORES-1:0]     team_mask_i,
  input  logic [NB_CORES-1:0]     barrier_req_i,
  output logic [NB_CORES-1:0]     barrier_release_o,
  input  logic [NB_CORES-1:0]     mutex_req_i,
  output logic [NB_CORES-1:0]     mutex_gnt_o,
  input  logic                    dispatch_push_i,
  input  logic [31:0]             dispatch_data_i,
  input  logic [NB_CORES-1:0]     dispatch_mask_i,
  output logic [NB_CORES-1:0]     disp_valid_o,
  output logic [31:0]             disp_data_o,
  input  logic [NB_CORES-1:0]     disp_ack_i,
  input  logic [NB_CORES-1:0]     disp_wait_i,
  output logic [NB_CORES-1:0]     core_clk_en_o,
  // DMA control
  input  logic                    dma_start_i,
  input  logic                    dma_dir_i,
  input  logic [31:0]             dma_l2_addr_i,
  input  logic [31:0]             dma_tcdm_addr_i,
  input  logic [15:0]             dma_len_i,
  output logic                    dma_busy_o,
  output logic                    dma_done_o,
  // performance counters
  input  logic [NB_CORES-1:0][4:0] core_events_i,   // active, instr, mem stall, FPU stall, I$ miss
  input  logic                    perf_enable_i,
  input  logic                    perf_clear_i,
  input  logic [CW-1:0]           perf_core_i,
  input  logic [3:0]              perf_idx_i,
  output logic [31:0]             perf_data_o
);

  localparam int unsigned NB_MASTERS = NB_CORES + 1;            // cores + DMA
  localparam int unsigned BANK_WORDS = TCDM_SIZE / 4 / NB_BANKS;
  localparam int unsigned WAW        = (BANK_WORDS > 1) ? $clog2(BANK_WORDS) : 1;

  // ------------------------------------------------------------------ shared FPUs
  logic     [NB_FPUS-1:0] f_req_v, f_req_r, f_rsp_v, f_rsp_r;
  fpu_req_t [NB_FPUS-1:0] f_req;
  fpu_rsp_t [NB_FPUS-1:0] f_rsp;
  logic                   d_req_v, d_req_r, d_rsp_v, d_rsp_r;
  fpu_req_t               d_req;
  fpu_rsp_t               d_rsp;
  logic     [NB_CORES-1:0] fpu_cont;

  fpu_interconnect #(.NB_CORES(NB_CORES), .NB_FPUS(NB_FPUS)) i_fpu_xbar (
    .clk_i, .rst_ni,
    .core_req_valid_i(core_fpu_req_valid_i), .core_req_ready_o(core_fpu_req_ready_o),
    .core_req_i(core_fpu_req_i), .core_rsp_valid_o(core_fpu_rsp_valid_o),
    .core_rsp_ready_i(core_fpu_rsp_ready_i), .core_rsp_o(core_fpu_rsp_o),
    .fpu_contention_o(fpu_cont),
    .fpu_req_valid_o(f_req_v), .fpu_req_ready_i(f_req_r), .fpu_req_o(f_req),
    .fpu_rsp_valid_i(f_rsp_v), .fpu_rsp_ready_o(f_rsp_r), .fpu_rsp_i(f_rsp),
    .ds_req_valid_o(d_req_v), .ds_req_ready_i(d_req_r), .ds_req_o(d_req),
    .ds_rsp_valid_i(d_rsp_v), .ds_rsp_ready_o(d_rsp_r), .ds_rsp_i(d_rsp));

  for (genvar k = 0; k < NB_FPUS; k++) begin : g_fpu
    fpu_top #(.PIPE_REGS(FPU_PIPE_REGS)) i_fpu (
      .clk_i, .rst_ni, .in_valid_i(f_req_v[k]), .in_ready_o(f_req_r[k]), .req_i(f_req[k]),
      .out_valid_o(f_rsp_v[k]), .out_ready_i(f_rsp_r[k]), .rsp_o(f_rsp[k]));
  end

  fpu_divsqrt i_divsqrt (
    .clk_i, .rst_ni, .in_valid_i(d_req_v), .in_ready_o(d_req_r), .req_i(d_req),
    .out_valid_o(d_rsp_v), .out_ready_i(d_rsp_r), .rsp_o(d_rsp));

  // ------------------------------------------------------------------ TCDM
  tcdm_req_t [NB_MASTERS-1:0] m_req;
  tcdm_rsp_t [NB_MASTERS-1:0] m_rsp;
  logic      [NB_MASTERS-1:0] tcdm_cont;
  logic [NB_CORES-1:0] in_tcdm;
  tcdm_req_t dma_tcdm_req, dma_l2_req;
  tcdm_rsp_t l2_rsp;

  for (genvar c = 0; c < NB_CORES; c++) begin : g_core_dec
    assign in_tcdm[c] = (core_data_req_i[c].addr >= TCDM_BASE) &&
                        (core_data_req_i[c].addr <  TCDM_BASE + TCDM_SIZE);
    always_comb begin
      m_req[c]      = core_data_req_i[c];
      m_req[c].req  = core_data_req_i[c].req && in_tcdm[c];
      m_req[c].addr = core_data_req_i[c].addr - TCDM_BASE;
      core_ext_req_o[c]     = core_data_req_i[c];
      core_ext_req_o[c].req = core_data_req_i[c].req && !in_tcdm[c];
      core_data_rsp_o[c].gnt     = in_tcdm[c] ? m_rsp[c].gnt : core_ext_rsp_i[c].gnt;
      core_data_rsp_o[c].r_valid = m_rsp[c].r_valid || core_ext_rsp_i[c].r_valid;
      core_data_rsp_o[c].r_rdata = m_rsp[c].r_valid ? m_rsp[c].r_rdata : core_ext_rsp_i[c].r_rdata;
    end
  end
  always_comb begin
    m_req[NB_CORES]      = dma_tcdm_req;
    m_req[NB_CORES].addr = dma_tcdm_req.addr - TCDM_BASE;
  end

  logic [NB_BANKS-1:0]           b_req, b_we;
  logic [NB_BANKS-1:0][WAW-1:0]  b_addr;
  logic [NB_BANKS-1:0][3:0]      b_be;
  logic [NB_BANKS-1:0][31:0]     b_wdata, b_rdata;

  tcdm_interconnect #(.NB_MASTERS(NB_MASTERS), .NB_BANKS(NB_BANKS), .BANK_WORDS(BANK_WORDS))
  i_log_xbar (
    .clk_i, .rst_ni, .req_i(m_req), .rsp_o(m_rsp), .contention_o(tcdm_cont),
    .bank_req_o(b_req), .bank_we_o(b_we), .bank_addr_o(b_addr), .bank_be_o(b_be),
    .bank_wdata_o(b_wdata), .bank_rdata_i(b_rdata));

  for (genvar b = 0; b < NB_BANKS; b++) begin : g_bank
    tcdm_bank #(.WORDS(BANK_WORDS)) i_bank (
      .clk_i, .req_i(b_req[b]), .we_i(b_we[b]), .addr_i(b_addr[b]), .be_i(b_be[b]),
      .wdata_i(b_wdata[b]), .rdata_o(b_rdata[b]));
  end

  // ------------------------------------------------------------------ DMA and L2
  cluster_dma i_dma (
    .clk_i, .rst_ni, .start_i(dma_start_i), .dir_i(dma_dir_i), .l2_addr_i(dma_l2_addr_i),
    .tcdm_addr_i(dma_tcdm_addr_i), .len_i(dma_len_i), .busy_o(dma_busy_o), .done_o(dma_done_o),
    .l2_req_o(dma_l2_req), .l2_rsp_i(l2_rsp), .tcdm_req_o(dma_tcdm_req),
    .tcdm_rsp_i(m_rsp[NB_CORES]));

  l2_mem #(.WORDS(L2_SIZE / 4), .LATENCY(L2_LATENCY)) i_l2 (
    .clk_i, .rst_ni, .req_i(dma_l2_req), .rsp_o(l2_rsp));

  // ------------------------------------------------------------------ event unit
  event_unit #(.NB_CORES(NB_CORES)) i_event_unit (
    .clk_i, .rst_ni, .team_mask_i, .barrier_req_i, .barrier_release_o, .mutex_req_i,
    .mutex_gnt_o, .dispatch_push_i, .dispatch_data_i, .dispatch_mask_i, .disp_valid_o,
    .disp_data_o, .disp_ack_i, .disp_wait_i, .clk_en_o(core_clk_en_o));

  // ------------------------------------------------------------------ performance counters
  logic [NB_CORES-1:0][31:0] perf_rd;
  for (genvar c = 0; c < NB_CORES; c++) begin : g_perf
    logic [NB_PERF_EVENTS-1:0] ev;
    always_comb begin
      ev = '0;
      ev[EV_CYCLES]       = 1'b1;
      ev[EV_ACTIVE]       = core_events_i[c][0];
      ev[EV_INSTR]        = core_events_i[c][1];
      ev[EV_MEM_STALL]    = core_events_i[c][2];
      ev[EV_TCDM_CONT]    = tcdm_cont[c];
      ev[EV_FPU_STALL]    = core_events_i[c][3];
      ev[EV_FPU_CONT]     = fpu_cont[c];
      ev[EV_FPU_WB_STALL] = core_fpu_rsp_valid_o[c] && !core_fpu_rsp_ready_i[c];
      ev[EV_IMISS]        = core_events_i[c][4];
    end
    perf_counters #(.NB_EVENTS(NB_PERF_EVENTS)) i_perf (
      .clk_i, .rst_ni, .enable_i(perf_enable_i), .clear_i(perf_clear_i), .event_i(ev),
      .rd_idx_i(perf_idx_i), .rd_data_o(perf_rd[c]));
  end
  assign perf_data_o = perf_rd[perf_core_i];

endmodule
