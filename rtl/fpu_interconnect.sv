// Shared-FPU interconnect between NB_CORES cores and NB_FPUS FPU instances plus one
// DIV-SQRT unit.
//
// Mapping is static and interleaved: core c always uses FPU c mod NB_FPUS, so with 8 cores
// and 4 FPUs the pairs 0&4, 1&5, 2&6 and 3&7 share FPUs 0..3. In front of every FPU a fair
// round-robin arbiter picks one of the requesting cores of its group and passes the FPU's
// ready to that core only; the other cores see ready low and stall. Divisions and square
// roots from all cores go to the single DIV-SQRT unit through one more round-robin arbiter.
// The interconnect writes the core index into the upper CORE_ID_W bits of the tag of every
// request; results are steered back to the core named in their tag ("Tag" in the paper's
// figure) and handed to the core with those bits cleared, so sharing is invisible to core
// and FPU. If an FPU result and a DIV-SQRT result target the same core in the same cycle,
// the FPU result goes first and the other waits (our choice). With NB_FPUS == NB_CORES the
// arbiters have one input each and the interconnect reduces to wires.
//
// Interface: ready/valid request and response ports on both sides (APU protocol).
// fpu_contention_o[c] is high in a cycle where core c offers a request that is not taken;
// it feeds the FPU-contention performance counter. Combinational request path, no added
// latency. The mapping, fairness and tag routing follow the paper; the response priority
// and the tag layout are ours.
module fpu_interconnect
  import tp_pkg::*;
#(
  parameter int unsigned NB_CORES = 8,
  parameter int unsigned NB_FPUS  = 4
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  // core side
  input  logic     [NB_CORES-1:0] core_req_valid_i,
  output logic     [NB_CORES-1:0] core_req_ready_o,
  input  fpu_req_t [NB_CORES-1:0] core_req_i,
  output logic     [NB_CORES-1:0] core_rsp_valid_o,
  input  logic     [NB_CORES-1:0] core_rsp_ready_i,
  output fpu_rsp_t [NB_CORES-1:0] core_rsp_o,
  output logic     [NB_CORES-1:0] fpu_contention_o,
  // FPU side
  output logic     [NB_FPUS-1:0]  fpu_req_valid_o,
  input  logic     [NB_FPUS-1:0]  fpu_req_ready_i,
  output fpu_req_t [NB_FPUS-1:0]  fpu_req_o,
  input  logic     [NB_FPUS-1:0]  fpu_rsp_valid_i,
  output logic     [NB_FPUS-1:0]  fpu_rsp_ready_o,
  input  fpu_rsp_t [NB_FPUS-1:0]  fpu_rsp_i,
  // DIV-SQRT side
  output logic                    ds_req_valid_o,
  input  logic                    ds_req_ready_i,
  output fpu_req_t                ds_req_o,
  input  logic                    ds_rsp_valid_i,
  output logic                    ds_rsp_ready_o,
  input  fpu_rsp_t                ds_rsp_i
);

  localparam int unsigned GRP = NB_CORES / NB_FPUS;   // cores per FPU
  localparam int unsigned GW  = (GRP > 1) ? $clog2(GRP) : 1;
  localparam int unsigned CW  = (NB_CORES > 1) ? $clog2(NB_CORES) : 1;

  logic [NB_CORES-1:0] is_ds, fpu_gnt_core, ds_gnt_core;

  for (genvar c = 0; c < NB_CORES; c++) begin : g_cls
    assign is_ds[c] = op_group(core_req_i[c].op) == GRP_DIVSQRT;
  end

  function automatic fpu_req_t with_id(fpu_req_t r, int unsigned c);
    fpu_req_t o = r;
    o.tag[TAG_W-1 -: CORE_ID_W] = CORE_ID_W'(c);
    return o;
  endfunction

  // ---------------------------------------------------------------- FPU request arbiters
  for (genvar k = 0; k < NB_FPUS; k++) begin : g_fpu
    logic [GRP-1:0] req, gnt;
    logic [GW-1:0]  idx;
    logic           any;
    for (genvar j = 0; j < GRP; j++) begin : g_member
      // member j of group k is core k + j*NB_FPUS
      assign req[j] = core_req_valid_i[k + j*NB_FPUS] && !is_ds[k + j*NB_FPUS];
      assign fpu_gnt_core[k + j*NB_FPUS] = gnt[j];
    end
    rr_arbiter #(.N(GRP)) i_arb (
      .clk_i, .rst_ni, .req_i(req), .advance_i(fpu_req_ready_i[k]),
      .gnt_o(gnt), .idx_o(idx), .valid_o(any));
    assign fpu_req_valid_o[k] = any;
    assign fpu_req_o[k] = with_id(core_req_i[k + int'(idx)*NB_FPUS], k + int'(idx)*NB_FPUS);
  end

  // ---------------------------------------------------------------- DIV-SQRT arbiter
  logic [CW-1:0] ds_idx;
  logic          ds_any;
  rr_arbiter #(.N(NB_CORES)) i_ds_arb (
    .clk_i, .rst_ni, .req_i(core_req_valid_i & is_ds), .advance_i(ds_req_ready_i),
    .gnt_o(ds_gnt_core), .idx_o(ds_idx), .valid_o(ds_any));
  assign ds_req_valid_o = ds_any;
  assign ds_req_o       = with_id(core_req_i[ds_idx], int'(ds_idx));

  for (genvar c = 0; c < NB_CORES; c++) begin : g_ready
    assign core_req_ready_o[c] = is_ds[c] ? (ds_gnt_core[c] && ds_req_ready_i)
                                          : (fpu_gnt_core[c] && fpu_req_ready_i[c % NB_FPUS]);
    assign fpu_contention_o[c] = core_req_valid_i[c] && !core_req_ready_o[c];
  end

  // ---------------------------------------------------------------- responses
  logic [NB_CORES-1:0] from_fpu, from_ds;
  for (genvar c = 0; c < NB_CORES; c++) begin : g_rsp
    fpu_rsp_t r;
    assign from_fpu[c] = fpu_rsp_valid_i[c % NB_FPUS] &&
                         (int'(fpu_rsp_i[c % NB_FPUS].tag[TAG_W-1 -: CORE_ID_W]) == c);
    assign from_ds[c]  = ds_rsp_valid_i && (int'(ds_rsp_i.tag[TAG_W-1 -: CORE_ID_W]) == c);
    always_comb begin
      r = from_fpu[c] ? fpu_rsp_i[c % NB_FPUS] : ds_rsp_i;
      r.tag[TAG_W-1 -: CORE_ID_W] = '0;
      core_rsp_o[c] = r;
    end
    assign core_rsp_valid_o[c] = from_fpu[c] || from_ds[c];
  end

  always_comb begin
    fpu_rsp_ready_o = '0;
    ds_rsp_ready_o  = 1'b0;
    for (int c = 0; c < int'(NB_CORES); c++) begin
      if (from_fpu[c]) fpu_rsp_ready_o[c % NB_FPUS] = core_rsp_ready_i[c];
      else if (from_ds[c]) ds_rsp_ready_o = core_rsp_ready_i[c];
    end
  end

  // static mapping requires NB_CORES to be a multiple of NB_FPUS
  initial assert (NB_CORES % NB_FPUS == 0 && NB_CORES <= (1 << CORE_ID_W));
  // a granted core is always one that asked
  for (genvar c = 0; c < NB_CORES; c++) begin : g_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni)
                     core_req_ready_o[c] |-> core_req_valid_i[c]);
  end

endmodule
