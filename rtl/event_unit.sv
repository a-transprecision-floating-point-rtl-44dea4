// Event unit: hardware support for barriers, critical regions, thread dispatch and the
// sleeping of idle cores.
//
// Barrier: a core that reaches a barrier raises barrier_req_i[c] for one cycle and then
// sleeps (clk_en_o[c] low) until every core of team_mask_i has arrived; in that cycle all
// of them get a one-cycle barrier_release_o pulse and their clock enable returns.
// Critical regions: mutex_req_i[c] is held high by a core that wants the lock; one core at
// a time (round-robin among requesters) gets mutex_gnt_o[c], which stays high until that
// core drops its request. A core waiting for the lock also sleeps.
// Dispatch: a master core posts a value (e.g. the address of a parallel function) with
// dispatch_push_i and a mask of workers; each worker in the mask sees disp_valid_o[c] and
// disp_data_o until it acknowledges with disp_ack_i[c]. A worker waiting for dispatch with
// disp_wait_i[c] sleeps until its entry is valid.
// All inputs are sampled at the clock edge; releases and grants appear in the next cycle.
// The paper gives the function (dispatch, barriers, critical regions, power saving of idle
// cores); this signal-level interface and the single-entry dispatch register are ours.
module event_unit #(
  parameter int unsigned NB_CORES = 8
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic [NB_CORES-1:0] team_mask_i,
  input  logic [NB_CORES-1:0] barrier_req_i,
  output logic [NB_CORES-1:0] barrier_release_o,
  input  logic [NB_CORES-1:0] mutex_req_i,
  output logic [NB_CORES-1:0] mutex_gnt_o,
  input  logic                dispatch_push_i,
  input  logic [31:0]         dispatch_data_i,
  input  logic [NB_CORES-1:0] dispatch_mask_i,
  output logic [NB_CORES-1:0] disp_valid_o,
  output logic [31:0]         disp_data_o,
  input  logic [NB_CORES-1:0] disp_ack_i,
  input  logic [NB_CORES-1:0] disp_wait_i,
  output logic [NB_CORES-1:0] clk_en_o
);

  localparam int unsigned CW = (NB_CORES > 1) ? $clog2(NB_CORES) : 1;

  logic [NB_CORES-1:0] arrived_q, release_q, gnt_q, disp_v_q;
  logic [31:0]         disp_data_q;
  logic [NB_CORES-1:0] arrived_n, mgnt;
  logic [CW-1:0]       midx;
  logic                many, all_in, lock_free;

  assign arrived_n = arrived_q | barrier_req_i;
  assign all_in    = ((arrived_n & team_mask_i) == team_mask_i) && (arrived_n != 0);
  assign lock_free = (gnt_q & mutex_req_i) == 0;

  rr_arbiter #(.N(NB_CORES)) i_mutex_arb (
    .clk_i, .rst_ni, .req_i(mutex_req_i & ~gnt_q), .advance_i(lock_free),
    .gnt_o(mgnt), .idx_o(midx), .valid_o(many));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      arrived_q   <= '0;
      release_q   <= '0;
      gnt_q       <= '0;
      disp_v_q    <= '0;
      disp_data_q <= '0;
    end else begin
      // barrier
      if (all_in) begin
        release_q <= arrived_n;
        arrived_q <= '0;
      end else begin
        release_q <= '0;
        arrived_q <= arrived_n;
      end
      // mutex: the holder keeps the lock while it requests it
      if (lock_free) gnt_q <= many ? mgnt : '0;
      // dispatch
      if (dispatch_push_i) begin
        disp_v_q    <= dispatch_mask_i;
        disp_data_q <= dispatch_data_i;
      end else begin
        disp_v_q <= disp_v_q & ~disp_ack_i;
      end
    end
  end

  assign barrier_release_o = release_q;
  assign mutex_gnt_o       = gnt_q;
  assign disp_valid_o      = disp_v_q;
  assign disp_data_o       = disp_data_q;
  // sleep while waiting at a barrier, for the lock, or for dispatch
  assign clk_en_o = ~(arrived_q | (mutex_req_i & ~gnt_q) | (disp_wait_i & ~disp_v_q));

  assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(gnt_q));

endmodule
