// Fair round-robin arbiter.
//
// Grants one of N requesters per cycle (one-hot gnt_o, index idx_o). The search for the
// winner starts at a pointer that moves to the position after the winner whenever the
// grant is used (advance_i), so a requester that keeps asking is served at least once every
// N grants. Combinational request-to-grant path; the pointer resets to 0. This is the "fair
// round-robin" policy the cluster uses in front of each shared FPU, for the outputs of the
// FPU operation groups and for the TCDM banks; the pointer scheme is our choice.
module rr_arbiter #(
  parameter int unsigned N  = 2,
  parameter int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic [N-1:0]  req_i,
  input  logic          advance_i,
  output logic [N-1:0]  gnt_o,
  output logic [IW-1:0] idx_o,
  output logic          valid_o
);

  logic [IW-1:0] ptr_q;

  always_comb begin
    int unsigned k;
    gnt_o   = '0;
    idx_o   = '0;
    valid_o = 1'b0;
    for (int unsigned i = 0; i < N; i++) begin
      k = (int'(ptr_q) + i) % N;
      if (!valid_o && req_i[k]) begin
        valid_o  = 1'b1;
        idx_o    = IW'(k);
        gnt_o[k] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                   ptr_q <= '0;
    else if (advance_i && valid_o) ptr_q <= (int'(idx_o) == N - 1) ? '0 : IW'(idx_o + 1'b1);
  end

endmodule
