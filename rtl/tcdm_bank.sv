// One bank of the tightly-coupled data memory (TCDM).
//
// A single-port word-wide SRAM with byte enables and one-cycle read latency: a request in
// cycle t (req_i, we_i, addr_i, be_i, wdata_i) is performed at the clock edge, and read
// data are valid on rdata_o in cycle t+1 and held until the next read. Written as an array
// so that it can be simulated and mapped to an SRAM macro by synthesis. The cluster's
// TCDM is NB_BANKS of these behind the logarithmic interconnect; the paper gives its size
// (64 kB for eight cores) and its single-cycle latency, the bank count is our choice.
module tcdm_bank #(
  parameter int unsigned WORDS = 1024,
  parameter int unsigned AW    = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic          clk_i,
  input  logic          req_i,
  input  logic          we_i,
  input  logic [AW-1:0] addr_i,
  input  logic [3:0]    be_i,
  input  logic [31:0]   wdata_i,
  output logic [31:0]   rdata_o
);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < 4; b++)
          if (be_i[b]) mem[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end

endmodule
