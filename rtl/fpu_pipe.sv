// Parametric pipeline of NUM_REGS ready/valid register stages.
//
// Used inside every FPU operation group to implement the "0-2 pipeline registers" knob of
// the shared FPUs. With NUM_REGS = 0 the stage is a wire (combinational FPU, result in the
// issue cycle). With NUM_REGS = n a value appears n cycles after it was accepted; a stage
// holds its value while the next one is full and not draining, and in_ready_o falls only
// when every stage is occupied and the output is stalled (e.g. by a write-back conflict).
// Stage i is ready when it is empty or stage i+1 accepts, so full throughput is one
// operation per cycle. The register placement at the output of the group is our choice.
module fpu_pipe #(
  parameter int unsigned NUM_REGS = 1,
  parameter type         T        = logic [31:0]
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic in_valid_i,
  output logic in_ready_o,
  input  T     in_data_i,
  output logic out_valid_o,
  input  logic out_ready_i,
  output T     out_data_o
);

  if (NUM_REGS == 0) begin : g_wire
    assign out_valid_o = in_valid_i;
    assign in_ready_o  = out_ready_i;
    assign out_data_o  = in_data_i;
  end else begin : g_regs
    logic [NUM_REGS:0] valid;
    logic [NUM_REGS:0] ready;
    T     [NUM_REGS:0] data;

    assign valid[0] = in_valid_i;
    assign data[0]  = in_data_i;
    assign in_ready_o = ready[0];
    assign ready[NUM_REGS] = out_ready_i;

    for (genvar i = 0; i < NUM_REGS; i++) begin : g_stage
      assign ready[i] = !valid[i+1] || ready[i+1];
      always_ff @(posedge clk_i or negedge rst_ni) begin
        if (!rst_ni) begin
          valid[i+1] <= 1'b0;
          data[i+1]  <= '0;
        end else if (ready[i]) begin
          valid[i+1] <= valid[i];
          if (valid[i]) data[i+1] <= data[i];
        end
      end
    end

    assign out_valid_o = valid[NUM_REGS];
    assign out_data_o  = data[NUM_REGS];
  end

endmodule
