// linear_unit: the row of adders of the fully connected layers.
//
// P adders, one per output neuron computed in parallel. Every cycle with valid=1 the
// unit receives one input neuron's spike for the current time step and P new weights
// (one per output neuron, read from the weight memory that cycle) and adds each weight
// to its accumulator when the spike is set. At the first input neuron of a time step
// the accumulators are first shifted left by one bit (shift=1), which gives earlier
// time steps their larger radix weight; clear=1 starts a new group of outputs. act_out
// is the ReLU/requantized view of the accumulators, acc their full-precision value.
// The one-weight-per-cycle data flow and the adder row follow the paper; the
// clear/shift control and the requantizer are this design's choices.
//
// Timing: accumulators update at the clock edge of a valid cycle; act_out and acc
// reflect it one cycle later. Rate: one input neuron per cycle.
module linear_unit
  import snn_pkg::*;
#(
  parameter int unsigned P = LIN_P
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     valid,
  input  logic                     clear,     // start from zero (first neuron, first step)
  input  logic                     shift,     // shift left first (first neuron, later step)
  input  logic                     spike,
  input  logic [P-1:0][WB-1:0]     w,         // signed weights
  input  logic [4:0]               rq_shift,
  input  logic [TS_W-1:0]          num_steps,
  output logic [P-1:0][PSUM_W-1:0] acc,       // signed sums
  output logic [P-1:0][T_MAX-1:0]  act_out
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
    end else if (valid) begin
      for (int p = 0; p < P; p++) begin
        logic [PSUM_W-1:0] base, term;
        term = spike ? {{(PSUM_W-WB){w[p][WB-1]}}, w[p]} : '0;
        if (clear)      base = '0;
        else if (shift) base = acc[p] << 1;
        else            base = acc[p];
        acc[p] <= base + term;
      end
    end
  end

  always_comb
    for (int p = 0; p < P; p++) act_out[p] = requant(acc[p], rq_shift, num_steps);

  a_clear_shift_excl: assert property (@(posedge clk) disable iff (!rst_n) valid |-> !(clear && shift));

endmodule
