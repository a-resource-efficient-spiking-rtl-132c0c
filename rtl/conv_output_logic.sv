// conv_output_logic: per-column accumulation over input channels and time steps, with
// the partial-sum memory of a convolution unit.
//
// For each of the X columns the adder-array result is either stored as it is (first
// input channel of the first time step), added to the stored partial sum (later input
// channels), or added to the stored partial sum shifted left by one bit (first input
// channel of a later time step). The left shift applies the radix weight: a spike at
// time step t counts twice as much as one at t+1. This is the adder, the shift and the
// two multiplexers of the paper's output-logic figure. In the final pass (last time
// step, last input channel) the new sums are also passed through ReLU and requantized
// to radix-encoded activations. The memory holds one word of X full-precision sums per
// output row of the output channel being computed.
//
// Timing: rd_en/rd_addr fetch the stored row (one-cycle read); at least one cycle later
// wr_en commits the new sums to wr_addr. act_out and out_valid are registered and
// appear the cycle after a final-pass commit.
module conv_output_logic
  import snn_pkg::*;
#(
  parameter int unsigned X     = 30,
  parameter int unsigned ACC_W = 10,
  parameter int unsigned DEPTH = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     rd_en,
  input  logic [AW-1:0]            rd_addr,
  input  logic                     wr_en,
  input  logic [AW-1:0]            wr_addr,
  input  psum_mode_e               mode,
  input  logic                     final_pass,
  input  logic [4:0]               rq_shift,
  input  logic [TS_W-1:0]          num_steps,
  input  logic [X-1:0][ACC_W-1:0]  arr,         // signed adder-array results
  output logic [X-1:0][T_MAX-1:0]  act_out,
  output logic                     out_valid
);

  logic [X-1:0][PSUM_W-1:0] mem [DEPTH];
  logic [X-1:0][PSUM_W-1:0] rd_q;
  logic [X-1:0][PSUM_W-1:0] nsum;

  always_ff @(posedge clk) begin
    if (rd_en) rd_q <= mem[rd_addr];
    if (wr_en) mem[wr_addr] <= nsum;
  end

  always_comb begin
    for (int x = 0; x < X; x++) begin
      logic [PSUM_W-1:0] a;
      a = {{(PSUM_W-ACC_W){arr[x][ACC_W-1]}}, arr[x]};
      unique case (mode)
        PS_ACC:   nsum[x] = a + rd_q[x];
        PS_SHIFT: nsum[x] = a + (rd_q[x] << 1);
        default:  nsum[x] = a;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_out   <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= wr_en && final_pass;
      if (wr_en && final_pass)
        for (int x = 0; x < X; x++) act_out[x] <= requant(nsum[x], rq_shift, num_steps);
    end
  end

endmodule
