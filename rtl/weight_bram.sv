// weight_bram: on-chip memory of the fully connected layers' weights.
//
// One word holds P signed WB-bit weights, one per output neuron of a group of P
// outputs the linear unit computes together. For a layer with n_in inputs, the word of
// output group g and input neuron i sits at param_base + g*n_in + i, so a group's
// weights are read one word per cycle in input order. Filled through the write port by
// the host or from external DRAM. The paper gives the memory and the one-word-per-cycle
// fetch; the layout is this design's choice.
//
// Timing: simple dual port; read data is registered, valid the cycle after rd_en, and
// holds until the next read.
module weight_bram
  import snn_pkg::*;
#(
  parameter int unsigned DEPTH = WMEM_DEPTH,
  parameter int unsigned P     = LIN_P,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  wr_en,
  input  logic [AW-1:0]         wr_addr,
  input  logic [P-1:0][WB-1:0]  wr_data,
  input  logic                  rd_en,
  input  logic [AW-1:0]         rd_addr,
  output logic [P-1:0][WB-1:0]  rd_data
);

  logic [P-1:0][WB-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
