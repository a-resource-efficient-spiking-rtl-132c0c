// kernel_bram: on-chip memory of the convolution kernels.
//
// One word holds the kernels that the N convolution units apply at the same time: for
// an output-channel group g and input channel c, kernel u of the word belongs to output
// channel g*N+u. Each kernel is KR x KC signed WB-bit values, row-major. The layers'
// kernels sit one after another; each layer's first word is given in its layer
// descriptor. The write port is filled by the host or, when the parameters do not fit
// on chip, from external DRAM before the layer. The paper gives the memory and its
// per-layer organisation; the word layout is this design's choice.
//
// Timing: simple dual port, one write and one read per cycle; read data is registered
// and appears the cycle after rd_en, then holds until the next read.
module kernel_bram
  import snn_pkg::*;
#(
  parameter int unsigned DEPTH = KMEM_DEPTH,
  parameter int unsigned N     = N_CU,
  parameter int unsigned KR    = CONV_K,
  parameter int unsigned KC    = CONV_K,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                                  clk,
  input  logic                                  wr_en,
  input  logic [AW-1:0]                         wr_addr,
  input  logic [N-1:0][KR-1:0][KC-1:0][WB-1:0]  wr_data,
  input  logic                                  rd_en,
  input  logic [AW-1:0]                         rd_addr,
  output logic [N-1:0][KR-1:0][KC-1:0][WB-1:0]  rd_data
);

  logic [N-1:0][KR-1:0][KC-1:0][WB-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
