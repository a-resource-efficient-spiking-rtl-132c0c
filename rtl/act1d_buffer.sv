// act1d_buffer: ping-pong buffer of one-dimensional activations (fully connected layers).
//
// Two banks of DEPTH words; a word holds P neurons of T_MAX bits, neuron n at word n/P,
// lane n%P. Reads come from the bank selected by sel and writes go to the other one;
// swap exchanges them after each layer. Writes have a per-lane enable, so the flatten
// step can fill the buffer one neuron at a time while a linear layer writes a whole
// group of P results at once. Ping-pong operation follows the paper; the word
// organisation is this design's choice.
//
// Timing: read data is registered (valid the cycle after rd_en) and holds until the
// next read. swap takes effect at the next clock edge.
module act1d_buffer
  import snn_pkg::*;
#(
  parameter int unsigned DEPTH = ACT1D_DEPTH,
  parameter int unsigned P     = LIN_P,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    swap,
  output logic                    sel,
  input  logic                    rd_en,
  input  logic [AW-1:0]           rd_addr,
  output logic [P-1:0][T_MAX-1:0] rd_data,
  input  logic                    wr_en,
  input  logic [AW-1:0]           wr_addr,
  input  logic [P-1:0]            wr_lane,
  input  logic [P-1:0][T_MAX-1:0] wr_data
);

  logic [P-1:0][T_MAX-1:0] ping [DEPTH];
  logic [P-1:0][T_MAX-1:0] pong [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    sel <= 1'b0;
    else if (swap) sel <= ~sel;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= sel ? pong[rd_addr] : ping[rd_addr];
    for (int p = 0; p < P; p++) begin
      if (wr_en && wr_lane[p] && sel)  ping[wr_addr][p] <= wr_data[p];
      if (wr_en && wr_lane[p] && !sel) pong[wr_addr][p] <= wr_data[p];
    end
  end

endmodule
