// act2d_buffer: ping-pong buffer of two-dimensional activations.
//
// Two banks (ping and pong) of DEPTH words; a word is one feature-map row of RW
// activations of T_MAX bits, addressed as channel*rows + row. One bank is read by the
// layer being computed while the layer's results are written into the other; swap
// exchanges the roles at the end of the layer, so activations alternate between the
// banks from layer to layer. The host port writes the input image into the bank that
// the first layer reads. Ping-pong operation follows the paper; the word organisation
// and the host port are this design's choices.
//
// Timing: read data is registered (valid the cycle after rd_en) and holds until the
// next read. swap takes effect at the next clock edge. sel tells which bank is read.
module act2d_buffer
  import snn_pkg::*;
#(
  parameter int unsigned DEPTH = ACT2D_DEPTH,
  parameter int unsigned RW    = ROW_W,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     swap,
  output logic                     sel,        // 0: ping is read, pong written
  input  logic                     rd_en,
  input  logic [AW-1:0]            rd_addr,
  output logic [RW-1:0][T_MAX-1:0] rd_data,
  input  logic                     wr_en,
  input  logic [AW-1:0]            wr_addr,
  input  logic [RW-1:0][T_MAX-1:0] wr_data,
  input  logic                     host_wr_en,
  input  logic [AW-1:0]            host_wr_addr,
  input  logic [RW-1:0][T_MAX-1:0] host_wr_data
);

  logic [RW-1:0][T_MAX-1:0] ping [DEPTH];
  logic [RW-1:0][T_MAX-1:0] pong [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    sel <= 1'b0;
    else if (swap) sel <= ~sel;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= sel ? pong[rd_addr] : ping[rd_addr];
    if (wr_en && sel)       ping[wr_addr] <= wr_data;
    if (host_wr_en && !sel) ping[host_wr_addr] <= host_wr_data;
  end

  always_ff @(posedge clk) begin
    if (wr_en && !sel)     pong[wr_addr] <= wr_data;
    if (host_wr_en && sel) pong[host_wr_addr] <= host_wr_data;
  end

  a_one_writer: assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && host_wr_en));

endmodule
