// conv_adder_array: the Y x X adder array of a convolution unit.
//
// Adder row y holds kernel row y in a rotating register; the value at position 0 is the
// one applied in the current cycle and the row rotates by one on every step, so row y
// walks through K(y,0) .. K(y,KC-1) while the input shift register walks through the
// kernel columns. Each adder adds its kernel value when the activation tap of its column
// carries a spike and adds zero otherwise (the multiplexer in front of each adder).
// On the first step of a kernel row (first=1) adder row y starts from the partial sum
// that row y-1 finished for the previous input row, and row 0 starts from zero; so the
// partial sums travel from the top row to the bottom row, one row per input row, and
// the bottom row holds a finished output row after the last kernel column.
// The structure follows the paper's figure of the convolution unit; the register
// widths and the rotating kernel register are this design's choices.
//
// Timing: one step per cycle (step=1). bottom is the registered content of the last
// row and is valid the cycle after the KC-th step of an input row.
module conv_adder_array #(
  parameter int unsigned X     = 30,  // adder columns (output values per row)
  parameter int unsigned KR    = 5,   // adder rows = kernel rows
  parameter int unsigned KC    = 5,   // kernel columns
  parameter int unsigned WB    = 3,   // kernel value width
  parameter int unsigned ACC_W = 10   // adder width
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              kern_load,  // load a whole kernel
  input  logic [KR-1:0][KC-1:0][WB-1:0]     kern_in,    // signed values, [row][col]
  input  logic                              step,       // apply one kernel column
  input  logic                              first,      // first column of a kernel row
  input  logic [X-1:0]                      tap,        // spike seen by each column
  output logic [X-1:0][ACC_W-1:0]           bottom      // signed sums of the last row
);

  logic [KR-1:0][KC-1:0][WB-1:0] kreg;
  logic [KR-1:0][X-1:0][ACC_W-1:0] acc;

  always_ff @(posedge clk) begin
    if (kern_load) begin
      kreg <= kern_in;
    end else if (step) begin
      for (int y = 0; y < KR; y++) begin
        for (int k = 0; k < KC - 1; k++) kreg[y][k] <= kreg[y][k+1];
        kreg[y][KC-1] <= kreg[y][0];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
    end else if (step) begin
      for (int y = 0; y < KR; y++) begin
        for (int x = 0; x < X; x++) begin
          logic [ACC_W-1:0] base, term;
          term = tap[x] ? {{(ACC_W-WB){kreg[y][0][WB-1]}}, kreg[y][0]} : '0;
          if (!first)      base = acc[y][x];
          else if (y == 0) base = '0;
          else             base = acc[y-1][x];
          acc[y][x] <= base + term;
        end
      end
    end
  end

  assign bottom = acc[KR-1];

endmodule
