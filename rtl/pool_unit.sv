// pool_unit: row-based average pooling of radix-encoded activations.
//
// Built like a convolution unit without kernel values: an input shift register taps
// every STRIDE-th value, and a KR x X adder array adds the KC values of a window row
// per adder row, handing each partial sum one adder row down per input row. The bottom
// row therefore holds the window sums of one output row after input row r*STRIDE+KR-1.
// The unit works on whole T-bit activation values rather than on single time steps, so
// it needs neither kernel values nor output logic for input-channel or time-step
// accumulation; the sum is divided by the window size with a right shift (windows with a
// power-of-two size). The paper gives the row-based structure and the absence of kernel
// values and output logic; average (not max) pooling, working on whole activation values
// and the handshake are this design's choices.
//
// Timing: row_valid at cycle 0 -> steps at cycles 1..KC -> act_out/out_valid registered
// at cycle KC+1 (out_valid only when out_en was set with the row). busy is high during
// cycles 1..KC.
module pool_unit
  import snn_pkg::*;
#(
  parameter int unsigned X      = POOL_X,
  parameter int unsigned KR     = POOL_K,
  parameter int unsigned KC     = POOL_K,
  parameter int unsigned STRIDE = POOL_STR,
  parameter int unsigned RW     = ROW_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    row_valid,
  input  logic [RW-1:0][T_MAX-1:0] row_vals,
  input  logic                    out_en,
  output logic                    busy,
  output logic                    out_valid,
  output logic [X-1:0][T_MAX-1:0] act_out
);

  localparam int unsigned SL    = (X - 1) * STRIDE + KC;
  localparam int unsigned SUM_W = T_MAX + $clog2(KR * KC) + 1;
  localparam int unsigned SH    = $clog2(KR * KC);
  localparam int unsigned CW    = $clog2(KC + 1);

  logic [SL-1:0][T_MAX-1:0]      sreg;
  logic [KR-1:0][X-1:0][SUM_W-1:0] acc;
  logic [CW-1:0]                 cnt;
  logic                          run, out_en_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sreg      <= '0;
      acc       <= '0;
      cnt       <= '0;
      run       <= 1'b0;
      out_en_q  <= 1'b0;
      out_valid <= 1'b0;
      act_out   <= '0;
    end else begin
      out_valid <= 1'b0;
      if (!run) begin
        if (row_valid) begin
          for (int i = 0; i < SL; i++) sreg[i] <= (i < RW) ? row_vals[i] : '0;
          out_en_q <= out_en;
          cnt      <= '0;
          run      <= 1'b1;
        end
      end else begin
        sreg <= sreg >> T_MAX;
        cnt  <= cnt + 1'b1;
        for (int y = 0; y < KR; y++)
          for (int x = 0; x < X; x++) begin
            logic [SUM_W-1:0] base;
            if (cnt != '0)   base = acc[y][x];
            else if (y == 0) base = '0;
            else             base = acc[y-1][x];
            acc[y][x] <= base + SUM_W'(sreg[x*STRIDE]);
          end
        if (cnt == CW'(KC - 1)) begin
          run <= 1'b0;
          out_valid <= out_en_q;
          // The bottom row's final sum is the value being written this cycle.
          for (int x = 0; x < X; x++) begin
            logic [SUM_W-1:0] fin;
            fin = acc[KR-1][x] + SUM_W'(sreg[x*STRIDE]);  // KC >= 2
            if (out_en_q) act_out[x] <= T_MAX'(fin >> SH);
          end
        end
      end
    end
  end

  assign busy = run;

endmodule
