// tb_linear_unit: self-checking test of the linear unit (16 parallel outputs).
//
// Streams 25 input neurons with random T-bit activations for T = 4 time steps, one
// neuron and one word of 16 random 3-bit weights per cycle, spikes taken most
// significant bit first, with clear at the first neuron and shift at the first neuron of
// each later step. The accumulators must then equal sum_i w[o][i] * a[i] and act_out
// must be their ReLU/shift/saturate requantization. Run twice to check clear.
module tb_linear_unit;
  import snn_pkg::*;

  localparam int P = LIN_P, NIN = 25, T = 4, SHF = 3;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic valid = 0, clear = 0, shift = 0, spike = 0;
  logic [P-1:0][WB-1:0] w = '0;
  logic [4:0] rq_shift = 5'(SHF);
  logic [TS_W-1:0] num_steps = TS_W'(T);
  logic [P-1:0][PSUM_W-1:0] acc;
  logic [P-1:0][T_MAX-1:0] act_out;

  linear_unit dut (.*);

  int checks = 0, failures = 0;
  int a [NIN];
  int wt [P][NIN];

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      foreach (a[i]) a[i] = $urandom_range((1 << T) - 1);
      foreach (wt[p, i]) wt[p][i] = int'($urandom_range(7)) - 4;
      for (int t = 0; t < T; t++)
        for (int i = 0; i < NIN; i++) begin
          @(negedge clk);
          valid = 1;
          clear = (t == 0 && i == 0);
          shift = (t != 0 && i == 0);
          spike = a[i][T-1-t];
          for (int p = 0; p < P; p++) w[p] = WB'(wt[p][i]);
        end
      @(negedge clk);
      valid = 0;
      for (int p = 0; p < P; p++) begin
        automatic int s = 0, e;
        for (int i = 0; i < NIN; i++) s += wt[p][i] * a[i];
        e = (s < 0) ? 0 : ((s >> SHF) > (1 << T) - 1 ? (1 << T) - 1 : (s >> SHF));
        checks += 2;
        if ($signed(acc[p]) != s) begin failures++; $display("FAIL acc[%0d] got %0d exp %0d", p, $signed(acc[p]), s); end
        if (int'(act_out[p]) != e) begin failures++; $display("FAIL act[%0d] got %0d exp %0d", p, act_out[p], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
