// tb_act1d_buffer: checks the 1D activation ping-pong buffer: single-lane writes (as
// the flatten step makes them) build up words neuron by neuron, whole-word writes (as a
// linear layer makes them) replace words, reads see the other bank until swap.
module tb_act1d_buffer;
  import snn_pkg::*;
  localparam int P = LIN_P, AW = $clog2(ACT1D_DEPTH), NN = 100;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic swap = 0, sel, rd_en = 0, wr_en = 0;
  logic [AW-1:0] rd_addr = '0, wr_addr = '0;
  logic [P-1:0] wr_lane = '0;
  logic [P-1:0][T_MAX-1:0] rd_data, wr_data = '0;

  act1d_buffer dut (.*);

  int checks = 0, failures = 0;
  int nv [NN];
  logic [P-1:0][T_MAX-1:0] word;

  initial begin : watchdog
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // flatten-style writes into pong (sel = 0 means ping is read)
    for (int n = 0; n < NN; n++) begin
      nv[n] = $urandom_range((1 << T_MAX) - 1);
      wr_en = 1; wr_addr = AW'(n / P); wr_lane = P'(1) << (n % P);
      wr_data = {P{T_MAX'(nv[n])}};
      @(negedge clk);
    end
    wr_en = 0;
    swap = 1; @(negedge clk); swap = 0;
    for (int a = 0; a * P < NN; a++) begin
      rd_en = 1; rd_addr = AW'(a); @(negedge clk); rd_en = 0;
      for (int p = 0; p < P && a * P + p < NN; p++) begin
        checks++;
        if (int'(rd_data[p]) != nv[a*P+p]) begin failures++; $display("FAIL neuron %0d", a*P+p); end
      end
    end
    // whole-word write into ping, must not disturb pong
    for (int i = 0; i < P; i++) word[i] = T_MAX'($urandom);
    wr_en = 1; wr_addr = AW'(3); wr_lane = '1; wr_data = word; @(negedge clk); wr_en = 0;
    rd_en = 1; rd_addr = AW'(3); @(negedge clk); rd_en = 0;
    for (int p = 0; p < P; p++) begin
      checks++;
      if (int'(rd_data[p]) != nv[3*P+p]) begin failures++; $display("FAIL pong disturbed lane %0d", p); end
    end
    swap = 1; @(negedge clk); swap = 0;
    rd_en = 1; rd_addr = AW'(3); @(negedge clk); rd_en = 0;
    checks++;
    if (rd_data != word) begin failures++; $display("FAIL word write"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
