// tb_weight_bram: writes random weight words (16 weights of 3 bits) to random
// addresses of the weight memory, reads them back and checks the data, the one-cycle
// read latency and that the read data holds while rd_en is low.
module tb_weight_bram;
  import snn_pkg::*;
  localparam int DEPTH = WMEM_DEPTH, W = LIN_P * WB, NW = 40;

  logic clk = 0;
  always #1 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [$clog2(DEPTH)-1:0] wr_addr = '0, rd_addr = '0;
  logic [LIN_P-1:0][WB-1:0] wr_data = '0, rd_data;

  weight_bram dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] ref_mem [int];
  int addrs [NW];

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NW; i++) begin
      @(negedge clk);
      addrs[i] = (i == 0) ? 0 : (i == 1) ? DEPTH - 1 : $urandom_range(DEPTH - 1);
      wr_en = 1; wr_addr = addrs[i]; wr_data = rnd();
      ref_mem[addrs[i]] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < NW; i++) begin
      rd_en = 1; rd_addr = addrs[i];
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_data != ref_mem[addrs[i]]) begin failures++; $display("FAIL read %0d", addrs[i]); end
      @(negedge clk);
      checks++;
      if (rd_data != ref_mem[addrs[i]]) begin failures++; $display("FAIL hold %0d", addrs[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
