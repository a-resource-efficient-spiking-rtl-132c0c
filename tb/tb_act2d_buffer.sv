// tb_act2d_buffer: checks the ping-pong behaviour of the 2D activation buffer. The host
// port fills the bank being read, the layer write port fills the other bank, and after
// swap the roles exchange: data written as results become readable, while the old
// contents of the read bank stay untouched by layer writes.
module tb_act2d_buffer;
  import snn_pkg::*;
  localparam int DEPTH = ACT2D_DEPTH, AW = $clog2(ACT2D_DEPTH), NW = 16;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic swap = 0, sel, rd_en = 0, wr_en = 0, host_wr_en = 0;
  logic [AW-1:0] rd_addr = '0, wr_addr = '0, host_wr_addr = '0;
  logic [ROW_W-1:0][T_MAX-1:0] rd_data, wr_data = '0, host_wr_data = '0;

  act2d_buffer dut (.*);

  int checks = 0, failures = 0;
  logic [ROW_W*T_MAX-1:0] hostv [NW], resv [NW];

  function automatic logic [ROW_W*T_MAX-1:0] rnd();
    logic [ROW_W*T_MAX-1:0] v;
    for (int i = 0; i < ROW_W * T_MAX; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  task automatic rd_check(int a, logic [ROW_W*T_MAX-1:0] e, string what);
    rd_en = 1; rd_addr = AW'(a);
    @(negedge clk); rd_en = 0;
    checks++;
    if (rd_data != e) begin failures++; $display("FAIL %s addr %0d", what, a); end
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (sel !== 1'b0) failures++;
    for (int i = 0; i < NW; i++) begin       // host fills the read bank (ping)
      hostv[i] = rnd();
      host_wr_en = 1; host_wr_addr = AW'(i * 7); host_wr_data = hostv[i];
      @(negedge clk);
    end
    host_wr_en = 0;
    for (int i = 0; i < NW; i++) begin       // layer results into the write bank (pong)
      resv[i] = rnd();
      wr_en = 1; wr_addr = AW'(i * 7); wr_data = resv[i];
      @(negedge clk);
    end
    wr_en = 0;
    for (int i = 0; i < NW; i++) rd_check(i * 7, hostv[i], "ping before swap");
    swap = 1; @(negedge clk); swap = 0;
    checks++; if (sel !== 1'b1) begin failures++; $display("FAIL sel after swap"); end
    for (int i = 0; i < NW; i++) rd_check(i * 7, resv[i], "pong after swap");
    for (int i = 0; i < NW; i++) begin       // next layer writes back into ping
      resv[i] = rnd();
      wr_en = 1; wr_addr = AW'(DEPTH - 1 - i); wr_data = resv[i];
      @(negedge clk);
    end
    wr_en = 0;
    swap = 1; @(negedge clk); swap = 0;
    for (int i = 0; i < NW; i++) rd_check(DEPTH - 1 - i, resv[i], "ping after second swap");
    for (int i = 0; i < NW; i++) rd_check(i * 7, hostv[i], "ping untouched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
