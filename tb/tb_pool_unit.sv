// tb_pool_unit: self-checking test of the pooling unit at its default size (14 columns,
// 2x2 window, stride 2). Feeds 8 random rows of 6-bit activations and compares every
// output row with the integer average of each window (rounded down); checks that an
// output appears only for rows that finish a window and that it is ready KC+1 cycles
// after the row was offered.
module tb_pool_unit;
  import snn_pkg::*;

  localparam int X = POOL_X, K = POOL_K, S = POOL_STR, RW = ROW_W, H = 8;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic row_valid = 0, out_en = 0;
  logic [RW-1:0][T_MAX-1:0] row_vals = '0;
  logic busy, out_valid;
  logic [X-1:0][T_MAX-1:0] act_out;

  pool_unit dut (.*);

  int checks = 0, failures = 0, lat, outs = 0;
  int img [H][RW];

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (img[y, x]) img[y][x] = $urandom_range((1 << T_MAX) - 1);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int y = 0; y < H; y++) begin
      @(negedge clk);
      row_valid = 1;
      out_en    = (y % S) == (K - 1);
      for (int x = 0; x < RW; x++) row_vals[x] = T_MAX'(img[y][x]);
      @(negedge clk);
      row_valid = 0;
      lat = 1;
      while (busy) begin
        checks++;
        if (out_valid) begin failures++; $display("FAIL early out_valid"); end
        @(negedge clk); lat++;
      end
      checks++;
      if (out_valid != out_en || (out_en && lat != K + 1)) begin
        failures++; $display("FAIL row %0d: out_valid=%0b lat=%0d", y, out_valid, lat);
      end
      if (out_en) begin
        outs++;
        for (int x = 0; x < X; x++) begin
          automatic int e = (img[y-1][2*x] + img[y-1][2*x+1] + img[y][2*x] + img[y][2*x+1]) >> 2;
          checks++;
          if (int'(act_out[x]) != e) begin
            failures++; $display("FAIL out row %0d col %0d: got %0d exp %0d", y / 2, x, act_out[x], e);
          end
        end
      end
    end
    checks++;
    if (outs != H / 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
