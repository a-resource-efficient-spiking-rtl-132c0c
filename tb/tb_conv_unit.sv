// tb_conv_unit: self-checking test of one convolution unit at its default size
// (30 columns, 5x5 kernel, stride 1).
//
// Convolves a random 2-channel, 9-row, 32-column image of 3-bit radix-encoded
// activations (T = 3) with random 3-bit kernels, feeding the unit one binary row per
// (time step, input channel, row) in the order the controller uses, and compares each
// requantized output row with a reference computed on integers (saturating at
// 2^T_MAX-1). Also checks that the outputs are not almost all clipped or zero. Also checks the latency
// from row_valid to out_valid (KC+2 cycles).
module tb_conv_unit;
  import snn_pkg::*;

  localparam int X = CONV_X, K = CONV_K, RW = ROW_W;
  localparam int T = 3, CIN = 2, H = 9, SHF = 1;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic kern_load = 0;
  logic [K-1:0][K-1:0][WB-1:0] kern_in = '0;
  logic row_valid = 0;
  logic [RW-1:0] row_bits = '0;
  psum_mode_e psum_mode = PS_FIRST;
  logic out_en = 0, final_pass = 0;
  logic [4:0] out_row = '0;
  logic [4:0] rq_shift = 5'(SHF);
  logic [TS_W-1:0] num_steps = TS_W'(T_MAX);   // saturate at 2^T_MAX-1 so few outputs clip
  logic busy, out_valid;
  logic [X-1:0][T_MAX-1:0] act_out;

  conv_unit dut (.*);

  int checks = 0, failures = 0;
  int img [CIN][H][RW];
  int kw [CIN][K][K];
  int lat;
  int n_mid = 0, n_out = 0;

  function automatic int ref_out(int oy, int ox);
    int s = 0, v;
    for (int c = 0; c < CIN; c++)
      for (int ky = 0; ky < K; ky++)
        for (int kx = 0; kx < K; kx++)
          if (ox + kx < RW) s += kw[c][ky][kx] * img[c][oy+ky][ox+kx];
    if (s < 0) return 0;
    v = s >> SHF;
    return (v > (1 << T_MAX) - 1) ? (1 << T_MAX) - 1 : v;
  endfunction

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (img[c, y, x]) img[c][y][x] = $urandom_range((1 << T) - 1);
    foreach (kw[c, y, x]) kw[c][y][x] = int'($urandom_range(6)) - 3;   // zero-mean weights
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < T; t++) begin
      for (int c = 0; c < CIN; c++) begin
        @(negedge clk);
        kern_load = 1;
        for (int ky = 0; ky < K; ky++) for (int kx = 0; kx < K; kx++) kern_in[ky][kx] = WB'(kw[c][ky][kx]);
        @(negedge clk);
        kern_load = 0;
        for (int y = 0; y < H; y++) begin
          row_valid = 1;
          for (int x = 0; x < RW; x++) row_bits[x] = img[c][y][x][T-1-t];
          psum_mode  = (t == 0 && c == 0) ? PS_FIRST : (c == 0) ? PS_SHIFT : PS_ACC;
          out_en     = (y >= K - 1);
          out_row    = 5'(y - (K - 1));
          final_pass = (t == T - 1) && (c == CIN - 1);
          @(negedge clk);
          row_valid = 0;
          lat = 1;
          while (busy) begin @(negedge clk); lat++; end
          if (final_pass && out_en) begin
            checks++;
            if (!out_valid || lat != K + 2) begin
              failures++;
              $display("FAIL latency: out_valid=%0b after %0d cycles", out_valid, lat);
            end
            for (int ox = 0; ox <= RW - K && ox < X; ox++) begin
              checks++;
              n_out++;
              if (act_out[ox] != 0 && act_out[ox] != '1) n_mid++;
              if (int'(act_out[ox]) != ref_out(y - (K - 1), ox)) begin
                failures++;
                if (failures < 10) $display("FAIL row %0d col %0d: got %0d exp %0d", y - (K-1), ox, act_out[ox], ref_out(y - (K-1), ox));
              end
            end
          end
        end
      end
    end
    checks++;
    if (n_mid * 4 < n_out) begin failures++; $display("FAIL too few unclipped outputs %0d of %0d", n_mid, n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
