// tb_snn_accel: end-to-end test of the accelerator at its default parameters.
//
// Runs a LeNet-5 shaped network (32x32x1 - 6C5 - P2 - 16C5 - P2 - 120C5 - 120 - 84 - 10)
// with random 3-bit weights and a random input image, four times: with T = 4 time steps
// (the main LeNet-5 operating point) and then with T = 3, 5 and 6 (the spike-train
// lengths of the accuracy/latency sweep), each with fresh weights and image. A reference
// model computes every layer on plain integers (a radix-encoded spike train of T steps
// is worth exactly its T-bit integer, so the reference needs no spikes). Every row the
// accelerator writes into its activation buffers is compared with the reference, as are
// the final scores. The kernels of the third convolution layer are provided only when
// the accelerator requests them (external parameter load). The test also counts the
// mechanisms of the design and fails if one never happened, and checks the linear
// layers' rate of one weight word per cycle.
module tb_snn_accel;
  import snn_pkg::*;

  int T = 4;
  localparam int N = N_CU;
  localparam int P = LIN_P;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic cfg_we = 0; logic [3:0] cfg_addr = '0; layer_t cfg_data = '0;
  logic start = 0; logic [4:0] num_layers = '0; logic [TS_W-1:0] num_steps = TS_W'(T);
  logic busy, done;
  logic img_we = 0; logic [7:0] img_addr = '0; logic [ROW_W-1:0][T_MAX-1:0] img_data = '0;
  logic k_we = 0; logic [8:0] k_addr = '0; logic [N-1:0][CONV_K-1:0][CONV_K-1:0][WB-1:0] k_data = '0;
  logic w_we = 0; logic [9:0] w_addr = '0; logic [P-1:0][WB-1:0] w_data = '0;
  logic param_req; logic [3:0] param_layer; logic param_done = 0;
  logic result_valid; logic [5:0] result_group; logic [P-1:0][PSUM_W-1:0] result_scores;

  snn_accel dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ---------------- reference model ----------------
  int img [1][32][32];
  int k1 [6][1][5][5];   int f1 [6][28][28];  int q1 [6][14][14];
  int k2 [16][6][5][5];  int f2 [16][10][10]; int q2 [16][5][5];
  int k3 [120][16][5][5]; int f3 [120];
  int w1 [84][120]; int h1 [84];
  int w2 [10][84];  int sc [10];
  int sh [8];
  int saturations = 0;

  function automatic int rq(int s, int shf);
    int v;
    if (s < 0) return 0;
    v = s >> shf;
    if (v > (1 << T) - 1) begin saturations++; return (1 << T) - 1; end
    return v;
  endfunction

  // smallest shift that keeps the largest sum in range, minus one (so that some saturate)
  function automatic int pick_shift(int mx);
    int s = 0;
    while ((mx >> s) > (1 << T) - 1) s++;
    return (s > 0) ? s - 1 : 0;
  endfunction

  function automatic int rw();  // random zero-mean 3-bit signed weight
    return int'($urandom_range(6)) - 3;
  endfunction

  int s, mx;
  task automatic build_reference();
    saturations = 0;
    for (int y = 0; y < 32; y++) for (int x = 0; x < 32; x++) img[0][y][x] = $urandom_range((1<<T)-1);
    foreach (k1[a,b,c,e]) k1[a][b][c][e] = rw();
    foreach (k2[a,b,c,e]) k2[a][b][c][e] = rw();
    foreach (k3[a,b,c,e]) k3[a][b][c][e] = rw();
    foreach (w1[a,b]) w1[a][b] = rw();
    foreach (w2[a,b]) w2[a][b] = rw();
    // conv1
    mx = 0;
    for (int o = 0; o < 6; o++) for (int y = 0; y < 28; y++) for (int x = 0; x < 28; x++) begin
      s = 0;
      for (int ky = 0; ky < 5; ky++) for (int kx = 0; kx < 5; kx++) s += k1[o][0][ky][kx] * img[0][y+ky][x+kx];
      f1[o][y][x] = s; if (s > mx) mx = s;
    end
    sh[0] = pick_shift(mx);
    for (int o = 0; o < 6; o++) for (int y = 0; y < 28; y++) for (int x = 0; x < 28; x++) f1[o][y][x] = rq(f1[o][y][x], sh[0]);
    for (int c = 0; c < 6; c++) for (int y = 0; y < 14; y++) for (int x = 0; x < 14; x++)
      q1[c][y][x] = (f1[c][2*y][2*x] + f1[c][2*y][2*x+1] + f1[c][2*y+1][2*x] + f1[c][2*y+1][2*x+1]) >> 2;
    // conv2
    mx = 0;
    for (int o = 0; o < 16; o++) for (int y = 0; y < 10; y++) for (int x = 0; x < 10; x++) begin
      s = 0;
      for (int i = 0; i < 6; i++) for (int ky = 0; ky < 5; ky++) for (int kx = 0; kx < 5; kx++) s += k2[o][i][ky][kx] * q1[i][y+ky][x+kx];
      f2[o][y][x] = s; if (s > mx) mx = s;
    end
    sh[2] = pick_shift(mx);
    for (int o = 0; o < 16; o++) for (int y = 0; y < 10; y++) for (int x = 0; x < 10; x++) f2[o][y][x] = rq(f2[o][y][x], sh[2]);
    for (int c = 0; c < 16; c++) for (int y = 0; y < 5; y++) for (int x = 0; x < 5; x++)
      q2[c][y][x] = (f2[c][2*y][2*x] + f2[c][2*y][2*x+1] + f2[c][2*y+1][2*x] + f2[c][2*y+1][2*x+1]) >> 2;
    // conv3 (120C5 on 5x5 -> 1x1)
    mx = 0;
    for (int o = 0; o < 120; o++) begin
      s = 0;
      for (int i = 0; i < 16; i++) for (int ky = 0; ky < 5; ky++) for (int kx = 0; kx < 5; kx++) s += k3[o][i][ky][kx] * q2[i][ky][kx];
      f3[o] = s; if (s > mx) mx = s;
    end
    sh[4] = pick_shift(mx);
    for (int o = 0; o < 120; o++) f3[o] = rq(f3[o], sh[4]);
    // fc 120 -> 84
    mx = 0;
    for (int o = 0; o < 84; o++) begin
      s = 0; for (int i = 0; i < 120; i++) s += w1[o][i] * f3[i];
      h1[o] = s; if (s > mx) mx = s;
    end
    sh[6] = pick_shift(mx);
    for (int o = 0; o < 84; o++) h1[o] = rq(h1[o], sh[6]);
    // fc 84 -> 10 (raw scores)
    for (int o = 0; o < 10; o++) begin
      s = 0; for (int i = 0; i < 84; i++) s += w2[o][i] * h1[i];
      sc[o] = s;
    end
  endtask

  // ---------------- layer table ----------------
  function automatic layer_t mk(layer_kind_e kind, int in_ch, int in_h, int in_w, int out_ch,
                                int out_h, int n_in, int n_out, int base, int shf, bit ext, bit last);
    layer_t l;
    l = '0;
    l.kind = kind; l.in_ch = 10'(in_ch); l.in_h = 6'(in_h); l.in_w = 6'(in_w); l.out_ch = 10'(out_ch);
    l.out_h = 6'(out_h); l.n_in = 12'(n_in); l.n_out = 10'(n_out); l.param_base = 16'(base);
    l.rq_shift = 5'(shf); l.ext_load = ext; l.last = last;
    return l;
  endfunction

  layer_t lt [8];
  localparam int KB1 = 0, KB2 = 2, KB3 = 2 + 4 * 6;        // kernel word bases
  localparam int WB1 = 0, WB2 = 6 * 120;                    // weight word bases

  task automatic write_kernels(int base, int cout, int cin, int which);
    for (int g = 0; g * N < cout; g++) for (int i = 0; i < cin; i++) begin
      @(negedge clk);
      k_we = 1; k_addr = 9'(base + g * cin + i); k_data = '0;
      for (int u = 0; u < N; u++) if (g * N + u < cout)
        for (int ky = 0; ky < 5; ky++) for (int kx = 0; kx < 5; kx++)
          k_data[u][ky][kx] = WB'(which == 1 ? k1[g*N+u][i][ky][kx] :
                                  which == 2 ? k2[g*N+u][i][ky][kx] : k3[g*N+u][i][ky][kx]);
    end
    @(negedge clk); k_we = 0;
  endtask

  task automatic write_weights(int base, int nout, int nin, int which);
    for (int g = 0; g * P < nout; g++) for (int i = 0; i < nin; i++) begin
      @(negedge clk);
      w_we = 1; w_addr = 10'(base + g * nin + i); w_data = '0;
      for (int p = 0; p < P; p++) if (g * P + p < nout)
        w_data[p] = WB'(which == 1 ? w1[g*P+p][i] : w2[g*P+p][i]);
    end
    @(negedge clk); w_we = 0;
  endtask

  // ---------------- monitors ----------------
  int n_kload = 0, n_shift = 0, n_acc = 0, n_wrstall = 0, n_skip = 0, n_pool = 0, n_flat = 0;
  int n_linshift = 0, n_swap2 = 0, n_swap1 = 0, n_preq = 0, n_result = 0, n_linrun = 0, n_linvalid = 0;
  int cycles = 0;
  bit running = 0;

  always @(posedge clk) if (rst_n) begin
    automatic int L = int'(dut.u_ctrl.layer);
    if (running) cycles++;
    if (dut.cu_kern_load) n_kload++;
    if (dut.cu_row_valid && dut.cu_mode == PS_SHIFT) n_shift++;
    if (dut.cu_row_valid && dut.cu_mode == PS_ACC) n_acc++;
    if (int'(dut.u_ctrl.state) == 9) begin   // controller state S_C_WR: unit outputs written one per cycle
      n_wrstall++;
      if (!dut.a2_wr_en) n_skip++;
    end
    if (dut.a2_swap) n_swap2++;
    if (dut.a1_swap) n_swap1++;
    if (dut.lin_valid && dut.lin_shift) n_linshift++;
    if (dut.lin_valid && L == 6) n_linvalid++;
    if (dut.wm_rd_en && L == 6) n_linrun++;
    // 2D buffer writes
    if (dut.a2_wr_en) begin
      automatic int a = int'(dut.a2_wr_addr);
      if (L == 0) begin
        for (int x = 0; x < 28; x++) check(int'(dut.a2_wr_data[x]) == f1[a/28][a%28][x], $sformatf("conv1 ch%0d row%0d col%0d", a/28, a%28, x));
      end else if (L == 1) begin
        n_pool++;
        for (int x = 0; x < 14; x++) check(int'(dut.a2_wr_data[x]) == q1[a/14][a%14][x], $sformatf("pool1 ch%0d row%0d col%0d", a/14, a%14, x));
      end else if (L == 2) begin
        for (int x = 0; x < 10; x++) check(int'(dut.a2_wr_data[x]) == f2[a/10][a%10][x], $sformatf("conv2 ch%0d row%0d col%0d", a/10, a%10, x));
      end else if (L == 3) begin
        n_pool++;
        for (int x = 0; x < 5; x++) check(int'(dut.a2_wr_data[x]) == q2[a/5][a%5][x], $sformatf("pool2 ch%0d row%0d col%0d", a/5, a%5, x));
      end else if (L == 4) begin
        check(int'(dut.a2_wr_data[0]) == f3[a], $sformatf("conv3 ch%0d", a));
      end
    end
    // 1D buffer writes
    if (dut.a1_wr_en) begin
      automatic int a = int'(dut.a1_wr_addr);
      if (L == 5) begin
        n_flat++;
        for (int p = 0; p < P; p++) if (dut.a1_wr_lane[p]) check(int'(dut.a1_wr_data[p]) == f3[a*P+p], $sformatf("flatten n%0d", a*P+p));
      end else if (L == 6) begin
        for (int p = 0; p < P; p++) if (a*P+p < 84) check(int'(dut.a1_wr_data[p]) == h1[a*P+p], $sformatf("fc1 n%0d", a*P+p));
      end
    end
    if (result_valid) begin
      n_result++;
      for (int p = 0; p < 10; p++)
        check($signed(result_scores[p]) == sc[p], $sformatf("score %0d: got %0d exp %0d", p, $signed(result_scores[p]), sc[p]));
    end
  end

  // external parameter load of the layer marked ext_load
  always @(posedge clk) if (param_req && !param_done) begin
    n_preq++;
    check(param_layer == 4'd4, "param_req layer");
    write_kernels(KB3, 120, 16, 3);
    @(negedge clk); param_done = 1;
    @(negedge clk); param_done = 0;
  end

  initial begin : watchdog
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int run_cycles [4];
  int ts [4] = '{4, 3, 5, 6};
  int tot_shift = 0, tot_acc = 0, tot_wrstall = 0, tot_skip = 0, tot_pool = 0, tot_linshift = 0, tot_sat = 0;

  task automatic clear_counters();
    n_kload = 0; n_shift = 0; n_acc = 0; n_wrstall = 0; n_skip = 0; n_pool = 0; n_flat = 0;
    n_linshift = 0; n_swap2 = 0; n_swap1 = 0; n_preq = 0; n_result = 0; n_linrun = 0; n_linvalid = 0;
    cycles = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 4; r++) begin
      T = ts[r];
      build_reference();
      lt[0] = mk(L_CONV, 1, 32, 32, 6, 28, 0, 0, KB1, sh[0], 0, 0);
      lt[1] = mk(L_POOL, 6, 28, 28, 0, 14, 0, 0, 0, 0, 0, 0);
      lt[2] = mk(L_CONV, 6, 14, 14, 16, 10, 0, 0, KB2, sh[2], 0, 0);
      lt[3] = mk(L_POOL, 16, 10, 10, 0, 5, 0, 0, 0, 0, 0, 0);
      lt[4] = mk(L_CONV, 16, 5, 5, 120, 1, 0, 0, KB3, sh[4], 1, 0);
      lt[5] = mk(L_FLAT, 120, 1, 1, 0, 0, 0, 0, 0, 0, 0, 0);
      lt[6] = mk(L_LIN, 0, 0, 0, 0, 0, 120, 84, WB1, sh[6], 0, 0);
      lt[7] = mk(L_LIN, 0, 0, 0, 0, 0, 84, 10, WB2, 0, 0, 1);
      for (int i = 0; i < 8; i++) begin
        @(negedge clk); cfg_we = 1; cfg_addr = 4'(i); cfg_data = lt[i];
      end
      @(negedge clk); cfg_we = 0;
      // the first layer reads the bank selected now; the image port writes that bank
      for (int y = 0; y < 32; y++) begin
        @(negedge clk); img_we = 1; img_addr = 8'(y);
        for (int x = 0; x < 32; x++) img_data[x] = T_MAX'(img[0][y][x]);
      end
      @(negedge clk); img_we = 0;
      write_kernels(KB1, 6, 1, 1);
      write_kernels(KB2, 16, 6, 2);
      write_weights(WB1, 84, 120, 1);
      write_weights(WB2, 10, 84, 2);
      clear_counters();
      @(negedge clk); start = 1; num_layers = 5'd8; num_steps = TS_W'(T); running = 1;
      @(negedge clk); start = 0;
      wait (done);
      @(negedge clk); running = 0;
      repeat (5) @(negedge clk);
      check(!busy, "idle after done");
      run_cycles[r] = cycles;
      $display("T=%0d: cycles=%0d (%0.1f us at 200 MHz, external load included)", T, cycles, cycles * 0.005);
      $display("  kernel loads=%0d shift-acc rows=%0d acc rows=%0d write-back stall cycles=%0d skipped unit outputs=%0d",
               n_kload, n_shift, n_acc, n_wrstall, n_skip);
      $display("  pool rows=%0d flatten writes=%0d linear shifts=%0d swaps2d=%0d swaps1d=%0d param_req=%0d results=%0d saturations(ref)=%0d",
               n_pool, n_flat, n_linshift, n_swap2, n_swap1, n_preq, n_result, saturations);
      // linear layer 1: one weight word per cycle: 6 groups x T steps x 120 inputs
      check(n_linrun == 6 * T * 120, $sformatf("fc1 streaming cycles %0d", n_linrun));
      check(n_linvalid == 6 * T * 120, $sformatf("fc1 accumulate cycles %0d", n_linvalid));
      check(n_kload == (2*1 + 4*6 + 30*16) * T, $sformatf("kernel loads %0d", n_kload));
      check(n_flat == 120, "flatten wrote 120 neurons");
      check(n_swap2 == 5 && n_swap1 == 3, "ping-pong swaps");
      check(n_preq == 1, "external parameter load happened");
      check(n_result == 1, "one result group");
      tot_shift += n_shift; tot_acc += n_acc; tot_wrstall += n_wrstall; tot_skip += n_skip;
      tot_pool += n_pool; tot_linshift += n_linshift; tot_sat += saturations;
    end
    // latency grows with the spike-train length (almost all work is repeated per step)
    check(run_cycles[1] < run_cycles[0] && run_cycles[0] < run_cycles[2] && run_cycles[2] < run_cycles[3],
          "latency grows with T");
    check(tot_shift > 0, "psum shift-accumulate happened");
    check(tot_acc > 0, "psum accumulate happened");
    check(tot_wrstall > 0, "write-back stall happened");
    check(tot_skip > 0, "idle unit output skipped");
    check(tot_pool > 0, "pooling happened");
    check(tot_linshift > 0, "linear shift happened");
    check(tot_sat > 0, "requantization saturated at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
