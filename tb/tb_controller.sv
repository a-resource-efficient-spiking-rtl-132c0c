// tb_controller: checks the sequencing of the controller against event lists computed
// in the testbench, for a small four-layer network with T = 2:
//   conv (2 in, 5 out channels, 6 rows -> 2 rows, parameters loaded externally),
//   pool (2 channels, 4 rows -> 2), flatten (2 x 2 x 3), linear (6 -> 20, last layer).
// The processing units are replaced by simple busy models. Checked: the external
// parameter handshake, every kernel-memory, 2D-buffer, 1D-buffer and weight-memory
// address in order, the bit plane, partial-sum mode and final flag of each convolution
// row, the linear unit's clear/shift/lane/bit controls, the buffer swaps, the result
// pulses and done, and the one-weight-per-cycle rate of the linear layer.
module tb_controller;
  import snn_pkg::*;

  localparam int T = 2, N = N_CU, P = LIN_P;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic cfg_we = 0; logic [3:0] cfg_addr = '0; layer_t cfg_data = '0;
  logic start = 0; logic [4:0] num_layers = 5'd4; logic [TS_W-1:0] num_steps_in = TS_W'(T);
  logic busy, done; logic [TS_W-1:0] num_steps; logic [4:0] rq_shift;
  logic param_req; logic [3:0] param_layer; logic param_done = 0;
  logic a2_swap, a2_rd_en, a2_wr_en, a2_wr_pool; logic [7:0] a2_rd_addr, a2_wr_addr; logic [1:0] a2_wr_cu;
  logic a1_swap, a1_rd_en, a1_wr_en, a1_wr_lin; logic [5:0] a1_rd_addr, a1_wr_addr; logic [P-1:0] a1_wr_lane;
  logic [5:0] flat_col;
  logic km_rd_en, wm_rd_en; logic [8:0] km_rd_addr; logic [9:0] wm_rd_addr;
  logic cu_kern_load, cu_row_valid, cu_out_en, cu_final; logic [TS_W-1:0] cu_bit; psum_mode_e cu_mode;
  logic [4:0] cu_out_row; logic cu_busy;
  logic pool_row_valid, pool_out_en; logic pool_busy;
  logic lin_valid, lin_clear, lin_shift; logic [3:0] lin_lane; logic [TS_W-1:0] lin_bit;
  logic result_valid;

  controller dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ---- busy models of the units ----
  int cu_cnt = 0, pool_cnt = 0;
  always @(posedge clk) begin
    if (cu_row_valid) cu_cnt <= 6; else if (cu_cnt > 0) cu_cnt <= cu_cnt - 1;
    if (pool_row_valid) pool_cnt <= 2; else if (pool_cnt > 0) pool_cnt <= pool_cnt - 1;
  end
  assign cu_busy   = cu_cnt > 0;
  assign pool_busy = pool_cnt > 0;

  // ---- expected event lists ----
  int exp_k[$], exp_a2r[$], exp_a2w[$], exp_a1w[$], exp_w[$], exp_lin[$], exp_row[$];
  int got_k[$], got_a2r[$], got_a2w[$], got_a1w[$], got_w[$], got_lin[$], got_row[$];
  int n_swap2 = 0, n_swap1 = 0, n_res = 0, n_done = 0, n_req = 0, lin_cycles = 0;
  bit kernel_before_param = 0;
  bit req_q = 0;

  initial begin
    // conv: kernel words base 10 + g*in_ch + ic; rows ic*6 + r; writes (g*N+u)*2 + orow
    for (int g = 0; g < 2; g++) for (int t = 0; t < T; t++) for (int ic = 0; ic < 2; ic++) begin
      exp_k.push_back(10 + g * 2 + ic);
      for (int r = 0; r < 6; r++) begin
        exp_a2r.push_back(ic * 6 + r);
        // bit, mode, out_en, final packed into one number
        exp_row.push_back(((T-1-t) << 8) | (((t==0 && ic==0) ? 0 : (ic==0) ? 2 : 1) << 4) |
                          ((r >= 4) << 2) | ((t == T-1 && ic == 1) << 1));
        if (t == T - 1 && ic == 1 && r >= 4)
          for (int u = 0; u < N; u++) if (g * N + u < 5) exp_a2w.push_back(((g*N+u)*2 + r - 4) | (u << 12));
      end
    end
    // pool: rows ch*4 + r; writes ch*2 + (r-1)/2 at odd rows, from the pooling unit
    for (int ch = 0; ch < 2; ch++) for (int r = 0; r < 4; r++) begin
      exp_a2r.push_back(ch * 4 + r);
      if (r % 2 == 1) exp_a2w.push_back((ch * 2 + r / 2) | (1 << 16));
    end
    // flatten: rows ch*2 + r; neuron n -> word n/P, lane n%P, column n%3
    for (int ch = 0; ch < 2; ch++) for (int r = 0; r < 2; r++) exp_a2r.push_back(ch * 2 + r);
    for (int n = 0; n < 12; n++) exp_a1w.push_back((n / P) | ((n % P) << 8) | ((n % 3) << 16));
    // linear: weights 100 + g*6 + i; controls one cycle later; result word g, all lanes
    for (int g = 0; g < 2; g++) begin
      for (int t = 0; t < T; t++) for (int i = 0; i < 6; i++) begin
        exp_w.push_back(100 + g * 6 + i);
        exp_lin.push_back((t==0 && i==0) | ((t!=0 && i==0) << 1) | (i << 4) | ((T-1-t) << 8));
      end
      exp_a1w.push_back(g | (1 << 20));
    end
  end

  always @(posedge clk) if (rst_n) begin
    req_q <= param_req;
    if (param_req && !req_q) begin
      n_req++;
      if (got_k.size() > 0) kernel_before_param = 1;
    end
    if (km_rd_en) got_k.push_back(int'(km_rd_addr));
    if (a2_rd_en) got_a2r.push_back(int'(a2_rd_addr));
    if (cu_row_valid) got_row.push_back((int'(cu_bit) << 8) | (int'(cu_mode) << 4) | (int'(cu_out_en) << 2) | (int'(cu_final) << 1));
    if (a2_wr_en) got_a2w.push_back(int'(a2_wr_addr) | (a2_wr_pool ? (1 << 16) : (int'(a2_wr_cu) << 12)));
    if (a1_wr_en) got_a1w.push_back(a1_wr_lin ? (int'(a1_wr_addr) | (1 << 20)) :
                                    (int'(a1_wr_addr) | ($clog2(int'(a1_wr_lane)) << 8) | (int'(flat_col) << 16)));
    if (wm_rd_en) begin got_w.push_back(int'(wm_rd_addr)); lin_cycles++; end
    if (lin_valid) got_lin.push_back(int'(lin_clear) | (int'(lin_shift) << 1) | (int'(lin_lane) << 4) | (int'(lin_bit) << 8));
    if (a2_swap) n_swap2++;
    if (a1_swap) n_swap1++;
    if (result_valid) n_res++;
    if (done) n_done++;
  end

  // external parameter agent
  always @(posedge clk) if (param_req && !param_done) begin
    repeat (5) @(negedge clk);
    param_done = 1;
    @(negedge clk); param_done = 0;
  end

  function automatic layer_t mk(layer_kind_e kind, int in_ch, int in_h, int in_w, int out_ch,
                                int out_h, int n_in, int n_out, int base, bit ext, bit last);
    layer_t l;
    l = '0;
    l.kind = kind; l.in_ch = 10'(in_ch); l.in_h = 6'(in_h); l.in_w = 6'(in_w); l.out_ch = 10'(out_ch);
    l.out_h = 6'(out_h); l.n_in = 12'(n_in); l.n_out = 10'(n_out); l.param_base = 16'(base);
    l.ext_load = ext; l.last = last; l.rq_shift = 5'd1;
    return l;
  endfunction

  task automatic cmp(string what, int e[$], int g[$]);
    check(e.size() == g.size(), $sformatf("%s: %0d events, expected %0d", what, g.size(), e.size()));
    for (int i = 0; i < e.size() && i < g.size(); i++)
      check(e[i] == g[i], $sformatf("%s[%0d]: got %0h expected %0h", what, i, g[i], e[i]));
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  layer_t lt [4];
  initial begin
    lt[0] = mk(L_CONV, 2, 6, 6, 5, 2, 0, 0, 10, 1, 0);
    lt[1] = mk(L_POOL, 2, 4, 4, 0, 2, 0, 0, 0, 0, 0);
    lt[2] = mk(L_FLAT, 2, 2, 3, 0, 0, 0, 0, 0, 0, 0);
    lt[3] = mk(L_LIN, 0, 0, 0, 0, 0, 6, 20, 100, 0, 1);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4; i++) begin
      @(negedge clk); cfg_we = 1; cfg_addr = 4'(i); cfg_data = lt[i];
    end
    @(negedge clk); cfg_we = 0; start = 1;
    @(negedge clk); start = 0;
    check(busy, "busy after start");
    wait (done);
    repeat (3) @(negedge clk);
    check(!busy, "idle after done");
    check(num_steps == TS_W'(T), "num_steps latched");
    check(n_req == 1 && !kernel_before_param, "external parameter load before first kernel read");
    cmp("kernel reads", exp_k, got_k);
    cmp("2D reads", exp_a2r, got_a2r);
    cmp("conv row controls", exp_row, got_row);
    cmp("2D writes", exp_a2w, got_a2w);
    cmp("1D writes", exp_a1w, got_a1w);
    cmp("weight reads", exp_w, got_w);
    cmp("linear controls", exp_lin, got_lin);
    check(lin_cycles == 2 * T * 6, "linear: one weight word per cycle");
    check(n_swap2 == 2 && n_swap1 == 2, $sformatf("swaps %0d %0d", n_swap2, n_swap1));
    check(n_res == 2, "result pulses");
    check(n_done == 1, "done pulse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
