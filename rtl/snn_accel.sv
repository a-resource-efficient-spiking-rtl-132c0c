// snn_accel: top level of the radix-encoded spiking neural network accelerator.
//
// The accelerator runs a user-defined network of convolution, average-pooling, flatten
// and fully connected layers on radix-encoded spike trains of T time steps. Its parts:
//   * N_CU convolution units (conv_unit) with a fixed 5x5 kernel, each computing one
//     output channel, all fed with the same input row;
//   * one pooling unit (pool_unit) and one linear unit (linear_unit);
//   * a kernel memory (kernel_bram) and a weight memory (weight_bram), written by the
//     host or from external DRAM;
//   * a 2D ping-pong activation buffer (act2d_buffer) for feature maps and a 1D one
//     (act1d_buffer) for fully connected layers;
//   * the controller, which executes the layer table.
// Each layer reads one bank of its activation buffer and writes the other; the flatten
// layer copies the last feature maps into the 1D buffer. The final layer's full-precision
// sums leave on result_scores while result_valid is high (one group of LIN_P outputs per
// pulse, group index result_group). External DRAM is not part of the design: when a layer
// is marked ext_load, param_req/param_layer ask for its parameters, which the outside
// writes through the kernel/weight write ports before answering param_done.
// The block structure follows the paper's system overview; the port list, the host
// interface and the layer table are this design's choices.
//
// Use: write the layer table (cfg_*), kernels (k_*), weights (w_*) and the input image
// (img_*: one 2D buffer word per channel row, activations as T-bit integers), then pulse
// start with num_layers and num_steps; done pulses at the end of the last layer.
module snn_accel
  import snn_pkg::*;
#(
  parameter int unsigned N        = N_CU,
  parameter int unsigned NL       = MAX_LAYERS,
  localparam int unsigned LAW = $clog2(NL),
  localparam int unsigned A2W = $clog2(ACT2D_DEPTH),
  localparam int unsigned KAW = $clog2(KMEM_DEPTH),
  localparam int unsigned WAW = $clog2(WMEM_DEPTH),
  localparam int unsigned A1W = $clog2(ACT1D_DEPTH)
) (
  input  logic                                          clk,
  input  logic                                          rst_n,
  // layer table and run control
  input  logic                                          cfg_we,
  input  logic [LAW-1:0]                                cfg_addr,
  input  layer_t                                        cfg_data,
  input  logic                                          start,
  input  logic [LAW:0]                                  num_layers,
  input  logic [TS_W-1:0]                               num_steps,
  output logic                                          busy,
  output logic                                          done,
  // input image into the 2D buffer bank read by the first layer
  input  logic                                          img_we,
  input  logic [A2W-1:0]                                img_addr,
  input  logic [ROW_W-1:0][T_MAX-1:0]                   img_data,
  // parameter memories (host or DRAM transfer)
  input  logic                                          k_we,
  input  logic [KAW-1:0]                                k_addr,
  input  logic [N-1:0][CONV_K-1:0][CONV_K-1:0][WB-1:0]  k_data,
  input  logic                                          w_we,
  input  logic [WAW-1:0]                                w_addr,
  input  logic [LIN_P-1:0][WB-1:0]                      w_data,
  output logic                                          param_req,
  output logic [LAW-1:0]                                param_layer,
  input  logic                                          param_done,
  // network output
  output logic                                          result_valid,
  output logic [A1W-1:0]                                result_group,
  output logic [LIN_P-1:0][PSUM_W-1:0]                  result_scores
);

  localparam int unsigned UW  = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned LW  = $clog2(LIN_P);
  localparam int unsigned PAW = $clog2(ROW_W);

  // controller signals
  logic [TS_W-1:0] ns;
  logic [4:0]      rq;
  logic            a2_swap, a2_rd_en, a2_wr_en, a2_wr_pool;
  logic [A2W-1:0]  a2_rd_addr, a2_wr_addr;
  logic [UW-1:0]   a2_wr_cu;
  logic            a1_swap, a1_rd_en, a1_wr_en, a1_wr_lin;
  logic [A1W-1:0]  a1_rd_addr, a1_wr_addr;
  logic [LIN_P-1:0] a1_wr_lane;
  logic [5:0]      flat_col;
  logic            km_rd_en, wm_rd_en;
  logic [KAW-1:0]  km_rd_addr;
  logic [WAW-1:0]  wm_rd_addr;
  logic            cu_kern_load, cu_row_valid, cu_out_en, cu_final, cu_busy;
  logic [TS_W-1:0] cu_bit;
  psum_mode_e      cu_mode;
  logic [PAW-1:0]  cu_out_row;
  logic            pool_row_valid, pool_out_en, pool_busy;
  logic            lin_valid, lin_clear, lin_shift;
  logic [LW-1:0]   lin_lane;
  logic [TS_W-1:0] lin_bit;
  logic            a2_sel, a1_sel;

  // data
  logic [ROW_W-1:0][T_MAX-1:0]   a2_rd_data, a2_wr_data;
  logic [LIN_P-1:0][T_MAX-1:0]   a1_rd_data, a1_wr_data;
  logic [N-1:0][CONV_K-1:0][CONV_K-1:0][WB-1:0] km_rd_data;
  logic [LIN_P-1:0][WB-1:0]      wm_rd_data;
  logic [ROW_W-1:0]              row_bits;
  logic [N-1:0]                  cu_busy_v, cu_out_valid;
  logic [N-1:0][CONV_X-1:0][T_MAX-1:0] cu_act;
  logic                          pool_out_valid;
  logic [POOL_X-1:0][T_MAX-1:0]  pool_act;
  logic [LIN_P-1:0][PSUM_W-1:0]  lin_acc;
  logic [LIN_P-1:0][T_MAX-1:0]   lin_act;

  controller #(.N(N), .NL(NL)) u_ctrl (
    .clk, .rst_n,
    .cfg_we, .cfg_addr, .cfg_data, .start, .num_layers, .num_steps_in(num_steps),
    .busy, .done, .num_steps(ns), .rq_shift(rq),
    .param_req, .param_layer, .param_done,
    .a2_swap, .a2_rd_en, .a2_rd_addr, .a2_wr_en, .a2_wr_addr, .a2_wr_pool, .a2_wr_cu,
    .a1_swap, .a1_rd_en, .a1_rd_addr, .a1_wr_en, .a1_wr_addr, .a1_wr_lane, .a1_wr_lin, .flat_col,
    .km_rd_en, .km_rd_addr, .wm_rd_en, .wm_rd_addr,
    .cu_kern_load, .cu_row_valid, .cu_bit, .cu_mode, .cu_out_en, .cu_out_row, .cu_final, .cu_busy,
    .pool_row_valid, .pool_out_en, .pool_busy,
    .lin_valid, .lin_clear, .lin_shift, .lin_lane, .lin_bit, .result_valid
  );

  // ---- memories -----------------------------------------------------------------------
  kernel_bram #(.N(N)) u_kmem (
    .clk, .wr_en(k_we), .wr_addr(k_addr), .wr_data(k_data),
    .rd_en(km_rd_en), .rd_addr(km_rd_addr), .rd_data(km_rd_data)
  );

  weight_bram u_wmem (
    .clk, .wr_en(w_we), .wr_addr(w_addr), .wr_data(w_data),
    .rd_en(wm_rd_en), .rd_addr(wm_rd_addr), .rd_data(wm_rd_data)
  );

  act2d_buffer u_act2d (
    .clk, .rst_n, .swap(a2_swap), .sel(a2_sel),
    .rd_en(a2_rd_en), .rd_addr(a2_rd_addr), .rd_data(a2_rd_data),
    .wr_en(a2_wr_en), .wr_addr(a2_wr_addr), .wr_data(a2_wr_data),
    .host_wr_en(img_we), .host_wr_addr(img_addr), .host_wr_data(img_data)
  );

  act1d_buffer u_act1d (
    .clk, .rst_n, .swap(a1_swap), .sel(a1_sel),
    .rd_en(a1_rd_en), .rd_addr(a1_rd_addr), .rd_data(a1_rd_data),
    .wr_en(a1_wr_en), .wr_addr(a1_wr_addr), .wr_lane(a1_wr_lane), .wr_data(a1_wr_data)
  );

  // ---- convolution units: spikes of time step t are bit cu_bit of each activation ----
  always_comb
    for (int j = 0; j < ROW_W; j++) row_bits[j] = a2_rd_data[j][cu_bit];

  for (genvar g = 0; g < N; g++) begin : g_cu
    conv_unit u_cu (
      .clk, .rst_n,
      .kern_load(cu_kern_load), .kern_in(km_rd_data[g]),
      .row_valid(cu_row_valid), .row_bits,
      .psum_mode(cu_mode), .out_en(cu_out_en), .out_row(cu_out_row), .final_pass(cu_final),
      .rq_shift(rq), .num_steps(ns),
      .busy(cu_busy_v[g]), .out_valid(cu_out_valid[g]), .act_out(cu_act[g])
    );
  end
  assign cu_busy = |cu_busy_v;

  pool_unit u_pool (
    .clk, .rst_n,
    .row_valid(pool_row_valid), .row_vals(a2_rd_data), .out_en(pool_out_en),
    .busy(pool_busy), .out_valid(pool_out_valid), .act_out(pool_act)
  );

  linear_unit u_lin (
    .clk, .rst_n,
    .valid(lin_valid), .clear(lin_clear), .shift(lin_shift),
    .spike(a1_rd_data[lin_lane][lin_bit]), .w(wm_rd_data),
    .rq_shift(rq), .num_steps(ns),
    .acc(lin_acc), .act_out(lin_act)
  );

  // ---- write-back multiplexers ------------------------------------------------------
  always_comb begin
    a2_wr_data = '0;
    if (a2_wr_pool) for (int x = 0; x < POOL_X; x++) a2_wr_data[x] = pool_act[x];
    else            for (int x = 0; x < CONV_X; x++) a2_wr_data[x] = cu_act[a2_wr_cu][x];
  end

  always_comb begin
    if (a1_wr_lin) a1_wr_data = lin_act;
    else           for (int p = 0; p < LIN_P; p++) a1_wr_data[p] = a2_rd_data[flat_col[$clog2(ROW_W)-1:0]];
  end

  assign result_group  = a1_wr_addr;
  assign result_scores = lin_acc;

endmodule
