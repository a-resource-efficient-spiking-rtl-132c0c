// controller: executes a table of layer descriptors on the processing units.
//
// The host writes up to MAX_LAYERS descriptors (snn_pkg::layer_t) and pulses start with
// the number of layers and the spike-train length T. The controller then runs the layers
// in order. Before a layer marked ext_load it raises param_req and waits for param_done,
// during which an external agent (DRAM transfer) fills the kernel or weight memory.
//
//  * Convolution: the N convolution units compute N output channels at once. Loop order
//    (outermost first): output-channel group, time step t, input channel, input row. At
//    each (group, t, input channel) the N kernels are read as one kernel-memory word and
//    loaded; then every input row is read from the 2D buffer and its spikes for time step
//    t (bit T-1-t of each activation) are broadcast to the units. The next row is read
//    while the units work on the current one, so a row costs KC+3 cycles. The units'
//    partial-sum mode is "first" at t=0 and input channel 0, "shift" at the first input
//    channel of a later step and "accumulate" otherwise. In the last pass (t=T-1, last input channel)
//    each finished output row is written to the 2D buffer, one unit per cycle; the units
//    wait meanwhile (write-back stall).
//  * Pooling: per channel and input row, the row is read and fed to the pooling unit;
//    finished output rows are written back.
//  * Flatten: every 2D row is read and its values are written, one neuron per cycle,
//    into the 1D buffer, neuron index (channel*rows + row)*cols + col.
//  * Linear: per group of P outputs, for every time step and input neuron, one 1D word
//    and one weight word are read per cycle and presented to the linear unit the next
//    cycle; the group's result is written to the 1D buffer after the last neuron.
//    On the last layer result_valid marks the cycle in which the linear unit holds the
//    group's final sums.
// After each layer the written buffer is swapped, so the next layer reads it.
// The paper names the controller and gives the loop order of the convolution and the
// ping-pong alternation; the descriptor table, the handshakes and the exact sequencing
// are this design's choices. Several output channels sharing one unit is not done.
module controller
  import snn_pkg::*;
#(
  parameter int unsigned N        = N_CU,
  parameter int unsigned CK       = CONV_K,
  parameter int unsigned CSTR     = CONV_STR,
  parameter int unsigned PK       = POOL_K,
  parameter int unsigned PSTR     = POOL_STR,
  parameter int unsigned P        = LIN_P,
  parameter int unsigned NL       = MAX_LAYERS,
  parameter int unsigned A2_DEPTH = ACT2D_DEPTH,
  parameter int unsigned A1_DEPTH = ACT1D_DEPTH,
  parameter int unsigned K_DEPTH  = KMEM_DEPTH,
  parameter int unsigned W_DEPTH  = WMEM_DEPTH,
  parameter int unsigned PS_DEPTH = ROW_W,
  localparam int unsigned LAW  = $clog2(NL),
  localparam int unsigned A2W  = $clog2(A2_DEPTH),
  localparam int unsigned A1W  = $clog2(A1_DEPTH),
  localparam int unsigned KAW  = $clog2(K_DEPTH),
  localparam int unsigned WAW  = $clog2(W_DEPTH),
  localparam int unsigned PAW  = $clog2(PS_DEPTH),
  localparam int unsigned UW   = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned LW   = $clog2(P)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host
  input  logic                 cfg_we,
  input  logic [LAW-1:0]       cfg_addr,
  input  layer_t               cfg_data,
  input  logic                 start,
  input  logic [LAW:0]         num_layers,
  input  logic [TS_W-1:0]      num_steps_in,
  output logic                 busy,
  output logic                 done,
  output logic [TS_W-1:0]      num_steps,
  output logic [4:0]           rq_shift,
  // external parameter load
  output logic                 param_req,
  output logic [LAW-1:0]       param_layer,
  input  logic                 param_done,
  // 2D activation buffer
  output logic                 a2_swap,
  output logic                 a2_rd_en,
  output logic [A2W-1:0]       a2_rd_addr,
  output logic                 a2_wr_en,
  output logic [A2W-1:0]       a2_wr_addr,
  output logic                 a2_wr_pool,   // 1: pooling unit, 0: convolution unit a2_wr_cu
  output logic [UW-1:0]        a2_wr_cu,
  // 1D activation buffer
  output logic                 a1_swap,
  output logic                 a1_rd_en,
  output logic [A1W-1:0]       a1_rd_addr,
  output logic                 a1_wr_en,
  output logic [A1W-1:0]       a1_wr_addr,
  output logic [P-1:0]         a1_wr_lane,
  output logic                 a1_wr_lin,    // 1: linear unit outputs, 0: flatten value
  output logic [5:0]           flat_col,     // column of the 2D row being flattened
  // parameter memories
  output logic                 km_rd_en,
  output logic [KAW-1:0]       km_rd_addr,
  output logic                 wm_rd_en,
  output logic [WAW-1:0]       wm_rd_addr,
  // convolution units
  output logic                 cu_kern_load,
  output logic                 cu_row_valid,
  output logic [TS_W-1:0]      cu_bit,
  output psum_mode_e           cu_mode,
  output logic                 cu_out_en,
  output logic [PAW-1:0]       cu_out_row,
  output logic                 cu_final,
  input  logic                 cu_busy,
  // pooling unit
  output logic                 pool_row_valid,
  output logic                 pool_out_en,
  input  logic                 pool_busy,
  // linear unit
  output logic                 lin_valid,
  output logic                 lin_clear,
  output logic                 lin_shift,
  output logic [LW-1:0]        lin_lane,
  output logic [TS_W-1:0]      lin_bit,
  output logic                 result_valid
);

  typedef enum logic [4:0] {
    S_IDLE, S_LAYER, S_PREQ, S_DISPATCH,
    S_C_KRD, S_C_KLD, S_C_RD, S_C_FEED, S_C_WAIT, S_C_WR, S_C_ADV,
    S_P_RD, S_P_FEED, S_P_WAIT, S_P_WR,
    S_F_RD, S_F_WR,
    S_L_RUN, S_L_DRAIN, S_L_WR,
    S_NEXT
  } state_e;

  state_e       state;
  layer_t       table_q [NL];
  layer_t       d;              // current descriptor
  logic [LAW:0] layer, nlayers;

  logic [9:0]  grp;             // output-channel group (conv) / output group (linear)
  logic [TS_W-1:0] t;
  logic [9:0]  ch;              // input channel (conv, pool, flatten)
  logic [5:0]  row, col;
  logic [UW-1:0] u;
  logic [11:0] nidx;            // input neuron (linear)
  logic [15:0] nflat;           // neuron written by flatten
  logic [15:0] pbase;           // parameter word of current group
  logic        out_en_q, final_q;
  logic [5:0]  orow_q;
  logic        pref;            // next convolution row already read
  logic        c_prefetch;

  // ---- output-row bookkeeping of the row pipelines -----------------------------------
  logic [5:0] c_rr, p_rr;
  logic       c_out_en, p_out_en;
  assign c_rr     = row - 6'(CK - 1);
  assign c_out_en = (row >= 6'(CK - 1)) && (c_rr % 6'(CSTR) == 0) && (c_rr / 6'(CSTR) < d.out_h);
  assign p_rr     = row - 6'(PK - 1);
  assign p_out_en = (row >= 6'(PK - 1)) && (p_rr % 6'(PSTR) == 0) && (p_rr / 6'(PSTR) < d.out_h);

  logic last_t, last_ch, last_row;
  assign last_t   = (t == num_steps - 1'b1);
  assign last_ch  = (ch == d.in_ch - 1'b1);
  assign last_row = (row == d.in_h - 1'b1);

  // delayed linear-unit controls (memories answer one cycle after the request)
  logic l_v, l_clr, l_sh;
  logic [LW-1:0] l_lane;
  logic [TS_W-1:0] l_bit;

  always_ff @(posedge clk) if (cfg_we) table_q[cfg_addr] <= cfg_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      d <= '0; layer <= '0; nlayers <= '0; num_steps <= TS_W'(1);
      grp <= '0; t <= '0; ch <= '0; row <= '0; col <= '0; u <= '0;
      nidx <= '0; nflat <= '0; pbase <= '0;
      out_en_q <= 1'b0; final_q <= 1'b0; orow_q <= '0; pref <= 1'b0;
      l_v <= 1'b0; l_clr <= 1'b0; l_sh <= 1'b0; l_lane <= '0; l_bit <= '0;
    end else begin
      l_v <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          nlayers   <= num_layers;
          num_steps <= num_steps_in;
          layer     <= '0;
          state     <= S_LAYER;
        end
        S_LAYER: begin
          d     <= table_q[layer[LAW-1:0]];
          state <= table_q[layer[LAW-1:0]].ext_load ? S_PREQ : S_DISPATCH;
        end
        S_PREQ: if (param_done) state <= S_DISPATCH;
        S_DISPATCH: begin
          grp <= '0; t <= '0; ch <= '0; row <= '0; col <= '0; u <= '0;
          nidx <= '0; nflat <= '0; pbase <= d.param_base;
          unique case (d.kind)
            L_CONV:  state <= S_C_KRD;
            L_POOL:  state <= S_P_RD;
            L_FLAT:  state <= S_F_RD;
            default: state <= S_L_RUN;
          endcase
        end
        // ---------------- convolution ----------------
        S_C_KRD: state <= S_C_KLD;
        S_C_KLD: begin row <= '0; state <= S_C_RD; end
        S_C_RD:  state <= S_C_FEED;
        S_C_FEED: begin
          pref     <= 1'b0;
          out_en_q <= c_out_en;
          final_q  <= last_t && last_ch;
          orow_q   <= c_rr / 6'(CSTR);
          state    <= S_C_WAIT;
        end
        S_C_WAIT: begin
          // prefetch: the units hold the current row, so the next one is read now
          if (c_prefetch) begin row <= row + 1'b1; pref <= 1'b1; end
          if (!cu_busy) begin
            u     <= '0;
            state <= (final_q && out_en_q) ? S_C_WR : (pref ? S_C_FEED : S_C_ADV);
          end
        end
        S_C_WR: begin
          u <= u + 1'b1;
          if (u == UW'(N - 1)) state <= pref ? S_C_FEED : S_C_ADV;
        end
        S_C_ADV: begin   // end of a pass over all input rows
          if (!last_ch) begin ch <= ch + 1'b1; state <= S_C_KRD; end
          else if (!last_t) begin ch <= '0; t <= t + 1'b1; state <= S_C_KRD; end
          else begin
            ch <= '0; t <= '0;
            grp   <= grp + 1'b1;
            pbase <= pbase + 16'(d.in_ch);
            state <= ((grp + 1'b1) * 10'(N) >= d.out_ch) ? S_NEXT : S_C_KRD;
          end
        end
        // ---------------- pooling ----------------
        S_P_RD:   state <= S_P_FEED;
        S_P_FEED: begin
          out_en_q <= p_out_en;
          orow_q   <= p_rr / 6'(PSTR);
          state    <= S_P_WAIT;
        end
        S_P_WAIT: if (!pool_busy) state <= S_P_WR;
        S_P_WR: begin
          if (!last_row) begin row <= row + 1'b1; state <= S_P_RD; end
          else begin
            row <= '0;
            if (!last_ch) begin ch <= ch + 1'b1; state <= S_P_RD; end
            else state <= S_NEXT;
          end
        end
        // ---------------- flatten ----------------
        S_F_RD: begin col <= '0; state <= S_F_WR; end
        S_F_WR: begin
          nflat <= nflat + 1'b1;
          col   <= col + 1'b1;
          if (col == d.in_w - 1'b1) begin
            if (!last_row) begin row <= row + 1'b1; state <= S_F_RD; end
            else begin
              row <= '0;
              if (!last_ch) begin ch <= ch + 1'b1; state <= S_F_RD; end
              else state <= S_NEXT;
            end
          end
        end
        // ---------------- linear ----------------
        S_L_RUN: begin
          l_v    <= 1'b1;
          l_clr  <= (t == '0) && (nidx == '0);
          l_sh   <= (t != '0) && (nidx == '0);
          l_lane <= nidx[LW-1:0];
          l_bit  <= num_steps - 1'b1 - t;
          if (nidx == d.n_in - 1'b1) begin
            nidx <= '0;
            if (last_t) begin t <= '0; state <= S_L_DRAIN; end
            else t <= t + 1'b1;
          end else nidx <= nidx + 1'b1;
        end
        S_L_DRAIN: state <= S_L_WR;
        S_L_WR: begin
          grp   <= grp + 1'b1;
          pbase <= pbase + 16'(d.n_in);
          state <= ((grp + 1'b1) * 10'(P) >= d.n_out) ? S_NEXT : S_L_RUN;
        end
        // ---------------- end of layer ----------------
        S_NEXT: begin
          layer <= layer + 1'b1;
          state <= (layer + 1'b1 == nlayers) ? S_IDLE : S_LAYER;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---- outputs ----------------------------------------------------------------------
  assign busy        = (state != S_IDLE);
  assign done        = (state == S_NEXT) && (layer + 1'b1 == nlayers);
  assign rq_shift    = d.rq_shift;
  assign param_req   = (state == S_PREQ);
  assign param_layer = layer[LAW-1:0];

  assign a2_swap  = (state == S_NEXT) && (d.kind == L_CONV || d.kind == L_POOL);
  assign a1_swap  = (state == S_NEXT) && (d.kind == L_FLAT || d.kind == L_LIN);

  assign c_prefetch = (state == S_C_WAIT) && !pref && !last_row;
  assign a2_rd_en   = (state == S_C_RD) || c_prefetch || (state == S_P_RD) || (state == S_F_RD);
  assign a2_rd_addr = A2W'(ch * d.in_h + 16'(row) + 16'(c_prefetch));
  assign a2_wr_pool = (state == S_P_WR);
  assign a2_wr_cu   = u;
  always_comb begin
    a2_wr_en   = 1'b0;
    a2_wr_addr = '0;
    if (state == S_C_WR) begin
      a2_wr_en   = (grp * 10'(N) + 10'(u)) < d.out_ch;
      a2_wr_addr = A2W'(16'(grp * 10'(N) + 10'(u)) * d.out_h + 16'(orow_q));
    end else if (state == S_P_WR) begin
      a2_wr_en   = out_en_q;
      a2_wr_addr = A2W'(ch * d.out_h + 16'(orow_q));
    end
  end

  assign a1_rd_en   = (state == S_L_RUN);
  assign a1_rd_addr = A1W'(nidx / 12'(P));
  assign a1_wr_lin  = (state == S_L_WR);
  assign a1_wr_en   = (state == S_F_WR) || (state == S_L_WR);
  assign a1_wr_addr = (state == S_L_WR) ? A1W'(grp) : A1W'(nflat / 16'(P));
  assign a1_wr_lane = (state == S_L_WR) ? '1 : (P'(1) << nflat[LW-1:0]);
  assign flat_col   = col;

  assign km_rd_en   = (state == S_C_KRD);
  assign km_rd_addr = KAW'(pbase + 16'(ch));
  assign wm_rd_en   = (state == S_L_RUN);
  assign wm_rd_addr = WAW'(pbase + 16'(nidx));

  assign cu_kern_load = (state == S_C_KLD);
  assign cu_row_valid = (state == S_C_FEED);
  assign cu_bit       = num_steps - 1'b1 - t;
  assign cu_mode      = (t == '0 && ch == '0) ? PS_FIRST : (ch == '0) ? PS_SHIFT : PS_ACC;
  assign cu_out_en    = c_out_en;
  assign cu_out_row   = PAW'(c_rr / 6'(CSTR));
  assign cu_final     = last_t && last_ch;

  assign pool_row_valid = (state == S_P_FEED);
  assign pool_out_en    = p_out_en;

  assign lin_valid    = l_v;
  assign lin_clear    = l_clr;
  assign lin_shift    = l_sh;
  assign lin_lane     = l_lane;
  assign lin_bit      = l_bit;
  assign result_valid = (state == S_L_WR) && d.last;

endmodule
