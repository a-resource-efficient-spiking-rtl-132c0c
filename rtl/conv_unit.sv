// conv_unit: one convolution unit for a fixed kernel size, computing one output row of
// one output channel per input row (row-based execution).
//
// Input logic: on row_valid the binary input row (one time step's spikes of one input
// channel) is loaded into a shift register long enough for (X-1)*STRIDE+KC values.
// Column x of the adder array is wired to every STRIDE-th register position, x*STRIDE.
// The register then shifts by one value per cycle for KC cycles, exposing the kernel
// window of every column to its adder, while each adder row steps through its kernel
// row (conv_adder_array). After the KC steps the bottom adder row holds the finished
// row, which the output logic (conv_output_logic) accumulates with the partial sum of
// earlier input channels and time steps. Partial sums of output row r are complete after
// input row r+KR-1, so the sequencer marks which input rows produce an output (out_en)
// and at which row address (out_row).
// Structure, dataflow and radix shift follow the paper; the handshake, the one-cycle
// row load and the widths are this design's choices.
//
// Timing: row_valid at cycle 0 -> steps at cycles 1..KC -> commit at cycle KC+1 ->
// out_valid/act_out at cycle KC+2. busy is high during cycles 1..KC+1; a new row may be
// offered in the cycle busy is low. kern_load must not coincide with a busy cycle.
module conv_unit
  import snn_pkg::*;
#(
  parameter int unsigned X        = CONV_X,
  parameter int unsigned KR       = CONV_K,
  parameter int unsigned KC       = CONV_K,
  parameter int unsigned STRIDE   = CONV_STR,
  parameter int unsigned RW       = ROW_W,      // input row width
  parameter int unsigned ACC_W    = 10,
  parameter int unsigned PS_DEPTH = ROW_W,      // output rows held in the partial-sum memory
  localparam int unsigned PAW     = $clog2(PS_DEPTH)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          kern_load,
  input  logic [KR-1:0][KC-1:0][WB-1:0] kern_in,
  input  logic                          row_valid,
  input  logic [RW-1:0]                 row_bits,
  input  psum_mode_e                    psum_mode,
  input  logic                          out_en,
  input  logic [PAW-1:0]                out_row,
  input  logic                          final_pass,
  input  logic [4:0]                    rq_shift,
  input  logic [TS_W-1:0]               num_steps,
  output logic                          busy,
  output logic                          out_valid,
  output logic [X-1:0][T_MAX-1:0]       act_out
);

  localparam int unsigned SL = (X - 1) * STRIDE + KC;
  localparam int unsigned CW = $clog2(KC + 1);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_OUT} state_e;
  state_e state;

  logic [SL-1:0]     sreg;
  logic [CW-1:0]     cnt;
  psum_mode_e        mode_q;
  logic              out_en_q, final_q;
  logic [PAW-1:0]    row_q;
  logic [X-1:0]      tap;
  logic [X-1:0][ACC_W-1:0] bottom;

  always_comb
    for (int x = 0; x < X; x++) tap[x] = sreg[x*STRIDE];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      sreg     <= '0;
      cnt      <= '0;
      mode_q   <= PS_FIRST;
      out_en_q <= 1'b0;
      final_q  <= 1'b0;
      row_q    <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (row_valid) begin
          for (int i = 0; i < SL; i++) sreg[i] <= (i < RW) ? row_bits[i] : 1'b0;
          mode_q   <= psum_mode;
          out_en_q <= out_en;
          final_q  <= final_pass;
          row_q    <= out_row;
          cnt      <= '0;
          state    <= S_RUN;
        end
        S_RUN: begin
          sreg <= sreg >> 1;
          cnt  <= cnt + 1'b1;
          if (cnt == CW'(KC - 1)) state <= S_OUT;
        end
        default: state <= S_IDLE;   // S_OUT: commit happens in this cycle
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  conv_adder_array #(.X(X), .KR(KR), .KC(KC), .WB(WB), .ACC_W(ACC_W)) u_array (
    .clk, .rst_n,
    .kern_load,
    .kern_in,
    .step  (state == S_RUN),
    .first (cnt == '0),
    .tap,
    .bottom
  );

  conv_output_logic #(.X(X), .ACC_W(ACC_W), .DEPTH(PS_DEPTH)) u_out (
    .clk, .rst_n,
    .rd_en      (state == S_IDLE && row_valid && out_en),
    .rd_addr    (out_row),
    .wr_en      (state == S_OUT && out_en_q),
    .wr_addr    (row_q),
    .mode       (mode_q),
    .final_pass (final_q),
    .rq_shift,
    .num_steps,
    .arr        (bottom),
    .act_out,
    .out_valid
  );

  a_no_load_when_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !kern_load);

endmodule
