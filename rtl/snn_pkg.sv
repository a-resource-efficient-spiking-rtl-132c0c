// snn_pkg: types, sizes and arithmetic shared by the radix-encoded SNN accelerator.
//
// Activations are radix-encoded spike trains of T time steps. A neuron's activation is
// stored as a T_MAX-bit unsigned integer; the spike it emits at time step t is bit
// (T-1-t) of that integer, so the first time step carries the most significant bit.
// Kernel and linear weights are 3-bit two's-complement values (the parameter resolution
// used in the evaluated models). Partial sums are kept at full integer precision
// (PSUM_W bits) and are turned back into T-bit activations by ReLU plus a per-layer
// right shift with saturation ("requantize"). The shift-based requantizer, the layer
// descriptor format and all widths not printed in the paper are this design's choices.
package snn_pkg;

  // ---- sizes of the main configuration (LeNet-5 build, four 5x5 convolution units) ----
  localparam int unsigned T_MAX    = 6;    // longest spike train supported (paper evaluates T = 3..6)
  localparam int unsigned TS_W     = 3;    // width of a time-step count 0..T_MAX
  localparam int unsigned WB       = 3;    // kernel / weight resolution in bits
  localparam int unsigned PSUM_W   = 24;   // full-precision partial sum width
  localparam int unsigned ROW_W    = 32;   // activation row length held by one 2D buffer word
  localparam int unsigned N_CU     = 4;    // convolution units
  localparam int unsigned CONV_X   = 30;   // adder-array columns of a convolution unit
  localparam int unsigned CONV_K   = 5;    // kernel rows (= adder-array rows Y) and columns
  localparam int unsigned CONV_STR = 1;    // convolution stride
  localparam int unsigned POOL_X   = 14;   // pooling unit columns
  localparam int unsigned POOL_K   = 2;    // pooling window rows (= Y) and columns
  localparam int unsigned POOL_STR = 2;    // pooling stride
  localparam int unsigned LIN_P    = 16;   // parallel output neurons of the linear unit
  localparam int unsigned ACT2D_DEPTH = 256;  // rows (channel x row) per 2D buffer bank
  localparam int unsigned ACT1D_DEPTH = 64;   // words of LIN_P neurons per 1D buffer bank
  localparam int unsigned KMEM_DEPTH  = 512;  // kernel BRAM words (one word = N_CU kernels)
  localparam int unsigned WMEM_DEPTH  = 1024; // weight BRAM words (one word = LIN_P weights)
  localparam int unsigned MAX_LAYERS  = 16;

  typedef enum logic [1:0] {
    L_CONV = 2'd0,   // convolution on the convolution units, 2D -> 2D
    L_POOL = 2'd1,   // average pooling on the pooling unit, 2D -> 2D
    L_FLAT = 2'd2,   // flatten: copy the 2D feature maps into the 1D buffer
    L_LIN  = 2'd3    // fully connected layer on the linear unit, 1D -> 1D
  } layer_kind_e;

  // How the output logic combines the adder-array result with the stored partial sum.
  typedef enum logic [1:0] {
    PS_FIRST = 2'd0, // first input channel of the first time step: store the result
    PS_ACC   = 2'd1, // later input channel: add the stored partial sum
    PS_SHIFT = 2'd2  // first input channel of a later time step: add the stored sum << 1
  } psum_mode_e;

  // One entry of the layer table the controller executes.
  typedef struct packed {
    layer_kind_e kind;
    logic        ext_load;    // parameters come from external DRAM before this layer
    logic        last;        // final layer: its raw sums are the network output
    logic [9:0]  in_ch;       // conv/pool/flat: input channels
    logic [5:0]  in_h;        // conv/pool/flat: input rows
    logic [5:0]  in_w;        // flat: input columns
    logic [9:0]  out_ch;      // conv: output channels
    logic [5:0]  out_h;       // conv/pool: output rows
    logic [11:0] n_in;        // linear: input neurons
    logic [9:0]  n_out;       // linear: output neurons
    logic [15:0] param_base;  // first kernel / weight BRAM word of this layer
    logic [4:0]  rq_shift;    // requantization right shift
  } layer_t;

  // ReLU, right shift and saturation to the range of an nsteps-bit radix code.
  function automatic logic [T_MAX-1:0] requant(input logic signed [PSUM_W-1:0] v,
                                               input logic [4:0] sh,
                                               input logic [TS_W-1:0] nsteps);
    logic signed [PSUM_W-1:0] s;
    logic signed [PSUM_W-1:0] maxv;
    maxv = (PSUM_W'(1) << nsteps) - PSUM_W'(1);
    s    = v >>> sh;
    if (v < 0)          return '0;
    else if (s > maxv)  return maxv[T_MAX-1:0];
    else                return s[T_MAX-1:0];
  endfunction

endpackage
