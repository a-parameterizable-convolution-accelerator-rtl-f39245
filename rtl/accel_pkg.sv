// accel_pkg -- types and constants shared by the convolution accelerator.
//
// The accelerator runs one convolution layer per start. The scalar inputs
// that describe that layer travel through the design as one packed struct,
// layer_cfg_t. The layer types follow the paper: 1x1 filters (padding 0) and
// 3x3 filters (padding 0 or 1, stride 1 or 2), an optional ReLU, and an
// optional 2x2 or 3x3 max-pool with stride 2. Activations, weights and biases
// are 8-bit dynamic fixed point (DFP). The two shift fields carry the DFP
// scaling: bias_shift aligns a bias with the accumulator, and out_shift
// rescales the accumulator to the output format. Field widths, and the rule
// that both shifts are left/right shifts of zero or more bits, are this
// design's choice.
package accel_pkg;

  localparam int DIM_W   = 16;   // width of every layer dimension field
  localparam int ACC_W   = 32;   // PE accumulator width
  localparam int DATA_W  = 8;    // activation / weight / bias width
  localparam int POOL_S  = 2;    // the only max-pool stride the paper supports

  typedef logic signed [DATA_W-1:0] act_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  typedef struct packed {
    logic [DIM_W-1:0] in_h;        // H_i
    logic [DIM_W-1:0] in_w;        // X_i
    logic [DIM_W-1:0] in_c;        // C_i, a multiple of ICP
    logic [DIM_W-1:0] out_c;       // C_o, a multiple of OCP and APACK
    logic [1:0]       fsize;       // filter size: 1 or 3
    logic [1:0]       stride;      // convolution stride: 1 or 2
    logic             pad;         // zero padding: 0 or 1
    logic             relu_en;     // apply ReLU
    logic             pool_en;     // apply max-pool (else bypass)
    logic [1:0]       pool_k;      // max-pool window: 2 or 3
    logic [4:0]       bias_shift;  // bias << bias_shift aligns it to the accumulator
    logic [4:0]       out_shift;   // accumulator >> out_shift (rounded) gives the output
  } layer_cfg_t;

  // Convolution output height / width: (n + 2*pad - f) / s + 1.
  function automatic logic [DIM_W-1:0] conv_out_dim(input logic [DIM_W-1:0] n,
                                                     input logic [1:0] f,
                                                     input logic [1:0] s,
                                                     input logic pad);
    logic [DIM_W:0] span;
    span = {1'b0, n} + (pad ? 2 : 0) - {{(DIM_W-1){1'b0}}, f};
    return (s == 2'd2) ? DIM_W'(span >> 1) + 1'b1 : DIM_W'(span) + 1'b1;
  endfunction

  // Max-pool output height / width (floor mode): (n - k) / 2 + 1.
  function automatic logic [DIM_W-1:0] pool_out_dim(input logic [DIM_W-1:0] n,
                                                     input logic [1:0] k);
    return ((n - {{(DIM_W-2){1'b0}}, k}) / DIM_W'(POOL_S)) + 1'b1;
  endfunction

endpackage
