// wes_pkg: types and constants shared by the WES-coupled convolution engine.
//
// The engine computes one fixed-point convolution layer (normal or depthwise)
// with uint8 activations and weights, a per-layer scale compound M*2^s and a
// per-output-channel 4-bit shift scale S_i (the "weight equalizing shift").
// Field widths of the quantization parameters follow the parameter table of
// the method (M 32 bit, s 6 bit, S_i 4 bit, zero points 8 bit); the widths of
// the layer dimensions are this design's choice.
package wes_pkg;

  localparam int unsigned DATA_W  = 8;   // uint8 activations and weights
  localparam int unsigned ACC_W   = 32;  // accumulator and bias width
  localparam int unsigned M_W     = 32;  // scale-compound mantissa
  localparam int unsigned EXP_W   = 6;   // scale-compound exponent s
  localparam int unsigned SHIFT_W = 4;   // channel-wise shift scale S_i
  localparam int unsigned DIM_W   = 16;  // tensor dimensions
  localparam int unsigned KDIM_W  = 4;   // kernel size, stride, padding

  // Per-layer configuration, latched by the controller at start.
  typedef struct packed {
    logic [DIM_W-1:0]       w_in;
    logic [DIM_W-1:0]       h_in;
    logic [DIM_W-1:0]       c_in;       // ignored in depthwise mode
    logic [DIM_W-1:0]       w_out;
    logic [DIM_W-1:0]       h_out;
    logic [DIM_W-1:0]       c_out;
    logic [KDIM_W-1:0]      w_w;        // kernel width
    logic [KDIM_W-1:0]      h_w;        // kernel height
    logic [KDIM_W-1:0]      stride;
    logic [KDIM_W-1:0]      pad_left;
    logic [KDIM_W-1:0]      pad_top;
    logic                   depthwise;
    logic                   relu;
    logic [DATA_W-1:0]      z_in;
    logic [DATA_W-1:0]      z_w;
    logic [DATA_W-1:0]      z_out;
    logic [M_W-1:0]         m;          // mantissa, value m / 2^32 in [0.5,1)
    logic signed [EXP_W-1:0] s;         // exponent, left shift when positive
  } wes_cfg_t;

  // Quantization parameters that travel with a beat into the datapath.
  typedef struct packed {
    logic [DATA_W-1:0]       z_in;
    logic [DATA_W-1:0]       z_w;
    logic [DATA_W-1:0]       z_out;
    logic                    relu;
    logic [M_W-1:0]          m;
    logic signed [EXP_W-1:0] s;
  } wes_qparam_t;

  function automatic wes_qparam_t qparam_of(wes_cfg_t c);
    wes_qparam_t q;
    q.z_in  = c.z_in;
    q.z_w   = c.z_w;
    q.z_out = c.z_out;
    q.relu  = c.relu;
    q.m     = c.m;
    q.s     = c.s;
    return q;
  endfunction

endpackage
