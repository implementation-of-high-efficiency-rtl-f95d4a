// snn_pkg: constants and types shared by the ResNet-10 spiking processor.
//
// The network is a ResNet-10 SNN run with a single time step: Conv1 (3->64)
// encodes the 32x32 RGB image, two residual blocks at 128 channels (Conv2_x)
// and two at 256 channels (Conv3_x, 16x16) extract features, a pool and a
// 256x10 fully connected layer classify. Channel counts, the group count g=4,
// the 8-bit weights and the 8x8 main-path PE array follow the published
// design; the 16-bit width of stored membrane values, the load bus and the
// layer numbering are this implementation's choices.
package snn_pkg;

  // network sizes
  localparam int unsigned IMG    = 32;   // input image side
  localparam int unsigned CH0    = 3;    // RGB input channels
  localparam int unsigned CH1    = 64;   // Conv1 output channels
  localparam int unsigned CH2    = 128;  // Conv2_x channels
  localparam int unsigned CH3    = 256;  // Conv3_x channels
  localparam int unsigned GROUPS = 4;    // grouped-convolution parameter g
  localparam int unsigned NCLASS = 10;   // CIFAR-10 classes

  // arithmetic widths
  localparam int unsigned WW = 8;   // weight / bias width (signed)
  localparam int unsigned XW = 16;  // stored membrane-value width (signed, saturated)
  localparam int unsigned PW = 8;   // input pixel width (signed)

  // main-path PE array geometry
  localparam int unsigned PAR_OUT = 8;  // output channels in parallel
  localparam int unsigned PAR_IN  = 8;  // input channels in parallel
  localparam int unsigned TAPS    = 9;  // 3x3 kernel, one PE per tap
  localparam int unsigned SC_LANES = 64; // shortcut PE array inputs per cycle (64x8)

  // default LIF threshold, at accumulator scale
  localparam int THRESH_DEFAULT = 64;

  // layer identifiers on the parameter load bus
  typedef enum logic [3:0] {
    L_CONV1 = 4'd0,
    L_B1A   = 4'd1, L_B1B = 4'd2,
    L_B2A   = 4'd3, L_B2B = 4'd4,
    L_B3A   = 4'd5, L_B3B = 4'd6,
    L_B4A   = 4'd7, L_B4B = 4'd8,
    L_FC    = 4'd9
  } layer_id_e;

  // which memory of a layer a load word goes to
  typedef enum logic [1:0] {
    SEL_W    = 2'd0,  // main weights
    SEL_B    = 2'd1,  // main biases
    SEL_SC_W = 2'd2,  // shortcut weights
    SEL_SC_B = 2'd3   // shortcut biases
  } mem_sel_e;

  // parameter load bus: one 64-bit lane of one memory word per cycle
  typedef struct packed {
    logic        we;
    layer_id_e   layer;
    mem_sel_e    sel;
    logic [15:0] addr;
    logic [7:0]  lane;
    logic [63:0] data;
  } param_ld_t;

  // saturate a wide signed value to XW bits
  function automatic logic signed [XW-1:0] sat_xw(input logic signed [39:0] v);
    if (v > 40'sd32767)       return 16'sh7fff;
    else if (v < -40'sd32768) return 16'sh8000;
    else                      return v[XW-1:0];
  endfunction

endpackage
