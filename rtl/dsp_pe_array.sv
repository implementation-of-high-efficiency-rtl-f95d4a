// dsp_pe_array: multiply-add PE array for multi-bit (non-spike) inputs.
//
// Used where the data entering a convolution is not a spike: the encoding
// layer Conv1 (a 3x64 array of 9-PE cores over the 8-bit image) and the
// residual side branch (a 64x8 array of single-PE cores for 1x1 kernels over
// 16-bit membrane values). Each PE is a signed multiplier (a DSP slice on the
// FPGA); output o is the sum over NIN inputs and TAPS taps of x*w.
// Combinational. Sizes and the use of DSP PEs follow the published design.
//
// Weight packing: w[o][i][t], w[0][0][0] in the LSB byte.
module dsp_pe_array #(
  parameter int unsigned NIN  = 3,
  parameter int unsigned NOUT = 64,
  parameter int unsigned TAPS = 9,
  parameter int unsigned XW   = 8,
  parameter int unsigned WW   = 8,
  parameter int unsigned YW   = 32
) (
  input  logic [NIN-1:0][TAPS-1:0][XW-1:0]           x,
  input  logic [NOUT-1:0][NIN-1:0][TAPS-1:0][WW-1:0] w,
  output logic signed [NOUT-1:0][YW-1:0]             y
);
  // operands sign-extended to the sum width before the multiply
  logic signed [YW-1:0] xe [NIN][TAPS];
  logic signed [YW-1:0] we [NOUT][NIN][TAPS];
  always_comb begin
    for (int i = 0; i < NIN; i++)
      for (int t = 0; t < TAPS; t++) xe[i][t] = YW'($signed(x[i][t]));
    for (int o = 0; o < NOUT; o++)
      for (int i = 0; i < NIN; i++)
        for (int t = 0; t < TAPS; t++) we[o][i][t] = YW'($signed(w[o][i][t]));
  end

  always_comb begin
    for (int o = 0; o < NOUT; o++) begin
      y[o] = '0;
      for (int i = 0; i < NIN; i++)
        for (int t = 0; t < TAPS; t++)
          y[o] += xe[i][t] * we[o][i][t];
    end
  end
endmodule
