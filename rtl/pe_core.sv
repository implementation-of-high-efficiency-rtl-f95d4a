// pe_core: one main-path processing-element core of the spiking convolution.
//
// Nine PEs, one per tap of a 3x3 kernel. The input of the main path is a
// spike (0 or 1), so each PE's multiply-add reduces to adding its 8-bit signed
// weight when its spike is set; no DSP multiplier is needed. The nine terms
// are summed combinationally, so a whole 3x3 kernel is evaluated in one clock,
// as in the published PE-core design. Output: signed sum, 12 bits
// (9 x 128 fits in 11 bits plus sign).
module pe_core #(
  parameter int unsigned TAPS = 9,
  parameter int unsigned WW   = 8,
  parameter int unsigned SW   = WW + $clog2(TAPS) + 1
) (
  input  logic [TAPS-1:0]         spk,
  input  logic [TAPS-1:0][WW-1:0] w,
  output logic signed [SW-1:0]    sum
);
  always_comb begin
    sum = '0;
    for (int t = 0; t < TAPS; t++)
      if (spk[t]) sum += SW'($signed(w[t]));
  end
endmodule
