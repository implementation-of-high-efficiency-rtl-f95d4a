// pe_array: the 8x8 main-path PE array with its data router.
//
// NIN input channels, each presented as a 3x3 window of spikes, are broadcast
// (the data router is pure wiring) to NOUT output rows. Row o holds NIN PE
// cores, core (o,i) convolving input window i with kernel w[o][i]; the NIN
// core sums of a row are added into the partial output Fsum[o]. Purely
// combinational: one full array evaluation per clock. The 8x8 size and the
// broadcast of input maps to all output channels follow the published design.
//
// Weight packing: w[o][i][t] is the 8-bit signed weight of tap t (t = 3*row +
// col of the kernel) from input i to output o; packed, w[0][0][0] is the LSB
// byte of a parameter-memory word.
module pe_array #(
  parameter int unsigned NOUT = 8,
  parameter int unsigned NIN  = 8,
  parameter int unsigned TAPS = 9,
  parameter int unsigned WW   = 8,
  parameter int unsigned FW   = 16
) (
  input  logic [NIN-1:0][TAPS-1:0]                   spk,
  input  logic [NOUT-1:0][NIN-1:0][TAPS-1:0][WW-1:0] w,
  output logic signed [NOUT-1:0][FW-1:0]             fsum
);
  localparam int unsigned SW = WW + $clog2(TAPS) + 1;

  logic signed [SW-1:0] core_sum [NOUT][NIN];

  for (genvar o = 0; o < NOUT; o++) begin : g_row
    for (genvar i = 0; i < NIN; i++) begin : g_core
      pe_core #(.TAPS(TAPS), .WW(WW), .SW(SW)) u_core (
        .spk (spk[i]),          // broadcast of input window i to every row
        .w   (w[o][i]),
        .sum (core_sum[o][i])
      );
    end
  end

  always_comb begin
    for (int o = 0; o < NOUT; o++) begin
      fsum[o] = '0;
      for (int i = 0; i < NIN; i++) fsum[o] += FW'(core_sum[o][i]);
    end
  end
endmodule
