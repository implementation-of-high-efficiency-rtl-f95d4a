// param_ram: on-chip BRAM holding the weights or biases of one layer.
//
// Each word holds everything the layer's PE array needs in one clock (for
// the main path 8 outputs x 8 inputs x 9 taps x 8 bits), so the array is
// switched by reading one word per reuse, matching the published "stored
// according to the physical arrangement of the PE array". Words are filled
// before inference through a load port that writes one 64-bit lane per clock
// (the load port is this design's choice). Read: synchronous, one cycle of
// latency, like a block RAM.
module param_ram #(
  parameter int unsigned WORD_BITS = 4608,
  parameter int unsigned DEPTH     = 64,
  localparam int unsigned LANES    = (WORD_BITS + 63) / 64,
  localparam int unsigned AW       = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                 clk,
  input  logic                 ld_we,
  input  logic [15:0]          ld_addr,
  input  logic [7:0]           ld_lane,
  input  logic [63:0]          ld_data,
  input  logic [AW-1:0]        raddr,
  output logic [WORD_BITS-1:0] rdata
);
  logic [LANES-1:0][63:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (ld_we && (ld_addr < 16'(DEPTH)) && (ld_lane < 8'(LANES)))
      mem[ld_addr[AW-1:0]][ld_lane] <= ld_data;
    rdata <= WORD_BITS'(mem[raddr]);
  end
endmodule
