// fmap_ram: on-chip BRAM holding one feature map of the network.
//
// One word per pixel holds all NCH channels of EW bits each (EW = 16 for
// membrane values, 1 for spike maps). A producer writes WCH channels at a
// time (one output-channel group of its PE array) at channel group wchunk.
// Two independent synchronous read ports with one cycle of latency let two
// consumers (a block's main path and its shortcut, or a block and the pool)
// read the same map. The word layout and port count are this design's choice.
module fmap_ram #(
  parameter int unsigned NPIX = 1024,
  parameter int unsigned NCH  = 128,
  parameter int unsigned EW   = 16,
  parameter int unsigned WCH  = 8,
  localparam int unsigned AW  = $clog2(NPIX),
  localparam int unsigned CW  = (NCH / WCH > 1) ? $clog2(NCH / WCH) : 1
) (
  input  logic                          clk,
  input  logic                          we,
  input  logic [AW-1:0]                 waddr,
  input  logic [CW-1:0]                 wchunk,
  input  logic [WCH-1:0][EW-1:0]        wdata,
  input  logic [AW-1:0]                 ra_addr,
  output logic [NCH-1:0][EW-1:0]        ra_data,
  input  logic [AW-1:0]                 rb_addr,
  output logic [NCH-1:0][EW-1:0]        rb_data
);
  logic [NCH-1:0][EW-1:0] mem [NPIX];

  always_ff @(posedge clk) begin
    if (we)
      for (int c = 0; c < WCH; c++)
        mem[waddr][32'(wchunk) * WCH + c] <= wdata[c];
    ra_data <= mem[ra_addr];
    rb_data <= mem[rb_addr];
  end
endmodule
