// res_block: one residual block of the feature-extraction stage.
//
// What it does: from the block input X (a 16-bit membrane map with CIN
// channels) it computes X' = conv_b(LIF(conv_a(LIF(X)))) + shortcut(X), a map
// of COUT channels at H_IN/STRIDE resolution. The main branch holds two LIF
// activations and two grouped 3x3 spiking convolutions; the side branch is a
// 1x1 convolution on the DSP shortcut array (SC_CONV=1, used when the channel
// count or resolution changes) or the input itself (direct mapping). The side
// branch reads the membrane value, not the spikes, which is why it needs
// multipliers while the main branch does not.
//
// How it works: conv_a thresholds the input words it fetches (lif_neuron) and
// writes spikes to the block's middle spike BRAM; conv_b reads that map as
// soon as conv_a has finished the rows it needs, and for every output pixel
// also fetches the block-input pixel at the same position for the shortcut,
// which it adds before writing the output BRAM. Both engines run together.
// The output BRAM has two read ports for the next block (main path and
// shortcut) or for the pool.
//
// Interface: src_ra_* / src_rb_* read the previous layer's map (one clock of
// latency); src_rows says how many of its rows are final. o_ra_* / o_rb_*
// read this block's output, o_rows says how many rows are final.
//
// Structure (LIF, Conv, LIF, Conv, Shortcut, add) follows the published block;
// buffering, handshakes, stride placement and widths are this design's own.
module res_block
  import snn_pkg::*;
#(
  parameter int unsigned CIN      = 64,
  parameter int unsigned COUT     = 128,
  parameter int unsigned H_IN     = 32,
  parameter int unsigned STRIDE   = 1,
  parameter bit          SC_CONV  = 1'b1,
  parameter int unsigned SC_SHIFT = 6,
  parameter int          THRESH   = THRESH_DEFAULT,
  parameter layer_id_e   LAYER_A  = L_B1A,
  parameter layer_id_e   LAYER_B  = L_B1B,
  localparam int unsigned H_OUT   = (H_IN - 1) / STRIDE + 1,
  localparam int unsigned IAW     = $clog2(H_IN * H_IN),
  localparam int unsigned OAW     = $clog2(H_OUT * H_OUT),
  localparam int unsigned RW      = $clog2(H_IN + 1),
  localparam int unsigned ORW     = $clog2(H_OUT + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  input  param_ld_t                 ld,
  input  logic [RW-1:0]             src_rows,
  output logic [IAW-1:0]            src_ra_addr,
  input  logic [CIN-1:0][XW-1:0]    src_ra_data,
  output logic [IAW-1:0]            src_rb_addr,
  input  logic [CIN-1:0][XW-1:0]    src_rb_data,
  input  logic [OAW-1:0]            o_ra_addr,
  output logic [COUT-1:0][XW-1:0]   o_ra_data,
  input  logic [OAW-1:0]            o_rb_addr,
  output logic [COUT-1:0][XW-1:0]   o_rb_data,
  output logic [ORW-1:0]            o_rows,
  output logic [31:0]               stall_a,
  output logic [31:0]               stall_b
);
  localparam int unsigned NCHUNK = COUT / PAR_OUT;
  localparam int unsigned KW     = (NCHUNK > 1) ? $clog2(NCHUNK) : 1;

  // first LIF: spikes of the block input
  logic [CIN-1:0] in_spk;
  lif_neuron #(.N(CIN), .XW(XW), .THRESH(THRESH)) u_lif_in (.u(src_ra_data), .spk(in_spk));

  // conv_a -> middle spike map
  logic               a_busy, a_done, a_we;
  logic [OAW-1:0]     a_waddr, mid_raddr;
  logic [KW-1:0]      a_chunk;
  logic [PAR_OUT-1:0] a_s;
  logic [PAR_OUT-1:0][XW-1:0] a_x;
  logic [ORW-1:0]     a_rows;
  logic [$clog2(PAR_OUT*PAR_OUT)-1:0] a_sc_raddr;

  spike_conv #(
    .CIN(CIN), .COUT(COUT), .NGROUP(GROUPS), .H_IN(H_IN), .W_IN(H_IN), .STRIDE(STRIDE),
    .OUT_SPIKE(1'b1), .SC_MODE(0), .SC_CIN(PAR_OUT), .SC_W(PAR_OUT), .SC_STRIDE(1),
    .THRESH(THRESH), .LAYER_ID(LAYER_A)
  ) u_conv_a (
    .clk, .rst_n, .start, .busy(a_busy), .done(a_done),
    .src_rows, .in_raddr(src_ra_addr), .in_rdata(in_spk),
    .sc_raddr(a_sc_raddr), .sc_rdata('0), .ld,
    .out_we(a_we), .out_waddr(a_waddr), .out_chunk(a_chunk), .out_x(a_x), .out_s(a_s),
    .rows_done(a_rows), .stall_cycles(stall_a));

  logic [COUT-1:0][0:0] mid_rdata, mid_unused;
  logic [PAR_OUT-1:0][0:0] a_s_w;
  always_comb for (int o = 0; o < PAR_OUT; o++) a_s_w[o] = a_s[o];

  fmap_ram #(.NPIX(H_OUT*H_OUT), .NCH(COUT), .EW(1), .WCH(PAR_OUT)) u_mid (
    .clk, .we(a_we), .waddr(a_waddr), .wchunk(a_chunk), .wdata(a_s_w),
    .ra_addr(mid_raddr), .ra_data(mid_rdata), .rb_addr('0), .rb_data(mid_unused));

  logic [COUT-1:0] mid_spk;
  always_comb for (int c = 0; c < COUT; c++) mid_spk[c] = mid_rdata[c];

  // conv_b + shortcut -> block output map
  logic               b_we;
  logic [OAW-1:0]     b_waddr;
  logic [KW-1:0]      b_chunk;
  logic [PAR_OUT-1:0] b_s;
  logic [PAR_OUT-1:0][XW-1:0] b_x;

  spike_conv #(
    .CIN(COUT), .COUT(COUT), .NGROUP(GROUPS), .H_IN(H_OUT), .W_IN(H_OUT), .STRIDE(1),
    .OUT_SPIKE(1'b0), .SC_MODE(SC_CONV ? 2 : 1), .SC_CIN(CIN), .SC_W(H_IN), .SC_STRIDE(STRIDE),
    .SC_SHIFT(SC_SHIFT), .THRESH(THRESH), .LAYER_ID(LAYER_B)
  ) u_conv_b (
    .clk, .rst_n, .start, .busy, .done,
    .src_rows(a_rows), .in_raddr(mid_raddr), .in_rdata(mid_spk),
    .sc_raddr(src_rb_addr), .sc_rdata(src_rb_data), .ld,
    .out_we(b_we), .out_waddr(b_waddr), .out_chunk(b_chunk), .out_x(b_x), .out_s(b_s),
    .rows_done(o_rows), .stall_cycles(stall_b));

  fmap_ram #(.NPIX(H_OUT*H_OUT), .NCH(COUT), .EW(XW), .WCH(PAR_OUT)) u_out (
    .clk, .we(b_we), .waddr(b_waddr), .wchunk(b_chunk), .wdata(b_x),
    .ra_addr(o_ra_addr), .ra_data(o_ra_data), .rb_addr(o_rb_addr), .rb_data(o_rb_data));
endmodule
