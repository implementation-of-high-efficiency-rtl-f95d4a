// snn_top: the residual spiking neural network processor (ResNet-10, T = 1).
//
// What it does: classifies one signed 8-bit RGB image of IMG_SIZE x IMG_SIZE pixels
// into NCLASS classes with every parameter and every intermediate map held
// in on-chip memories. Data path, in order:
//   image BRAM -> Conv1 (encoding, 3->64, DSP array)
//   -> Conv2_x: block 1 (64->128, 1x1-conv shortcut), block 2 (128->128, direct)
//   -> Conv3_x: block 3 (128->256, stride 2, 1x1-conv shortcut), block 4 (256->256, direct)
//   -> LIF + global spike-count pool (256) -> FC 256x10 -> argmax classifier.
// Every layer has its own engine and output BRAM, and all of them run at the
// same time on the same image: each starts an output row as soon as its
// producer has finished the input rows it needs (fully pipelined across
// layers). The controller launches the stages, starts the FC after the pool
// and reports the latency in clocks.
//
// Interface: before start, the host writes the image (img_we/img_addr/
// img_data, one pixel of three signed bytes per clock, channel c in byte c)
// and all weights and biases over the parameter load bus ld (see snn_pkg).
// start is a one-clock pulse; done pulses when class_id and score are valid;
// they stay valid until the next done. cycles is the last image's latency.
//
// Network shape, grouped convolution, PE-array sizes and on-chip storage
// follow the published processor; strides, widths, thresholds, shifts, the
// load bus and the handshakes are this implementation's choices.
module snn_top
  import snn_pkg::*;
#(
  parameter int unsigned IMG_SIZE       = 32,
  parameter int          THRESH    = THRESH_DEFAULT,
  parameter int unsigned ENC_SHIFT = 4,
  parameter int unsigned SC_SHIFT  = 6,
  localparam int unsigned H2       = IMG_SIZE / 2,
  localparam int unsigned AW1      = $clog2(IMG_SIZE * IMG_SIZE),
  localparam int unsigned AW2      = $clog2(H2 * H2),
  localparam int unsigned CLW      = $clog2(NCLASS)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              img_we,
  input  logic [AW1-1:0]                    img_addr,
  input  logic [CH0-1:0][PW-1:0]            img_data,
  input  param_ld_t                         ld,
  input  logic                              start,
  output logic                              busy,
  output logic                              done,
  output logic [CLW-1:0]                    class_id,
  output logic signed [NCLASS-1:0][31:0]    score,
  output logic [31:0]                       cycles
);
  localparam int unsigned RW1 = $clog2(IMG_SIZE + 1);
  localparam int unsigned RW2 = $clog2(H2 + 1);
  localparam int unsigned CNTW = $clog2(H2 * H2 + 1);

  // ---------------------------------------------------------------- control
  logic stage_start, fc_start, fc_done, result_we;
  logic [5:0] stage_done;

  snn_controller #(.NSTAGE(6)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done, .stage_start, .stage_done,
    .fc_start, .fc_done, .result_we, .cycles);

  // ---------------------------------------------------------------- image BRAM
  logic [AW1-1:0]           img_raddr;
  logic [CH0-1:0][PW-1:0]   img_rdata, img_unused;
  fmap_ram #(.NPIX(IMG_SIZE*IMG_SIZE), .NCH(CH0), .EW(PW), .WCH(CH0)) u_img (
    .clk, .we(img_we), .waddr(img_addr), .wchunk(1'b0), .wdata(img_data),
    .ra_addr(img_raddr), .ra_data(img_rdata), .rb_addr('0), .rb_data(img_unused));

  // ---------------------------------------------------------------- Conv1
  logic                   c1_busy, c1_we;
  logic [AW1-1:0]         c1_waddr;
  logic [CH1-1:0][XW-1:0] c1_x;
  logic [RW1-1:0]         c1_rows;

  encode_conv #(.H(IMG_SIZE), .W(IMG_SIZE), .CIN(CH0), .COUT(CH1), .ENC_SHIFT(ENC_SHIFT)) u_conv1 (
    .clk, .rst_n, .start(stage_start), .busy(c1_busy), .done(stage_done[0]),
    .img_raddr, .img_rdata, .ld,
    .out_we(c1_we), .out_waddr(c1_waddr), .out_x(c1_x), .rows_done(c1_rows));

  logic [AW1-1:0]         x0_ra_addr, x0_rb_addr;
  logic [CH1-1:0][XW-1:0] x0_ra_data, x0_rb_data;
  fmap_ram #(.NPIX(IMG_SIZE*IMG_SIZE), .NCH(CH1), .EW(XW), .WCH(CH1)) u_x0 (
    .clk, .we(c1_we), .waddr(c1_waddr), .wchunk(1'b0), .wdata(c1_x),
    .ra_addr(x0_ra_addr), .ra_data(x0_ra_data), .rb_addr(x0_rb_addr), .rb_data(x0_rb_data));

  // ---------------------------------------------------------------- Conv2_x
  logic                   b1_busy, b2_busy, b3_busy, b4_busy;
  logic [AW1-1:0]         x1_ra_addr, x1_rb_addr, x2_ra_addr, x2_rb_addr;
  logic [CH2-1:0][XW-1:0] x1_ra_data, x1_rb_data, x2_ra_data, x2_rb_data;
  logic [RW1-1:0]         x1_rows, x2_rows;
  logic [31:0]            b1_stall_a, b1_stall_b, b2_stall_a, b2_stall_b;
  logic [31:0]            b3_stall_a, b3_stall_b, b4_stall_a, b4_stall_b;

  res_block #(.CIN(CH1), .COUT(CH2), .H_IN(IMG_SIZE), .STRIDE(1), .SC_CONV(1'b1),
              .SC_SHIFT(SC_SHIFT), .THRESH(THRESH), .LAYER_A(L_B1A), .LAYER_B(L_B1B)) u_b1 (
    .clk, .rst_n, .start(stage_start), .busy(b1_busy), .done(stage_done[1]), .ld,
    .src_rows(c1_rows), .src_ra_addr(x0_ra_addr), .src_ra_data(x0_ra_data),
    .src_rb_addr(x0_rb_addr), .src_rb_data(x0_rb_data),
    .o_ra_addr(x1_ra_addr), .o_ra_data(x1_ra_data), .o_rb_addr(x1_rb_addr), .o_rb_data(x1_rb_data),
    .o_rows(x1_rows), .stall_a(b1_stall_a), .stall_b(b1_stall_b));

  res_block #(.CIN(CH2), .COUT(CH2), .H_IN(IMG_SIZE), .STRIDE(1), .SC_CONV(1'b0),
              .SC_SHIFT(SC_SHIFT), .THRESH(THRESH), .LAYER_A(L_B2A), .LAYER_B(L_B2B)) u_b2 (
    .clk, .rst_n, .start(stage_start), .busy(b2_busy), .done(stage_done[2]), .ld,
    .src_rows(x1_rows), .src_ra_addr(x1_ra_addr), .src_ra_data(x1_ra_data),
    .src_rb_addr(x1_rb_addr), .src_rb_data(x1_rb_data),
    .o_ra_addr(x2_ra_addr), .o_ra_data(x2_ra_data), .o_rb_addr(x2_rb_addr), .o_rb_data(x2_rb_data),
    .o_rows(x2_rows), .stall_a(b2_stall_a), .stall_b(b2_stall_b));

  // ---------------------------------------------------------------- Conv3_x
  logic [AW2-1:0]         x3_ra_addr, x3_rb_addr, x4_ra_addr, x4_rb_addr;
  logic [CH3-1:0][XW-1:0] x3_ra_data, x3_rb_data, x4_ra_data, x4_rb_data;
  logic [RW2-1:0]         x3_rows, x4_rows;

  res_block #(.CIN(CH2), .COUT(CH3), .H_IN(IMG_SIZE), .STRIDE(2), .SC_CONV(1'b1),
              .SC_SHIFT(SC_SHIFT), .THRESH(THRESH), .LAYER_A(L_B3A), .LAYER_B(L_B3B)) u_b3 (
    .clk, .rst_n, .start(stage_start), .busy(b3_busy), .done(stage_done[3]), .ld,
    .src_rows(x2_rows), .src_ra_addr(x2_ra_addr), .src_ra_data(x2_ra_data),
    .src_rb_addr(x2_rb_addr), .src_rb_data(x2_rb_data),
    .o_ra_addr(x3_ra_addr), .o_ra_data(x3_ra_data), .o_rb_addr(x3_rb_addr), .o_rb_data(x3_rb_data),
    .o_rows(x3_rows), .stall_a(b3_stall_a), .stall_b(b3_stall_b));

  res_block #(.CIN(CH3), .COUT(CH3), .H_IN(H2), .STRIDE(1), .SC_CONV(1'b0),
              .SC_SHIFT(SC_SHIFT), .THRESH(THRESH), .LAYER_A(L_B4A), .LAYER_B(L_B4B)) u_b4 (
    .clk, .rst_n, .start(stage_start), .busy(b4_busy), .done(stage_done[4]), .ld,
    .src_rows(x3_rows), .src_ra_addr(x3_ra_addr), .src_ra_data(x3_ra_data),
    .src_rb_addr(x3_rb_addr), .src_rb_data(x3_rb_data),
    .o_ra_addr(x4_ra_addr), .o_ra_data(x4_ra_data), .o_rb_addr(x4_rb_addr), .o_rb_data(x4_rb_data),
    .o_rows(x4_rows), .stall_a(b4_stall_a), .stall_b(b4_stall_b));

  assign x4_rb_addr = '0;

  // ---------------------------------------------------------------- classifier part
  logic                   pool_busy, fc_busy;
  logic [CH3-1:0][CNTW-1:0] cnt;

  spike_pool #(.NCH(CH3), .H(H2), .THRESH(THRESH)) u_pool (
    .clk, .rst_n, .start(stage_start), .busy(pool_busy), .done(stage_done[5]),
    .src_rows(x4_rows), .raddr(x4_ra_addr), .rdata(x4_ra_data), .cnt);

  logic signed [NCLASS-1:0][31:0] fc_score;
  fc_layer #(.NIN(CH3), .NOUT(NCLASS), .CW(CNTW), .SW(32)) u_fc (
    .clk, .rst_n, .start(fc_start), .busy(fc_busy), .done(fc_done), .cnt, .ld, .score(fc_score));

  logic [CLW-1:0] cls;
  classifier #(.NCLASS(NCLASS), .SW(32)) u_cls (.score(fc_score), .class_id(cls));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      class_id <= '0;
      score    <= '0;
    end else if (result_we) begin
      class_id <= cls;
      score    <= fc_score;
    end
  end
endmodule
