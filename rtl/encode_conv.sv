// encode_conv: Conv1, the convolutional encoding layer.
//
// What it does: 3x3 convolution (padding 1, stride 1) of the signed 8-bit
// 3-channel input image to COUT = 64 channels, plus an 8-bit bias. The result
// is the first membrane map X0, written as 16-bit values after an arithmetic
// right shift by ENC_SHIFT and saturation. Its input is not a spike train, so
// the PEs are multipliers (DSP slices): a 3x64 array of 9-PE cores evaluates
// all 64 output channels of one pixel in a single clock (dsp_pe_array).
//
// How it works: the nine taps of a pixel's window are read from the image
// BRAM one per clock (zeros outside the image), then copied into the compute
// register while the next window is being read, so the layer produces one
// pixel every nine clocks. The whole output pixel (all channels) is written in
// one clock. rows_done counts finished output rows for the next layer.
// All weights of the layer fit one parameter word (3x64x9 bytes).
//
// The 3x64 DSP array follows the published design; the tap-serial window
// fetch, shift and saturation are this implementation's choices.
module encode_conv
  import snn_pkg::*;
#(
  parameter int unsigned H         = 32,
  parameter int unsigned W         = 32,
  parameter int unsigned CIN       = 3,
  parameter int unsigned COUT      = 64,
  parameter int unsigned ENC_SHIFT = 4,
  localparam int unsigned NPIX     = H * W,
  localparam int unsigned AW       = $clog2(NPIX),
  localparam int unsigned RW       = $clog2(H + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  output logic                        busy,
  output logic                        done,
  output logic [AW-1:0]               img_raddr,
  input  logic [CIN-1:0][PW-1:0]      img_rdata,
  input  param_ld_t                   ld,
  output logic                        out_we,
  output logic [AW-1:0]               out_waddr,
  output logic [COUT-1:0][XW-1:0]     out_x,
  output logic [RW-1:0]               rows_done
);
  localparam int unsigned YW = 32;

  // fetch
  logic                        f_run;
  logic [AW-1:0]               f_pix;
  logic [$clog2(H+1)-1:0]      f_r;
  logic [$clog2(W+1)-1:0]      f_c;
  logic [3:0]                  f_tap;
  logic                        cap_v, cap_pad, cap_last;
  logic [3:0]                  cap_tap;
  logic [AW-1:0]               cap_pix;
  logic [CIN-1:0][TAPS-1:0][PW-1:0] win_fill, win_cur;

  int ir, ic;
  logic tap_pad;
  always_comb begin
    ir = int'(f_r) + int'(f_tap) / 3 - 1;
    ic = int'(f_c) + int'(f_tap) % 3 - 1;
    tap_pad   = (ir < 0) || (ir >= int'(H)) || (ic < 0) || (ic >= int'(W));
    img_raddr = tap_pad ? '0 : AW'(ir * int'(W) + ic);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_run   <= 1'b0;
      f_pix   <= '0;
      f_r     <= '0;
      f_c     <= '0;
      f_tap   <= '0;
      cap_v   <= 1'b0;
      cap_pad <= 1'b0;
      cap_tap <= '0;
      cap_pix <= '0;
    end else begin
      cap_v <= f_run;
      cap_tap <= f_tap;
      cap_pad <= tap_pad;
      cap_pix <= f_pix;
      if (start) begin
        f_run <= 1'b1;
        f_pix <= '0;
        f_r   <= '0;
        f_c   <= '0;
        f_tap <= '0;
      end else if (f_run) begin
        if (32'(f_tap) == TAPS - 1) begin
          f_tap <= '0;
          if (32'(f_pix) == NPIX - 1) f_run <= 1'b0;
          f_pix <= f_pix + 1'b1;
          if (32'(f_c) == W - 1) begin
            f_c <= '0;
            f_r <= f_r + 1'b1;
          end else f_c <= f_c + 1'b1;
        end else f_tap <= f_tap + 1'b1;
      end
    end
  end

  // capture, then copy the complete window to the compute register
  logic            cmp_v, out_v;
  logic [AW-1:0]   cmp_pix, last_pix;
  always_ff @(posedge clk) begin
    if (cap_v)
      for (int i = 0; i < CIN; i++)
        win_fill[i][cap_tap] <= cap_pad ? '0 : img_rdata[i];
    if (cap_last) win_cur <= win_fill;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cap_last <= 1'b0;
      cmp_v    <= 1'b0;
      cmp_pix  <= '0;
      last_pix <= '0;
      out_v    <= 1'b0;
      out_waddr <= '0;
    end else begin
      cap_last <= cap_v && (32'(cap_tap) == TAPS - 1);
      cmp_v    <= cap_last;
      if (cap_v && (32'(cap_tap) == TAPS - 1)) last_pix <= cap_pix;
      if (cap_last) cmp_pix <= last_pix;
      out_v     <= cmp_v;
      out_waddr <= cmp_pix;
    end
  end

  // weights: one word holding the whole 3x64 array; biases: one word
  logic [COUT*CIN*TAPS*WW-1:0] w_word;
  logic [COUT*WW-1:0]          b_word;
  param_ram #(.WORD_BITS(COUT*CIN*TAPS*WW), .DEPTH(1)) u_wram (
    .clk, .ld_we(ld.we && ld.layer == L_CONV1 && ld.sel == SEL_W),
    .ld_addr(ld.addr), .ld_lane(ld.lane), .ld_data(ld.data),
    .raddr(1'b0), .rdata(w_word));
  param_ram #(.WORD_BITS(COUT*WW), .DEPTH(1)) u_bram (
    .clk, .ld_we(ld.we && ld.layer == L_CONV1 && ld.sel == SEL_B),
    .ld_addr(ld.addr), .ld_lane(ld.lane), .ld_data(ld.data),
    .raddr(1'b0), .rdata(b_word));

  logic signed [COUT-1:0][YW-1:0] y;
  dsp_pe_array #(.NIN(CIN), .NOUT(COUT), .TAPS(TAPS), .XW(PW), .WW(WW), .YW(YW)) u_array (
    .x(win_cur), .w(w_word), .y);

  always_ff @(posedge clk)
    if (cmp_v)
      for (int o = 0; o < COUT; o++)
        out_x[o] <= sat_xw((40'($signed(y[o])) + 40'($signed(b_word[o*WW +: WW]))) >>> ENC_SHIFT);

  assign out_we = out_v;

  // progress
  logic [$clog2(W+1)-1:0] o_c;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rows_done <= '0;
      o_c       <= '0;
      busy      <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rows_done <= '0;
        o_c       <= '0;
        busy      <= 1'b1;
      end else if (out_v) begin
        if (32'(o_c) == W - 1) begin
          o_c       <= '0;
          rows_done <= rows_done + 1'b1;
          if (32'(rows_done) == H - 1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end else o_c <= o_c + 1'b1;
      end
    end
  end
endmodule
