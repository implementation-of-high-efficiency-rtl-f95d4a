// spike_conv: main-path grouped 3x3 spiking convolution layer engine.
//
// What it does: convolves a spike map (CIN channels, H_IN x W_IN) with a
// grouped 3x3 kernel (GROUPS groups, padding 1, stride STRIDE) to COUT
// channels, adds an 8-bit bias, and writes either the LIF spikes of the
// result (OUT_SPIKE=1, first conv of a residual block) or the 16-bit
// membrane value plus the residual side branch (OUT_SPIKE=0, second conv).
//
// How it works: three overlapping stages, after the published four-step
// convolution pipeline (padding, input, compute, output):
//  * fetch   - walks the output pixels in raster order; for each it reads the
//              nine input words of its 3x3 window, one per clock, substituting
//              zeros outside the map (padding), plus one shortcut word, into a
//              fill buffer. A row is fetched only once the producing layer
//              reports enough finished rows (src_rows), which is what lets all
//              layers run at once as a row-level pipeline; cycles spent waiting
//              are counted in stall_cycles.
//  * compute - the filled window is handed to the 8x8 PE array (pe_array). For
//              each group of 8 output channels (a "chunk") the array is reused
//              NPASS = (CIN/GROUPS)/8 times over consecutive 8-channel slices of
//              the group's inputs; the partial sums Fsum_1..Fsum_NPASS are
//              accumulated on top of the bias. Weights for one array use are one
//              param_ram word at address chunk*NPASS+pass. The window stays put
//              while all chunks of the pixel are computed (input reuse within
//              the group). In the same passes the 64x8 DSP shortcut array
//              (dsp_pe_array, SC_MODE=2) forms the 1x1 convolution of the block
//              input, SC_CIN/64 passes per chunk; SC_MODE=1 takes the block
//              input unchanged (direct mapping).
//  * output  - writes the chunk's 8 channels to the output map.
// Timing: one PE-array pass per clock; a pixel takes NCHUNK*NPASS clocks while
// the next window is fetched in parallel (10 clocks). Read ports have one
// clock of latency. start is a one-cycle pulse; done pulses when the last
// chunk has been written.
//
// The grouped reuse, PE array size, DSP shortcut and spike-only main path
// follow the published design. The fetch order, the row handshake, stride
// handling, the shortcut scaling (arithmetic shift by SC_SHIFT, saturation to
// 16 bits) and all widths are this implementation's choices.
module spike_conv
  import snn_pkg::*;
#(
  parameter int unsigned CIN       = 128,
  parameter int unsigned COUT      = 128,
  parameter int unsigned NGROUP    = 4,
  parameter int unsigned H_IN      = 32,
  parameter int unsigned W_IN      = 32,
  parameter int unsigned STRIDE    = 1,
  parameter bit          OUT_SPIKE = 1'b1,
  parameter int unsigned SC_MODE   = 0,    // 0 none, 1 direct mapping, 2 1x1 conv
  parameter int unsigned SC_CIN    = 64,
  parameter int unsigned SC_W      = 32,   // width of the shortcut source map
  parameter int unsigned SC_STRIDE = 1,
  parameter int unsigned SC_SHIFT  = 6,
  parameter int          THRESH    = THRESH_DEFAULT,
  parameter layer_id_e   LAYER_ID  = L_B1A,
  localparam int unsigned H_OUT    = (H_IN - 1) / STRIDE + 1,
  localparam int unsigned W_OUT    = (W_IN - 1) / STRIDE + 1,
  localparam int unsigned NPIX_IN  = H_IN * W_IN,
  localparam int unsigned NPIX_OUT = H_OUT * W_OUT,
  localparam int unsigned NCHUNK   = COUT / PAR_OUT,
  localparam int unsigned IAW      = $clog2(NPIX_IN),
  localparam int unsigned OAW      = $clog2(NPIX_OUT),
  localparam int unsigned SAW      = $clog2(SC_W * SC_W),
  localparam int unsigned KW       = (NCHUNK > 1) ? $clog2(NCHUNK) : 1,
  localparam int unsigned RW       = $clog2(H_IN + 1),
  localparam int unsigned ORW      = $clog2(H_OUT + 1)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  output logic                         busy,
  output logic                         done,
  // producer progress and input-window reads
  input  logic [RW-1:0]                src_rows,
  output logic [IAW-1:0]               in_raddr,
  input  logic [CIN-1:0]               in_rdata,
  // shortcut source (block input) reads
  output logic [SAW-1:0]               sc_raddr,
  input  logic [SC_CIN-1:0][XW-1:0]    sc_rdata,
  // parameter load bus
  input  param_ld_t                    ld,
  // result write
  output logic                         out_we,
  output logic [OAW-1:0]               out_waddr,
  output logic [KW-1:0]                out_chunk,
  output logic [PAR_OUT-1:0][XW-1:0]   out_x,
  output logic [PAR_OUT-1:0]           out_s,
  output logic [ORW-1:0]               rows_done,
  output logic [31:0]                  stall_cycles
);
  localparam int unsigned CPG   = CIN / NGROUP;       // inputs per group
  localparam int unsigned OPG   = COUT / NGROUP;      // outputs per group
  localparam int unsigned NPASS = CPG / PAR_IN;       // PE-array reuses per chunk
  localparam int unsigned PW_   = (NPASS > 1) ? $clog2(NPASS) : 1;
  localparam int unsigned SC_L  = (SC_CIN < SC_LANES) ? SC_CIN : SC_LANES;
  localparam int unsigned NSC   = SC_CIN / SC_L;      // shortcut passes per chunk
  localparam int unsigned NTAP  = (SC_MODE != 0) ? TAPS + 1 : TAPS;
  localparam int unsigned FW    = 16;
  localparam int unsigned ACW   = 24;
  localparam int unsigned WDEP  = NCHUNK * NPASS;
  localparam int unsigned SDEP  = NCHUNK * NSC;
  localparam int unsigned YW    = 32;

  // elaboration-time rules of the mapping
  if (CPG % PAR_IN != 0 || OPG % PAR_OUT != 0 || CIN % NGROUP != 0) begin : g_chk_group
    $error("spike_conv: group sizes must be multiples of the 8x8 PE array");
  end
  if (SC_MODE == 2 && NSC > NPASS) begin : g_chk_sc
    $error("spike_conv: shortcut needs more passes than the main path provides");
  end
  if (SC_MODE == 1 && SC_CIN != COUT) begin : g_chk_id
    $error("spike_conv: direct mapping needs SC_CIN == COUT");
  end

  // ---------------------------------------------------------------- fetch
  typedef enum logic [1:0] {F_IDLE, F_WAIT, F_TAPS, F_HOLD} fstate_e;
  fstate_e f_state;
  logic [$clog2(H_OUT+1)-1:0] f_r;
  logic [$clog2(W_OUT+1)-1:0] f_c;
  logic [3:0]                 f_tap;
  logic                       cap_v, cap_pad;
  logic [3:0]                 cap_tap;
  logic [TAPS-1:0][CIN-1:0]   win_fill, win_cur;
  logic [SC_CIN-1:0][XW-1:0]  sc_fill, sc_cur;

  // window tap geometry
  int ir, ic;
  logic tap_pad;
  always_comb begin
    ir = int'(f_r) * STRIDE + int'(f_tap) / 3 - 1;
    ic = int'(f_c) * STRIDE + int'(f_tap) % 3 - 1;
    tap_pad = (ir < 0) || (ir >= int'(H_IN)) || (ic < 0) || (ic >= int'(W_IN));
    in_raddr = tap_pad ? '0 : IAW'(ir * int'(W_IN) + ic);
    sc_raddr = SAW'(int'(f_r) * SC_STRIDE * SC_W + int'(f_c) * SC_STRIDE);
  end

  int need_rows;
  always_comb begin
    need_rows = int'(f_r) * STRIDE + 2;
    if (need_rows > int'(H_IN)) need_rows = int'(H_IN);
  end

  // ---------------------------------------------------------------- compute
  logic              c_busy;
  logic [KW-1:0]     c_k;
  logic [PW_-1:0]    c_p;
  logic [OAW-1:0]    c_pix, f_pix;
  logic              c_last_issue;
  logic              handoff;

  assign c_last_issue = c_busy && (32'(c_k) == NCHUNK - 1) && (32'(c_p) == NPASS - 1);
  assign handoff = (f_state == F_HOLD) && !cap_v && (!c_busy || c_last_issue);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_state      <= F_IDLE;
      f_r          <= '0;
      f_c          <= '0;
      f_tap        <= '0;
      f_pix        <= '0;
      cap_v        <= 1'b0;
      cap_pad      <= 1'b0;
      cap_tap      <= '0;
      stall_cycles <= '0;
    end else begin
      cap_v <= 1'b0;
      unique case (f_state)
        F_IDLE: if (start) begin
          f_state      <= F_WAIT;
          f_r          <= '0;
          f_c          <= '0;
          f_pix        <= '0;
          stall_cycles <= '0;
        end
        F_WAIT: begin
          f_tap <= '0;
          if (int'(src_rows) >= need_rows) f_state <= F_TAPS;
          else stall_cycles <= stall_cycles + 1;
        end
        F_TAPS: begin
          cap_v   <= 1'b1;
          cap_tap <= f_tap;
          cap_pad <= (f_tap < 4'(TAPS)) ? tap_pad : 1'b0;
          if (32'(f_tap) == NTAP - 1) f_state <= F_HOLD;
          else f_tap <= f_tap + 1'b1;
        end
        F_HOLD: if (handoff) begin
          if (32'(f_pix) == NPIX_OUT - 1) f_state <= F_IDLE;
          else begin
            f_state <= F_WAIT;
            f_pix   <= f_pix + 1'b1;
            if (32'(f_c) == W_OUT - 1) begin
              f_c <= '0;
              f_r <= f_r + 1'b1;
            end else f_c <= f_c + 1'b1;
          end
        end
        default: f_state <= F_IDLE;
      endcase
    end
  end

  // capture of read data (one cycle after the address)
  always_ff @(posedge clk) begin
    if (cap_v) begin
      if (cap_tap < 4'(TAPS)) win_fill[cap_tap] <= cap_pad ? '0 : in_rdata;
      else                    sc_fill <= sc_rdata;
    end
    if (handoff) begin
      win_cur <= win_fill;
      sc_cur  <= sc_fill;
    end
  end

  // stage C0: issue weight reads and select the input slice of this pass
  logic [NPASS*NCHUNK > 1 ? $clog2(WDEP)-1 : 0 : 0] w_raddr;
  logic [KW-1:0]                    b_raddr;
  logic [PAR_IN-1:0][TAPS-1:0]      sel_spk;
  int                               grp, base;

  always_comb begin
    grp  = (int'(c_k) * PAR_OUT) / OPG;
    base = grp * CPG + int'(c_p) * PAR_IN;
    for (int i = 0; i < PAR_IN; i++)
      for (int t = 0; t < TAPS; t++)
        sel_spk[i][t] = win_cur[t][base + i];
    w_raddr = $bits(w_raddr)'(int'(c_k) * NPASS + int'(c_p));
    b_raddr = c_k;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_busy <= 1'b0;
      c_k    <= '0;
      c_p    <= '0;
      c_pix  <= '0;
    end else begin
      if (c_busy) begin
        if (32'(c_p) == NPASS - 1) begin
          c_p <= '0;
          if (32'(c_k) == NCHUNK - 1) begin
            c_k    <= '0;
            c_busy <= 1'b0;
          end else c_k <= c_k + 1'b1;
        end else c_p <= c_p + 1'b1;
      end
      if (handoff) begin
        c_busy <= 1'b1;
        c_k    <= '0;
        c_p    <= '0;
        c_pix  <= f_pix;
      end
    end
  end

  // stage C1 registers
  logic                        c1_v, c1_first, c1_last;
  logic [KW-1:0]               c1_k;
  logic [OAW-1:0]              c1_pix;
  logic [PAR_IN-1:0][TAPS-1:0] c1_spk;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c1_v     <= 1'b0;
      c1_first <= 1'b0;
      c1_last  <= 1'b0;
      c1_k     <= '0;
      c1_pix   <= '0;
    end else begin
      c1_v     <= c_busy;
      c1_first <= (c_p == '0);
      c1_last  <= (32'(c_p) == NPASS - 1);
      c1_k     <= c_k;
      c1_pix   <= c_pix;
    end
  end
  always_ff @(posedge clk) c1_spk <= sel_spk;

  // parameter memories
  logic [PAR_OUT*PAR_IN*TAPS*WW-1:0] w_word;
  logic [PAR_OUT*WW-1:0]             b_word;

  param_ram #(.WORD_BITS(PAR_OUT*PAR_IN*TAPS*WW), .DEPTH(WDEP)) u_wram (
    .clk, .ld_we(ld.we && ld.layer == LAYER_ID && ld.sel == SEL_W),
    .ld_addr(ld.addr), .ld_lane(ld.lane), .ld_data(ld.data),
    .raddr(w_raddr), .rdata(w_word));

  param_ram #(.WORD_BITS(PAR_OUT*WW), .DEPTH(NCHUNK)) u_bram (
    .clk, .ld_we(ld.we && ld.layer == LAYER_ID && ld.sel == SEL_B),
    .ld_addr(ld.addr), .ld_lane(ld.lane), .ld_data(ld.data),
    .raddr(b_raddr), .rdata(b_word));

  // main-path PE array
  logic signed [PAR_OUT-1:0][FW-1:0] fsum;
  pe_array #(.NOUT(PAR_OUT), .NIN(PAR_IN), .TAPS(TAPS), .WW(WW), .FW(FW)) u_array (
    .spk(c1_spk), .w(w_word), .fsum);

  // accumulation of Fsum_1..Fsum_NPASS on the bias
  logic signed [ACW-1:0] acc [PAR_OUT];
  always_ff @(posedge clk)
    if (c1_v)
      for (int o = 0; o < PAR_OUT; o++)
        acc[o] <= (c1_first ? ACW'($signed(b_word[o*WW +: WW])) : acc[o]) + ACW'($signed(fsum[o]));

  // residual side branch
  logic signed [PAR_OUT-1:0][XW-1:0] sc_val;   // valid in stage C2
  logic                              c2_v;
  logic [KW-1:0]                     c2_k;
  logic [OAW-1:0]                    c2_pix;

  if (SC_MODE == 2) begin : g_sc_conv
    localparam int unsigned SPW = (NSC > 1) ? $clog2(NSC) : 1;
    logic [$clog2(SDEP+1)-1:0]          scw_raddr;
    logic [SC_L-1:0][0:0][XW-1:0]       sc_sel, c1_scx;
    logic                               c1_scv;
    logic [PAR_OUT*SC_L*WW-1:0]         scw_word;
    logic [PAR_OUT*WW-1:0]              scb_word;
    logic signed [PAR_OUT-1:0][YW-1:0]  sc_y;
    logic signed [39:0]                 sc_acc [PAR_OUT];

    always_comb begin
      scw_raddr = $bits(scw_raddr)'(int'(c_k) * NSC + ((int'(c_p) < NSC) ? int'(c_p) : 0));
      for (int i = 0; i < SC_L; i++)
        sc_sel[i][0] = sc_cur[(int'(c_p) % NSC) * SC_L + i];
    end
    always_ff @(posedge clk) begin
      c1_scx <= sc_sel;
      c1_scv <= c_busy && (int'(c_p) < NSC);
    end

    param_ram #(.WORD_BITS(PAR_OUT*SC_L*WW), .DEPTH(SDEP)) u_scwram (
      .clk, .ld_we(ld.we && ld.layer == LAYER_ID && ld.sel == SEL_SC_W),
      .ld_addr(ld.addr), .ld_lane(ld.lane), .ld_data(ld.data),
      .raddr(scw_raddr[$clog2(SDEP > 1 ? SDEP : 2)-1:0]), .rdata(scw_word));
    param_ram #(.WORD_BITS(PAR_OUT*WW), .DEPTH(NCHUNK)) u_scbram (
      .clk, .ld_we(ld.we && ld.layer == LAYER_ID && ld.sel == SEL_SC_B),
      .ld_addr(ld.addr), .ld_lane(ld.lane), .ld_data(ld.data),
      .raddr(b_raddr), .rdata(scb_word));

    dsp_pe_array #(.NIN(SC_L), .NOUT(PAR_OUT), .TAPS(1), .XW(XW), .WW(WW), .YW(YW)) u_sc_array (
      .x(c1_scx), .w(scw_word), .y(sc_y));

    always_ff @(posedge clk)
      if (c1_v && c1_scv)
        for (int o = 0; o < PAR_OUT; o++)
          sc_acc[o] <= (c1_first ? 40'($signed(scb_word[o*WW +: WW])) : sc_acc[o]) + 40'($signed(sc_y[o]));

    always_comb
      for (int o = 0; o < PAR_OUT; o++) sc_val[o] = sat_xw(sc_acc[o] >>> SC_SHIFT);
  end else if (SC_MODE == 1) begin : g_sc_id
    logic signed [PAR_OUT-1:0][XW-1:0] c1_id, c2_id;
    always_ff @(posedge clk) begin
      for (int o = 0; o < PAR_OUT; o++) c1_id[o] <= sc_cur[int'(c_k) * PAR_OUT + o];
      if (c1_v && c1_last) c2_id <= c1_id;
    end
    assign sc_val = c2_id;
  end else begin : g_sc_none
    assign sc_val = '0;
  end

  // stage C2: output
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c2_v   <= 1'b0;
      c2_k   <= '0;
      c2_pix <= '0;
    end else begin
      c2_v   <= c1_v && c1_last;
      c2_k   <= c1_k;
      c2_pix <= c1_pix;
    end
  end

  logic signed [PAR_OUT-1:0][ACW-1:0] acc_v;
  always_comb
    for (int o = 0; o < PAR_OUT; o++) acc_v[o] = acc[o];

  lif_neuron #(.N(PAR_OUT), .XW(ACW), .THRESH(THRESH)) u_lif (.u(acc_v), .spk(out_s));

  always_comb begin
    for (int o = 0; o < PAR_OUT; o++)
      out_x[o] = OUT_SPIKE ? sat_xw(40'(acc[o]))
                           : sat_xw(40'(acc[o]) + 40'($signed(sc_val[o])));
    out_we    = c2_v;
    out_waddr = c2_pix;
    out_chunk = c2_k;
  end

  // progress: finished rows and end of layer
  logic [$clog2(W_OUT+1)-1:0] o_c;
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
      end else if (c2_v && 32'(c2_k) == NCHUNK - 1) begin
        if (32'(o_c) == W_OUT - 1) begin
          o_c       <= '0;
          rows_done <= rows_done + 1'b1;
          if (32'(rows_done) == H_OUT - 1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end else o_c <= o_c + 1'b1;
      end
    end
  end

  // a new pixel is only handed over once the previous one is fully issued
  assert property (@(posedge clk) disable iff (!rst_n) handoff |-> (!c_busy || c_last_issue));
endmodule
