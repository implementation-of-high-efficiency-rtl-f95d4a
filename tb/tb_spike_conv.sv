// tb_spike_conv: self-checking test of the grouped 3x3 spiking convolution engine.
//
// Two engines at reduced size share one random 7x7 input map: a first-conv
// engine (spike output, stride 2 with padding) and a second-conv engine with a
// 1x1 convolution shortcut (membrane output). The input map is written into a
// behavioural memory row by row while the engines run, so they must wait for
// the producer (stall); each output is compared with a model computed here.
// The number of clocks per output pixel (NCHUNK*NPASS once the input is
// complete) is checked too.
module tb_spike_conv;
  import snn_pkg::*;
  localparam int CIN = 32, COUT = 16, G = 2, H = 7, TH = 5, SCSH = 2;
  localparam int CPG = CIN / G, OPG = COUT / G, NPASS = CPG / 8, NCHUNK = COUT / 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // input map: spikes and membrane words
  logic [CIN-1:0]          spk_mem [H*H];
  logic [CIN-1:0][XW-1:0]  x_mem   [H*H];
  logic [$clog2(H+1)-1:0]  rows = '0;
  param_ld_t ld = '0;
  logic start = 0;

  // engine A: stride 2, spike output, no shortcut
  localparam int HA = (H - 1) / 2 + 1;
  logic a_busy, a_done, a_we;
  logic [$clog2(H*H)-1:0] a_raddr;
  logic [CIN-1:0] a_rdata;
  logic [5:0] a_scaddr;
  logic [$clog2(HA*HA)-1:0] a_waddr;
  logic [0:0] a_chunk;
  logic [7:0][XW-1:0] a_x;
  logic [7:0] a_s;
  logic [$clog2(HA+1)-1:0] a_rows;
  logic [31:0] a_stall;

  spike_conv #(.CIN(CIN), .COUT(COUT), .NGROUP(G), .H_IN(H), .W_IN(H), .STRIDE(2),
               .OUT_SPIKE(1'b1), .SC_MODE(0), .SC_CIN(8), .SC_W(8), .THRESH(TH), .LAYER_ID(L_B1A)) u_a (
    .clk, .rst_n, .start, .busy(a_busy), .done(a_done), .src_rows(rows),
    .in_raddr(a_raddr), .in_rdata(a_rdata), .sc_raddr(a_scaddr), .sc_rdata('0), .ld,
    .out_we(a_we), .out_waddr(a_waddr), .out_chunk(a_chunk), .out_x(a_x), .out_s(a_s),
    .rows_done(a_rows), .stall_cycles(a_stall));

  // engine B: stride 1, membrane output plus 1x1 conv shortcut over x_mem
  logic b_busy, b_done, b_we;
  logic [$clog2(H*H)-1:0] b_raddr, b_scaddr;
  logic [CIN-1:0] b_rdata;
  logic [CIN-1:0][XW-1:0] b_scdata;
  logic [$clog2(H*H)-1:0] b_waddr;
  logic [0:0] b_chunk;
  logic [7:0][XW-1:0] b_x;
  logic [7:0] b_s;
  logic [$clog2(H+1)-1:0] b_rows;
  logic [31:0] b_stall;

  spike_conv #(.CIN(CIN), .COUT(COUT), .NGROUP(G), .H_IN(H), .W_IN(H), .STRIDE(1),
               .OUT_SPIKE(1'b0), .SC_MODE(2), .SC_CIN(CIN), .SC_W(H), .SC_STRIDE(1),
               .SC_SHIFT(SCSH), .THRESH(TH), .LAYER_ID(L_B1B)) u_b (
    .clk, .rst_n, .start, .busy(b_busy), .done(b_done), .src_rows(rows),
    .in_raddr(b_raddr), .in_rdata(b_rdata), .sc_raddr(b_scaddr), .sc_rdata(b_scdata), .ld,
    .out_we(b_we), .out_waddr(b_waddr), .out_chunk(b_chunk), .out_x(b_x), .out_s(b_s),
    .rows_done(b_rows), .stall_cycles(b_stall));

  // behavioural read ports, one clock of latency
  always_ff @(posedge clk) begin
    a_rdata  <= spk_mem[a_raddr];
    b_rdata  <= spk_mem[b_raddr];
    b_scdata <= x_mem[b_scaddr];
  end

  // weights
  int wa [COUT][CPG][9], ba [COUT], wb [COUT][CPG][9], bb [COUT], ws [COUT][CIN], bs [COUT];
  int res_a [COUT][HA*HA], res_b [COUT][H*H];
  int wr_a = 0, wr_b = 0, t_first_b = -1, t_last_b = 0, t = 0;
  always @(posedge clk) t++;
  always @(posedge clk) begin
    if (rst_n && a_we) begin
      for (int o = 0; o < 8; o++) res_a[a_chunk*8+o][a_waddr] = int'(a_s[o]);
      wr_a++;
    end
    if (rst_n && b_we) begin
      for (int o = 0; o < 8; o++) res_b[b_chunk*8+o][b_waddr] = int'($signed(b_x[o]));
      wr_b++;
      if (t_first_b < 0) t_first_b = t;
      t_last_b = t;
    end
  end

  task automatic send(layer_id_e l, mem_sel_e s, int addr, int lane, logic [63:0] d);
    ld.we <= 1'b1; ld.layer <= l; ld.sel <= s; ld.addr <= 16'(addr); ld.lane <= 8'(lane); ld.data <= d;
    @(posedge clk);
  endtask
  task automatic load_main(layer_id_e l, ref int w [COUT][CPG][9], ref int b [COUT]);
    logic [8*8*9*8-1:0] word;
    logic [63:0] bw;
    for (int k = 0; k < NCHUNK; k++) begin
      for (int p = 0; p < NPASS; p++) begin
        for (int o = 0; o < 8; o++) for (int i = 0; i < 8; i++) for (int tt = 0; tt < 9; tt++)
          word[((o*8+i)*9+tt)*8 +: 8] = 8'(w[k*8+o][p*8+i][tt]);
        for (int ln = 0; ln < 72; ln++) send(l, SEL_W, k*NPASS+p, ln, word[ln*64 +: 64]);
      end
      for (int o = 0; o < 8; o++) bw[o*8 +: 8] = 8'(b[k*8+o]);
      send(l, SEL_B, k, 0, bw);
    end
  endtask

  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [8*CIN*8-1:0] sw;
    logic [63:0] bw;
    int e;
    void'($urandom(7));
    for (int p = 0; p < H*H; p++)
      for (int c = 0; c < CIN; c++) begin
        spk_mem[p][c] = 1'($urandom % 2);
        x_mem[p][c]   = XW'(int'($urandom % 2001) - 1000);
      end
    foreach (wa[o, i, k]) begin wa[o][i][k] = int'($urandom % 9) - 4; wb[o][i][k] = int'($urandom % 255) - 127; end
    foreach (ba[o]) begin ba[o] = int'($urandom % 21) - 10; bb[o] = int'($urandom % 255) - 127; bs[o] = int'($urandom % 255) - 127; end
    foreach (ws[o, i]) ws[o][i] = int'($urandom % 31) - 15;
    // the test's input memory stays hidden from the engines until rows are released
    repeat (2) @(posedge clk);
    rst_n = 1;
    load_main(L_B1A, wa, ba);
    load_main(L_B1B, wb, bb);
    for (int k = 0; k < NCHUNK; k++) begin
      for (int o = 0; o < 8; o++) for (int i = 0; i < CIN; i++) sw[(o*CIN+i)*8 +: 8] = 8'(ws[k*8+o][i]);
      for (int ln = 0; ln < CIN; ln++) send(L_B1B, SEL_SC_W, k, ln, sw[ln*64 +: 64]);
      for (int o = 0; o < 8; o++) bw[o*8 +: 8] = 8'(bs[k*8+o]);
      send(L_B1B, SEL_SC_B, k, 0, bw);
    end
    ld.we <= 1'b0;
    start <= 1;
    @(posedge clk);
    start <= 0;
    // release one input row every 200 clocks
    for (int r = 1; r <= H; r++) begin
      repeat (200) @(posedge clk);
      rows <= ($bits(rows))'(r);
    end
    wait (b_done);
    repeat (3) @(posedge clk);

    // model A
    e = 0;
    for (int co = 0; co < COUT; co++) for (int oy = 0; oy < HA; oy++) for (int ox = 0; ox < HA; ox++) begin
      int acc, g;
      acc = ba[co]; g = co / OPG;
      for (int tt = 0; tt < 9; tt++) begin
        int iy, ix;
        iy = oy*2 + tt/3 - 1; ix = ox*2 + tt%3 - 1;
        if (iy < 0 || iy >= H || ix < 0 || ix >= H) continue;
        for (int ci = 0; ci < CPG; ci++) if (spk_mem[iy*H+ix][g*CPG+ci]) acc += wa[co][ci][tt];
      end
      if (res_a[co][oy*HA+ox] != ((acc > TH) ? 1 : 0)) begin
        if (e < 5) $display("A mismatch co=%0d (%0d,%0d) acc=%0d got %0d", co, oy, ox, acc, res_a[co][oy*HA+ox]);
        e++;
      end
      checks++;
    end
    failures += e;
    // model B
    e = 0;
    for (int co = 0; co < COUT; co++) for (int oy = 0; oy < H; oy++) for (int ox = 0; ox < H; ox++) begin
      longint acc, sc;
      int g;
      acc = bb[co]; sc = bs[co]; g = co / OPG;
      for (int tt = 0; tt < 9; tt++) begin
        int iy, ix;
        iy = oy + tt/3 - 1; ix = ox + tt%3 - 1;
        if (iy < 0 || iy >= H || ix < 0 || ix >= H) continue;
        for (int ci = 0; ci < CPG; ci++) if (spk_mem[iy*H+ix][g*CPG+ci]) acc += wb[co][ci][tt];
      end
      for (int ci = 0; ci < CIN; ci++) sc += longint'($signed(x_mem[oy*H+ox][ci])) * ws[co][ci];
      sc = sat16(sc >>> SCSH);
      if (res_b[co][oy*H+ox] != sat16(acc + sc)) begin
        if (e < 5) $display("B mismatch co=%0d (%0d,%0d) exp %0d (main %0d sc %0d) got %0d", co, oy, ox, sat16(acc+sc), acc, sc, res_b[co][oy*H+ox]);
        e++;
      end
      checks++;
    end
    failures += e;
    checks += 4;
    if (wr_a != HA*HA*NCHUNK || wr_b != H*H*NCHUNK) begin failures++; $display("write counts %0d %0d", wr_a, wr_b); end
    if (a_stall == 0 || b_stall == 0) begin failures++; $display("no stall seen"); end
    // last row released: remaining H pixels of B at NCHUNK*NPASS clocks each (+ pipeline fill)
    if (t_last_b - t_first_b < (H*H - 1) * NCHUNK * NPASS) begin failures++; $display("too fast"); end
    begin
      if (!(a_rows == 4'(HA) && b_rows == 4'(H))) begin failures++; $display("rows_done wrong"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
