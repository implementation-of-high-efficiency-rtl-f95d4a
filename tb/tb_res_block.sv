// tb_res_block: self-checking test of the residual block on small maps.
// Two blocks run at once from behavioural source maps whose rows are
// released gradually (so both convolutions stall on their producers):
//   A: 32 -> 64 channels, 6x6 -> 3x3 (stride 2), 1x1-convolution shortcut;
//   B: 32 -> 32 channels, 6x6, direct-mapping shortcut.
// The output maps are read back through the block's read port and compared
// with a behavioural model (LIF, grouped 3x3 convolutions, shortcut, shift
// and saturation). Also checks the row counter and that both stages stalled.
module tb_res_block;
  import snn_pkg::*;
  localparam int H = 6, HA = 3, CI = 32, COA = 64, COB = 32;
  localparam int TH = THRESH_DEFAULT, SC_SH = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  param_ld_t ld = '0;
  logic start = 0;
  logic busy_a, done_a, busy_b, done_b;
  logic [2:0] src_rows = '0;
  logic [5:0] a_sra, a_srb, b_sra, b_srb, b_ora = '0, b_orb = '0;
  logic [3:0] a_ora = '0, a_orb = '0;
  logic [CI-1:0][15:0] a_srad, a_srbd, b_srad, b_srbd;
  logic [COA-1:0][15:0] a_orad, a_orbd;
  logic [COB-1:0][15:0] b_orad, b_orbd;
  logic [1:0] a_rows;
  logic [2:0] b_rows;
  logic [31:0] a_st_a, a_st_b, b_st_a, b_st_b;
  logic [CI-1:0][15:0] src [H*H];
  int checks = 0, failures = 0, done_seen = 0;

  res_block #(.CIN(CI), .COUT(COA), .H_IN(H), .STRIDE(2), .SC_CONV(1'b1), .LAYER_A(L_B3A), .LAYER_B(L_B3B))
    u_a (.clk, .rst_n, .start, .busy(busy_a), .done(done_a), .ld, .src_rows,
         .src_ra_addr(a_sra), .src_ra_data(a_srad), .src_rb_addr(a_srb), .src_rb_data(a_srbd),
         .o_ra_addr(a_ora), .o_ra_data(a_orad), .o_rb_addr(a_orb), .o_rb_data(a_orbd),
         .o_rows(a_rows), .stall_a(a_st_a), .stall_b(a_st_b));
  res_block #(.CIN(CI), .COUT(COB), .H_IN(H), .STRIDE(1), .SC_CONV(1'b0), .LAYER_A(L_B2A), .LAYER_B(L_B2B))
    u_b (.clk, .rst_n, .start, .busy(busy_b), .done(done_b), .ld, .src_rows,
         .src_ra_addr(b_sra), .src_ra_data(b_srad), .src_rb_addr(b_srb), .src_rb_data(b_srbd),
         .o_ra_addr(b_ora), .o_ra_data(b_orad), .o_rb_addr(b_orb), .o_rb_data(b_orbd),
         .o_rows(b_rows), .stall_a(b_st_a), .stall_b(b_st_b));

  always_ff @(posedge clk) begin
    a_srad <= src[a_sra]; a_srbd <= src[a_srb];
    b_srad <= src[b_sra]; b_srbd <= src[b_srb];
  end
  always @(posedge clk) if (rst_n) done_seen += int'(done_a) + int'(done_b);

  int xin [], wa_a [], ba_a [], wb_a [], bb_a [], ws_a [], bs_a [];
  int wa_b [], ba_b [], wb_b [], bb_b [];
  int xo_a [], xo_b [];

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom % 32'(hi - lo + 1));
  endfunction
  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction
  function automatic void fill(ref int a [], input int n, input int lo, input int hi);
    a = new[n];
    foreach (a[i]) a[i] = rnd(lo, hi);
  endfunction

  // grouped 3x3 convolution of the spikes of xin; maps are [c][y][x]
  function automatic void model_conv(ref int xi [], input int cin, input int h, input int stride,
                                     input bit thr, ref int w [], ref int b [],
                                     input int cout, ref int acc_out []);
    int ho = (h - 1) / stride + 1;
    int cpg = cin / GROUPS, opg = cout / GROUPS;
    acc_out = new[cout * ho * ho];
    for (int co = 0; co < cout; co++)
      for (int oy = 0; oy < ho; oy++)
        for (int ox = 0; ox < ho; ox++) begin
          int acc = b[co];
          for (int t = 0; t < 9; t++) begin
            int iy = oy * stride + t / 3 - 1, ix = ox * stride + t % 3 - 1;
            if (iy < 0 || iy >= h || ix < 0 || ix >= h) continue;
            for (int ci = 0; ci < cpg; ci++) begin
              int v = xi[(((co / opg)*cpg+ci)*h+iy)*h+ix];
              if (thr ? (v > TH) : (v != 0)) acc += w[(co*cpg+ci)*9+t];
            end
          end
          acc_out[(co*ho+oy)*ho+ox] = acc;
        end
  endfunction

  function automatic void model_block(input int cin, input int cout, input int stride, input bit scconv,
                                      ref int wa [], ref int ba [], ref int wb [], ref int bb [],
                                      ref int ws [], ref int bs [], ref int xout []);
    int ho = (H - 1) / stride + 1;
    int acc_a [], acc_b [], mid [];
    model_conv(xin, cin, H, stride, 1'b1, wa, ba, cout, acc_a);
    mid = new[acc_a.size()];
    foreach (acc_a[i]) mid[i] = (acc_a[i] > TH) ? 1 : 0;
    model_conv(mid, cout, ho, 1, 1'b0, wb, bb, cout, acc_b);
    xout = new[acc_b.size()];
    for (int co = 0; co < cout; co++)
      for (int oy = 0; oy < ho; oy++)
        for (int ox = 0; ox < ho; ox++) begin
          longint sc;
          if (scconv) begin
            sc = bs[co];
            for (int ci = 0; ci < cin; ci++)
              sc += longint'(xin[(ci*H+oy*stride)*H+ox*stride]) * ws[co*cin+ci];
            sc = sat16(sc >>> SC_SH);
          end else sc = xin[(co*H+oy)*H+ox];
          xout[(co*ho+oy)*ho+ox] = sat16(longint'(acc_b[(co*ho+oy)*ho+ox]) + sc);
        end
  endfunction

  task automatic send_bytes(layer_id_e l, mem_sel_e s, int addr, ref byte unsigned q [$]);
    logic [63:0] d;
    for (int lane = 0; lane < (q.size() + 7) / 8; lane++) begin
      d = '0;
      for (int k = 0; k < 8; k++)
        if (lane * 8 + k < q.size()) d[k*8 +: 8] = q[lane*8 + k];
      ld.we <= 1'b1; ld.layer <= l; ld.sel <= s; ld.addr <= 16'(addr);
      ld.lane <= 8'(lane); ld.data <= d;
      @(posedge clk);
    end
  endtask

  // word (chunk k, pass p): byte (o*8+i)*9+t = w[k*8+o][p*8+i][t]
  task automatic load_main(layer_id_e l, int cin, int cout, ref int w [], ref int b []);
    byte unsigned q [$];
    int cpg = cin / GROUPS, npass = cpg / 8;
    for (int k = 0; k < cout / 8; k++) begin
      for (int p = 0; p < npass; p++) begin
        q = {};
        for (int o = 0; o < 8; o++)
          for (int i = 0; i < 8; i++)
            for (int t = 0; t < 9; t++) q.push_back(8'(w[((k*8+o)*cpg + p*8+i)*9+t]));
        send_bytes(l, SEL_W, k * npass + p, q);
      end
      q = {};
      for (int o = 0; o < 8; o++) q.push_back(8'(b[k*8+o]));
      send_bytes(l, SEL_B, k, q);
    end
  endtask

  // word (chunk k, pass p): byte o*lanes+i = ws[k*8+o][p*lanes+i]
  task automatic load_sc(layer_id_e l, int cin, int cout, ref int w [], ref int b []);
    byte unsigned q [$];
    int nsc = (cin + 63) / 64, lanes = (cin < 64) ? cin : 64;
    for (int k = 0; k < cout / 8; k++) begin
      for (int p = 0; p < nsc; p++) begin
        q = {};
        for (int o = 0; o < 8; o++)
          for (int i = 0; i < lanes; i++) q.push_back(8'(w[(k*8+o)*cin + p*lanes+i]));
        send_bytes(l, SEL_SC_W, k * nsc + p, q);
      end
      q = {};
      for (int o = 0; o < 8; o++) q.push_back(8'(b[k*8+o]));
      send_bytes(l, SEL_SC_B, k, q);
    end
  endtask

  task automatic compare(string nm, int cout, int ho, ref int xo [], input bit blk_a);
    int e = 0;
    for (int p = 0; p < ho * ho; p++) begin
      if (blk_a) a_ora <= 4'(p); else b_ora <= 6'(p);
      @(posedge clk);
      @(posedge clk);
      #1;
      for (int c = 0; c < cout; c++) begin
        int got = blk_a ? int'($signed(a_orad[c])) : int'($signed(b_orad[c]));
        checks++;
        if (got != xo[(c*ho + p/ho)*ho + p%ho]) begin
          e++;
          if (e < 5) $display("%s pixel %0d ch %0d got %0d exp %0d", nm, p, c, got, xo[(c*ho + p/ho)*ho + p%ho]);
        end
      end
    end
    failures += e;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fill(xin, CI * H * H, -200, 400);
    fill(wa_a, COA * (CI/GROUPS) * 9, -24, 24);  fill(ba_a, COA, -32, 32);
    fill(wb_a, COA * (COA/GROUPS) * 9, -24, 24); fill(bb_a, COA, -32, 32);
    fill(ws_a, COA * CI, -24, 24);               fill(bs_a, COA, -32, 32);
    fill(wa_b, COB * (CI/GROUPS) * 9, -24, 24);  fill(ba_b, COB, -32, 32);
    fill(wb_b, COB * (COB/GROUPS) * 9, -24, 24); fill(bb_b, COB, -32, 32);
    for (int p = 0; p < H * H; p++)
      for (int c = 0; c < CI; c++) src[p][c] = 16'(xin[c*H*H + p]);
    model_block(CI, COA, 2, 1'b1, wa_a, ba_a, wb_a, bb_a, ws_a, bs_a, xo_a);
    model_block(CI, COB, 1, 1'b0, wa_b, ba_b, wb_b, bb_b, ws_a, bs_a, xo_b);
    repeat (2) @(posedge clk);
    rst_n = 1;
    load_main(L_B3A, CI, COA, wa_a, ba_a);
    load_main(L_B3B, COA, COA, wb_a, bb_a);
    load_sc(L_B3B, CI, COA, ws_a, bs_a);
    load_main(L_B2A, CI, COB, wa_b, ba_b);
    load_main(L_B2B, COB, COB, wb_b, bb_b);
    ld.we <= 1'b0;
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    for (int r = 1; r <= H; r++) begin
      repeat (150) @(posedge clk);
      src_rows <= 3'(r);
    end
    wait (done_seen == 2);
    repeat (3) @(posedge clk);
    compare("A", COA, HA, xo_a, 1'b1);
    compare("B", COB, H, xo_b, 1'b0);
    checks += 4;
    if (int'(a_rows) != HA || int'(b_rows) != H) begin failures++; $display("rows %0d %0d", a_rows, b_rows); end
    if (a_st_a == 0 || b_st_a == 0) begin failures++; $display("first stage never stalled"); end
    if (a_st_b == 0 || b_st_b == 0) begin failures++; $display("second stage never stalled"); end
    if (busy_a || busy_b) begin failures++; $display("still busy"); end
    $display("stalls: A %0d/%0d B %0d/%0d", a_st_a, a_st_b, b_st_a, b_st_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
