// tb_snn_top: end-to-end test of the whole processor at its default size.
//
// Generates a pseudo-random image and pseudo-random 8-bit weights and biases
// for every layer, loads them over the parameter bus, runs one inference,
// and compares the class, the ten scores, the pooled counts and every
// feature map written by every layer with a plain behavioural model of the
// same network computed here. It also checks that the design's mechanisms
// occurred: layers overlapping in time (a layer finishing rows while its
// producer still runs), consumers stalling on their producer, padding,
// grouped PE-array reuse, both shortcut kinds and both spike values; and
// that the latency is within the published 3.98 ms at 100 MHz (398,000
// clocks) and no shorter than the busiest engine's compute time.
module tb_snn_top;
  import snn_pkg::*;

  localparam int S  = IMG;       // the top runs with its default parameters
  localparam int S2 = S / 2;
  localparam int TH = THRESH_DEFAULT;
  localparam int ENC_SH = 4;     // top defaults
  localparam int SC_SH  = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic img_we = 0, start = 0, busy, done;
  logic [$clog2(S*S)-1:0] img_addr = '0;
  logic [CH0-1:0][PW-1:0] img_data = '0;
  param_ld_t ld;
  logic [3:0] class_id;
  logic signed [NCLASS-1:0][31:0] score;
  logic [31:0] cycles;

  snn_top dut (.clk, .rst_n, .img_we, .img_addr, .img_data, .ld, .start,
               .busy, .done, .class_id, .score, .cycles);

  int checks = 0, failures = 0;

  // ---------------------------------------------------------------- model data (flat)
  // maps: [c][y][x] -> (c*h + y)*h + x ; main weights: [co][ci_in_group][t]
  int img [], x0 [], m1 [], x1 [], m2 [], x2 [], m3 [], x3 [], m4 [], x4 [];
  int w1 [], b1 [];
  int wa1 [], ba1 [], wb1 [], bb1 [], ws1 [], bs1 [];
  int wa2 [], ba2 [], wb2 [], bb2 [];
  int wa3 [], ba3 [], wb3 [], bb3 [], ws3 [], bs3 [];
  int wa4 [], ba4 [], wb4 [], bb4 [];
  int wfc [], bfc [];
  int cnt_ref [CH3];
  longint score_ref [NCLASS];
  int class_ref;
  int pad_taps = 0, spikes1 = 0, spikes0 = 0;

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

  // ---------------------------------------------------------------- model
  function automatic void model_conv1();
    x0 = new[CH1 * S * S];
    for (int o = 0; o < CH1; o++)
      for (int y = 0; y < S; y++)
        for (int x = 0; x < S; x++) begin
          longint acc = 0;
          for (int i = 0; i < CH0; i++)
            for (int t = 0; t < 9; t++) begin
              int iy = y + t / 3 - 1, ix = x + t % 3 - 1;
              if (iy >= 0 && iy < S && ix >= 0 && ix < S)
                acc += longint'(img[(i*S+iy)*S+ix]) * w1[(o*CH0+i)*9+t];
            end
          x0[(o*S+y)*S+x] = sat16((acc + b1[o]) >>> ENC_SH);
        end
  endfunction

  // grouped 3x3 conv of the spikes of xin (threshold applied when thr=1)
  function automatic void model_conv(ref int xin [], input int cin, input int h, input int stride,
                                     input bit thr, ref int w [], ref int b [],
                                     input int cout, ref int acc_out []);
    int ho = (h - 1) / stride + 1;
    int cpg = cin / GROUPS, opg = cout / GROUPS;
    acc_out = new[cout * ho * ho];
    for (int co = 0; co < cout; co++) begin
      int g = co / opg;
      for (int oy = 0; oy < ho; oy++)
        for (int ox = 0; ox < ho; ox++) begin
          int acc = b[co];
          for (int t = 0; t < 9; t++) begin
            int iy = oy * stride + t / 3 - 1, ix = ox * stride + t % 3 - 1;
            if (iy < 0 || iy >= h || ix < 0 || ix >= h) begin
              pad_taps++;
              continue;
            end
            for (int ci = 0; ci < cpg; ci++) begin
              int v = xin[((g*cpg+ci)*h+iy)*h+ix];
              if (thr ? (v > TH) : (v != 0)) acc += w[(co*cpg+ci)*9+t];
            end
          end
          acc_out[(co*ho+oy)*ho+ox] = acc;
        end
    end
  endfunction

  // residual block: xout = sat(convb(spk(conva(spk(xin)))) + sc(xin))
  function automatic void model_block(ref int xin [], input int cin, input int cout, input int h,
                                      input int stride, input bit scconv,
                                      ref int wa [], ref int ba [], ref int wb [], ref int bb [],
                                      ref int ws [], ref int bs [],
                                      ref int mid [], ref int xout []);
    int ho = (h - 1) / stride + 1;
    int acc_a [], acc_b [];
    model_conv(xin, cin, h, stride, 1'b1, wa, ba, cout, acc_a);
    mid = new[acc_a.size()];
    foreach (acc_a[i]) begin
      mid[i] = (acc_a[i] > TH) ? 1 : 0;
      if (mid[i] != 0) spikes1++; else spikes0++;
    end
    model_conv(mid, cout, ho, 1, 1'b0, wb, bb, cout, acc_b);
    xout = new[acc_b.size()];
    for (int co = 0; co < cout; co++)
      for (int oy = 0; oy < ho; oy++)
        for (int ox = 0; ox < ho; ox++) begin
          longint sc;
          if (scconv) begin
            sc = bs[co];
            for (int ci = 0; ci < cin; ci++)
              sc += longint'(xin[(ci*h+oy*stride)*h+ox*stride]) * ws[co*cin+ci];
            sc = sat16(sc >>> SC_SH);
          end else sc = xin[(co*h+oy)*h+ox];
          xout[(co*ho+oy)*ho+ox] = sat16(longint'(acc_b[(co*ho+oy)*ho+ox]) + sc);
        end
  endfunction

  function automatic void model_tail();
    for (int c = 0; c < CH3; c++) begin
      cnt_ref[c] = 0;
      for (int p = 0; p < S2 * S2; p++) if (x4[c*S2*S2+p] > TH) cnt_ref[c]++;
    end
    class_ref = 0;
    for (int j = 0; j < NCLASS; j++) begin
      score_ref[j] = bfc[j];
      for (int i = 0; i < CH3; i++) score_ref[j] += longint'(cnt_ref[i]) * wfc[j*CH3+i];
      if (score_ref[j] > score_ref[class_ref]) class_ref = j;
    end
  endfunction

  // ---------------------------------------------------------------- loading
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

  // word (chunk k, pass p): byte o*64+i = ws[k*8+o][p*64+i]
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

  task automatic load_all();
    byte unsigned q [$];
    // image
    for (int p = 0; p < S * S; p++) begin
      img_we <= 1'b1;
      img_addr <= $bits(img_addr)'(p);
      for (int i = 0; i < CH0; i++) img_data[i] <= 8'(img[i*S*S+p]);
      @(posedge clk);
    end
    img_we <= 1'b0;
    // Conv1: one word, byte (o*3+i)*9+t
    q = {};
    for (int o = 0; o < CH1; o++)
      for (int i = 0; i < CH0; i++)
        for (int t = 0; t < 9; t++) q.push_back(8'(w1[(o*CH0+i)*9+t]));
    send_bytes(L_CONV1, SEL_W, 0, q);
    q = {};
    for (int o = 0; o < CH1; o++) q.push_back(8'(b1[o]));
    send_bytes(L_CONV1, SEL_B, 0, q);
    load_main(L_B1A, CH1, CH2, wa1, ba1);  load_main(L_B1B, CH2, CH2, wb1, bb1);
    load_sc(L_B1B, CH1, CH2, ws1, bs1);
    load_main(L_B2A, CH2, CH2, wa2, ba2);  load_main(L_B2B, CH2, CH2, wb2, bb2);
    load_main(L_B3A, CH2, CH3, wa3, ba3);  load_main(L_B3B, CH3, CH3, wb3, bb3);
    load_sc(L_B3B, CH2, CH3, ws3, bs3);
    load_main(L_B4A, CH3, CH3, wa4, ba4);  load_main(L_B4B, CH3, CH3, wb4, bb4);
    // FC: word i, byte j = wfc[j][i]
    for (int i = 0; i < CH3; i++) begin
      q = {};
      for (int j = 0; j < NCLASS; j++) q.push_back(8'(wfc[j*CH3+i]));
      send_bytes(L_FC, SEL_W, i, q);
    end
    q = {};
    for (int j = 0; j < NCLASS; j++) q.push_back(8'(bfc[j]));
    send_bytes(L_FC, SEL_B, 0, q);
    ld.we <= 1'b0;
  endtask

  // ---------------------------------------------------------------- comparison helpers
  int map_err;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------------------------------------------------------- monitors
  int first_row_t [5];
  int done_t [6];
  int tcount = 0;
  always @(posedge clk) begin
    tcount <= tcount + 1;
    if (rst_n && dut.c1_rows != 0 && first_row_t[0] < 0) first_row_t[0] <= tcount;
    if (rst_n && dut.x1_rows != 0 && first_row_t[1] < 0) first_row_t[1] <= tcount;
    if (rst_n && dut.x2_rows != 0 && first_row_t[2] < 0) first_row_t[2] <= tcount;
    if (rst_n && dut.x3_rows != 0 && first_row_t[3] < 0) first_row_t[3] <= tcount;
    if (rst_n && dut.x4_rows != 0 && first_row_t[4] < 0) first_row_t[4] <= tcount;
    for (int i = 0; i < 6; i++) if (rst_n && dut.stage_done[i]) done_t[i] <= tcount;
  end

  // grouped reuse: PE-array uses that add onto the previous pass's partial sum
  longint reuse_passes = 0;
  always @(posedge clk) if (rst_n)
    reuse_passes <= reuse_passes
      + longint'(dut.u_b1.u_conv_a.c1_v && !dut.u_b1.u_conv_a.c1_first)
      + longint'(dut.u_b1.u_conv_b.c1_v && !dut.u_b1.u_conv_b.c1_first)
      + longint'(dut.u_b2.u_conv_a.c1_v && !dut.u_b2.u_conv_a.c1_first)
      + longint'(dut.u_b2.u_conv_b.c1_v && !dut.u_b2.u_conv_b.c1_first)
      + longint'(dut.u_b3.u_conv_a.c1_v && !dut.u_b3.u_conv_a.c1_first)
      + longint'(dut.u_b3.u_conv_b.c1_v && !dut.u_b3.u_conv_b.c1_first)
      + longint'(dut.u_b4.u_conv_a.c1_v && !dut.u_b4.u_conv_a.c1_first)
      + longint'(dut.u_b4.u_conv_b.c1_v && !dut.u_b4.u_conv_b.c1_first);

  // ---------------------------------------------------------------- watchdog
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- test
  initial begin
    int errs, overlaps, n;
    longint stall_sum;
    ld = '0;
    foreach (first_row_t[i]) first_row_t[i] = -1;
    void'($urandom(32'd20250101));
    // random image and parameters (weights centred on zero, biases small)
    fill(img, CH0 * S * S, -128, 127);
    fill(w1, CH1 * CH0 * 9, -24, 24);             fill(b1, CH1, -64, 64);
    fill(wa1, CH2 * (CH1/GROUPS) * 9, -24, 24);   fill(ba1, CH2, -32, 32);
    fill(wb1, CH2 * (CH2/GROUPS) * 9, -24, 24);   fill(bb1, CH2, -32, 32);
    fill(ws1, CH2 * CH1, -24, 24);                fill(bs1, CH2, -32, 32);
    fill(wa2, CH2 * (CH2/GROUPS) * 9, -24, 24);   fill(ba2, CH2, -32, 32);
    fill(wb2, CH2 * (CH2/GROUPS) * 9, -24, 24);   fill(bb2, CH2, -32, 32);
    fill(wa3, CH3 * (CH2/GROUPS) * 9, -24, 24);   fill(ba3, CH3, -32, 32);
    fill(wb3, CH3 * (CH3/GROUPS) * 9, -24, 24);   fill(bb3, CH3, -32, 32);
    fill(ws3, CH3 * CH2, -24, 24);                fill(bs3, CH3, -32, 32);
    fill(wa4, CH3 * (CH3/GROUPS) * 9, -24, 24);   fill(ba4, CH3, -32, 32);
    fill(wb4, CH3 * (CH3/GROUPS) * 9, -24, 24);   fill(bb4, CH3, -32, 32);
    fill(wfc, NCLASS * CH3, -128, 127);           fill(bfc, NCLASS, -128, 127);

    model_conv1();
    model_block(x0, CH1, CH2, S, 1, 1'b1, wa1, ba1, wb1, bb1, ws1, bs1, m1, x1);
    model_block(x1, CH2, CH2, S, 1, 1'b0, wa2, ba2, wb2, bb2, ws1, bs1, m2, x2);
    model_block(x2, CH2, CH3, S, 2, 1'b1, wa3, ba3, wb3, bb3, ws3, bs3, m3, x3);
    model_block(x3, CH3, CH3, S2, 1, 1'b0, wa4, ba4, wb4, bb4, ws3, bs3, m4, x4);
    model_tail();
    $display("model: class %0d, spikes 1/0 = %0d/%0d", class_ref, spikes1, spikes0);

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    load_all();
    @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    wait (done);
    repeat (2) @(posedge clk);
    $display("inference latency: %0d clocks", cycles);

    // ---- every stored map against the model
    errs = 0;
    for (int p = 0; p < S*S; p++) for (int c = 0; c < CH1; c++)
      if ($signed(dut.u_x0.mem[p][c]) != x0[c*S*S+p]) errs++;
    check(errs == 0, $sformatf("Conv1 map: %0d mismatches", errs));
    begin
      int e [8];
      foreach (e[i]) e[i] = 0;
      for (int p = 0; p < S*S; p++) for (int c = 0; c < CH2; c++) begin
        if (dut.u_b1.u_mid.mem[p][c] != 1'(m1[c*S*S+p])) begin
          e[0]++;
        end
        if ($signed(dut.u_b1.u_out.mem[p][c]) != x1[c*S*S+p]) e[1]++;
        if (dut.u_b2.u_mid.mem[p][c] != 1'(m2[c*S*S+p])) e[2]++;
        if ($signed(dut.u_b2.u_out.mem[p][c]) != x2[c*S*S+p]) e[3]++;
      end
      for (int p = 0; p < S2*S2; p++) for (int c = 0; c < CH3; c++) begin
        if (dut.u_b3.u_mid.mem[p][c] != 1'(m3[c*S2*S2+p])) e[4]++;
        if ($signed(dut.u_b3.u_out.mem[p][c]) != x3[c*S2*S2+p]) e[5]++;
        if (dut.u_b4.u_mid.mem[p][c] != 1'(m4[c*S2*S2+p])) e[6]++;
        if ($signed(dut.u_b4.u_out.mem[p][c]) != x4[c*S2*S2+p]) e[7]++;
      end
      for (int i = 0; i < 8; i++)
        check(e[i] == 0, $sformatf("block %0d %s map: %0d mismatches", i/2 + 1,
                                   (i % 2) ? "output" : "middle spike", e[i]));
    end
    errs = 0;
    for (int c = 0; c < CH3; c++) if (32'(dut.cnt[c]) != cnt_ref[c]) errs++;
    check(errs == 0, $sformatf("pool counts: %0d mismatches", errs));
    for (int j = 0; j < NCLASS; j++)
      check(longint'($signed(score[j])) == score_ref[j],
            $sformatf("score[%0d] %0d, expected %0d", j, $signed(score[j]), score_ref[j]));
    check(32'(class_id) == class_ref, $sformatf("class %0d, expected %0d", class_id, class_ref));

    // ---- latency
    check(cycles <= 398_000, $sformatf("latency %0d above 3.98 ms at 100 MHz", cycles));
    check(cycles >= (S2*S2) * (CH3/8) * (CH3/GROUPS/8),
          $sformatf("latency %0d below the busiest engine's compute time", cycles));

    // ---- mechanisms
    overlaps = 0;
    for (int i = 1; i < 5; i++) if (first_row_t[i] >= 0 && first_row_t[i] < done_t[i-1]) overlaps++;
    $display("inter-layer overlaps: %0d of 4", overlaps);
    check(overlaps > 0, "no layer started before its producer finished");
    stall_sum = longint'(dut.b1_stall_a) + dut.b1_stall_b + dut.b2_stall_a + dut.b2_stall_b
              + dut.b3_stall_a + dut.b3_stall_b + dut.b4_stall_a + dut.b4_stall_b;
    n = 0;
    if (dut.b1_stall_a != 0) n++; if (dut.b1_stall_b != 0) n++;
    if (dut.b2_stall_a != 0) n++; if (dut.b2_stall_b != 0) n++;
    if (dut.b3_stall_a != 0) n++; if (dut.b3_stall_b != 0) n++;
    if (dut.b4_stall_a != 0) n++; if (dut.b4_stall_b != 0) n++;
    $display("engines that stalled on their producer: %0d of 8 (%0d cycles)", n, stall_sum);
    check(n > 0, "no producer stall happened");
    $display("padding taps: %0d", pad_taps);
    check(pad_taps > 0, "no padding used");
    $display("middle-map spikes: %0d ones, %0d zeros", spikes1, spikes0);
    check(spikes1 > 0 && spikes0 > 0, "spike maps were all 0 or all 1");
    // expected: pixels x chunks x (passes - 1), summed over the eight engines
    n = S*S*(CH2/8)*(CH1/GROUPS/8 - 1) + 2*S*S*(CH2/8)*(CH2/GROUPS/8 - 1) + S*S*(CH2/8)*(CH2/GROUPS/8 - 1)
      + S2*S2*(CH3/8)*(CH2/GROUPS/8 - 1) + 3*S2*S2*(CH3/8)*(CH3/GROUPS/8 - 1);
    $display("grouped PE-array reuse passes: %0d (expected %0d); shortcuts: 2 conv, 2 direct", reuse_passes, n);
    check(reuse_passes == longint'(n) && n > 0, "grouped PE-array reuse count");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
