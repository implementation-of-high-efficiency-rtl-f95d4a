// tb_encode_conv: self-checking test of Conv1, the encoding layer, on a 6x6 image.
// Loads random weights and biases, runs the layer from a behavioural image
// BRAM, and compares all 64 channels of every output pixel with a model
// (3x3, padding 1, shift and saturation). Also checks the rate of one pixel
// per nine clocks and the row counter.
module tb_encode_conv;
  import snn_pkg::*;
  localparam int H = 6, SH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, out_we;
  logic [5:0] img_raddr, out_waddr;
  logic [2:0][7:0] img_rdata;
  logic [2:0][7:0] img [H*H];
  param_ld_t ld = '0;
  logic [63:0][15:0] out_x;
  logic [2:0] rows_done;
  int checks = 0, failures = 0;
  int w [64][3][9], b [64];
  int res [H*H][64];
  int t = 0, t_start = 0, t_done = 0, nwr = 0;

  encode_conv #(.H(H), .W(H), .ENC_SHIFT(SH)) dut (.clk, .rst_n, .start, .busy, .done,
    .img_raddr, .img_rdata, .ld, .out_we, .out_waddr, .out_x, .rows_done);

  always_ff @(posedge clk) img_rdata <= img[img_raddr];
  always @(posedge clk) begin
    t++;
    if (rst_n && out_we) begin
      for (int o = 0; o < 64; o++) res[out_waddr][o] = int'($signed(out_x[o]));
      nwr++;
    end
    if (done) t_done = t;
  end

  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [64*27*8-1:0] word;
    logic [64*8-1:0] bw;
    longint acc;
    int iy, ix, e;
    for (int p = 0; p < H*H; p++) for (int i = 0; i < 3; i++) img[p][i] = 8'($urandom);
    foreach (w[o, i, k]) w[o][i][k] = int'($urandom % 256) - 128;
    foreach (b[o]) b[o] = int'($urandom % 256) - 128;
    for (int o = 0; o < 64; o++) begin
      bw[o*8 +: 8] = 8'(b[o]);
      for (int i = 0; i < 3; i++) for (int k = 0; k < 9; k++) word[((o*3+i)*9+k)*8 +: 8] = 8'(w[o][i][k]);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int ln = 0; ln < 216; ln++) begin
      ld.we <= 1; ld.layer <= L_CONV1; ld.sel <= SEL_W; ld.addr <= 0; ld.lane <= 8'(ln); ld.data <= word[ln*64 +: 64];
      @(posedge clk);
    end
    for (int ln = 0; ln < 8; ln++) begin
      ld.we <= 1; ld.layer <= L_CONV1; ld.sel <= SEL_B; ld.addr <= 0; ld.lane <= 8'(ln); ld.data <= bw[ln*64 +: 64];
      @(posedge clk);
    end
    ld.we <= 0;
    start <= 1;
    @(posedge clk);
    t_start = t;
    start <= 0;
    wait (done);
    repeat (3) @(posedge clk);
    e = 0;
    for (int y = 0; y < H; y++) for (int x = 0; x < H; x++) for (int o = 0; o < 64; o++) begin
      acc = b[o];
      for (int i = 0; i < 3; i++) for (int k = 0; k < 9; k++) begin
        iy = y + k/3 - 1; ix = x + k%3 - 1;
        if (iy >= 0 && iy < H && ix >= 0 && ix < H) acc += longint'($signed(img[iy*H+ix][i])) * w[o][i][k];
      end
      checks++;
      if (res[y*H+x][o] != sat16(acc >>> SH)) begin
        e++;
        if (e < 5) $display("mismatch (%0d,%0d) o=%0d got %0d exp %0d", y, x, o, res[y*H+x][o], sat16(acc >>> SH));
      end
    end
    failures += e;
    checks += 3;
    if (nwr != H*H) begin failures++; $display("writes %0d", nwr); end
    if (int'(rows_done) != H) begin failures++; $display("rows_done %0d", rows_done); end
    // nine clocks per pixel, plus a few clocks of pipeline
    if (t_done - t_start < 9*H*H || t_done - t_start > 9*H*H + 6) begin
      failures++; $display("latency %0d, expected about %0d", t_done - t_start, 9*H*H);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
