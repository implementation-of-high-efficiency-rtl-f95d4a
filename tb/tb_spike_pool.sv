// tb_spike_pool: self-checking test of the LIF + spike-count pooling unit.
// A 4x4 map of 16 channels is released to the pool one row at a time; the
// counts must equal the number of values above the threshold per channel,
// and the pool must wait for each row (it cannot finish before the last
// row is released) and finish one clock after reading the last pixel.
module tb_spike_pool;
  import snn_pkg::*;
  localparam int NCH = 16, H = 4, TH = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done;
  logic [2:0] src_rows = '0;
  logic [3:0] raddr;
  logic [NCH-1:0][15:0] rdata;
  logic [NCH-1:0][15:0] map [H*H];
  logic [NCH-1:0][4:0] cnt;
  logic [2:0] prev_rows = '0;
  int checks = 0, failures = 0, t = 0, t_rel = 0, t_done = 0;
  spike_pool #(.NCH(NCH), .H(H), .THRESH(TH)) dut (.clk, .rst_n, .start, .busy, .done, .src_rows, .raddr, .rdata, .cnt);
  always_ff @(posedge clk) rdata <= map[raddr];
  always @(posedge clk) begin t++; if (done) t_done = t; if (src_rows == 3'(H) && prev_rows != 3'(H)) t_rel = t; prev_rows = src_rows; end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int e;
    for (int p = 0; p < H*H; p++) for (int c = 0; c < NCH; c++) map[p][c] = 16'(int'($urandom % 41) - 20);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      src_rows <= '0;
      start <= 1;
      @(posedge clk);
      start <= 0;
      for (int r = 1; r <= H; r++) begin
        repeat (20) @(posedge clk);
        src_rows <= 3'(r);
      end
      wait (done);
      repeat (2) @(posedge clk);
      for (int c = 0; c < NCH; c++) begin
        e = 0;
        for (int p = 0; p < H*H; p++) if ($signed(map[p][c]) > TH) e++;
        checks++;
        if (int'(cnt[c]) != e) begin failures++; $display("ch %0d count %0d exp %0d", c, cnt[c], e); end
      end
      checks++;
      // last row: H pixels read after release, then one clock to count
      // (H+1 clocks from the clock that sees the release to the done pulse)
      if (t_done - t_rel != H + 1) begin failures++; $display("done %0d clocks after last row", t_done - t_rel); end
      for (int p = 0; p < H*H; p++) for (int c = 0; c < NCH; c++) map[p][c] = 16'(int'($urandom % 41) - 10);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
