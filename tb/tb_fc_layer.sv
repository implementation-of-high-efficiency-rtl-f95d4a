// tb_fc_layer: self-checking test of the fully connected layer (16 inputs,
// 10 outputs here). Loads random weights and biases over the parameter bus,
// runs two input vectors and checks the scores and the NIN+2 clock latency.
module tb_fc_layer;
  import snn_pkg::*;
  localparam int NIN = 16, NOUT = 10, CW = 9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done;
  logic [NIN-1:0][CW-1:0] cnt;
  param_ld_t ld = '0;
  logic signed [NOUT-1:0][31:0] score;
  int checks = 0, failures = 0, t = 0, t_start = 0, t_done = 0;
  int w [NOUT][NIN], b [NOUT];
  fc_layer #(.NIN(NIN), .NOUT(NOUT), .CW(CW)) dut (.clk, .rst_n, .start, .busy, .done, .cnt, .ld, .score);
  always @(posedge clk) begin t++; if (done) t_done = t; if (start) t_start = t; end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic send(mem_sel_e s, int addr, int lane, logic [63:0] d);
    ld.we <= 1; ld.layer <= L_FC; ld.sel <= s; ld.addr <= 16'(addr); ld.lane <= 8'(lane); ld.data <= d;
    @(posedge clk);
  endtask
  initial begin
    logic [127:0] word;
    longint e;
    foreach (w[j, i]) w[j][i] = int'($urandom % 256) - 128;
    foreach (b[j]) b[j] = int'($urandom % 256) - 128;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NIN; i++) begin
      word = '0;
      for (int j = 0; j < NOUT; j++) word[j*8 +: 8] = 8'(w[j][i]);
      send(SEL_W, i, 0, word[63:0]);
      send(SEL_W, i, 1, word[127:64]);
    end
    word = '0;
    for (int j = 0; j < NOUT; j++) word[j*8 +: 8] = 8'(b[j]);
    send(SEL_B, 0, 0, word[63:0]);
    send(SEL_B, 0, 1, word[127:64]);
    ld.we <= 0;
    for (int run = 0; run < 2; run++) begin
      for (int i = 0; i < NIN; i++) cnt[i] = (run == 0) ? 9'd256 : 9'($urandom % 257);
      start <= 1;
      @(posedge clk);
      start <= 0;
      wait (done);
      repeat (2) @(posedge clk);
      for (int j = 0; j < NOUT; j++) begin
        e = b[j];
        for (int i = 0; i < NIN; i++) e += longint'(cnt[i]) * w[j][i];
        checks++;
        if (longint'($signed(score[j])) != e) begin failures++; $display("score %0d got %0d exp %0d", j, $signed(score[j]), e); end
      end
      checks++;
      if (t_done - t_start != NIN + 2) begin failures++; $display("latency %0d", t_done - t_start); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
