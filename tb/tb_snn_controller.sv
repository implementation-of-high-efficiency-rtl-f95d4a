// tb_snn_controller: self-checking test of the inference scheduler.
// Stage done pulses arrive in random order and at random times; the FC must
// start exactly once, one clock after the last of them, done and result_we
// must follow the FC's done, and cycles must equal the clocks from start to
// done. A start while busy must be ignored.
module tb_snn_controller;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, stage_start, fc_start, fc_done = 0, result_we;
  logic [5:0] stage_done = '0;
  logic [31:0] cycles;
  int checks = 0, failures = 0, t = 0, t_start = 0, t_last = 0, t_fc = 0, n_fc = 0, n_ss = 0, t_done = 0;
  snn_controller #(.NSTAGE(6)) dut (.clk, .rst_n, .start, .busy, .done, .stage_start, .stage_done,
    .fc_start, .fc_done, .result_we, .cycles);
  always @(posedge clk) begin
    t++;
    if (fc_start) begin n_fc++; t_fc = t; end
    if (stage_start) n_ss++;
    if (done) t_done = t;
    if (start && !busy) t_start = t;
    if (stage_done != '0) t_last = t;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      int order [6];
      n_fc = 0; n_ss = 0;
      foreach (order[i]) order[i] = i;
      order.shuffle();
      start <= 1;
      @(posedge clk);
      start <= 0;
      @(posedge clk);
      // a start while busy is ignored
      start <= 1;
      @(posedge clk);
      start <= 0;
      foreach (order[i]) begin
        repeat (1 + $urandom % 20) @(posedge clk);
        stage_done <= 6'(1) << order[i];
        @(posedge clk);
        stage_done <= '0;
        checks++;
        if (i < 5 && n_fc != 0) begin failures++; $display("FC started early"); end
      end
      repeat (5) @(posedge clk);
      checks += 3;
      if (n_fc != 1) begin failures++; $display("fc_start count %0d", n_fc); end
      if (t_fc != t_last + 1) begin failures++; $display("fc_start at %0d, last done at %0d", t_fc, t_last); end
      if (n_ss != 1) begin failures++; $display("stage_start count %0d", n_ss); end
      repeat (7) @(posedge clk);
      fc_done <= 1;
      @(posedge clk);
      fc_done <= 0;
      repeat (3) @(posedge clk);
      checks += 2;
      if (busy) begin failures++; $display("still busy"); end
      if (cycles != 32'(t_done - t_start)) begin failures++; $display("cycles %0d, measured %0d", cycles, t_done - t_start); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
