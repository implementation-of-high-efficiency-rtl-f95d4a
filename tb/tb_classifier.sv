// tb_classifier: self-checking test of the argmax classifier, including ties
// (lowest index wins) and all-negative scores.
module tb_classifier;
  logic signed [9:0][31:0] score;
  logic [3:0] class_id;
  int checks = 0, failures = 0;
  classifier dut (.score, .class_id);
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int best;
    for (int n = 0; n < 1000; n++) begin
      for (int k = 0; k < 10; k++) score[k] = (n < 10) ? 32'(-1000 + ((k == n) ? 5 : 0)) : 32'(int'($urandom % 41) - 20);
      if (n == 10) score = '0;   // all equal: class 0
      #1;
      best = 0;
      for (int k = 1; k < 10; k++) if ($signed(score[k]) > $signed(score[best])) best = k;
      checks++;
      if (int'(class_id) != best) begin failures++; $display("got %0d exp %0d", class_id, best); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
