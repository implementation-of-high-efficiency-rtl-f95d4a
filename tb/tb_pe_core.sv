// tb_pe_core: self-checking test of the nine-PE spiking core.
// Random spike patterns and signed weights; the sum must equal the sum of the
// weights whose spike is set, including the all-ones extreme cases.
module tb_pe_core;
  logic [8:0] spk;
  logic [8:0][7:0] w;
  logic signed [12:0] sum;
  int checks = 0, failures = 0;
  pe_core dut (.spk, .w, .sum);
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int exp_sum;
    for (int n = 0; n < 2000; n++) begin
      spk = (n == 0) ? 9'h1ff : 9'($urandom);
      for (int t = 0; t < 9; t++) w[t] = (n == 0) ? 8'h80 : (n == 1 ? 8'h7f : 8'($urandom));
      if (n == 1) spk = 9'h1ff;
      #1;
      exp_sum = 0;
      for (int t = 0; t < 9; t++) if (spk[t]) exp_sum += int'($signed(w[t]));
      checks++;
      if (int'(sum) != exp_sum) begin
        failures++;
        if (failures < 5) $display("mismatch spk=%b got %0d exp %0d", spk, sum, exp_sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
