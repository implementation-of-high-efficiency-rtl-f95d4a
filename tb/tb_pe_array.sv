// tb_pe_array: self-checking test of the 8x8 PE array and its broadcast.
// Random spike windows and weights; each Fsum[o] must be the sum over all
// eight input windows of the weights of set spikes. One case sets a single
// input window only, to show that it reaches every output row.
module tb_pe_array;
  logic [7:0][8:0] spk;
  logic [7:0][7:0][8:0][7:0] w;
  logic signed [7:0][15:0] fsum;
  int checks = 0, failures = 0;
  pe_array dut (.spk, .w, .fsum);
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int e;
    for (int n = 0; n < 300; n++) begin
      for (int i = 0; i < 8; i++) spk[i] = 9'($urandom);
      if (n == 0) begin spk = '0; spk[5] = 9'h1ff; end
      for (int o = 0; o < 8; o++) for (int i = 0; i < 8; i++) for (int t = 0; t < 9; t++)
        w[o][i][t] = 8'($urandom);
      #1;
      for (int o = 0; o < 8; o++) begin
        e = 0;
        for (int i = 0; i < 8; i++) for (int t = 0; t < 9; t++)
          if (spk[i][t]) e += int'($signed(w[o][i][t]));
        checks++;
        if (int'($signed(fsum[o])) != e) begin
          failures++;
          if (failures < 5) $display("mismatch o=%0d got %0d exp %0d", o, $signed(fsum[o]), e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
