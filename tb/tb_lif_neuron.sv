// tb_lif_neuron: self-checking test of the single-step LIF threshold.
// Checks spike = (U > U_th) for random values and at U_th-1, U_th, U_th+1 and
// the extremes of the signed range.
module tb_lif_neuron;
  localparam int TH = 64;
  logic signed [7:0][15:0] u;
  logic [7:0] spk;
  int checks = 0, failures = 0;
  lif_neuron #(.N(8), .XW(16), .THRESH(TH)) dut (.u, .spk);
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int v [8];
    for (int n = 0; n < 500; n++) begin
      for (int k = 0; k < 8; k++) begin
        v[k] = int'($urandom % 400) - 200;
        if (n == 0) v[k] = (k < 3) ? TH - 1 + k : ((k < 5) ? -32768 + (k - 3) * 65535 : TH * k);
        u[k] = 16'(v[k]);
      end
      #1;
      for (int k = 0; k < 8; k++) begin
        checks++;
        if (spk[k] != (v[k] > TH)) begin
          failures++;
          $display("mismatch u=%0d spk=%0d", v[k], spk[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
