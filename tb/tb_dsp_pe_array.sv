// tb_dsp_pe_array: self-checking test of the multiply-add (DSP) PE array in
// both of its uses: the 3x64 array of 9-PE cores over 8-bit pixels (Conv1) and
// the 64x8 array of single PEs over 16-bit membrane values (shortcut).
module tb_dsp_pe_array;
  logic [2:0][8:0][7:0]        xa;
  logic [63:0][2:0][8:0][7:0]  wa;
  logic signed [63:0][31:0]    ya;
  logic [63:0][0:0][15:0]      xb;
  logic [7:0][63:0][0:0][7:0]  wb;
  logic signed [7:0][31:0]     yb;
  int checks = 0, failures = 0;
  dsp_pe_array #(.NIN(3), .NOUT(64), .TAPS(9), .XW(8)) u_enc (.x(xa), .w(wa), .y(ya));
  dsp_pe_array #(.NIN(64), .NOUT(8), .TAPS(1), .XW(16)) u_sc (.x(xb), .w(wb), .y(yb));
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    longint e;
    for (int n = 0; n < 40; n++) begin
      for (int i = 0; i < 3; i++) for (int t = 0; t < 9; t++) xa[i][t] = (n == 0) ? 8'h80 : 8'($urandom);
      for (int o = 0; o < 64; o++) for (int i = 0; i < 3; i++) for (int t = 0; t < 9; t++)
        wa[o][i][t] = (n == 0) ? 8'h80 : 8'($urandom);
      for (int i = 0; i < 64; i++) xb[i][0] = (n == 0) ? 16'h8000 : 16'($urandom);
      for (int o = 0; o < 8; o++) for (int i = 0; i < 64; i++) wb[o][i][0] = (n == 0) ? 8'h80 : 8'($urandom);
      #1;
      for (int o = 0; o < 64; o++) begin
        e = 0;
        for (int i = 0; i < 3; i++) for (int t = 0; t < 9; t++)
          e += longint'($signed(xa[i][t])) * longint'($signed(wa[o][i][t]));
        checks++;
        if (longint'($signed(ya[o])) != e) begin failures++; $display("enc o=%0d got %0d exp %0d", o, $signed(ya[o]), e); end
      end
      for (int o = 0; o < 8; o++) begin
        e = 0;
        for (int i = 0; i < 64; i++) e += longint'($signed(xb[i][0])) * longint'($signed(wb[o][i][0]));
        checks++;
        if (longint'($signed(yb[o])) != e) begin failures++; $display("sc o=%0d got %0d exp %0d", o, $signed(yb[o]), e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
