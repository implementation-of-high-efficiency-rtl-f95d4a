// tb_snn_pkg: self-checking test of the shared package.
// Checks the 16-bit saturation function used by every layer that writes a
// membrane map (random values across and near both limits, compared with a
// plain clamp), the field layout of the parameter load bus (95 bits, data in
// the low 64), the layer and memory-select codes, and the network constants
// that the rest of the design and its testbenches depend on.
module tb_snn_pkg;
  import snn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint clamp(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  initial begin
    longint v, got;
    param_ld_t p;
    for (int n = 0; n < 3000; n++) begin
      @(posedge clk);
      case (n % 3)
        0: v = longint'($signed(40'({$urandom, $urandom})));   // anywhere in 40 bits
        1: v = longint'(int'($urandom % 70000) - 35000);       // around the limits
        default: v = longint'(int'($urandom % 9) - 4) + (($urandom % 2) ? 32767 : -32768);
      endcase
      got = longint'(sat_xw(40'(v)));
      checks++;
      if (got != clamp(v)) begin
        failures++;
        if (failures < 5) $display("sat_xw(%0d) = %0d, expected %0d", v, got, clamp(v));
      end
    end
    p = '0;
    p.data = 64'hdead_beef_0123_4567;
    p.lane = 8'h5a;
    p.addr = 16'h1234;
    p.sel  = SEL_SC_W;
    p.layer = L_FC;
    p.we   = 1'b1;
    checks += 6;
    if ($bits(param_ld_t) != 95) begin failures++; $display("load bus is %0d bits", $bits(param_ld_t)); end
    if (p[63:0] != 64'hdead_beef_0123_4567 || p[71:64] != 8'h5a || p[87:72] != 16'h1234) begin
      failures++; $display("load bus field layout");
    end
    if (p[94] != 1'b1) begin failures++; $display("we is not the top bit"); end
    if (int'(L_CONV1) != 0 || int'(L_B1A) != 1 || int'(L_B4B) != 8 || int'(L_FC) != 9) begin
      failures++; $display("layer codes");
    end
    if (int'(SEL_W) == int'(SEL_B) || int'(SEL_SC_W) == int'(SEL_SC_B)) begin failures++; $display("select codes"); end
    if (CH1 != 64 || CH2 != 128 || CH3 != 256 || GROUPS != 4 || NCLASS != 10 || IMG != 32 || WW != 8) begin
      failures++; $display("network constants");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
