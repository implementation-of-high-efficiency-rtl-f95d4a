// tb_param_ram: self-checking test of the lane-loaded parameter BRAM.
//
// Writes every 64-bit lane of every word of a 4608-bit x 8 memory with random
// data (lanes in a scrambled order), then reads all words back and checks
// them, including the one-clock read latency and that writes addressed past
// the depth or the lane count are ignored.
module tb_param_ram;
  localparam int WB = 4608, D = 8, L = WB / 64;
  logic clk = 0;
  always #5 clk = ~clk;
  logic ld_we = 0;
  logic [15:0] ld_addr = '0;
  logic [7:0] ld_lane = '0;
  logic [63:0] ld_data = '0;
  logic [2:0] raddr = '0;
  logic [WB-1:0] rdata;
  int checks = 0, failures = 0;

  param_ram #(.WORD_BITS(WB), .DEPTH(D)) dut (.clk, .ld_we, .ld_addr, .ld_lane, .ld_data, .raddr, .rdata);

  logic [WB-1:0] model [D];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    void'($urandom(3));
    for (int a = 0; a < D; a++)
      for (int n = 0; n < L; n++) begin
        int ln;
        logic [63:0] d;
        ln = (n * 37) % L;
        d = {$urandom, $urandom};
        model[a][ln*64 +: 64] = d;
        ld_we <= 1; ld_addr <= 16'(a); ld_lane <= 8'(ln); ld_data <= d;
        @(posedge clk);
      end
    // out-of-range writes must not land anywhere
    ld_addr <= 16'(D); ld_lane <= 8'd0; ld_data <= '1;
    @(posedge clk);
    ld_addr <= 16'd0; ld_lane <= 8'(L); ld_data <= '1;
    @(posedge clk);
    ld_we <= 0;
    for (int a = 0; a < D; a++) begin
      raddr <= 3'(a);
      @(posedge clk);
      #1;
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        $display("word %0d mismatch", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
