// tb_fmap_ram: self-checking test of the feature-map BRAM.
// Writes random 8-channel groups to random pixels, keeps a model of the
// memory, and reads both ports every clock, checking the one-clock latency
// and that a group write leaves the other channels of the word untouched.
module tb_fmap_ram;
  localparam int NPIX = 64, NCH = 32, EW = 16, WCH = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [5:0] waddr = '0, ra_addr = '0, rb_addr = '0;
  logic [1:0] wchunk = '0;
  logic [WCH-1:0][EW-1:0] wdata = '0;
  logic [NCH-1:0][EW-1:0] ra_data, rb_data;
  logic [NCH-1:0][EW-1:0] model [NPIX];
  int checks = 0, failures = 0;
  fmap_ram #(.NPIX(NPIX), .NCH(NCH), .EW(EW), .WCH(WCH)) dut (.clk, .we, .waddr, .wchunk, .wdata,
    .ra_addr, .ra_data, .rb_addr, .rb_data);
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    // fill completely first
    for (int p = 0; p < NPIX; p++) for (int k = 0; k < NCH / WCH; k++) begin
      we <= 1; waddr <= 6'(p); wchunk <= 2'(k);
      for (int c = 0; c < WCH; c++) begin
        logic [EW-1:0] d;
        d = EW'($urandom);
        wdata[c] <= d;
        model[p][k*WCH+c] = d;
      end
      @(posedge clk);
    end
    we <= 0;
    // random group writes with reads on both ports
    for (int n = 0; n < 2000; n++) begin
      int p, k, a, b;
      p = int'($urandom % NPIX); k = int'($urandom % 4);
      a = int'($urandom % NPIX); b = int'($urandom % NPIX);
      ra_addr <= 6'(a); rb_addr <= 6'(b);
      we <= 1; waddr <= 6'(p); wchunk <= 2'(k);
      for (int c = 0; c < WCH; c++) wdata[c] <= EW'($urandom);
      @(posedge clk);
      #1;
      // read data is the word as it was before this clock's write
      checks += 2;
      if (ra_data !== model[a]) begin failures++; $display("port a mismatch at %0d", a); end
      if (rb_data !== model[b]) begin failures++; $display("port b mismatch at %0d", b); end
      for (int c = 0; c < WCH; c++) model[p][k*WCH+c] = wdata[c];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
