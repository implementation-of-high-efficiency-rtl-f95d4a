// spike_pool: global pooling of the last feature map.
//
// What it does: applies the final LIF activation to the last residual block's
// output map (NCH channels, NPIX pixels) and counts, per channel, how many
// pixels fired. The count is the global average of the spike map times NPIX;
// the constant 1/NPIX is left to the fully connected weights. The result is
// the 256 x 1 vector the classifier consumes.
//
// How it works: reads one pixel word per clock as soon as the producer has
// finished its row (src_rows), thresholds all NCH channels in parallel and
// increments the NCH counters. The read has one clock of latency; done
// pulses after the last pixel has been counted, NPIX+1 clocks after start
// when the map is already complete. Counts stay valid until the next start.
// Pool type and the counting form are this design's choices.
module spike_pool
  import snn_pkg::*;
#(
  parameter int unsigned NCH    = 256,
  parameter int unsigned H      = 16,
  parameter int          THRESH = THRESH_DEFAULT,
  localparam int unsigned NPIX  = H * H,
  localparam int unsigned AW    = $clog2(NPIX),
  localparam int unsigned CW    = $clog2(NPIX + 1),
  localparam int unsigned RW    = $clog2(H + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  input  logic [RW-1:0]            src_rows,
  output logic [AW-1:0]            raddr,
  input  logic [NCH-1:0][XW-1:0]   rdata,
  output logic [NCH-1:0][CW-1:0]   cnt
);
  logic            run, cap_v, cap_last;
  logic [AW:0]     pix;
  logic [NCH-1:0]  spk;

  lif_neuron #(.N(NCH), .XW(XW), .THRESH(THRESH)) u_lif (.u(rdata), .spk);

  // the row of the next pixel must be complete
  logic ready;
  assign ready = 32'(src_rows) > 32'(pix) / H;
  assign raddr = AW'(pix);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run      <= 1'b0;
      pix      <= '0;
      cap_v    <= 1'b0;
      cap_last <= 1'b0;
      busy     <= 1'b0;
      done     <= 1'b0;
      cnt      <= '0;
    end else begin
      done     <= 1'b0;
      cap_v    <= run && ready;
      cap_last <= run && ready && (32'(pix) == NPIX - 1);
      if (start) begin
        run  <= 1'b1;
        busy <= 1'b1;
        pix  <= '0;
        cnt  <= '0;
      end else begin
        if (run && ready) begin
          pix <= pix + 1'b1;
          if (32'(pix) == NPIX - 1) run <= 1'b0;
        end
        if (cap_v)
          for (int c = 0; c < NCH; c++) cnt[c] <= cnt[c] + CW'(spk[c]);
        if (cap_last) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
