// fc_layer: the 256 x 10 fully connected classification layer.
//
// What it does: score[j] = b[j] + sum_i cnt[i] * w[j][i], with 8-bit signed
// weights and biases and the unsigned pooled spike counts cnt.
//
// How it works: one input i per clock; its 10 weights (one param_ram word,
// address i, w[j] in byte j) are read and NOUT multiply-accumulators add
// cnt[i]*w[j]. The first product is added onto the bias. NIN+2 clocks from
// start to the done pulse; scores stay valid until the next start.
// The layer's size follows the published network; its one-input-per-clock
// structure is this design's choice.
module fc_layer
  import snn_pkg::*;
#(
  parameter int unsigned NIN  = 256,
  parameter int unsigned NOUT = 10,
  parameter int unsigned CW   = 9,
  parameter int unsigned SW   = 32,
  localparam int unsigned IW  = $clog2(NIN)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  input  logic [NIN-1:0][CW-1:0]        cnt,
  input  param_ld_t                     ld,
  output logic signed [NOUT-1:0][SW-1:0] score
);
  logic          run, m_v, m_first, m_last;
  logic [IW:0]   i;
  logic [CW-1:0] m_cnt;
  logic [NOUT*WW-1:0] w_word, b_word;

  param_ram #(.WORD_BITS(NOUT*WW), .DEPTH(NIN)) u_wram (
    .clk, .ld_we(ld.we && ld.layer == L_FC && ld.sel == SEL_W),
    .ld_addr(ld.addr), .ld_lane(ld.lane), .ld_data(ld.data),
    .raddr(i[IW-1:0]), .rdata(w_word));
  param_ram #(.WORD_BITS(NOUT*WW), .DEPTH(1)) u_bram (
    .clk, .ld_we(ld.we && ld.layer == L_FC && ld.sel == SEL_B),
    .ld_addr(ld.addr), .ld_lane(ld.lane), .ld_data(ld.data),
    .raddr(1'b0), .rdata(b_word));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run     <= 1'b0;
      i       <= '0;
      m_v     <= 1'b0;
      m_first <= 1'b0;
      m_last  <= 1'b0;
      m_cnt   <= '0;
      busy    <= 1'b0;
      done    <= 1'b0;
      score   <= '0;
    end else begin
      done    <= 1'b0;
      m_v     <= run;
      m_first <= run && (i == '0);
      m_last  <= run && (32'(i) == NIN - 1);
      m_cnt   <= cnt[i[IW-1:0]];
      if (start) begin
        run  <= 1'b1;
        busy <= 1'b1;
        i    <= '0;
      end else if (run) begin
        i <= i + 1'b1;
        if (32'(i) == NIN - 1) run <= 1'b0;
      end
      if (m_v)
        for (int j = 0; j < NOUT; j++)
          score[j] <= (m_first ? SW'($signed(b_word[j*WW +: WW])) : score[j])
                    + SW'($signed({1'b0, m_cnt}) * $signed(w_word[j*WW +: WW]));
      if (m_v && m_last) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end
endmodule
