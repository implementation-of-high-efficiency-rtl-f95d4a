// snn_controller: schedules one inference through the layer pipeline.
//
// What it does: on start it launches every pipelined stage (Conv1, the eight
// convolution engines of the four residual blocks and the pool) in the same
// clock; their row handshakes then order them, so later layers begin as soon
// as the rows they need exist. It collects each stage's done pulse, starts
// the fully connected layer when all of them have finished, and on the FC's
// done pulse latches the result (result_we) and pulses done. cycles counts
// the clocks from start to done, the latency of one image.
// The division of labour (all stages launched together, FC after pool) is
// this design's realisation of the published controller, whose role is
// only described.
module snn_controller #(
  parameter int unsigned NSTAGE = 6
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic              stage_start,
  input  logic [NSTAGE-1:0] stage_done,
  output logic              fc_start,
  input  logic              fc_done,
  output logic              result_we,
  output logic [31:0]       cycles
);
  typedef enum logic [1:0] {S_IDLE, S_PIPE, S_FC} state_e;
  state_e state;
  logic [NSTAGE-1:0] seen;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      seen        <= '0;
      stage_start <= 1'b0;
      fc_start    <= 1'b0;
      result_we   <= 1'b0;
      done        <= 1'b0;
      busy        <= 1'b0;
      cycles      <= '0;
    end else begin
      stage_start <= 1'b0;
      fc_start    <= 1'b0;
      result_we   <= 1'b0;
      done        <= 1'b0;
      if (state != S_IDLE) cycles <= cycles + 1;
      unique case (state)
        S_IDLE: if (start) begin
          state       <= S_PIPE;
          stage_start <= 1'b1;
          seen        <= '0;
          busy        <= 1'b1;
          cycles      <= 32'd1;
        end
        S_PIPE: begin
          seen <= seen | stage_done;
          if ((seen | stage_done) == '1) begin
            state    <= S_FC;
            fc_start <= 1'b1;
          end
        end
        S_FC: if (fc_done) begin
          state     <= S_IDLE;
          result_we <= 1'b1;
          done      <= 1'b1;
          busy      <= 1'b0;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a start while busy is ignored; flag it in simulation
  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $warning("snn_controller: start ignored while busy");
endmodule
