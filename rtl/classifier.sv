// classifier: picks the winning class from the fully connected layer's scores.
//
// Combinational argmax over NCLASS signed scores; on a tie the lower class
// index wins (tie rule is this design's choice).
module classifier #(
  parameter int unsigned NCLASS = 10,
  parameter int unsigned SW     = 32,
  localparam int unsigned IW    = $clog2(NCLASS)
) (
  input  logic signed [NCLASS-1:0][SW-1:0] score,
  output logic [IW-1:0]                    class_id
);
  always_comb begin
    logic signed [SW-1:0] best;
    best     = score[0];
    class_id = '0;
    for (int k = 1; k < NCLASS; k++)
      if ($signed(score[k]) > best) begin
        best     = score[k];
        class_id = IW'(k);
      end
  end
endmodule
