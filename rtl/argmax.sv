// argmax: index of the largest of P signed scores, the predicted label.
//
// A linear scan of comparisons, no arithmetic beyond compare; on a tie the
// lowest index wins. Purely combinational: idx and max follow the inputs in
// the same cycle.
module argmax #(
  parameter int unsigned P = 10,
  parameter int unsigned W = 37,
  localparam int unsigned IW = (P > 1) ? $clog2(P) : 1
) (
  input  logic signed [W-1:0] a [P],
  output logic [IW-1:0]       idx,
  output logic signed [W-1:0] max
);

  always_comb begin
    idx = '0;
    max = a[0];
    for (int i = 1; i < P; i++) begin
      if (a[i] > max) begin
        max = a[i];
        idx = IW'(i);
      end
    end
  end

endmodule
