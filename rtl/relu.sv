// relu: rectified linear activation, y = max(a, 0), on N lanes at once.
//
// Needs no table and no multiplier: the sign bit of each two's-complement
// lane selects between the lane and zero. Purely combinational. The output
// keeps the input width but is always nonnegative, which is what lets the
// following LUT layer drop the sign bit of its inputs.
module relu #(
  parameter int unsigned W = 35,  // lane width
  parameter int unsigned N = 1    // lanes
) (
  input  logic signed [W-1:0] a [N],
  output logic        [W-1:0] y [N]
);

  always_comb begin
    for (int i = 0; i < N; i++) y[i] = (a[i] < 0) ? '0 : a[i];
  end

endmodule
