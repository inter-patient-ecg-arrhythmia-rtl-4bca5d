// class_argmax: index of the largest of CLASSES group sums.
//
// The predicted class is the group with the highest sum. On a tie the lower
// class index wins (this design's choice; the paper does not treat ties).
// Purely combinational.
module class_argmax #(
  parameter int unsigned CLASSES = 4,
  parameter int unsigned SW      = 9
) (
  input  logic [CLASSES-1:0][SW-1:0]    sum,
  output logic [$clog2(CLASSES)-1:0]    idx,
  output logic [SW-1:0]                 best
);
  always_comb begin
    idx  = '0;
    best = sum[0];
    for (int c = 1; c < CLASSES; c++) begin
      if (sum[c] > best) begin
        best = sum[c];
        idx  = ($clog2(CLASSES))'(c);
      end
    end
  end
endmodule
