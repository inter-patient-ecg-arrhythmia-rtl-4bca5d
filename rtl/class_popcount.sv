// class_popcount: per-class group sums of the network outputs.
//
// The WIDTH outputs of the last layer are split into CLASSES groups of
// WIDTH/CLASSES consecutive outputs, group c holding outputs
// c*G .. c*G+G-1 (classes in the order N, S, V, F). Each group's EW-bit
// elements are added up. With EW = 1 this is the population count of the
// paper's readout; with EW = 8 it adds the spike counters of a rate-coded
// network. Purely combinational. Grouping consecutive outputs is this
// design's choice; the paper's figures only show each class owning a group.
module class_popcount #(
  parameter int unsigned WIDTH   = 2000,
  parameter int unsigned CLASSES = 4,
  parameter int unsigned EW      = 1,
  parameter int unsigned SW      = $clog2((WIDTH / CLASSES) * ((1 << EW) - 1) + 1)
) (
  input  logic [WIDTH-1:0][EW-1:0] x,
  output logic [CLASSES-1:0][SW-1:0] sum
);
  localparam int unsigned G = WIDTH / CLASSES;

  always_comb begin
    for (int c = 0; c < CLASSES; c++) begin
      sum[c] = '0;
      for (int i = 0; i < G; i++) sum[c] = sum[c] + SW'(x[c*G + i]);
    end
  end
endmodule
