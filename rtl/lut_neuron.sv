// lut_neuron: an N-input lookup table, the neuron of a LUT network (LUTN).
//
// A LUT is a 2^N:1 multiplexer: the N inputs L_0..L_{N-1} are the select
// lines and the 2^N table entries W_0..W_{2^N-1} are the data inputs. Input
// L_0 is the most significant select bit, so entry W_i is chosen when the
// binary number L_0 L_1 ... L_{N-1} equals i (the selector matrix of the
// paper, and its 3-input truth table). With N = 2 the LUT is equivalent to a
// logic gate; w[i] is then the gate's output for {x0,x1} = i.
// Purely combinational; the table is an input so it can be loaded.
module lut_neuron #(
  parameter int unsigned N = 6
) (
  input  logic [(1<<N)-1:0] w,   // table entries, w[i] = W_i
  input  logic [N-1:0]      l,   // l[j] = L_j
  output logic              y
);
  logic [N-1:0] sel;
  always_comb begin
    for (int j = 0; j < N; j++) sel[N-1-j] = l[j];
    y = w[sel];
  end
endmodule
