// spike_counter: one CW-bit counter per output of a rate-coded network.
//
// In the rate-coded network every output neuron has an 8-bit counter that
// counts the ones it produces over the 128 time steps of one inference;
// the class group sums of these counts give the prediction. On clear the
// counters go to zero; on each clock with en = 1 counter i adds x[i]. The
// counters saturate at 2^CW-1 (this design's choice; 128 steps never reach
// it with CW = 8).
module spike_counter #(
  parameter int unsigned W  = 2000,
  parameter int unsigned CW = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 en,
  input  logic [W-1:0]         x,
  output logic [W-1:0][CW-1:0] count
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
    end else if (clear) begin
      count <= '0;
    end else if (en) begin
      for (int i = 0; i < W; i++)
        if (x[i] && (count[i] != {CW{1'b1}})) count[i] <= count[i] + CW'(1);
    end
  end
endmodule
