// ecg_sample_buffer: circular store of the most recent 2^AW ECG samples.
//
// Incoming samples are written at the address given by the low AW bits of
// their sample number; the morphology unit reads back the samples around an
// R peak through a synchronous read port (data one clock after the
// address). With AW = 10 it holds 1024 samples, 2.8 s at 360 samples per
// second, enough for the 400-sample window around a beat plus the wait for
// that window to arrive. The paper does not describe this store; its size
// and read timing are this design's choices.
module ecg_sample_buffer #(
  parameter int unsigned AW = 10,
  parameter int unsigned DW = 11
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);
  logic [DW-1:0] mem [1 << AW];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
