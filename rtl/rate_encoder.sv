// rate_encoder: turns full-precision features into random bit streams.
//
// For the rate-coded networks each of the F input features is a value
// between 0 and 1, held here as a PW-bit fraction v/2^PW. Every time step
// (step = 1) each feature emits one bit that is 1 with probability v/2^PW,
// so that over many steps the rate of ones carries the value. The paper
// gives this rate coding but not how the streams are made; here each feature
// has its own 16-bit maximal-length Galois LFSR (polynomial
// x^16+x^14+x^13+x^11+1) and the bit is (low PW bits of the LFSR) < v.
// Separate generators keep the streams of different features uncorrelated,
// which the probabilistic reading of the gates assumes.
//
// Timing: bits[] is combinational from the current LFSR states and the
// values; the LFSRs advance on each clock with step = 1. reseed = 1 puts
// every LFSR back to its fixed per-feature start state, so a sequence of
// steps after reseed is reproducible.
module rate_encoder #(
  parameter int unsigned F  = 89,
  parameter int unsigned PW = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 reseed,
  input  logic                 step,
  input  logic [F-1:0][PW-1:0] value,
  output logic [F-1:0]         bits
);
  logic [F-1:0][15:0] lfsr;

  function automatic logic [15:0] seed_of(input int unsigned i);
    logic [31:0] h;
    h = ecg_lutn_pkg::mix32(32'(i) + 32'h1234_5678);
    return (h[15:0] == 16'h0) ? 16'h0001 : h[15:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < F; i++) lfsr[i] <= seed_of(i);
    end else if (reseed) begin
      for (int i = 0; i < F; i++) lfsr[i] <= seed_of(i);
    end else if (step) begin
      for (int i = 0; i < F; i++)
        lfsr[i] <= lfsr[i][0] ? ((lfsr[i] >> 1) ^ 16'hb400) : (lfsr[i] >> 1);
    end
  end

  always_comb begin
    for (int i = 0; i < F; i++) bits[i] = (lfsr[i][PW-1:0] < value[i]);
  end
endmodule
