// tb_rate_encoder: the fraction of ones of each stream over 4096 steps must
// be close to value/256; value 0 never fires; a reseed replays the same
// streams; no step means the bits hold.
module tb_rate_encoder;
  localparam int F = 5, STEPS = 4096;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, reseed, step;
  logic [F-1:0][7:0] value;
  logic [F-1:0] bits;
  logic [F-1:0] first [64];
  int ones [F];
  int checks = 0, failures = 0;

  rate_encoder #(.F(F), .PW(8)) dut (.clk(clk), .rst_n(rst_n), .reseed(reseed), .step(step),
                                     .value(value), .bits(bits));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; reseed = 0; step = 0;
    value = {8'd0, 8'd255, 8'd64, 8'd192, 8'd128};   // feature 0 = 128 ... 4 = 0
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (ones[i]) ones[i] = 0;
    for (int t = 0; t < STEPS; t++) begin
      if (t < 64) first[t] = bits;
      for (int i = 0; i < F; i++) ones[i] += bits[i];
      step = 1; @(negedge clk);
    end
    step = 0;
    for (int i = 0; i < F; i++) begin
      real exp_r, got_r;
      exp_r = value[i] / 256.0;
      got_r = ones[i] / real'(STEPS);
      checks++;
      if (got_r > exp_r + 0.03 || got_r < exp_r - 0.03) begin
        failures++;
        $display("FAIL rate feature %0d: %f vs %f", i, got_r, exp_r);
      end
    end
    checks++;
    if (ones[4] != 0) begin failures++; $display("FAIL value 0 fired"); end
    // Streams of different features differ.
    checks++;
    begin
      int same;
      same = 0;
      for (int t = 0; t < 64; t++) same += (first[t][0] == first[t][2]);
      if (same == 64) begin failures++; $display("FAIL streams identical"); end
    end
    // Reseed and replay.
    reseed = 1; @(negedge clk); reseed = 0;
    for (int t = 0; t < 64; t++) begin
      checks++;
      if (bits !== first[t]) begin failures++; $display("FAIL replay t=%0d", t); end
      step = 1; @(negedge clk);
    end
    step = 0;
    begin
      logic [F-1:0] held;
      held = bits;
      repeat (5) @(negedge clk);
      checks++;
      if (bits !== held) begin failures++; $display("FAIL bits moved without step"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
