// tb_spike_counter: counts of random spike patterns over 128 steps are
// compared with a software count; clear, enable and saturation are checked.
module tb_spike_counter;
  localparam int W = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, clear, en;
  logic [W-1:0] x;
  logic [W-1:0][7:0] count;
  logic [W-1:0][2:0] count3;
  int ref_c [W];
  int checks = 0, failures = 0;

  spike_counter #(.W(W), .CW(8)) dut  (.clk(clk), .rst_n(rst_n), .clear(clear), .en(en),
                                       .x(x), .count(count));
  spike_counter #(.W(W), .CW(3)) dut3 (.clk(clk), .rst_n(rst_n), .clear(clear), .en(en),
                                       .x(x), .count(count3));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; clear = 0; en = 0; x = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      clear = 1; @(negedge clk); clear = 0;
      foreach (ref_c[i]) ref_c[i] = 0;
      for (int t = 0; t < 128; t++) begin
        x = W'($urandom);
        en = ($urandom % 8) != 0;
        if (run == 2) begin x = '1; en = 1; end
        if (en) for (int i = 0; i < W; i++) ref_c[i] += x[i];
        @(negedge clk);
      end
      en = 0;
      for (int i = 0; i < W; i++) begin
        checks += 2;
        if (count[i] != ref_c[i]) begin failures++; $display("FAIL run %0d i=%0d %0d/%0d", run, i, count[i], ref_c[i]); end
        if (count3[i] != (ref_c[i] > 7 ? 7 : ref_c[i])) begin failures++; $display("FAIL sat i=%0d", i); end
      end
    end
    clear = 1; @(negedge clk); clear = 0;
    checks++;
    if (count != '0) begin failures++; $display("FAIL clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
