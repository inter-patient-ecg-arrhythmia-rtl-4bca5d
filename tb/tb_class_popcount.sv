// tb_class_popcount: group sums of 1-bit outputs and of 8-bit counts,
// compared with sums over the groups of consecutive outputs.
module tb_class_popcount;
  localparam int W = 40, C = 4, G = W / C;
  logic [W-1:0][0:0] x1;
  logic [W-1:0][7:0] x8;
  logic [C-1:0][3:0]  s1;
  logic [C-1:0][11:0] s8;
  int checks = 0, failures = 0;

  class_popcount #(.WIDTH(W), .CLASSES(C), .EW(1)) dut1 (.x(x1), .sum(s1));
  class_popcount #(.WIDTH(W), .CLASSES(C), .EW(8)) dut8 (.x(x8), .sum(s8));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < W; i++) begin
        x1[i] = (t == 0) ? 1'b1 : 1'($urandom);
        x8[i] = (t == 1) ? 8'hff : 8'($urandom);
      end
      #1;
      for (int c = 0; c < C; c++) begin
        int e1, e8;
        e1 = 0; e8 = 0;
        for (int i = c * G; i < (c + 1) * G; i++) begin e1 += x1[i]; e8 += x8[i]; end
        checks += 2;
        if (s1[c] != e1) begin failures++; $display("FAIL 1b c=%0d %0d/%0d", c, s1[c], e1); end
        if (s8[c] != e8) begin failures++; $display("FAIL 8b c=%0d %0d/%0d", c, s8[c], e8); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
