// tb_class_argmax: random and tied class sums; the largest sum must win and
// ties go to the lowest class index.
module tb_class_argmax;
  logic [3:0][8:0] s;
  logic [1:0] idx;
  logic [8:0] best;
  int checks = 0, failures = 0;

  class_argmax #(.CLASSES(4), .SW(9)) dut (.sum(s), .idx(idx), .best(best));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int e, m;
      for (int c = 0; c < 4; c++) s[c] = (t < 1000) ? 9'($urandom) : 9'($urandom % 4);
      #1;
      e = 0; m = s[0];
      for (int c = 1; c < 4; c++) if (s[c] > m) begin m = s[c]; e = c; end
      checks++;
      if (idx != e || best != m) begin
        failures++;
        $display("FAIL %0d %0d %0d %0d -> %0d", s[0], s[1], s[2], s[3], idx);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
