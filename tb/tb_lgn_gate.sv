// tb_lgn_gate: checks all 16 gate codes on all four input pairs against the
// gates' Boolean definitions.
module tb_lgn_gate;
  import tb_ref_pkg::*;
  logic [3:0] op;
  logic x0, x1, y;
  int checks = 0, failures = 0;

  lgn_gate dut (.op(op), .x0(x0), .x1(x1), .y(y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int o = 0; o < 16; o++)
      for (int a = 0; a < 2; a++)
        for (int b = 0; b < 2; b++) begin
          op = 4'(o); x0 = a[0]; x1 = b[0];
          #1;
          checks++;
          if (y !== ref_gate(o, a[0], b[0])) begin
            failures++;
            $display("FAIL op=%0d x0=%0d x1=%0d y=%0d", o, a, b, y);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
