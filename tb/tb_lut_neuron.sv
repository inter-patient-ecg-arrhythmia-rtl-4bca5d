// tb_lut_neuron: 3-input LUT checked exhaustively against the MUX truth
// table (L_0 most significant), 6-input LUT with random tables and inputs.
module tb_lut_neuron;
  import tb_ref_pkg::*;
  logic [7:0]  w3;  logic [2:0] l3; logic y3;
  logic [63:0] w6;  logic [5:0] l6; logic y6;
  int checks = 0, failures = 0;

  lut_neuron #(.N(3)) dut3 (.w(w3), .l(l3), .y(y3));
  lut_neuron #(.N(6)) dut6 (.w(w6), .l(l6), .y(y6));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w6 = '0; l6 = '0;
    // One-hot tables: W_i selected exactly when L0 L1 L2 = i.
    for (int i = 0; i < 8; i++)
      for (int s = 0; s < 8; s++) begin
        w3 = 8'(1 << i);
        l3 = {s[0], s[1], s[2]};     // l3[0] = L_0 = MSB of s
        #1;
        checks++;
        if (y3 !== (i == s)) begin
          failures++;
          $display("FAIL N=3 i=%0d s=%0d y=%0d", i, s, y3);
        end
      end
    for (int t = 0; t < 2000; t++) begin
      w6 = {$urandom, $urandom};
      l6 = 6'($urandom);
      #1;
      checks++;
      if (y6 !== ref_lut(6, w6, l6)) begin
        failures++;
        $display("FAIL N=6 w=%h l=%b y=%0d", w6, l6, y6);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
