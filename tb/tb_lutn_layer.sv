// tb_lutn_layer: loads random tables into a 3-input LUT layer and a
// two-input gate layer, drives random inputs and compares every output with
// a model that rebuilds the wiring from the hash.
module tb_lutn_layer;
  import tb_ref_pkg::*;
  localparam int IW = 20, W = 16, SEED = 7;
  logic clk = 0;
  always #5 clk = ~clk;

  logic        we3, we2;
  logic [3:0]  idx;
  logic [7:0]  tab3;
  logic [3:0]  tab2;
  logic [IW-1:0] x;
  logic [W-1:0]  y3, y2;
  logic [7:0] t3 [W];
  logic [3:0] t2 [W];
  int checks = 0, failures = 0;

  lutn_layer #(.N(3), .IN_WIDTH(IW), .WIDTH(W), .LAYER(1), .SEED(SEED)) dut3 (
    .clk(clk), .cfg_we(we3), .cfg_idx(idx), .cfg_table(tab3), .x(x), .y(y3));
  lutn_layer #(.N(2), .IN_WIDTH(IW), .WIDTH(W), .LAYER(0), .SEED(SEED)) dut2 (
    .clk(clk), .cfg_we(we2), .cfg_idx(idx), .cfg_table(tab2), .x(x), .y(y2));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we3 = 0; we2 = 0; x = '0; idx = '0; tab3 = '0; tab2 = '0;
    for (int n = 0; n < W; n++) begin
      t3[n] = 8'($urandom); t2[n] = 4'($urandom);
      @(negedge clk); we3 = 1; we2 = 1; idx = 4'(n); tab3 = t3[n]; tab2 = t2[n];
    end
    @(negedge clk); we3 = 0; we2 = 0;
    for (int t = 0; t < 300; t++) begin
      x = IW'({$urandom, $urandom});
      #1;
      for (int n = 0; n < W; n++) begin
        logic [5:0] l;
        bit e3, e2;
        l = '0;
        for (int j = 0; j < 3; j++) l[j] = x[ref_conn(SEED, 1, n, j, IW)];
        e3 = ref_lut(3, 64'(t3[n]), l);
        e2 = ref_gate(int'(t2[n]), x[ref_conn(SEED, 0, n, 0, IW)], x[ref_conn(SEED, 0, n, 1, IW)]);
        checks += 2;
        if (y3[n] !== e3) begin failures++; $display("FAIL lut n=%0d", n); end
        if (y2[n] !== e2) begin failures++; $display("FAIL gate n=%0d", n); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
