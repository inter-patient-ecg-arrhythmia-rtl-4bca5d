// tb_lutn_network: a three-layer network of 4-input LUTs with random tables,
// checked output by output against a layer-by-layer software model.
module tb_lutn_network;
  import tb_ref_pkg::*;
  localparam int IB = 30, W = 24, L = 3, SEED = 11;
  logic clk = 0;
  always #5 clk = ~clk;

  logic        we;
  logic [1:0]  layer;
  logic [4:0]  idx;
  logic [15:0] tab;
  logic [IB-1:0] x;
  logic [W-1:0]  y;
  logic [15:0] t [L][W];
  int checks = 0, failures = 0;

  lutn_network #(.N(4), .IN_BITS(IB), .WIDTH(W), .LAYERS(L), .SEED(SEED)) dut (
    .clk(clk), .cfg_we(we), .cfg_layer(layer), .cfg_idx(idx), .cfg_table(tab), .x(x), .y(y));

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; layer = 0; idx = 0; tab = 0; x = '0;
    for (int ly = 0; ly < L; ly++)
      for (int n = 0; n < W; n++) begin
        t[ly][n] = 16'($urandom);
        @(negedge clk); we = 1; layer = 2'(ly); idx = 5'(n); tab = t[ly][n];
      end
    @(negedge clk); we = 0;
    for (int k = 0; k < 300; k++) begin
      bit a [L+1][W > IB ? W : IB];
      x = IB'({$urandom, $urandom});
      #1;
      for (int i = 0; i < IB; i++) a[0][i] = x[i];
      for (int ly = 0; ly < L; ly++)
        for (int n = 0; n < W; n++) begin
          logic [5:0] l;
          l = '0;
          for (int j = 0; j < 4; j++)
            l[j] = a[ly][ref_conn(SEED, ly, n, j, ly == 0 ? IB : W)];
          a[ly+1][n] = ref_lut(4, 64'(t[ly][n]), l);
        end
      for (int n = 0; n < W; n++) begin
        checks++;
        if (y[n] !== a[L][n]) begin failures++; $display("FAIL k=%0d n=%0d", k, n); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
