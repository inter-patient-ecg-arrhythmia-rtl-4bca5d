// lutn_network: feed-forward network of LAYERS layers of N-input neurons.
//
// Layer 0 reads the IN_BITS-bit input vector, every later layer reads the
// WIDTH outputs of the layer before it, and the WIDTH outputs of the last
// layer are the network output (grouped per class by class_popcount). With
// N = 2 this is a logic gate network (LGN), with N = 4 or 6 a LUT network.
// The defaults are the paper's single-layer 6-input LUT network with 2000
// LUTs; the paper's other networks use N = 2 with 8000 gates per layer or
// N = 4 with 3000 LUTs per layer, with 1 to 4 layers.
//
// The network is purely combinational from x to y, so one inference takes
// one clock cycle when the caller registers input and output. Neuron tables
// are written through cfg_we/cfg_layer/cfg_idx/cfg_table, one neuron per
// clock, and must all be written before use.
module lutn_network #(
  parameter int unsigned N       = 6,
  parameter int unsigned IN_BITS = 138,
  parameter int unsigned WIDTH   = 2000,
  parameter int unsigned LAYERS  = 1,
  parameter int unsigned SEED    = 1
) (
  input  logic                              clk,
  input  logic                              cfg_we,
  input  logic [$clog2(LAYERS+1)-1:0]       cfg_layer,
  input  logic [$clog2(WIDTH)-1:0]          cfg_idx,
  input  logic [(1<<N)-1:0]                 cfg_table,
  input  logic [IN_BITS-1:0]                x,
  output logic [WIDTH-1:0]                  y
);
  logic [WIDTH-1:0] act [LAYERS];

  for (genvar ly = 0; ly < LAYERS; ly++) begin : g_layer
    localparam int unsigned IW = (ly == 0) ? IN_BITS : WIDTH;
    logic [IW-1:0] lin;
    if (ly == 0) begin : g_first
      assign lin = x;
    end else begin : g_next
      assign lin = act[ly-1];
    end
    lutn_layer #(
      .N(N), .IN_WIDTH(IW), .WIDTH(WIDTH), .LAYER(ly), .SEED(SEED)
    ) u_layer (
      .clk      (clk),
      .cfg_we   (cfg_we && (32'(cfg_layer) == ly)),
      .cfg_idx  (cfg_idx),
      .cfg_table(cfg_table),
      .x        (lin),
      .y        (act[ly])
    );
  end

  assign y = act[LAYERS-1];
endmodule
