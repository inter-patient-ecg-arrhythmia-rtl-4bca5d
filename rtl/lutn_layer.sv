// lutn_layer: one layer of a LUT network or logic gate network.
//
// The layer has WIDTH neurons. Each neuron reads N bits of the previous
// layer (IN_WIDTH bits wide) through fixed pseudo-random connections given by
// ecg_lutn_pkg::conn_index(SEED, LAYER, neuron, pin, IN_WIDTH); input pin j
// of a neuron drives its select line L_j. As in the paper, the wiring is
// random and fixed, and only the neuron functions are learned.
//
// The neuron functions are held in a table register per neuron, written one
// neuron at a time through the configuration port (cfg_we, cfg_idx,
// cfg_table) on the rising clock edge. Keeping the functions in registers
// rather than constants is this design's choice; it lets one netlist run any
// trained network that uses the same wiring. For N = 2 the neuron is a logic
// gate (lgn_gate) and the 4-bit table entry is that gate's operation code in
// the paper's numbering of the 16 gates; for N > 2 it is a lut_neuron and bit
// i of the entry is the LUT output W_i.
//
// The data path x -> y is purely combinational; the tables have no reset and
// must be loaded before use.
module lutn_layer #(
  parameter int unsigned N        = 6,
  parameter int unsigned IN_WIDTH = 138,
  parameter int unsigned WIDTH    = 2000,
  parameter int unsigned LAYER    = 0,
  parameter int unsigned SEED     = 1
) (
  input  logic                     clk,
  input  logic                     cfg_we,
  input  logic [$clog2(WIDTH)-1:0] cfg_idx,
  input  logic [(1<<N)-1:0]        cfg_table,
  input  logic [IN_WIDTH-1:0]      x,
  output logic [WIDTH-1:0]         y
);
  localparam int unsigned TW = 1 << N;

  logic [TW-1:0] tbl [WIDTH];

  always_ff @(posedge clk) begin
    if (cfg_we && (32'(cfg_idx) < WIDTH)) tbl[cfg_idx] <= cfg_table;
  end

  for (genvar n = 0; n < WIDTH; n++) begin : g_neuron
    logic [N-1:0] l;
    for (genvar j = 0; j < N; j++) begin : g_pin
      localparam int unsigned SRC = ecg_lutn_pkg::conn_index(SEED, LAYER, n, j, IN_WIDTH);
      assign l[j] = x[SRC];
    end
    if (N == 2) begin : g_gate
      lgn_gate u_gate (.op(tbl[n]), .x0(l[0]), .x1(l[1]), .y(y[n]));
    end else begin : g_lut
      lut_neuron #(.N(N)) u_lut (.w(tbl[n]), .l(l), .y(y[n]));
    end
  end
endmodule
