// ecg_lutn_pkg: types, constants and the connection function shared by the
// ECG LUT-network classifier.
//
// The binary feature vector of the classifier is 138 bits long and holds, in
// this order, RR1..RR4 (8 bits each), the two RR-change sign bits, the local
// RR coefficient-of-variation bits, the RR-ratio bits, the tachycardia bit,
// the morphology features M1, M2, M4 (3 bits each), the crest factors cf1 and
// cf2 (8 bits each) and 74 delta-encoding bits. The field widths and order
// follow the paper; placing the first field in the most significant bits of
// the packed vector is this design's own choice.
//
// conn_index() produces the fixed pseudo-random wiring between layers. The
// paper only says the connections are chosen at random and stay fixed; the
// integer hash used here is this design's choice, so that the wiring is a
// pure function of a seed and can be reproduced outside the RTL.
package ecg_lutn_pkg;

  localparam int unsigned NUM_CLASSES   = 4;    // N, S, V, F
  localparam int unsigned FEATURE_BITS  = 138;
  localparam int unsigned DELTA_BITS    = 74;
  localparam int unsigned SAMPLE_BITS   = 11;   // MIT-BIH resolution
  localparam int unsigned RR_BITS       = 11;   // RR interval in samples, saturated
  localparam int unsigned TIME_BITS     = 32;   // sample counter
  localparam int unsigned BEAT_LEN      = 180;  // beat window around R0
  localparam int unsigned BEAT_HALF     = 90;
  localparam int unsigned LONG_LEN      = 400;  // crest factor cf2 window
  localparam int unsigned LONG_HALF     = 200;

  typedef enum logic [1:0] {
    CLASS_N = 2'd0,
    CLASS_S = 2'd1,
    CLASS_V = 2'd2,
    CLASS_F = 2'd3
  } beat_class_e;

  // Rhythm features of one beat (output of rr_features).
  typedef struct packed {
    logic [7:0] rr1;
    logic [7:0] rr2;
    logic [7:0] rr3;
    logic [7:0] rr4;
    logic       d_rr_p;
    logic       d_rr_m;
    logic [1:0] loc_cv;
    logic [1:0] rr_ratio;
    logic       tachy;
  } rr_feat_t;

  // Shape features of one beat (output of beat_morphology).
  typedef struct packed {
    logic [2:0] m1;
    logic [2:0] m2;
    logic [2:0] m4;
    logic [7:0] cf1;
    logic [7:0] cf2;
  } morph_feat_t;

  // The complete 138-bit binary input vector.
  typedef struct packed {
    rr_feat_t               rr;
    morph_feat_t            morph;
    logic [DELTA_BITS-1:0]  delta;
  } feature_vec_t;

  // 32-bit integer mixer (xorshift-multiply finaliser).
  function automatic logic [31:0] mix32(input logic [31:0] v);
    logic [31:0] x;
    x = v;
    x = x ^ (x >> 16);
    x = x * 32'h7feb_352d;
    x = x ^ (x >> 15);
    x = x * 32'h846c_a68b;
    x = x ^ (x >> 16);
    return x;
  endfunction

  // Source index, in the previous layer of width in_width, of input `pin`
  // of neuron `neuron` in layer `layer`.
  function automatic int unsigned conn_index(input int unsigned seed,
                                             input int unsigned layer,
                                             input int unsigned neuron,
                                             input int unsigned pin,
                                             input int unsigned in_width);
    logic [31:0] h;
    h = mix32(32'(seed) ^ mix32(32'(layer) * 32'h9e37_79b1
                                 + 32'(neuron) * 32'h85eb_ca6b
                                 + 32'(pin) * 32'hc2b2_ae35));
    return int'(h % 32'(in_width));
  endfunction

endpackage
