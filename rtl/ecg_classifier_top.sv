// ecg_classifier_top: heartbeat classifier built from a LUT network.
//
// Binary mode (RATE_CODED = 0, the default): an ECG stream (one signed
// 11-bit sample per sample_valid, 360 samples/s) and R-peak markers
// (peak_flag with the sample at the peak) come in. Samples go into a
// 1024-sample circular buffer; peak times go to rr_features. When a beat's
// rhythm features are ready and the 200 samples after its R peak have
// arrived, beat_morphology reads its 400-sample neighbourhood from the
// buffer. The 138-bit feature vector {rhythm, morphology, delta_bits} is
// then registered and classified by the network in one clock:
// lutn_network -> class_popcount -> class_argmax, registered into
// class_valid/class_out/class_sums one clock after the feature vector. The
// 74 delta-encoding bits are not computed here and must be supplied on
// delta_bits while the beat is being processed (they are sampled when the
// morphology unit finishes).
//
// Rate-coded mode (RATE_CODED = 1): the network has RATE_FEATURES inputs fed
// by rate_encoder from the full-precision features on rate_features. A pulse
// on rate_start runs RATE_STEPS time steps, one per clock; spike_counter
// counts the ones of every output neuron, and the per-class sums of the
// counts are classified RATE_STEPS + 1 clocks after rate_start. The feature
// extraction is not built in this mode.
//
// Network tables are loaded through cfg_* before use (see lutn_network).
// Defaults: the single-layer network of 2000 6-input LUTs. Performance
// counters: beats_classified and beats_dropped (a finished beat that found
// the previous one still waiting for its morphology is dropped).
module ecg_classifier_top
  import ecg_lutn_pkg::*;
#(
  parameter int unsigned N             = 6,
  parameter int unsigned WIDTH         = 2000,
  parameter int unsigned LAYERS        = 1,
  parameter int unsigned SEED          = 1,
  parameter bit          RATE_CODED    = 1'b0,
  parameter int unsigned RATE_FEATURES = 89,
  parameter int unsigned RATE_PW       = 8,
  parameter int unsigned RATE_STEPS    = 128,
  parameter int unsigned BUF_AW        = 10,
  parameter int unsigned NLOC          = 500,
  // Width of one class sum: outputs per class times the largest element.
  parameter int unsigned SW = RATE_CODED ? $clog2((WIDTH / NUM_CLASSES) * 255 + 1)
                                         : $clog2((WIDTH / NUM_CLASSES) + 1)
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // ECG input (binary mode)
  input  logic                                   sample_valid,
  input  logic signed [SAMPLE_BITS-1:0]          sample,
  input  logic                                   peak_flag,
  input  logic [DELTA_BITS-1:0]                  delta_bits,
  // Full-precision features (rate-coded mode)
  input  logic                                   rate_start,
  input  logic [RATE_FEATURES-1:0][RATE_PW-1:0]  rate_features,
  // Network table loading
  input  logic                                   cfg_we,
  input  logic [$clog2(LAYERS+1)-1:0]            cfg_layer,
  input  logic [$clog2(WIDTH)-1:0]               cfg_idx,
  input  logic [(1<<N)-1:0]                      cfg_table,
  // Result
  output logic                                   class_valid,
  output beat_class_e                            class_out,
  output logic [NUM_CLASSES-1:0][SW-1:0]         class_sums,
  output logic [TIME_BITS-1:0]                   class_time,
  output feature_vec_t                           features,
  output logic [15:0]                            beats_classified,
  output logic [15:0]                            beats_dropped
);
  logic [NUM_CLASSES-1:0][SW-1:0] sums;
  logic [1:0]                     arg;
  logic [SW-1:0]                  best;
  logic                           res_valid;   // sums/arg are valid this clock
  logic [TIME_BITS-1:0]           res_time;

  class_argmax #(.CLASSES(NUM_CLASSES), .SW(SW)) u_argmax (
    .sum(sums), .idx(arg), .best(best)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      class_valid      <= 1'b0;
      class_out        <= CLASS_N;
      class_sums       <= '0;
      class_time       <= '0;
      beats_classified <= '0;
    end else begin
      class_valid <= res_valid;
      if (res_valid) begin
        class_out        <= beat_class_e'(arg);
        class_sums       <= sums;
        class_time       <= res_time;
        beats_classified <= beats_classified + 16'd1;
      end
    end
  end

  if (!RATE_CODED) begin : g_binary
    // ---------------- feature extraction ----------------
    logic [TIME_BITS-1:0]          tcount;
    logic                          rr_valid;
    rr_feat_t                      rr_feat;
    logic [TIME_BITS-1:0]          rr_r0;
    logic                          pend;
    rr_feat_t                      pend_rr;
    logic [TIME_BITS-1:0]          pend_r0;
    logic                          m_start, m_busy, m_done;
    logic [BUF_AW-1:0]             m_addr;
    logic [SAMPLE_BITS-1:0]        m_data;
    morph_feat_t                   m_feat;
    rr_feat_t                      cur_rr;
    logic [TIME_BITS-1:0]          cur_r0;
    logic                          x_valid;
    feature_vec_t                  x_reg;
    logic [WIDTH-1:0]              net_y;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) tcount <= '0;
      else if (sample_valid) tcount <= tcount + TIME_BITS'(1);
    end

    ecg_sample_buffer #(.AW(BUF_AW), .DW(SAMPLE_BITS)) u_buf (
      .clk(clk), .we(sample_valid), .waddr(tcount[BUF_AW-1:0]), .wdata(sample),
      .raddr(m_addr), .rdata(m_data)
    );

    rr_features #(.NLOC(NLOC)) u_rr (
      .clk(clk), .rst_n(rst_n),
      .peak_valid(sample_valid && peak_flag), .peak_time(tcount),
      .feat_valid(rr_valid), .feat(rr_feat), .r0_time(rr_r0)
    );

    // The beat may start once samples up to R0 + LONG_HALF - 1 are stored.
    assign m_start = pend && !m_busy && (tcount >= pend_r0 + TIME_BITS'(LONG_HALF));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        pend          <= 1'b0;
        pend_rr       <= '0;
        pend_r0       <= '0;
        cur_rr        <= '0;
        cur_r0        <= '0;
        beats_dropped <= '0;
      end else begin
        if (m_start) begin
          cur_rr <= pend_rr;
          cur_r0 <= pend_r0;
        end
        if (rr_valid) begin
          if (pend && !m_start) beats_dropped <= beats_dropped + 16'd1;
          pend    <= 1'b1;
          pend_rr <= rr_feat;
          pend_r0 <= rr_r0;
        end else if (m_start) begin
          pend <= 1'b0;
        end
      end
    end

    beat_morphology #(.AW(BUF_AW)) u_morph (
      .clk(clk), .rst_n(rst_n), .start(m_start), .r0_time(pend_r0),
      .rd_addr(m_addr), .rd_data(m_data), .busy(m_busy), .done(m_done),
      .feat(m_feat)
    );

    // ---------------- classification, one clock ----------------
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        x_valid  <= 1'b0;
        x_reg    <= '0;
        res_time <= '0;
      end else begin
        x_valid <= m_done;
        if (m_done) begin
          x_reg    <= '{rr: cur_rr, morph: m_feat, delta: delta_bits};
          res_time <= cur_r0;
        end
      end
    end

    lutn_network #(.N(N), .IN_BITS(FEATURE_BITS), .WIDTH(WIDTH), .LAYERS(LAYERS), .SEED(SEED))
    u_net (
      .clk(clk), .cfg_we(cfg_we), .cfg_layer(cfg_layer), .cfg_idx(cfg_idx),
      .cfg_table(cfg_table), .x(x_reg), .y(net_y)
    );

    class_popcount #(.WIDTH(WIDTH), .CLASSES(NUM_CLASSES), .EW(1), .SW(SW)) u_pop (
      .x(net_y), .sum(sums)
    );

    assign res_valid = x_valid;
    assign features  = x_reg;

  end else begin : g_rate
    // ---------------- rate-coded inference ----------------
    localparam int unsigned STW = $clog2(RATE_STEPS + 1);
    logic [STW-1:0]              steps_left;
    logic                        running, fin;
    logic [RATE_FEATURES-1:0]    bits;
    logic [WIDTH-1:0]            net_y;
    logic [WIDTH-1:0][7:0]       counts;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        steps_left <= '0;
        running    <= 1'b0;
        fin        <= 1'b0;
        res_time   <= '0;
      end else begin
        fin <= 1'b0;
        if (rate_start && !running) begin
          running    <= 1'b1;
          steps_left <= STW'(RATE_STEPS);
          res_time   <= res_time + TIME_BITS'(1);
        end else if (running) begin
          if (steps_left == STW'(1)) begin
            running <= 1'b0;
            fin     <= 1'b1;
          end
          steps_left <= steps_left - STW'(1);
        end
      end
    end

    rate_encoder #(.F(RATE_FEATURES), .PW(RATE_PW)) u_enc (
      .clk(clk), .rst_n(rst_n), .reseed(rate_start && !running), .step(running),
      .value(rate_features), .bits(bits)
    );

    lutn_network #(.N(N), .IN_BITS(RATE_FEATURES), .WIDTH(WIDTH), .LAYERS(LAYERS), .SEED(SEED))
    u_net (
      .clk(clk), .cfg_we(cfg_we), .cfg_layer(cfg_layer), .cfg_idx(cfg_idx),
      .cfg_table(cfg_table), .x(bits), .y(net_y)
    );

    spike_counter #(.W(WIDTH), .CW(8)) u_cnt (
      .clk(clk), .rst_n(rst_n), .clear(rate_start && !running), .en(running),
      .x(net_y), .count(counts)
    );

    class_popcount #(.WIDTH(WIDTH), .CLASSES(NUM_CLASSES), .EW(8), .SW(SW)) u_pop (
      .x(counts), .sum(sums)
    );

    assign res_valid     = fin;
    assign features      = '0;
    assign beats_dropped = '0;
  end
endmodule
