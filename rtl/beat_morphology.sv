// beat_morphology: shape features of one heartbeat from the stored ECG.
//
// Given the time of the beat's R peak R_0, the block reads the 400 samples
// R_0-200 .. R_0+199 from the sample buffer, one per clock. The inner 180,
// R_0-90 .. R_0+89, form the beat window beat[0..179] with R_0 at beat[90].
// From them it computes
//   M_k = |ecg[R_0] - min(beat[a..b])| / norm, norm = max(beat) - min(beat),
//     for M1 over beat[0..39], M2 over beat[65..84], M4 over beat[150..179]
//     (the paper's M3 over beat[95..104] is not part of the feature vector);
//     each is coded in 3 bits as min(7, floor(8*M));
//   cf1, cf2 = peak / RMS, the crest factor of the 180-sample beat window and
//     of the 400-sample window, with peak = max |x| of the window; each is
//     coded in 8 bits as min(255, floor(16*cf)).
// The window positions, feature definitions and bit counts follow the
// paper. The codes (uniform 3-bit quantisation of M, 4 fractional bits for
// the crest factors), samples being signed around the ADC zero, and the
// centring of the beat window are this design's choices. The crest factor
// needs no square root: the code is the largest q with
// q^2 * sum(x^2) <= 256 * L * peak^2 (L the window length), found by an
// 8-step bit-by-bit search.
//
// Interface and timing: start (with r0_time) is taken while idle; rd_addr is
// the buffer address of the wanted sample, whose value must be on rd_data
// one clock later (synchronous read). done is high for one cycle, with feat,
// 400 + 1 + 8 + 1 cycles after start. busy is high in between.
module beat_morphology
  import ecg_lutn_pkg::*;
#(
  parameter int unsigned AW = 10
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [TIME_BITS-1:0]          r0_time,
  output logic [AW-1:0]                 rd_addr,
  input  logic signed [SAMPLE_BITS-1:0] rd_data,
  output logic                          busy,
  output logic                          done,
  output morph_feat_t                   feat
);
  localparam int unsigned B0 = LONG_HALF - BEAT_HALF;   // 110: beat[0] in the sweep

  typedef enum logic [1:0] {S_IDLE, S_SWEEP, S_SEARCH, S_DONE} state_e;
  state_e state;

  logic [TIME_BITS-1:0]          base;
  logic [8:0]                    k;        // sweep index of the address issued
  logic                          dv;       // rd_data holds sample kd
  logic [8:0]                    kd;
  logic [3:0]                    sbit;

  logic signed [SAMPLE_BITS-1:0] bmax, bmin, min1, min2, min4, x0;
  logic [SAMPLE_BITS-1:0]        peak_b, peak_l;
  logic [31:0]                   sq_b, sq_l;
  logic [7:0]                    q1, q2;

  assign busy    = (state != S_IDLE);
  assign rd_addr = AW'(base + TIME_BITS'(k));

  // Absolute value and square of the sample on rd_data.
  logic [SAMPLE_BITS-1:0] ax;
  logic [31:0]            x2;
  logic [8:0]             b;
  always_comb begin
    ax = rd_data[SAMPLE_BITS-1] ? SAMPLE_BITS'(-rd_data) : SAMPLE_BITS'(rd_data);
    x2 = 32'(ax) * 32'(ax);
    b  = kd - 9'(B0);
  end

  // 3-bit code of |x0 - mn| / norm.
  function automatic logic [2:0] mcode(input logic signed [SAMPLE_BITS-1:0] xr,
                                       input logic signed [SAMPLE_BITS-1:0] mn,
                                       input logic [SAMPLE_BITS:0] norm);
    logic signed [SAMPLE_BITS+1:0] d;
    logic [SAMPLE_BITS+4:0] d8;
    logic [2:0] q;
    d  = (SAMPLE_BITS+2)'(xr) - (SAMPLE_BITS+2)'(mn);
    d8 = (SAMPLE_BITS+5)'(d < 0 ? -d : d) << 3;
    q  = 3'd0;
    if (norm != 0)
      for (int t = 1; t < 8; t++)
        if ((SAMPLE_BITS+5)'(norm) * (SAMPLE_BITS+5)'(t) <= d8) q = 3'(t);
    return q;
  endfunction

  // Trial of the crest-factor search: keep bit if q^2 * sq <= 256 * L * peak^2.
  function automatic logic cf_ok(input logic [7:0] q, input logic [31:0] sq,
                                 input logic [SAMPLE_BITS-1:0] pk,
                                 input int unsigned len);
    logic [63:0] lhs, rhs;
    lhs = 64'(q) * 64'(q) * 64'(sq);
    rhs = 64'd256 * 64'(len) * 64'(pk) * 64'(pk);
    return lhs <= rhs;
  endfunction

  logic [7:0] t1, t2;
  always_comb begin
    t1 = q1 | (8'd1 << sbit[2:0]);
    t2 = q2 | (8'd1 << sbit[2:0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      base   <= '0;
      k      <= '0;
      kd     <= '0;
      dv     <= 1'b0;
      sbit   <= '0;
      done   <= 1'b0;
      feat   <= '0;
      bmax   <= '0; bmin <= '0; min1 <= '0; min2 <= '0; min4 <= '0; x0 <= '0;
      peak_b <= '0; peak_l <= '0; sq_b <= '0; sq_l <= '0;
      q1     <= '0; q2 <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          base   <= r0_time - TIME_BITS'(LONG_HALF);
          k      <= '0;
          dv     <= 1'b0;
          peak_b <= '0; peak_l <= '0; sq_b <= '0; sq_l <= '0;
          bmax   <= {1'b1, {(SAMPLE_BITS-1){1'b0}}};   // most negative
          bmin   <= {1'b0, {(SAMPLE_BITS-1){1'b1}}};   // most positive
          min1   <= {1'b0, {(SAMPLE_BITS-1){1'b1}}};
          min2   <= {1'b0, {(SAMPLE_BITS-1){1'b1}}};
          min4   <= {1'b0, {(SAMPLE_BITS-1){1'b1}}};
          state  <= S_SWEEP;
        end
        S_SWEEP: begin
          // Issue the next address while the previous sample comes back.
          dv <= (32'(k) < LONG_LEN);
          kd <= k;
          if (32'(k) < LONG_LEN) k <= k + 9'd1;
          if (dv) begin
            if (ax > peak_l) peak_l <= ax;
            sq_l <= sq_l + x2;
            if (32'(kd) >= B0 && 32'(kd) < B0 + BEAT_LEN) begin
              if (ax > peak_b)      peak_b <= ax;
              sq_b <= sq_b + x2;
              if (rd_data > bmax)   bmax <= rd_data;
              if (rd_data < bmin)   bmin <= rd_data;
              if (b < 9'd40 && rd_data < min1)                  min1 <= rd_data;
              if (b >= 9'd65 && b < 9'd85 && rd_data < min2)    min2 <= rd_data;
              if (b >= 9'd150 && b < 9'd180 && rd_data < min4)  min4 <= rd_data;
              if (b == 9'(BEAT_HALF))                            x0 <= rd_data;
            end
            if (32'(kd) == LONG_LEN - 1) begin
              state <= S_SEARCH;
              sbit  <= 4'd7;
              q1    <= '0;
              q2    <= '0;
            end
          end
        end
        S_SEARCH: begin
          if (cf_ok(t1, sq_b, peak_b, BEAT_LEN)) q1 <= t1;
          if (cf_ok(t2, sq_l, peak_l, LONG_LEN)) q2 <= t2;
          if (sbit == 4'd0) state <= S_DONE;
          else              sbit  <= sbit - 4'd1;
        end
        S_DONE: begin
          feat.m1  <= mcode(x0, min1, (SAMPLE_BITS+1)'(bmax) - (SAMPLE_BITS+1)'(bmin));
          feat.m2  <= mcode(x0, min2, (SAMPLE_BITS+1)'(bmax) - (SAMPLE_BITS+1)'(bmin));
          feat.m4  <= mcode(x0, min4, (SAMPLE_BITS+1)'(bmax) - (SAMPLE_BITS+1)'(bmin));
          feat.cf1 <= (sq_b == 0) ? 8'd0 : q1;
          feat.cf2 <= (sq_l == 0) ? 8'd0 : q2;
          done     <= 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
