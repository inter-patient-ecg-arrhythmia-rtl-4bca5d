// rr_features: rhythm features of a heartbeat from its R-peak times.
//
// The block keeps the times of the last five R peaks, R_m3, R_m2, R_m1, R_0
// and R_p1, and once five are known it computes the features of beat R_0
// each time a new peak arrives:
//   RR1 = R_p1 - R_0, RR2 = R_0 - R_m1, RR3 = R_m1 - R_m2, RR4 = R_m2 - R_m3
//     (in samples, saturated at 2047), each sent on as an 8-bit code RR/4
//     saturated at 255;
//   d_rr_p = RR1 > RR2 and d_rr_m = RR2 > RR3;
//   local RR statistics: the last NLOC (500) RR2 values sit in a circular
//     buffer with a running sum S1 and sum of squares S2 that are updated by
//     one add and one subtract per beat instead of being recomputed. With c
//     values in the window (c < NLOC while it fills), mean m = S1/c and
//     variance s^2 = (c*S2 - S1^2)/c^2;
//   loc_cv[1] = s/m > 0.5, loc_cv[0] = s/m > 0.1;
//   rr_ratio[1] = RR1/m < 0.5, rr_ratio[0] = RR1/m < 0.25;
//   tachy = m < 216 samples, i.e. a local rate above 100 beats per minute at
//     360 samples per second.
// All comparisons are made exactly in integers by cross-multiplying, so no
// divider or square root is needed. The window includes the current beat.
// The RR/4 code, the saturation, the window's start-up and the use of the
// mean local RR for the tachycardia bit are this design's choices.
//
// Timing: peak_valid/peak_time are sampled on a rising edge; the window is
// updated on the next edge and feat_valid is high for one cycle on the edge
// after that, with feat and the time of R_0 (r0_time). Peaks must be at
// least three cycles apart.
module rr_features
  import ecg_lutn_pkg::*;
#(
  parameter int unsigned NLOC      = 500,
  parameter int unsigned FS        = 360,
  parameter int unsigned TACHY_BPM = 100
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 peak_valid,
  input  logic [TIME_BITS-1:0] peak_time,
  output logic                 feat_valid,
  output rr_feat_t             feat,
  output logic [TIME_BITS-1:0] r0_time
);
  localparam int unsigned RR_MAX  = (1 << RR_BITS) - 1;
  localparam int unsigned TACHY_RR = (FS * 60) / TACHY_BPM;   // 216 samples
  localparam int unsigned AW = $clog2(NLOC);
  localparam int unsigned CW = $clog2(NLOC + 1);

  typedef enum logic [1:0] {S_IDLE, S_UPDATE, S_OUT} state_e;
  state_e state;

  logic [TIME_BITS-1:0] pk [5];     // 0 = R_m3 ... 3 = R_0, 4 = R_p1
  logic [2:0]           npk;
  logic [RR_BITS-1:0]   rr [4];     // rr[0] = RR1 ... rr[3] = RR4
  logic [RR_BITS-1:0]   win [NLOC];
  logic [AW-1:0]        wptr;
  logic [CW-1:0]        cnt;
  logic [31:0]          s1;
  logic [47:0]          s2;

  function automatic logic [RR_BITS-1:0] sat_rr(input logic [TIME_BITS-1:0] d);
    return (d > TIME_BITS'(RR_MAX)) ? RR_BITS'(RR_MAX) : d[RR_BITS-1:0];
  endfunction

  function automatic logic [7:0] code8(input logic [RR_BITS-1:0] v);
    logic [RR_BITS-3:0] q;
    q = v[RR_BITS-1:2];
    return (q > 255) ? 8'hff : q[7:0];
  endfunction

  // Window statistics after the update (registered values).
  logic [63:0] s1sq, var_n, c64, rr1c;
  always_comb begin
    c64   = 64'(cnt);
    s1sq  = 64'(s1) * 64'(s1);
    var_n = c64 * 64'(s2) - s1sq;
    rr1c  = 64'(rr[0]) * c64;
  end

  // RR2 window memory (no reset; only entries below cnt are ever read).
  always_ff @(posedge clk) begin
    if (state == S_UPDATE) win[wptr] <= rr[1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      npk        <= '0;
      wptr       <= '0;
      cnt        <= '0;
      s1         <= '0;
      s2         <= '0;
      feat_valid <= 1'b0;
      feat       <= '0;
      r0_time    <= '0;
      for (int i = 0; i < 5; i++) pk[i] <= '0;
      for (int i = 0; i < 4; i++) rr[i] <= '0;
    end else begin
      feat_valid <= 1'b0;
      case (state)
        S_IDLE: if (peak_valid) begin
          for (int i = 0; i < 4; i++) pk[i] <= pk[i+1];
          pk[4] <= peak_time;
          rr[0] <= sat_rr(peak_time - pk[4]);
          rr[1] <= sat_rr(pk[4] - pk[3]);
          rr[2] <= sat_rr(pk[3] - pk[2]);
          rr[3] <= sat_rr(pk[2] - pk[1]);
          if (npk != 3'd5) npk <= npk + 3'd1;
          // Five peaks are known once this one is the fifth.
          if (npk >= 3'd4) state <= S_UPDATE;
        end
        S_UPDATE: begin
          // Replace the oldest RR2 when the window is full.
          if (32'(cnt) == NLOC) begin
            s1 <= s1 + 32'(rr[1]) - 32'(win[wptr]);
            s2 <= s2 + 48'(rr[1]) * 48'(rr[1]) - 48'(win[wptr]) * 48'(win[wptr]);
          end else begin
            s1  <= s1 + 32'(rr[1]);
            s2  <= s2 + 48'(rr[1]) * 48'(rr[1]);
            cnt <= cnt + CW'(1);
          end
          wptr      <= (32'(wptr) == NLOC - 1) ? '0 : wptr + AW'(1);
          state     <= S_OUT;
        end
        S_OUT: begin
          feat.rr1         <= code8(rr[0]);
          feat.rr2         <= code8(rr[1]);
          feat.rr3         <= code8(rr[2]);
          feat.rr4         <= code8(rr[3]);
          feat.d_rr_p      <= rr[0] > rr[1];
          feat.d_rr_m      <= rr[1] > rr[2];
          feat.loc_cv[1]   <= 64'd4   * var_n > s1sq;
          feat.loc_cv[0]   <= 64'd100 * var_n > s1sq;
          feat.rr_ratio[1] <= 64'd2 * rr1c < 64'(s1);
          feat.rr_ratio[0] <= 64'd4 * rr1c < 64'(s1);
          feat.tachy       <= 64'(s1) < 64'(TACHY_RR) * c64;
          r0_time          <= pk[3];
          feat_valid       <= 1'b1;
          state            <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A peak may only arrive while the block is idle.
  a_peak_spacing: assert property (@(posedge clk) disable iff (!rst_n)
    peak_valid |-> state == S_IDLE);
endmodule
