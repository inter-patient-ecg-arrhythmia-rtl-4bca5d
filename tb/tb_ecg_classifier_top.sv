// tb_ecg_classifier_top: end-to-end test at reduced size.
//
// Binary instance (2 layers of 16 4-input LUTs, 8-beat RR window): random
// tables are loaded, a synthetic ECG with R-peak markers is streamed in, and
// every classified beat is checked: its R-peak time, its RR codes against
// the known peak times, and its class sums and class against a software
// model of the network run on the registered feature vector. A burst of
// closely spaced peaks must make the design drop a beat.
// Rate-coded instance (1 layer of 16 gates, 128 steps): with gate tables
// "True" for class V and "False" elsewhere, the V sum must be 4*128 and the
// class V, 129 clocks after start; with every gate passing x0 the sums must
// follow the input rates.
// Mechanisms counted: beats classified, beats dropped, full RR windows,
// rate-coded inferences.
module tb_ecg_classifier_top;
  import ecg_lutn_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 4, W = 16, L = 2, SEED = 3, NLOC = 8, G = W / 4;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  logic sv, pf;
  logic signed [10:0] smp;
  logic [73:0] delta;
  logic we;
  logic [1:0] cl;
  logic [3:0] ci;
  logic [15:0] ct;
  logic cv; beat_class_e co; logic [3:0][2:0] cs; logic [31:0] ctime;
  feature_vec_t fvec; logic [15:0] nclass, ndrop;
  logic [15:0] tabs [L][W];

  // rate-coded instance
  logic rstart, rwe;
  logic [88:0][7:0] rfeat;
  logic [3:0] rci; logic [3:0] rct;
  logic rcv; beat_class_e rco; logic [3:0][9:0] rcs; logic [31:0] rtime;
  feature_vec_t rfvec; logic [15:0] rncl, rndrop;

  int checks = 0, failures = 0;
  int peaks [$];
  int n_beats = 0, n_full = 0, n_rate = 0;

  ecg_classifier_top #(.N(N), .WIDTH(W), .LAYERS(L), .SEED(SEED), .NLOC(NLOC)) dut (
    .clk(clk), .rst_n(rst_n), .sample_valid(sv), .sample(smp), .peak_flag(pf),
    .delta_bits(delta), .rate_start(1'b0), .rate_features('0),
    .cfg_we(we), .cfg_layer(cl), .cfg_idx(ci), .cfg_table(ct),
    .class_valid(cv), .class_out(co), .class_sums(cs), .class_time(ctime),
    .features(fvec), .beats_classified(nclass), .beats_dropped(ndrop));

  ecg_classifier_top #(.N(2), .WIDTH(W), .LAYERS(1), .SEED(SEED), .RATE_CODED(1'b1)) dut_r (
    .clk(clk), .rst_n(rst_n), .sample_valid(1'b0), .sample('0), .peak_flag(1'b0),
    .delta_bits('0), .rate_start(rstart), .rate_features(rfeat),
    .cfg_we(rwe), .cfg_layer(1'b0), .cfg_idx(rci), .cfg_table(rct),
    .class_valid(rcv), .class_out(rco), .class_sums(rcs), .class_time(rtime),
    .features(rfvec), .beats_classified(rncl), .beats_dropped(rndrop));

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int code(int v); v = v > 2047 ? 2047 : v; return (v / 4) > 255 ? 255 : v / 4; endfunction

  // Software model of the binary network on feature vector x.
  task automatic check_beat();
    bit a [L+1][W > 138 ? W : 138];
    int sums [4];
    int best, bi, k;
    for (int i = 0; i < 138; i++) a[0][i] = fvec[i];
    for (int ly = 0; ly < L; ly++)
      for (int n = 0; n < W; n++) begin
        logic [5:0] l;
        l = '0;
        for (int j = 0; j < N; j++) l[j] = a[ly][ref_conn(SEED, ly, n, j, ly == 0 ? 138 : W)];
        a[ly+1][n] = ref_lut(N, 64'(tabs[ly][n]), l);
      end
    for (int c = 0; c < 4; c++) begin
      sums[c] = 0;
      for (int i = c * G; i < (c + 1) * G; i++) sums[c] += a[L][i];
    end
    best = sums[0]; bi = 0;
    for (int c = 1; c < 4; c++) if (sums[c] > best) begin best = sums[c]; bi = c; end
    checks++;
    if (co != beat_class_e'(bi) || cs[0] != sums[0] || cs[1] != sums[1] ||
        cs[2] != sums[2] || cs[3] != sums[3]) begin
      failures++;
      $display("FAIL class %0d exp %0d", co, bi);
    end
    // R peak time and RR codes of this beat.
    k = -1;
    foreach (peaks[i]) if (peaks[i] == int'(ctime)) k = i;
    checks++;
    if (k < 3 || k + 1 >= peaks.size()) begin
      failures++; $display("FAIL unknown beat time %0d", ctime);
    end else if (fvec.rr.rr1 != code(peaks[k+1] - peaks[k]) || fvec.rr.rr2 != code(peaks[k] - peaks[k-1]) ||
                 fvec.rr.rr3 != code(peaks[k-1] - peaks[k-2]) || fvec.rr.rr4 != code(peaks[k-2] - peaks[k-3])) begin
      failures++; $display("FAIL rr codes at %0d", ctime);
    end
    if (k >= NLOC + 3) n_full++;
    checks++;
    if (fvec.delta != delta) begin failures++; $display("FAIL delta bits"); end
    n_beats++;
  endtask

  always @(posedge clk) if (rst_n && cv) begin #1; check_beat(); end

  initial begin
    int t, next_pk, rr;
    rst_n = 0; sv = 0; pf = 0; smp = 0; we = 0; cl = 0; ci = 0; ct = 0;
    rstart = 0; rwe = 0; rci = 0; rct = 0; rfeat = '0;
    delta = {$urandom, $urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int ly = 0; ly < L; ly++)
      for (int n = 0; n < W; n++) begin
        tabs[ly][n] = 16'($urandom);
        @(negedge clk); we = 1; cl = 2'(ly); ci = 4'(n); ct = tabs[ly][n];
      end
    @(negedge clk); we = 0;

    // ---- binary mode: stream 30 beats, one sample every 2 clocks ----
    t = 0; next_pk = 300;
    while (t < 30 * 320) begin
      int d;
      d = t - (peaks.size() > 0 ? peaks[$] : -1000);
      smp = 11'($signed($urandom % 31) - 15);
      if (d >= 0 && d < 4) smp = 11'(600 - 100 * d);
      pf = (t == next_pk);
      if (pf) begin
        peaks.push_back(t);
        // A burst of three quick peaks around t = 5000 forces a drop.
        rr = (t > 5000 && t < 5300) ? 70 : 250 + $urandom % 120;
        next_pk = t + rr;
        delta = {$urandom, $urandom, $urandom};
      end
      sv = 1; @(negedge clk); sv = 0; pf = 0; @(negedge clk);
      t++;
    end
    repeat (1000) @(negedge clk);
    checks++;
    if (nclass != 16'(n_beats)) begin failures++; $display("FAIL beat counter %0d/%0d", nclass, n_beats); end

    // ---- rate-coded mode ----
    for (int n = 0; n < W; n++) begin
      @(negedge clk); rwe = 1; rci = 4'(n); rct = (n / G == 2) ? 4'd15 : 4'd0;
    end
    @(negedge clk); rwe = 0;
    for (int i = 0; i < 89; i++) rfeat[i] = 8'($urandom);
    begin
      int cyc;
      rstart = 1; @(negedge clk); rstart = 0;
      cyc = 1;
      while (!rcv && cyc < 1000) begin @(posedge clk); #1; cyc++; end
      checks += 2;
      if (rco != CLASS_V || rcs[2] != 4 * 128 || rcs[0] != 0) begin
        failures++; $display("FAIL rate const class=%0d sums=%0d,%0d", rco, rcs[0], rcs[2]);
      end
      if (cyc != 130) begin failures++; $display("FAIL rate latency %0d", cyc); end
      n_rate++;
    end
    // Every gate passes x0: class sums follow the rates of the wired inputs.
    for (int n = 0; n < W; n++) begin
      @(negedge clk); rwe = 1; rci = 4'(n); rct = 4'd3;
    end
    @(negedge clk); rwe = 0;
    repeat (2) begin
      real expect_s [4];
      for (int c = 0; c < 4; c++) expect_s[c] = 0;
      for (int n = 0; n < W; n++) expect_s[n / G] += 128.0 * rfeat[ref_conn(SEED, 0, n, 0, 89)] / 256.0;
      rstart = 1; @(negedge clk); rstart = 0;
      while (!rcv) begin @(posedge clk); #1; end
      for (int c = 0; c < 4; c++) begin
        checks++;
        if (rcs[c] > expect_s[c] + 40 || rcs[c] < expect_s[c] - 40) begin
          failures++; $display("FAIL rate sum c=%0d %0d vs %f", c, rcs[c], expect_s[c]);
        end
      end
      n_rate++;
      for (int i = 0; i < 89; i++) rfeat[i] = 8'($urandom);
      @(negedge clk);
    end

    $display("mechanisms: beats=%0d dropped=%0d full_rr_window=%0d rate_inferences=%0d",
             n_beats, ndrop, n_full, n_rate);
    checks += 4;
    if (n_beats < 10) begin failures++; $display("FAIL too few beats"); end
    if (ndrop == 0)   begin failures++; $display("FAIL no drop"); end
    if (n_full == 0)  begin failures++; $display("FAIL RR window never full"); end
    if (n_rate < 3)   begin failures++; $display("FAIL rate runs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
