// tb_ecg_classifier_full: end-to-end test of the classifier at its default
// size (one layer of 2000 6-input LUTs, 500-beat RR window, binary mode).
// Random 64-bit tables are loaded into all 2000 LUTs, about ten beats of a
// synthetic ECG are streamed in with R-peak markers, and every classified
// beat is checked: its R-peak time, its RR codes, its delta bits and its
// class sums and class against a software model of the network run on the
// registered feature vector. A burst of close peaks must cause one dropped
// beat.
module tb_ecg_classifier_full;
  import ecg_lutn_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 6, W = 2000, L = 1, SEED = 1, NLOC = 500, G = W / 4;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  logic sv, pf;
  logic signed [10:0] smp;
  logic [73:0] delta;
  logic we;
  logic cl;
  logic [10:0] ci;
  logic [63:0] ct;
  logic cv; beat_class_e co; logic [3:0][8:0] cs; logic [31:0] ctime;
  feature_vec_t fvec; logic [15:0] nclass, ndrop;
  logic [63:0] tabs [L][W];

  int checks = 0, failures = 0;
  int peaks [$];
  int n_beats = 0, n_full = 0;

  ecg_classifier_top dut (
    .clk(clk), .rst_n(rst_n), .sample_valid(sv), .sample(smp), .peak_flag(pf),
    .delta_bits(delta), .rate_start(1'b0), .rate_features('0),
    .cfg_we(we), .cfg_layer(cl), .cfg_idx(ci), .cfg_table(ct),
    .class_valid(cv), .class_out(co), .class_sums(cs), .class_time(ctime),
    .features(fvec), .beats_classified(nclass), .beats_dropped(ndrop));

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
        a[ly+1][n] = ref_lut(N, tabs[ly][n], l);
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
    delta = {$urandom, $urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int ly = 0; ly < L; ly++)
      for (int n = 0; n < W; n++) begin
        tabs[ly][n] = {$urandom, $urandom};
        @(negedge clk); we = 1; cl = 1'(ly); ci = 11'(n); ct = tabs[ly][n];
      end
    @(negedge clk); we = 0;

    // ---- binary mode: stream 30 beats, one sample every 2 clocks ----
    t = 0; next_pk = 300;
    while (t < 10 * 320) begin
      int d;
      d = t - (peaks.size() > 0 ? peaks[$] : -1000);
      smp = 11'($signed($urandom % 31) - 15);
      if (d >= 0 && d < 4) smp = 11'(600 - 100 * d);
      pf = (t == next_pk);
      if (pf) begin
        peaks.push_back(t);
        // A burst of three quick peaks around t = 5000 forces a drop.
        rr = (t > 1900 && t < 2200) ? 70 : 250 + $urandom % 120;
        next_pk = t + rr;
        delta = {$urandom, $urandom, $urandom};
      end
      sv = 1; @(negedge clk); sv = 0; pf = 0; @(negedge clk);
      t++;
    end
    repeat (1000) @(negedge clk);
    checks++;
    if (nclass != 16'(n_beats)) begin failures++; $display("FAIL beat counter %0d/%0d", nclass, n_beats); end

    $display("mechanisms: beats=%0d dropped=%0d", n_beats, ndrop);
    checks += 2;
    if (n_beats < 4) begin failures++; $display("FAIL too few beats"); end
    if (ndrop == 0)   begin failures++; $display("FAIL no drop"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
