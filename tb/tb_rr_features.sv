// tb_rr_features: random R-peak sequences (with a fast stretch for the
// tachycardia bit); each beat's features are checked against a model using
// real arithmetic over a window of the last NLOC RR2 values, and the result
// must appear exactly three clock edges after the edge that samples the peak.
module tb_rr_features;
  import ecg_lutn_pkg::*;
  localparam int NLOC = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, pv;
  logic [31:0] pt;
  logic fv;
  rr_feat_t f;
  logic [31:0] r0;
  int checks = 0, failures = 0;
  int peaks [$];
  int rr2win [$];
  int nbeats = 0, n_tachy = 0, n_full = 0;

  rr_features #(.NLOC(NLOC)) dut (.clk(clk), .rst_n(rst_n), .peak_valid(pv), .peak_time(pt),
                                  .feat_valid(fv), .feat(f), .r0_time(r0));

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat(int v); return v > 2047 ? 2047 : v; endfunction
  function automatic int code(int v); return (v / 4) > 255 ? 255 : v / 4; endfunction

  initial begin
    int t;
    rst_n = 0; pv = 0; pt = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    t = 1000;
    for (int b = 0; b < 60; b++) begin
      int rr;
      if (b >= 20 && b < 32) rr = 150 + $urandom % 40;          // fast
      else if (b == 40)      rr = 1500 + $urandom % 1000;       // long pause, saturates
      else                   rr = 250 + $urandom % 200;
      t += rr;
      @(negedge clk); pv = 1; pt = 32'(t);
      @(negedge clk); pv = 0;
      peaks.push_back(t);
      if (peaks.size() >= 5) begin
        int p1, p0, m1, m2, m3, rr1, rr2, rr3, rr4, c;
        real m, s, sum, sq, cv;
        p1 = peaks[$]; p0 = peaks[$-1]; m1 = peaks[$-2]; m2 = peaks[$-3]; m3 = peaks[$-4];
        rr1 = sat(p1 - p0); rr2 = sat(p0 - m1); rr3 = sat(m1 - m2); rr4 = sat(m2 - m3);
        rr2win.push_back(rr2);
        if (rr2win.size() > NLOC) void'(rr2win.pop_front());
        c = rr2win.size();
        if (c == NLOC) n_full++;
        sum = 0; sq = 0;
        foreach (rr2win[i]) begin sum += rr2win[i]; sq += real'(rr2win[i]) * rr2win[i]; end
        m = sum / c;
        s = (sq / c - m * m);
        s = (s > 0) ? $sqrt(s) : 0.0;
        cv = s / m;
        // Sampled on edge 1, window updated on edge 2, result on edge 3.
        @(posedge clk); @(posedge clk); #1;
        checks++;
        if (!fv) begin failures++; $display("FAIL no feat_valid at beat %0d", b); end
        else begin
          rr_feat_t e;
          e.rr1 = 8'(code(rr1)); e.rr2 = 8'(code(rr2)); e.rr3 = 8'(code(rr3)); e.rr4 = 8'(code(rr4));
          e.d_rr_p = rr1 > rr2; e.d_rr_m = rr2 > rr3;
          e.loc_cv = {cv > 0.5, cv > 0.1};
          e.rr_ratio = {rr1 / m < 0.5, rr1 / m < 0.25};
          e.tachy = m < 216.0;
          n_tachy += e.tachy;
          checks += 2;
          if (f !== e) begin failures++; $display("FAIL beat %0d got %h exp %h", b, f, e); end
          if (r0 != 32'(p0)) begin failures++; $display("FAIL r0 %0d/%0d", r0, p0); end
          nbeats++;
        end
      end
      repeat ($urandom % 4) @(negedge clk);
    end
    checks++;
    if (n_tachy == 0 || n_full == 0) begin failures++; $display("FAIL coverage tachy=%0d full=%0d", n_tachy, n_full); end
    $display("beats=%0d tachy=%0d full_window=%0d", nbeats, n_tachy, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
