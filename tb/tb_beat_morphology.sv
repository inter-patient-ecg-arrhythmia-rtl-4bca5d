// tb_beat_morphology: synthetic beats (noise, a P wave, a QRS spike and
// dips) are placed in a 1024-sample circular memory, including beats whose
// window wraps around the end. The five features are compared with integer
// and real-arithmetic models of their definitions, and done must come 410
// clocks after start.
module tb_beat_morphology;
  import ecg_lutn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, done;
  logic [31:0] r0;
  logic [9:0] addr;
  logic signed [10:0] rdata;
  morph_feat_t f;
  logic signed [10:0] mem [1024];
  int checks = 0, failures = 0;

  beat_morphology #(.AW(10)) dut (.clk(clk), .rst_n(rst_n), .start(start), .r0_time(r0),
                                  .rd_addr(addr), .rd_data(rdata), .busy(busy), .done(done),
                                  .feat(f));

  always_ff @(posedge clk) rdata <= mem[addr];

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int mc(int x0, int mn, int norm);
    int d, q;
    d = x0 - mn; if (d < 0) d = -d;
    if (norm == 0) return 0;
    q = (8 * d) / norm;
    return q > 7 ? 7 : q;
  endfunction

  function automatic int cfc(int pk, real sq, int len);
    real cf; int q;
    if (sq == 0) return 0;
    cf = pk / $sqrt(sq / len);
    q = int'($floor(cf * 16.0));
    return q > 255 ? 255 : q;
  endfunction

  initial begin
    rst_n = 0; start = 0; r0 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 12; b++) begin
      int rpk, amp, x0, bmax, bmin, m1, m2, m4, pb, pl, cyc;
      real sqb, sql;
      morph_feat_t e;
      rpk = (b < 4) ? 300 + 97 * b : 800 + 53 * b;     // later ones wrap past 1023
      amp = 200 + $urandom % 800;
      for (int i = 0; i < 1024; i++) mem[i] = 11'($signed($urandom % 41) - 20);
      for (int d = -200; d < 200; d++) begin
        int v, a;
        a = (rpk + d) & 1023;
        v = mem[a];
        if (d > -60 && d < -40) v += amp / 8;                 // P wave
        if (d > -4 && d < 4)    v += amp - 120 * (d < 0 ? -d : d);  // QRS
        if (d >= 4 && d < 12)   v -= amp / 3;                 // S dip
        if (d > 60 && d < 90)   v += amp / 5 - (b % 3) * 30;  // T wave
        if (b == 11 && d == 0)  v = -1024;                    // inverted extreme
        if (v > 1023) v = 1023;
        if (v < -1024) v = -1024;
        mem[a] = 11'(v);
      end
      // Reference.
      x0 = mem[rpk & 1023]; bmax = -2000; bmin = 2000; m1 = 2000; m2 = 2000; m4 = 2000;
      pb = 0; pl = 0; sqb = 0; sql = 0;
      for (int d = -200; d < 200; d++) begin
        int v, a, bi;
        v = mem[(rpk + d) & 1023];
        a = v < 0 ? -v : v;
        if (a > pl) pl = a;
        sql += real'(v) * v;
        bi = d + 90;
        if (bi >= 0 && bi < 180) begin
          if (a > pb) pb = a;
          sqb += real'(v) * v;
          if (v > bmax) bmax = v;
          if (v < bmin) bmin = v;
          if (bi < 40 && v < m1) m1 = v;
          if (bi >= 65 && bi < 85 && v < m2) m2 = v;
          if (bi >= 150 && v < m4) m4 = v;
        end
      end
      e.m1 = 3'(mc(x0, m1, bmax - bmin));
      e.m2 = 3'(mc(x0, m2, bmax - bmin));
      e.m4 = 3'(mc(x0, m4, bmax - bmin));
      e.cf1 = 8'(cfc(pb, sqb, 180));
      e.cf2 = 8'(cfc(pl, sql, 400));
      @(negedge clk); start = 1; r0 = 32'(rpk + 4096 * b);
      @(negedge clk); start = 0;
      cyc = 0;
      while (!done && cyc < 1000) begin @(posedge clk); #1; cyc++; end
      checks += 2;
      if (f !== e) begin
        failures++;
        $display("FAIL beat %0d got m=%0d,%0d,%0d cf=%0d,%0d exp m=%0d,%0d,%0d cf=%0d,%0d", b,
                 f.m1, f.m2, f.m4, f.cf1, f.cf2, e.m1, e.m2, e.m4, e.cf1, e.cf2);
      end
      if (cyc != 410) begin failures++; $display("FAIL latency %0d", cyc); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
