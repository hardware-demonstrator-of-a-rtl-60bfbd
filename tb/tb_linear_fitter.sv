// tb_linear_fitter: random lines with 2..12 hits scattered by up to +-0.3 mm;
// slope, intercept and chi2 are compared with a real-valued least-squares
// fit of the same points (tolerances: 2/4096 in slope, 2 LSB in intercept,
// chi2 within 3% + a rounding allowance). Also checks the degenerate cases
// (one hit, all hits at one z: found = 0) and the fixed latency.
module tb_linear_fitter;
  import mtfp_pkg::*;
  localparam int MAXH = N_HITS;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;

  logic start, busy, done;
  logic hv [MAXH];
  logic signed [LEN_W:0] yh [MAXH], zh [MAXH];
  segment_t fit;

  linear_fitter dut (.*);

  int checks = 0, failures = 0, n_degen = 0;
  localparam int LATENCY = 23;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0;
    for (int h = 0; h < MAXH; h++) begin hv[h] = 0; yh[h] = 0; zh[h] = 0; end
    repeat (3) @(posedge clk); #1;
    rst = 0;
    for (int ev = 0; ev < 300; ev++) begin
      automatic real m = (real'($urandom_range(3000)) - 1500.0) / 1000.0;
      automatic real b = (real'($urandom_range(4000)) - 2000.0);
      automatic int  nh = (ev % 10 == 0) ? 1 : 2 + $urandom_range(10);
      automatic bit  samez = (ev % 10 == 5);
      automatic real n = 0, sz = 0, sy = 0, szz = 0, szy = 0, d, em, eb, echi = 0;
      automatic int  t = 0;
      for (int h = 0; h < MAXH; h++) hv[h] = 0;
      for (int i = 0; i < nh; i++) begin
        automatic int h = $urandom_range(MAXH - 1);
        automatic int z;
        while (hv[h]) h = (h + 1) % MAXH;
        z = samez ? 300 : $urandom_range(14000) - 7000;
        hv[h] = 1;
        zh[h] = 17'(z);
        yh[h] = 17'($rtoi(m * z + b + real'($urandom_range(20)) - 10.0));
      end
      for (int h = 0; h < MAXH; h++) if (hv[h]) begin
        n += 1; sz += zh[h]; sy += yh[h]; szz += real'(zh[h]) * zh[h]; szy += real'(zh[h]) * yh[h];
      end
      d = n * szz - sz * sz;
      start = 1; @(posedge clk); #1; start = 0;
      while (!done) begin @(posedge clk); #1; t++; end
      checks++;
      if (nh < 2 || samez) begin
        n_degen++;
        if (fit.found) begin failures++; $display("FAIL ev=%0d: degenerate fit found", ev); end
      end else begin
        em = (n * szy - sy * sz) / d;
        eb = (sy * szz - szy * sz) / d;
        for (int h = 0; h < MAXH; h++) if (hv[h]) begin
          automatic real r = yh[h] - (real'(fit.m) / 4096.0) * zh[h] - fit.b;
          echi += r * r;
        end
        if (!fit.found || (real'(fit.m) / 4096.0 - em) > 2.0 / 4096 || (em - real'(fit.m) / 4096.0) > 2.0 / 4096
            || (real'(fit.b) - eb) > 2.0 || (eb - real'(fit.b)) > 2.0
            || (real'(fit.chi2) - echi) > 0.03 * echi + 4.0 * n * 20.0
            || (echi - real'(fit.chi2)) > 0.03 * echi + 4.0 * n * 20.0
            || int'(fit.n_hits) != nh) begin
          failures++;
          $display("FAIL ev=%0d: m %f/%f b %f/%f chi2 %0d/%f n %0d/%0d", ev, real'(fit.m) / 4096.0, em,
                   real'(fit.b), eb, fit.chi2, echi, fit.n_hits, nh);
        end
      end
      checks++;
      if (t + 1 != LATENCY) begin failures++; $display("FAIL latency %0d", t + 1); end
    end
    checks++;
    if (n_degen == 0) begin failures++; $display("FAIL: no degenerate case"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
