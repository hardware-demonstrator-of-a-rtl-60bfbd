// tb_seed_scan: segment-finding efficiency and resolution of one chamber as a
// function of the seed's angular error, the scan of the efficiency and
// resolution plots (seed uncertainty 0 to 100 mrad). For each Gaussian sigma
// of the seed angle error, N_TRK random tracks (slope within +-45 degrees,
// intercept within +-50 mm, seed intercept error uniform within +-3 mm) are
// sent through the segment finder at its default parameters. A segment is
// correct if |alpha - alpha_gen| < 3 mrad and |b - b_gen| < 1 mm. The chamber
// model (2 x 3 layers of 30 mm tubes, no background hits) is this
// testbench's own, so the numbers are not expected to equal the published
// ones. Checked: efficiency of at least 95% for seed errors up to 25 mrad,
// efficiency that does not rise by more than the statistical spread as the
// seed gets worse, and the RMS angle and position residuals of the good
// segments below 1 mrad and 0.3 mm up to 25 mrad. The table is printed.
module tb_seed_scan;
  import mtfp_pkg::*;
  localparam real LSB = 7.5 / 256.0;
  localparam int  N_PT  = 7;
  localparam int  N_TRK = 200;
  localparam real SIGMA [N_PT] = '{0.0, 0.005, 0.010, 0.015, 0.025, 0.050, 0.100};

  logic clk = 0, rst = 1;
  always #2 clk = ~clk;

  logic seed_valid, seed_ready, row_avail, row_pop, seg_valid;
  seed_t seed;
  hit_row_t row;
  segment_t seg;
  logic [2:0] n_cand;

  segment_finder dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  hit_row_t rowq [$];
  assign row_avail = rowq.size() > 0;
  assign row = row_avail ? rowq[0] : '0;
  always @(posedge clk) if (row_pop) void'(rowq.pop_front());

  real layer_z [N_LAYERS] = '{-200.0, -174.0, -148.0, 148.0, 174.0, 200.0};

  function automatic int to_lsb(real mm);
    return $rtoi(mm / LSB + (mm >= 0 ? 0.5 : -0.5));
  endfunction

  function automatic real absr(real x); return x < 0 ? -x : x; endfunction

  task automatic make_packet(real m, real b, bit two, real b2, bit kill_ml1);
    hit_row_t rows [N_SLOTS];
    real sq = $sqrt(1.0 + m * m);
    for (int l = 0; l < N_LAYERS; l++) begin
      real zl = layer_z[l];
      real off = (l % 2 != 0) ? 15.0 : 0.0;
      int  k0 = $rtoi($floor((m * zl + b - off) / 30.0)) - 2;
      for (int s = 0; s < N_SLOTS; s++) begin
        real yt = off + 30.0 * (k0 + s);
        real r  = absr(m * zl + b - yt) / sq;
        if (two && absr(m * zl + b2 - yt) / sq < r) r = absr(m * zl + b2 - yt) / sq;
        rows[s][l].valid = (r < 14.6) && !(kill_ml1 && l >= LAYERS_PER_ML);
        rows[s][l].y = LEN_W'(to_lsb(yt));
        rows[s][l].z = LEN_W'(to_lsb(zl));
        rows[s][l].r = R_W'(to_lsb(r < 14.6 ? r : 0.0));
      end
    end
    for (int s = 0; s < N_SLOTS; s++) rowq.push_back(rows[s]);
  endtask

  function automatic bit good(real m, real b);
    real da = $atan(real'(seg.m) / 4096.0) - $atan(m);
    real dbb = real'(seg.b) * LSB - b;
    return seg.found && absr(da) < 0.003 && absr(dbb) < 1.0;
  endfunction

  // standard normal deviate (Box-Muller)
  function automatic real gauss();
    real u1 = (real'($urandom_range(1000000)) + 1.0) / 1000002.0;
    real u2 = real'($urandom_range(1000000)) / 1000001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // one track; returns 1 if the segment is correct, and its residuals
  task automatic run(input real m, input real b, input real dm, input real dbs,
                     output bit ok, output real da, output real dbb);
    make_packet(m, b, 0, 0.0, 0);
    seed_valid = 1;
    seed.m = SLOPE_W'($rtoi($tan($atan(m) + dm) * 4096.0));
    seed.b = LEN_W'(to_lsb(b + dbs));
    @(posedge clk); #1;
    seed_valid = 0;
    while (!seg_valid) begin @(posedge clk); #1; end
    da  = $atan(real'(seg.m) / 4096.0) - $atan(m);
    dbb = real'(seg.b) * LSB - b;
    ok  = seg.found && absr(da) < 0.003 && absr(dbb) < 1.0;
    repeat (2) @(posedge clk); #1;
  endtask

  initial begin
    real eff [N_PT];
    seed_valid = 0; seed = '0;
    repeat (3) @(posedge clk); #1;
    rst = 0;
    $display("sigma[mrad]  efficiency  rms(alpha)[mrad]  rms(b)[mm]");
    for (int p = 0; p < N_PT; p++) begin
      automatic int  n_ok = 0;
      automatic real sa = 0.0, sb = 0.0;
      for (int i = 0; i < N_TRK; i++) begin
        automatic real m  = $tan((real'($urandom_range(1500)) - 750.0) / 1000.0);
        automatic real b  = (real'($urandom_range(1000)) - 500.0) / 10.0;
        automatic real dm = SIGMA[p] * gauss();
        automatic real db = (real'($urandom_range(60)) - 30.0) / 10.0;
        automatic bit  ok;
        automatic real da, dbb;
        run(m, b, dm, db, ok, da, dbb);
        if (ok) begin n_ok++; sa += da * da; sb += dbb * dbb; end
      end
      eff[p] = real'(n_ok) / real'(N_TRK);
      sa = (n_ok > 0) ? $sqrt(sa / n_ok) : 0.0;
      sb = (n_ok > 0) ? $sqrt(sb / n_ok) : 0.0;
      $display("%8.1f     %6.3f      %8.3f          %6.3f", SIGMA[p] * 1000.0, eff[p], sa * 1000.0, sb);
      if (SIGMA[p] <= 0.025) begin
        checks += 3;
        if (eff[p] < 0.95) begin failures++; $display("FAIL: efficiency %f at %f mrad", eff[p], SIGMA[p] * 1000.0); end
        if (sa > 0.001)    begin failures++; $display("FAIL: alpha resolution %f mrad", sa * 1000.0); end
        if (sb > 0.3)      begin failures++; $display("FAIL: b resolution %f mm", sb); end
      end
      if (p > 0) begin
        checks++;
        if (eff[p] > eff[p-1] + 0.04) begin failures++; $display("FAIL: efficiency rises with a worse seed"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
