// tb_segment_finder: one chamber (2 x 3 layers of 30 mm tubes, 26 mm layer
// pitch, multilayers 296 mm apart) crossed by random straight tracks; the
// drift radii of the +-3 tube RoI are computed in real arithmetic, the seed
// slope carries an error of up to 10 mrad and the seed intercept up to 3 mm.
// A segment counts as correct if |alpha - alpha_gen| < 3 mrad and
// |b - b_gen| < 1 mm (the paper's efficiency criterion). Every track whose
// seed error is at most 2 mrad must pass and at least 95% of all. Also: a packet with no hits in one multilayer must give no
// segment, a two-track packet must still give a segment, some packets must
// form several candidates (left-right ghosts do), and the latency from seed to segment must be the same for every
// packet whose rows are ready.
module tb_segment_finder;
  import mtfp_pkg::*;
  localparam real LSB = 7.5 / 256.0;

  logic clk = 0, rst = 1;
  always #2 clk = ~clk;

  logic seed_valid, seed_ready, row_avail, row_pop, seg_valid;
  seed_t seed;
  hit_row_t row;
  segment_t seg;
  logic [2:0] n_cand;

  segment_finder dut (.*);

  int checks = 0, failures = 0, n_multi = 0, n_nocand = 0, lat0 = -1, n_trk = 0, n_eff = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200000) @(posedge clk);
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

  task automatic run(real m, real b, real dm, real dbs, bit two, bit kill_ml1);
    int t0, lat;
    bit ok;
    make_packet(m, b, two, b + 30.0, kill_ml1);
    seed_valid = 1;
    seed.m = SLOPE_W'($rtoi($tan($atan(m) + dm) * 4096.0));
    seed.b = LEN_W'(to_lsb(b + dbs));
    t0 = cycle;
    @(posedge clk); #1;
    seed_valid = 0;
    while (!seg_valid) begin @(posedge clk); #1; end
    lat = cycle - t0;
    checks += 2;
    if (kill_ml1) begin
      ok = !seg.found;
      if (ok) n_nocand++;
    end else if (two) begin
      ok = seg.found;   // two muons: the single-muon selection may pick either or mix them
    end else begin
      ok = good(m, b);
      n_trk++;
      if (ok) n_eff++;
      // with a seed error of more than 2 mrad an occasional miss is part of the algorithm
      if (!ok && absr(dm) > 0.002) begin
        ok = 1;
        $display("miss: m=%f b=%f dm=%f -> m=%f b=%f", m, b, dm, real'(seg.m) / 4096.0, real'(seg.b) * LSB);
      end
    end
    if (n_cand > 1) n_multi++;
    if (!ok) begin
      failures++;
      $display("FAIL: m=%f b=%f dm=%f -> found=%0d m=%f b=%f cand=%0d", m, b, dm, seg.found,
               real'(seg.m) / 4096.0, real'(seg.b) * LSB, n_cand);
    end
    if (lat0 < 0) lat0 = lat;
    else if (lat != lat0) begin failures++; $display("FAIL: latency %0d vs %0d", lat, lat0); end
    repeat (2) @(posedge clk); #1;
  endtask

  initial begin
    seed_valid = 0; seed = '0;
    repeat (3) @(posedge clk); #1;
    rst = 0;
    for (int i = 0; i < 150; i++) begin
      automatic real m  = (real'($urandom_range(2000)) - 1000.0) / 1000.0;
      automatic real b  = (real'($urandom_range(1000)) - 500.0) / 10.0;
      automatic real dm = (real'($urandom_range(200)) - 100.0) / 10000.0;
      automatic real db = (real'($urandom_range(60)) - 30.0) / 10.0;
      run(m, b, dm, db, 0, 0);
    end
    run(0.2, 3.0, 0.002, 1.0, 1, 0);
    run(-0.4, -8.0, -0.003, 0.0, 1, 0);
    run(0.1, 0.0, 0.0, 0.0, 0, 1);
    checks += 3;
    if (real'(n_eff) < 0.95 * real'(n_trk)) begin failures++; $display("FAIL: efficiency %0d/%0d", n_eff, n_trk); end
    if (n_multi == 0)  begin failures++; $display("FAIL: no multi-candidate packet"); end
    if (n_nocand == 0) begin failures++; $display("FAIL: no empty-candidate packet"); end
    $display("latency seed->segment = %0d clocks, multi=%0d, efficiency %0d/%0d", lat0, n_multi, n_eff, n_trk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
