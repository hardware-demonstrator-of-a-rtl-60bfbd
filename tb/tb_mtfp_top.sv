// tb_mtfp_top: end-to-end test of the track finder for one trigger tower.
// A small track generator models three chambers of 2 x 3 tube layers
// (30 mm tubes, 26 mm layer pitch, odd layers shifted by half a tube, the two
// multilayers 296 mm apart), computes the drift radius of every tube of the
// +-3 tube RoI a straight track passes, and sends the packets with a seed of
// known error. Reconstructed segments are checked against the generated track
// with the efficiency criterion |alpha_reco - alpha_gen| < 3 mrad and
// |b_reco - b_gen| < 1 mm; pT is checked against a real-valued model of the
// sagitta formula applied to the three reported segments, with the constants
// written into the tables.
// Mechanisms counted (each must occur): hits waiting in the FIFO for their
// seed, seeds arriving before their hits, events with more than one candidate
// (two tracks), events with no candidate, noise hits, FIFO overflow, pT results.
// Runs with every parameter of the top at its default.
module tb_mtfp_top;
  import mtfp_pkg::*;

  localparam real LSB = 7.5 / 256.0;
  localparam int  NCH = 3;

  logic clk = 0, rst = 1;
  always #2 clk = ~clk;

  logic     hit_valid [NCH];
  hit_row_t hit_row   [NCH];
  logic     fifo_overflow [NCH];
  logic     seed_valid [NCH];
  seed_t    seed [NCH];
  logic     seed_ready [NCH];
  logic [5:0] roi_region;
  logic signed [17:0] roi_phi, roi_eta;
  logic     seg_valid [NCH];
  segment_t seg [NCH];
  logic     cfg_we;
  logic [8:0] cfg_addr;
  logic signed [31:0] cfg_data;
  logic     pt_valid, pt_ok, charge_neg;
  logic signed [31:0] pt;

  mtfp_top dut (.*);

  int checks = 0, failures = 0;
  int n_fifo_wait = 0, n_seed_first = 0, n_multi = 0, n_nocand = 0, n_noise = 0;
  int n_overflow = 0, n_pt = 0, n_found = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #(4 * 400000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int to_lsb(real mm);
    return $rtoi(mm / LSB + (mm >= 0 ? 0.5 : -0.5));
  endfunction

  real layer_z [N_LAYERS] = '{-200.0, -174.0, -148.0, 148.0, 174.0, 200.0};

  // per-chamber expectation for the current event
  real exp_m [NCH], exp_b [NCH], exp_m2 [NCH], exp_b2 [NCH];
  bit  exp_two [NCH], exp_found [NCH];

  hit_row_t rows [NCH][N_SLOTS];

  task automatic make_packet(input int ch, input real m, input real b, input bit two,
                             input real b2, input int nnoise, input bit kill_ml1);
    real sq = $sqrt(1.0 + m * m);
    for (int l = 0; l < N_LAYERS; l++) begin
      real zl = layer_z[l];
      real off = (l % 2 != 0) ? 15.0 : 0.0;
      real yt_track = m * zl + b;
      int  k0 = $rtoi($floor((yt_track - off) / 30.0)) - 2;
      for (int s = 0; s < N_SLOTS; s++) begin
        real yt = off + 30.0 * (k0 + s);
        real r  = ((m * zl + b - yt) >= 0 ? (m * zl + b - yt) : -(m * zl + b - yt)) / sq;
        if (two) begin
          real r2 = ((m * zl + b2 - yt) >= 0 ? (m * zl + b2 - yt) : -(m * zl + b2 - yt)) / sq;
          if (r2 < r) r = r2;
        end
        rows[ch][s][l].valid = (r < 14.6) && !(kill_ml1 && l >= LAYERS_PER_ML);
        rows[ch][s][l].y = LEN_W'(to_lsb(yt));
        rows[ch][s][l].z = LEN_W'(to_lsb(zl));
        rows[ch][s][l].r = R_W'(to_lsb(r < 14.6 ? r : 0.0));
      end
    end
    for (int n = 0; n < nnoise; n++) begin
      int l = $urandom_range(N_LAYERS - 1);
      int s = $urandom_range(N_SLOTS - 1);
      if (!rows[ch][s][l].valid && !(kill_ml1 && l >= LAYERS_PER_ML)) begin
        rows[ch][s][l].valid = 1'b1;
        rows[ch][s][l].r = R_W'($urandom_range(500));
        n_noise++;
      end
    end
  endtask

  task automatic send_rows();
    for (int s = 0; s < N_SLOTS; s++) begin
      for (int c = 0; c < NCH; c++) begin
        hit_valid[c] = 1'b1;
        hit_row[c]   = rows[c][s];
      end
      @(posedge clk); #1;
    end
    for (int c = 0; c < NCH; c++) hit_valid[c] = 1'b0;
  endtask

  task automatic send_seeds(input real dm [NCH], input real db [NCH]);
    bit done [NCH];
    for (int c = 0; c < NCH; c++) begin
      seed_valid[c] = 1'b1;
      seed[c].m = SLOPE_W'($rtoi((exp_m[c] + dm[c]) * 4096.0));
      seed[c].b = LEN_W'(to_lsb(exp_b[c] + db[c]));
      done[c] = 1'b0;
      if (c == 0 && dut.g_ch[0].count != 0) n_fifo_wait++;
    end
    while (!(done[0] && done[1] && done[2])) begin
      @(posedge clk);
      for (int c = 0; c < NCH; c++)
        if (seed_valid[c] && seed_ready[c]) begin done[c] = 1'b1; end
      #1;
      for (int c = 0; c < NCH; c++) if (done[c]) seed_valid[c] = 1'b0;
    end
  endtask

  // ---- result checking ----
  int seg_seen [NCH];
  real seg_b_mm [NCH];
  function automatic bit trk_match(segment_t sgm, real m, real b);
    real mr = real'(sgm.m) / 4096.0;
    real br = real'(sgm.b) * LSB;
    real da = $atan(mr) - $atan(m);
    real dbb = br - b;
    return (da < 0.003 && da > -0.003 && dbb < 1.0 && dbb > -1.0);
  endfunction

  for (genvar c = 0; c < NCH; c++) begin : g_mon
    always @(posedge clk) if (!rst && seg_valid[c]) begin
      bit ok;
      seg_seen[c]++;
      seg_b_mm[c] = real'(seg[c].b) * LSB;
      checks++;
      if (dut.g_ch[c].n_cand > 1) n_multi++;
      if (!exp_found[c]) begin
        ok = !seg[c].found;
        if (ok) n_nocand++;
      end else begin
        ok = seg[c].found && (trk_match(seg[c], exp_m[c], exp_b[c]) ||
                              (exp_two[c] && trk_match(seg[c], exp_m2[c], exp_b2[c])));
        if (ok) n_found++;
      end
      if (!ok) begin
        failures++;
        $display("FAIL ch%0d: found=%0d m=%f b=%f mm (exp m=%f b=%f, found=%0d)", c, seg[c].found,
                 real'(seg[c].m) / 4096.0, real'(seg[c].b) * LSB, exp_m[c], exp_b[c], exp_found[c]);
      end
    end
  end

  // pT model with the constants of region 5
  localparam real A_SC = 10000.0;  // 1/a1 in GeV*LSB
  real exp_pt; bit exp_pt_ok; bit exp_neg;
  always @(posedge clk) if (!rst && pt_valid) begin
    automatic real ptr = real'(pt) / 65536.0;
    // sagitta of the three reported segments (K = 0.5, no chamber offsets)
    automatic real sg = seg_b_mm[1] - seg_b_mm[0] - 0.5 * (seg_b_mm[2] - seg_b_mm[0]);
    exp_neg = sg < 0;
    exp_pt = A_SC / ((sg < 0 ? -sg : sg) / LSB) + (1.0 + 0.5 * 0.3 + 0.25 * 0.09)
             + (0.5 + 0.2 * (-0.2) + 0.1 * 0.04);
    checks++;
    n_pt++;
    if (pt_ok !== exp_pt_ok ||
        (exp_pt_ok && ((ptr - exp_pt) > 0.01 * exp_pt + 0.1 || (exp_pt - ptr) > 0.01 * exp_pt + 0.1
                       || charge_neg != exp_neg))) begin
      failures++;
      $display("FAIL pT: got %f ok=%0d neg=%0d, expected %f ok=%0d neg=%0d", ptr, pt_ok, charge_neg,
               exp_pt, exp_pt_ok, exp_neg);
    end
  end

  task automatic cfg(input int region, input int k, input int value);
    cfg_we = 1; cfg_addr = 9'({region[5:0], k[2:0]}); cfg_data = value;
    @(posedge clk); #1;
    cfg_we = 0;
  endtask

  task automatic wait_event(input int nseg_prev);
    int t = 0;
    while (!(seg_seen[0] > nseg_prev && seg_seen[1] > nseg_prev && seg_seen[2] > nseg_prev)) begin
      @(posedge clk); t++;
    end
    repeat (12) @(posedge clk);
    #1;
  endtask

  // one event: straight tracks in the three chambers whose intercepts carry a sagitta
  task automatic run_event(input real m, input real b1, input real span, input real sag,
                           input bit seed_first, input int nnoise, input bit two,
                           input bit kill_ml1, input real seed_dm);
    real dm [NCH], db [NCH];
    int  nseg0 = seg_seen[0];
    exp_b[0] = b1; exp_b[2] = b1 + span; exp_b[1] = b1 + span / 2.0 + sag;
    for (int c = 0; c < NCH; c++) begin
      exp_m[c] = m; exp_two[c] = two; exp_m2[c] = m; exp_b2[c] = exp_b[c] + 50.0;
      exp_found[c] = !(kill_ml1 && c == 1);
      make_packet(c, m, exp_b[c], two, exp_b2[c], nnoise, kill_ml1 && c == 1);
      dm[c] = ($urandom_range(2) == 0) ? seed_dm : -seed_dm;
      db[c] = real'($urandom_range(60)) / 10.0 - 3.0;
    end
    // expected pT from the generated intercepts (the fit reproduces them to < 1 mm)
    exp_pt_ok = exp_found[0] && exp_found[1] && exp_found[2];
    if (seed_first) begin
      n_seed_first++;
      send_seeds(dm, db);
      repeat (3) @(posedge clk); #1;
      send_rows();
    end else begin
      send_rows();
      repeat (5) @(posedge clk); #1;
      send_seeds(dm, db);
    end
    wait_event(nseg0);
  endtask

  initial begin
    for (int c = 0; c < NCH; c++) begin
      hit_valid[c] = 0; hit_row[c] = '0; seed_valid[c] = 0; seed[c] = '0;
    end
    cfg_we = 0; cfg_addr = 0; cfg_data = 0;
    roi_region = 6'd5;
    roi_phi = 18'($rtoi(0.3 * 65536.0));
    roi_eta = 18'($rtoi(-0.2 * 65536.0));
    repeat (5) @(posedge clk); #1;
    rst = 0;
    // constants of region 5: a0 = 0, 1/a1 = A_SC, p = (1, 0.5, 0.25), e = (0.5, 0.2, 0.1)
    cfg(5, 0, 0);
    cfg(5, 1, $rtoi(A_SC * 65536.0));
    cfg(5, 2, 65536); cfg(5, 3, 32768); cfg(5, 4, 16384);
    cfg(5, 5, 32768); cfg(5, 6, $rtoi(0.2 * 65536.0)); cfg(5, 7, $rtoi(0.1 * 65536.0));

    // clean tracks, hits before seed and seed before hits
    run_event( 0.10,  12.0, 40.0,  9.0, 0, 0, 0, 0, 0.004);
    run_event(-0.35, -20.0, 60.0, -6.0, 1, 0, 0, 0, 0.005);
    run_event( 0.80,   3.0, 30.0, 12.0, 0, 0, 0, 0, 0.003);
    // noise hits
    run_event( 0.25,  -5.0, 50.0,  7.5, 1, 3, 0, 0, 0.004);
    run_event(-0.60,   8.0, 20.0, -9.0, 0, 4, 0, 0, 0.005);
    // two tracks in every chamber: several candidates, best chi2 wins
    run_event( 0.15,   0.0, 40.0,  8.0, 0, 0, 1, 0, 0.003);
    // no hits in multilayer 1 of chamber 2: no candidate, pT flagged
    run_event( 0.20,   5.0, 40.0,  8.0, 1, 0, 0, 1, 0.003);
    // random clean tracks
    for (int i = 0; i < 6; i++) begin
      automatic real m  = (real'($urandom_range(1600)) - 800.0) / 1000.0;
      automatic real b  = (real'($urandom_range(400)) - 200.0) / 10.0;
      automatic real sg = (real'($urandom_range(200)) + 50.0) / 10.0;
      run_event(m, b, 30.0, ($urandom_range(1) != 0) ? sg : -sg, (i % 2) != 0, 1, 0, 0, 0.004);
    end

    // FIFO overflow: more rows than the FIFO holds with no seed
    for (int s = 0; s < 70; s++) begin
      hit_valid[0] = 1'b1; hit_row[0] = rows[0][0];
      @(posedge clk); #1;
    end
    hit_valid[0] = 1'b0;
    @(posedge clk); #1;
    checks++;
    if (fifo_overflow[0]) n_overflow++;
    else begin failures++; $display("FAIL: no overflow flag"); end

    // every mechanism must have happened
    checks += 8;
    if (n_fifo_wait == 0)  begin failures++; $display("FAIL: hits never waited for a seed"); end
    if (n_seed_first == 0) begin failures++; $display("FAIL: seed never came first"); end
    if (n_multi == 0)      begin failures++; $display("FAIL: never more than one candidate"); end
    if (n_nocand == 0)     begin failures++; $display("FAIL: never an event without candidate"); end
    if (n_noise == 0)      begin failures++; $display("FAIL: no noise hits"); end
    if (n_overflow == 0)   begin failures++; $display("FAIL: no overflow"); end
    if (n_pt == 0)         begin failures++; $display("FAIL: no pT result"); end
    if (n_found == 0)      begin failures++; $display("FAIL: no segment found"); end
    $display("mechanisms: fifo_wait=%0d seed_first=%0d multi_cand=%0d no_cand=%0d noise=%0d overflow=%0d pt=%0d found=%0d",
             n_fifo_wait, n_seed_first, n_multi, n_nocand, n_noise, n_overflow, n_pt, n_found);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
