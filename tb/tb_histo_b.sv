// tb_histo_b: random multilayer packets with one or two clusters of
// intercepts plus random ones; a model of the fine histogram (triple filling,
// one count per distinct hit, hits not selected by stage A ignored) gives the
// expected number of maxima and their (hit, sign) sets. Checks the
// four-clock latency from start to done.
module tb_histo_b;
  import mtfp_pkg::*;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;

  logic start, done;
  coarse_idx_t win_base;
  ml_mask_t sel_mask;
  hp_out_t hits [HITS_PER_ML];
  logic [1:0] n_max;
  ml_sgn_mask_t max_mask [N_MAX];
  logic [$clog2(HB_BINS)-1:0] max_bin [N_MAX];
  logic [$clog2(HITS_PER_ML+1)-1:0] max_cnt [N_MAX];

  histo_b dut (.*);

  int checks = 0, failures = 0;
  int n_two = 0, n_one = 0, n_none = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic ml_mask_t hitset(ml_sgn_mask_t s);
    return s[HITS_PER_ML-1:0] | s[2*HITS_PER_ML-1:HITS_PER_ML];
  endfunction

  initial begin
    start = 0; win_base = 0; sel_mask = 0;
    for (int h = 0; h < HITS_PER_ML; h++) hits[h] = '0;
    repeat (3) @(posedge clk); #1;
    rst = 0;
    for (int ev = 0; ev < 400; ev++) begin
      automatic int base = $urandom_range(HA_BINS - 5);
      automatic int p1 = $urandom_range(39), p2 = $urandom_range(39);
      automatic int mode = ev % 4;   // 0: one cluster, 1: two, 2: noise only, 3: two + noise
      automatic ml_sgn_mask_t bm [HB_BINS];
      automatic int cnt [HB_BINS];
      automatic int a1 = 0, a2 = 0, c1 = 0, c2 = 0, exp_n;
      automatic ml_sgn_mask_t h1;
      win_base = coarse_idx_t'(base);
      sel_mask = ml_mask_t'($urandom) | ml_mask_t'($urandom);
      for (int h = 0; h < HITS_PER_ML; h++) begin
        automatic int bp, bmi;
        automatic int cl = (h < 6) ? 1 : (h < 10 && mode != 0 && mode != 2) ? 2 : 0;
        if (mode == 2) cl = 0;
        bp  = base * 8 + ((cl == 1) ? p1 + $urandom_range(1) : (cl == 2) ? p2 + $urandom_range(1)
                                  : $urandom_range(60) - 10);
        bmi = bp - $urandom_range(50) - 1;
        if ($urandom_range(3) == 0) begin automatic int t = bp; bp = bmi; bmi = t; end
        hits[h].valid = (mode == 2) ? ($urandom_range(3) == 0) : ($urandom_range(7) != 0);
        hits[h].ok_p  = bp >= 0 && bp < 256;
        hits[h].ok_m  = bmi >= 0 && bmi < 256;
        hits[h].bin_p = fine_idx_t'(bp);
        hits[h].bin_m = fine_idx_t'(bmi);
      end
      // model
      for (int k = 0; k < HB_BINS; k++) begin
        bm[k] = '0;
        for (int h = 0; h < HITS_PER_ML; h++) begin
          automatic int rp = int'(hits[h].bin_p) - base * 8;
          automatic int rm = int'(hits[h].bin_m) - base * 8;
          if (hits[h].valid && sel_mask[h] && hits[h].ok_p && rp >= k - 1 && rp <= k + 1) bm[k][h] = 1;
          if (hits[h].valid && sel_mask[h] && hits[h].ok_m && rm >= k - 1 && rm <= k + 1)
            bm[k][HITS_PER_ML + h] = 1;
        end
        cnt[k] = $countones(hitset(bm[k]));
        if (cnt[k] > c1) begin c1 = cnt[k]; a1 = k; end
      end
      h1 = bm[a1];
      for (int k = 0; k < HB_BINS; k++)
        if (cnt[k] > c2 && (bm[k] & ~h1) != 0) begin c2 = cnt[k]; a2 = k; end
      exp_n = (c1 < 2) ? 0 : (c2 >= 2) ? 2 : 1;
      if (exp_n == 2) n_two++; else if (exp_n == 1) n_one++; else n_none++;

      start = 1; @(posedge clk); #1; start = 0;
      repeat (2) begin
        @(posedge clk); #1;
        checks++;
        if (done) begin failures++; $display("FAIL: done too early"); end
      end
      @(posedge clk); #1;
      checks++;
      if (!done || int'(n_max) != exp_n || (exp_n >= 1 && max_mask[0] != bm[a1])
          || (exp_n == 2 && max_mask[1] != bm[a2])) begin
        failures++;
        $display("FAIL ev=%0d done=%0d n=%0d/%0d m0 %h/%h m1 %h/%h", ev, done, n_max, exp_n,
                 max_mask[0], bm[a1], max_mask[1], bm[a2]);
      end
    end
    checks += 3;
    if (n_two == 0)  begin failures++; $display("FAIL: two maxima never seen"); end
    if (n_one == 0)  begin failures++; $display("FAIL: one maximum never seen"); end
    if (n_none == 0) begin failures++; $display("FAIL: no maximum never seen"); end
    $display("cases: two=%0d one=%0d none=%0d", n_two, n_one, n_none);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
