// tb_histo_a: fills the coarse histogram with random packets (18 hits, both
// intercepts, some out of range, duplicates included) and checks the maximum
// bin, its content in distinct hits, the clamped +-2 window and the hits
// selected from it against a model built from lists of (bin, hit) pairs.
// Also checks the two-clock find latency.
module tb_histo_a;
  import mtfp_pkg::*;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;

  logic clear, find, done;
  hp_out_t fill [LAYERS_PER_ML];
  logic [$clog2(HITS_PER_ML)-1:0] fill_id [LAYERS_PER_ML];
  coarse_idx_t max_bin, win_base;
  logic [$clog2(HITS_PER_ML+1)-1:0] max_cnt;
  ml_mask_t sel_mask;

  histo_a dut (.*);

  int checks = 0, failures = 0, n_edge = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; find = 0;
    for (int i = 0; i < LAYERS_PER_ML; i++) begin fill[i] = '0; fill_id[i] = '0; end
    repeat (3) @(posedge clk); #1;
    rst = 0;
    for (int ev = 0; ev < 300; ev++) begin
      automatic bit inbin [HA_BINS][HITS_PER_ML];
      automatic int center = $urandom_range(HA_BINS - 1);
      automatic int cnt [HA_BINS];
      automatic int best = 0;
      automatic int base;
      automatic ml_mask_t sel;
      for (int k = 0; k < HA_BINS; k++) for (int h = 0; h < HITS_PER_ML; h++) inbin[k][h] = 0;
      clear = 1; @(posedge clk); #1; clear = 0;
      for (int s = 0; s < N_SLOTS; s++) begin
        for (int i = 0; i < LAYERS_PER_ML; i++) begin
          automatic int bp = center * 8 + $urandom_range(40) - 20 + (ev % 2) * $urandom_range(60);
          automatic int bm = bp - $urandom_range(60);
          fill[i].valid = ($urandom_range(5) != 0);
          fill[i].ok_p  = (bp >= 0 && bp < 256);
          fill[i].ok_m  = (bm >= 0 && bm < 256) && ($urandom_range(7) != 0);
          fill[i].bin_p = fine_idx_t'(bp);
          fill[i].bin_m = fine_idx_t'(bm);
          fill_id[i]    = 5'(i * N_SLOTS + s);
          if (fill[i].valid && fill[i].ok_p) inbin[bp / 8][i * N_SLOTS + s] = 1;
          if (fill[i].valid && fill[i].ok_m) inbin[bm / 8][i * N_SLOTS + s] = 1;
        end
        @(posedge clk); #1;
      end
      for (int i = 0; i < LAYERS_PER_ML; i++) fill[i].valid = 0;
      // model
      for (int k = 0; k < HA_BINS; k++) begin
        cnt[k] = 0;
        for (int h = 0; h < HITS_PER_ML; h++) cnt[k] += inbin[k][h];
        if (cnt[k] > cnt[best]) best = k;
      end
      base = best - 2;
      if (base < 0) base = 0;
      if (base > HA_BINS - 5) base = HA_BINS - 5;
      if (best < 2 || best > HA_BINS - 3) n_edge++;
      sel = '0;
      for (int k = base; k < base + 5; k++)
        for (int h = 0; h < HITS_PER_ML; h++) if (inbin[k][h]) sel[h] = 1'b1;
      find = 1; @(posedge clk); #1; find = 0;
      @(posedge clk); #1;
      checks++;
      if (!done || int'(max_bin) != best || int'(max_cnt) != cnt[best] || int'(win_base) != base
          || sel_mask != sel) begin
        failures++;
        $display("FAIL ev=%0d done=%0d bin %0d/%0d cnt %0d/%0d base %0d/%0d sel %h/%h", ev, done,
                 max_bin, best, max_cnt, cnt[best], win_base, base, sel_mask, sel);
      end
    end
    checks++;
    if (n_edge == 0) begin failures++; $display("FAIL: window clamp never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
