// histo_b: second-stage (fine) 1D Hough histogram of one multilayer,
// HB_BINS = 40 bin_hits of 0.9375 mm (the resolution of a 256-bin histogram)
// spanning the five coarse bin_hits selected by histo_a. Only hits selected by
// histo_a take part. Each intercept also fills its two neighbour bin_hits
// ("triple filling", 3 x 0.9375 = 2.8 mm wide) against bin-boundary effects.
// Every bin records which (hit, sign) pairs it holds; its content is the
// number of distinct hits, so b+ and b- of one hit count once.
// Up to N_MAX = 2 maxima with at least MIN_HITS = 2 hits are reported:
// the fullest bin (lowest index on a tie), then the fullest bin whose set of
// (hit, sign) pairs is not contained in the first one's. The second rule is
// this design's reading of "more than one maximum with different hit content":
// with triple filling the neighbours of a peak hold subsets of it and are not
// new maxima, while a left-right ghost (same hits, other signs) is.
// Interface: pulse `start` with the window and the multilayer's hits; `done`
// and the results come four clocks later. max_mask[i] is a sign mask
// {minus bits, plus bits}: bit h (plus) or HITS_PER_ML+h (minus) is set if
// that intercept of hit h lies in the maximum bin.
module histo_b
  import mtfp_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  coarse_idx_t win_base,
  input  ml_mask_t    sel_mask,
  input  hp_out_t     hits [HITS_PER_ML],
  output logic        done,
  output logic [1:0]  n_max,
  output ml_sgn_mask_t max_mask [N_MAX],
  output logic [$clog2(HB_BINS)-1:0] max_bin [N_MAX],
  output logic [$clog2(HITS_PER_ML+1)-1:0] max_cnt [N_MAX]
);
  localparam int CW = $clog2(HITS_PER_ML+1);
  localparam int BW = $clog2(HB_BINS);

  ml_sgn_mask_t bin_hits [HB_BINS];
  logic [CW-1:0] cnt [HB_BINS];
  logic [2:0]    stage;
  logic [BW-1:0] b1_bin;
  logic [CW-1:0] b1_cnt;
  logic          b1_ok;
  ml_sgn_mask_t  b1_set;

  function automatic ml_mask_t hit_bits(input ml_sgn_mask_t s);
    return s[HITS_PER_ML-1:0] | s[2*HITS_PER_ML-1:HITS_PER_ML];
  endfunction

  // fill with triple filling: bin k takes every intercept whose fine bin,
  // relative to the window start, is k-1, k or k+1
  function automatic logic in_reach(input fine_idx_t bin, input coarse_idx_t base, input int k);
    int rel;
    rel = int'(bin) - (int'(base) << (COARSE_SHIFT-FINE_SHIFT));
    return (rel >= k - 1) && (rel <= k + 1);
  endfunction

  // arg-max of the contents, skipping bin_hits whose hits are a subset of `excl`
  logic [BW-1:0] a1_bin, a2_bin;
  logic [CW-1:0] a1_cnt, a2_cnt;
  always_comb begin
    a1_bin = '0; a1_cnt = '0;
    a2_bin = '0; a2_cnt = '0;
    for (int k = 0; k < HB_BINS; k++) begin
      if (cnt[k] > a1_cnt) begin
        a1_cnt = cnt[k];
        a1_bin = BW'(k);
      end
      if (cnt[k] > a2_cnt && ((bin_hits[k] & ~b1_set) != '0)) begin
        a2_cnt = cnt[k];
        a2_bin = BW'(k);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      stage   <= '0;
      done    <= 1'b0;
      n_max   <= '0;
      b1_bin  <= '0;
      b1_cnt  <= '0;
      b1_ok   <= 1'b0;
      b1_set  <= '0;
      for (int k = 0; k < HB_BINS; k++) begin
        bin_hits[k] <= '0;
        cnt[k]  <= '0;
      end
      for (int i = 0; i < N_MAX; i++) begin
        max_mask[i] <= '0;
        max_bin[i]  <= '0;
        max_cnt[i]  <= '0;
      end
    end else begin
      stage <= {stage[1:0], start};
      done  <= stage[2];
      // stage 0: fill all bin_hits from the selected hits
      if (start) begin
        for (int k = 0; k < HB_BINS; k++) begin
          for (int h = 0; h < HITS_PER_ML; h++) begin
            bin_hits[k][h] <= hits[h].valid && sel_mask[h] && hits[h].ok_p
                          && in_reach(hits[h].bin_p, win_base, k);
            bin_hits[k][HITS_PER_ML+h] <= hits[h].valid && sel_mask[h] && hits[h].ok_m
                          && in_reach(hits[h].bin_m, win_base, k);
          end
        end
      end
      // stage 1: number of distinct hits per bin
      if (stage[0])
        for (int k = 0; k < HB_BINS; k++) cnt[k] <= CW'($countones(hit_bits(bin_hits[k])));
      // stage 2: first maximum
      if (stage[1]) begin
        b1_bin  <= a1_bin;
        b1_cnt  <= a1_cnt;
        b1_ok   <= a1_cnt >= CW'(MIN_HITS);
        b1_set  <= bin_hits[a1_bin];
      end
      // stage 3: second maximum, different hit content
      if (stage[2]) begin
        max_bin[0]  <= b1_bin;
        max_cnt[0]  <= b1_cnt;
        max_mask[0] <= bin_hits[b1_bin];
        max_bin[1]  <= a2_bin;
        max_cnt[1]  <= a2_cnt;
        max_mask[1] <= bin_hits[a2_bin];
        if (!b1_ok)                     n_max <= 2'd0;
        else if (a2_cnt >= CW'(MIN_HITS)) n_max <= 2'd2;
        else                            n_max <= 2'd1;
      end
    end
  end
endmodule
