// histo_a: first-stage (coarse) 1D Hough histogram of one multilayer,
// HA_BINS = 32 bin_hits of 7.5 mm covering the whole 240 mm range of b.
// Each bin records *which* hits fell into it (one bit per hit of the
// multilayer), so that a hit whose b+ and b- land in the same bin, or a hit
// entered twice, is counted once; the bin content is the popcount.
// After the packet, a pulse on `find` locates the fullest bin (lowest index on
// a tie) and returns the hits of the +-2 bin window around it, the window
// being shifted inward at the histogram edges so that it always spans five
// bin_hits; `win_base` is the first coarse bin of that window, which is also where
// the fine histogram starts.
// Interface: `clear` empties the histogram; each clock up to LAYERS_PER_ML
// hits are entered through fill_* (bin_hits are the top bits of the fine bin).
// Timing: `done` and the results come two clocks after `find`, which must
// come at least one clock after the last fill.
module histo_a
  import mtfp_pkg::*;
(
  input  logic      clk,
  input  logic      rst,
  input  logic      clear,
  input  hp_out_t   fill     [LAYERS_PER_ML],
  input  logic [$clog2(HITS_PER_ML)-1:0] fill_id [LAYERS_PER_ML],
  input  logic      find,
  output logic      done,
  output coarse_idx_t max_bin,
  output logic [$clog2(HITS_PER_ML+1)-1:0] max_cnt,
  output coarse_idx_t win_base,
  output ml_mask_t  sel_mask
);
  localparam int CW = $clog2(HITS_PER_ML+1);

  ml_mask_t bin_hits [HA_BINS];
  logic [CW-1:0] cnt [HA_BINS];
  logic find_d;
  coarse_idx_t best_bin_c;
  logic [CW-1:0] best_cnt_c;

  // ---- filling ----
  always_ff @(posedge clk) begin
    if (rst || clear) begin
      for (int k = 0; k < HA_BINS; k++) bin_hits[k] <= '0;
    end else begin
      for (int i = 0; i < LAYERS_PER_ML; i++) begin
        if (fill[i].valid && fill[i].ok_p)
          bin_hits[coarse_idx_t'(fill[i].bin_p >> (COARSE_SHIFT-FINE_SHIFT))][fill_id[i]] <= 1'b1;
        if (fill[i].valid && fill[i].ok_m)
          bin_hits[coarse_idx_t'(fill[i].bin_m >> (COARSE_SHIFT-FINE_SHIFT))][fill_id[i]] <= 1'b1;
      end
    end
  end

  // ---- bin contents and maximum ----
  always_comb begin
    best_bin_c = '0;
    best_cnt_c = '0;
    for (int k = 0; k < HA_BINS; k++) begin
      if (cnt[k] > best_cnt_c) begin
        best_cnt_c = cnt[k];
        best_bin_c = coarse_idx_t'(k);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      find_d   <= 1'b0;
      done     <= 1'b0;
      max_bin  <= '0;
      max_cnt  <= '0;
      win_base <= '0;
      sel_mask <= '0;
      for (int k = 0; k < HA_BINS; k++) cnt[k] <= '0;
    end else begin
      // stage 1: popcount of every bin
      for (int k = 0; k < HA_BINS; k++) cnt[k] <= CW'($countones(bin_hits[k]));
      find_d <= find;
      done   <= find_d;
      // stage 2: arg-max and window selection
      if (find_d) begin
        automatic int base = int'(best_bin_c) - HA_WIN;
        automatic ml_mask_t sel = '0;
        if (base < 0) base = 0;
        if (base > HA_BINS - (2*HA_WIN+1)) base = HA_BINS - (2*HA_WIN+1);
        for (int k = 0; k < 2*HA_WIN+1; k++) sel |= bin_hits[base + k];
        max_bin  <= best_bin_c;
        max_cnt  <= best_cnt_c;
        win_base <= coarse_idx_t'(base);
        sel_mask <= sel;
      end
    end
  end
endmodule
