// segment_finder: reconstructs the best straight segment of one drift-tube
// chamber from one RoI packet and the pre-trigger seed (m_seed, b_seed).
//
// Data flow, following the paper's firmware block design:
//   1. seed_prep turns m_seed into sqrt(1+m^2), cos and sin.
//   2. The packet (N_SLOTS = 6 rows, one hit per tube layer per row) is pulled
//      from the chamber's hit FIFO; six hit processors, one per tube layer,
//      compute b+ and b- of every hit and the offsets dy, dz.
//   3. Per multilayer, histo_a (32 coarse bins) finds the maximum and selects
//      the hits within +-2 bins; histo_b (40 fine bins, triple filling) finds
//      up to two maxima of at least two hits.
//   4. Each pair (maximum i of ML0, maximum j of ML1) is a candidate; fitter
//      2*i+j fits its hits at their positions on the track,
//      y_h = y_t +- dy, z_h = z_t -+ dz (+ for an intercept found as b+).
//   5. chi2_compare keeps the candidate with the lowest chi2.
// A candidate needs a maximum in both multilayers; with none, seg.found = 0.
//
// Interface: seed_valid/seed_ready handshake for the seed; the packet is read
// first-word-fall-through from the FIFO (`row_avail` = FIFO not empty,
// `row_pop` = take the row). One `seg_valid` pulse per seed carries the result.
// Timing: one packet at a time; a fixed 83 clocks from the seed to seg_valid
// when the packet is already in the FIFO (the paper reaches one segment per
// 300 ns = 72 clocks at 240 MHz; here the bit-serial square root and dividers
// dominate).
module segment_finder
  import mtfp_pkg::*;
(
  input  logic     clk,
  input  logic     rst,
  input  logic     seed_valid,
  input  seed_t    seed,
  output logic     seed_ready,
  input  logic     row_avail,
  input  hit_row_t row,
  output logic     row_pop,
  output logic     seg_valid,
  output segment_t seg,
  output logic [2:0] n_cand   // candidates formed for this packet (0..4)
);
  typedef enum logic [3:0] {
    S_IDLE, S_PREP, S_HITS, S_DRAIN, S_FIND, S_WAITA, S_WAITB, S_FIT, S_CMP
  } state_t;
  state_t state;

  seed_t seed_r;
  logic  prep_start, prep_done;
  logic [SEC_W-1:0]         sec;
  logic signed [TRIG_W-1:0] cos_v, sin_v;
  logic [$clog2(N_SLOTS)-1:0] slot, slot_d;

  // ---------------- seed preparation ----------------
  assign seed_ready = (state == S_IDLE);
  assign prep_start = seed_valid && seed_ready;

  seed_prep u_prep (
    .clk, .rst, .start(prep_start), .m(seed.m),
    .done(prep_done), .sec(sec), .cos_o(cos_v), .sin_o(sin_v));

  // ---------------- hit processors ----------------
  hp_out_t hp [N_LAYERS];
  logic signed [LEN_W-1:0] yt_d [N_LAYERS];
  logic signed [LEN_W-1:0] zt_d [N_LAYERS];

  assign row_pop = (state == S_HITS) && row_avail;

  for (genvar l = 0; l < N_LAYERS; l++) begin : g_hp
    dt_hit_t h_in;
    always_comb begin
      h_in       = row[l];
      h_in.valid = row[l].valid && row_pop;
    end
    hit_processor u_hp (
      .clk, .rst, .hit(h_in), .m(seed_r.m), .b_seed(seed_r.b),
      .sec(sec), .cos_i(cos_v), .sin_i(sin_v), .out(hp[l]));
    always_ff @(posedge clk) begin
      yt_d[l] <= row[l].y;
      zt_d[l] <= row[l].z;
    end
  end

  // ---------------- hit store (all hits of the packet) ----------------
  hp_out_t                 st_hp [N_HITS];
  logic signed [LEN_W-1:0] st_y  [N_HITS];
  logic signed [LEN_W-1:0] st_z  [N_HITS];

  always_ff @(posedge clk) begin
    if (rst || prep_start) begin
      for (int h = 0; h < N_HITS; h++) begin
        st_hp[h] <= '0; st_y[h] <= '0; st_z[h] <= '0;
      end
    end else begin
      for (int l = 0; l < N_LAYERS; l++) begin
        if (hp[l].valid) begin
          st_hp[l*N_SLOTS + int'(slot_d)] <= hp[l];
          st_y [l*N_SLOTS + int'(slot_d)] <= yt_d[l];
          st_z [l*N_SLOTS + int'(slot_d)] <= zt_d[l];
        end
      end
    end
  end

  // ---------------- histograms, one pair per multilayer ----------------
  logic find_a, start_b;
  logic done_a [2];
  logic done_b [2];
  coarse_idx_t win_base [2];
  coarse_idx_t amax_bin [2];
  logic [$clog2(HITS_PER_ML+1)-1:0] amax_cnt [2];
  ml_mask_t     sel_mask [2];
  logic [1:0]   n_max [2];
  ml_sgn_mask_t max_mask [2][N_MAX];
  logic [$clog2(HB_BINS)-1:0] bmax_bin [2][N_MAX];
  logic [$clog2(HITS_PER_ML+1)-1:0] bmax_cnt [2][N_MAX];

  assign find_a  = (state == S_FIND);
  assign start_b = (state == S_WAITA) && done_a[0];

  for (genvar ml = 0; ml < 2; ml++) begin : g_ml
    hp_out_t fill [LAYERS_PER_ML];
    logic [$clog2(HITS_PER_ML)-1:0] fill_id [LAYERS_PER_ML];
    hp_out_t ml_hits [HITS_PER_ML];
    for (genvar i = 0; i < LAYERS_PER_ML; i++) begin : g_fill
      assign fill[i]    = hp[ml*LAYERS_PER_ML + i];
      assign fill_id[i] = ($clog2(HITS_PER_ML))'(i*N_SLOTS + int'(slot_d));
    end
    for (genvar h = 0; h < HITS_PER_ML; h++) begin : g_hits
      assign ml_hits[h] = st_hp[ml*HITS_PER_ML + h];
    end
    histo_a u_ha (
      .clk, .rst, .clear(prep_start), .fill(fill), .fill_id(fill_id),
      .find(find_a), .done(done_a[ml]), .max_bin(amax_bin[ml]), .max_cnt(amax_cnt[ml]),
      .win_base(win_base[ml]), .sel_mask(sel_mask[ml]));
    histo_b u_hb (
      .clk, .rst, .start(start_b), .win_base(win_base[ml]), .sel_mask(sel_mask[ml]),
      .hits(ml_hits), .done(done_b[ml]), .n_max(n_max[ml]), .max_mask(max_mask[ml]),
      .max_bin(bmax_bin[ml]), .max_cnt(bmax_cnt[ml]));
  end

  // ---------------- candidates and linear fitters ----------------
  logic     fit_start;
  logic     fit_busy [N_FIT];
  logic     fit_done [N_FIT];
  logic     fit_fin  [N_FIT];
  segment_t fits     [N_FIT];
  logic     cmp_valid, cmp_out_valid;
  segment_t cmp_seg;
  logic [$clog2(N_FIT)-1:0] cmp_best;

  assign fit_start = (state == S_WAITB) && done_b[0];

  for (genvar c = 0; c < N_FIT; c++) begin : g_fit
    localparam int I0 = c / N_MAX;   // maximum of ML0
    localparam int I1 = c % N_MAX;   // maximum of ML1
    logic                  hv [N_HITS];
    logic signed [LEN_W:0] yh [N_HITS];
    logic signed [LEN_W:0] zh [N_HITS];
    logic cand;
    assign cand = (int'(n_max[0]) > I0) && (int'(n_max[1]) > I1);
    always_comb begin
      for (int h = 0; h < N_HITS; h++) begin
        automatic int ml = h / HITS_PER_ML;
        automatic int hl = h % HITS_PER_ML;
        automatic ml_sgn_mask_t mk = (ml == 0) ? max_mask[0][I0] : max_mask[1][I1];
        automatic logic plus  = mk[hl];
        automatic logic minus = mk[HITS_PER_ML + hl];
        hv[h] = cand && (plus || minus);
        if (plus) begin
          yh[h] = (LEN_W+1)'(st_y[h]) + (LEN_W+1)'(st_hp[h].dy);
          zh[h] = (LEN_W+1)'(st_z[h]) - (LEN_W+1)'(st_hp[h].dz);
        end else begin
          yh[h] = (LEN_W+1)'(st_y[h]) - (LEN_W+1)'(st_hp[h].dy);
          zh[h] = (LEN_W+1)'(st_z[h]) + (LEN_W+1)'(st_hp[h].dz);
        end
      end
    end
    linear_fitter u_fit (
      .clk, .rst, .start(fit_start), .hv(hv), .yh(yh), .zh(zh),
      .busy(fit_busy[c]), .done(fit_done[c]), .fit(fits[c]));
    always_ff @(posedge clk) begin
      if (rst || fit_start) fit_fin[c] <= 1'b0;
      else if (fit_done[c]) fit_fin[c] <= 1'b1;
    end
  end

  always_comb begin
    cmp_valid = (state == S_FIT);
    for (int c = 0; c < N_FIT; c++) cmp_valid &= fit_fin[c];
  end

  chi2_compare #(.N(N_FIT)) u_cmp (
    .clk, .rst, .in_valid(cmp_valid), .fits(fits),
    .out_valid(cmp_out_valid), .seg(cmp_seg), .best(cmp_best));

  // ---------------- control ----------------
  always_ff @(posedge clk) begin
    seg_valid <= 1'b0;
    if (rst) begin
      state  <= S_IDLE;
      seed_r <= '0;
      slot   <= '0;
      slot_d <= '0;
      seg    <= '0;
      n_cand <= '0;
    end else begin
      slot_d <= slot;
      unique case (state)
        S_IDLE: if (prep_start) begin
          seed_r <= seed;
          state  <= S_PREP;
        end
        S_PREP: if (prep_done) begin
          slot  <= '0;
          state <= S_HITS;
        end
        S_HITS: if (row_pop) begin
          if (int'(slot) == N_SLOTS-1) state <= S_DRAIN;
          else slot <= slot + 1'b1;
        end
        S_DRAIN: state <= S_FIND;   // last row is being entered
        S_FIND:  state <= S_WAITA;
        S_WAITA: if (done_a[0]) state <= S_WAITB;
        S_WAITB: if (done_b[0]) begin
          n_cand <= 3'(int'(n_max[0]) * int'(n_max[1]));
          state  <= S_FIT;
        end
        S_FIT: if (cmp_valid) state <= S_CMP;
        S_CMP: if (cmp_out_valid) begin
          seg       <= cmp_seg;
          seg_valid <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
