// linear_fitter: Simple Linear Regression of one segment candidate (paper
// Eqs. 6-7) and the chi2 of the fit.
//   D  = n*Szz - Sz^2
//   b^ = (Sy*Szz - Szy*Sz) / D
//   m^ = (n*Szy - Sy*Sz)   / D
//   chi2 = sum_h (y_h - m^*z_h - b^)^2
// The paper implements the sums with a chain of DSP blocks and the divisions
// with a ROM; this design computes all products and sums in parallel in one
// clock and uses two sequential dividers (one result bit per clock), a
// simpler arrangement with the same arithmetic. The chi2 is an unweighted sum
// of squared residuals in LSB^2 (the paper does not give the weighting),
// saturated at 2^32-1. A candidate with fewer than two hits, with all hits at
// one z, or whose result does not fit the output formats gives found = 0; it
// takes as long as any other, so the fitter has a fixed latency.
// Interface: pulse `start` with the hit list (hits are latched); `done`
// pulses with `fit` 5 + SLOPE_W = 23 clocks later (start in clock 0, done in
// clock 23). `busy` is high meanwhile.
module linear_fitter
  import mtfp_pkg::*;
#(
  parameter int MAXH = N_HITS
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    start,
  input  logic                    hv [MAXH],  // hit takes part
  input  logic signed [LEN_W:0]   yh [MAXH],  // hit position on the track
  input  logic signed [LEN_W:0]   zh [MAXH],
  output logic                    busy,
  output logic                    done,
  output segment_t                fit
);
  localparam int SUM_W = 2*(LEN_W+1) + $clog2(MAXH) + 1;  // Szz, Szy
  localparam int LIN_W = LEN_W + 1 + $clog2(MAXH) + 1;    // Sz, Sy
  localparam int DEN_W = SUM_W + $clog2(MAXH) + 1;
  localparam int NUM_W = 64;
  localparam int NW    = $clog2(MAXH+1);

  typedef enum logic [2:0] {S_IDLE, S_SUM, S_NUM, S_DIV, S_CHI} state_t;
  state_t state;

  logic                  v_r [MAXH];
  logic signed [LEN_W:0] y_r [MAXH];
  logic signed [LEN_W:0] z_r [MAXH];

  logic [NW-1:0]             n_r;
  logic signed [LIN_W-1:0]   sz_r, sy_r;
  logic signed [SUM_W-1:0]   szz_r, szy_r;
  logic signed [NUM_W-1:0]   nb_r, nm_r;
  logic [DEN_W-1:0]          d_r;
  logic                      degen;

  // ---- parallel sums ----
  logic [NW-1:0]           n_c;
  logic signed [LIN_W-1:0] sz_c, sy_c;
  logic signed [SUM_W-1:0] szz_c, szy_c;
  always_comb begin
    n_c = '0; sz_c = '0; sy_c = '0; szz_c = '0; szy_c = '0;
    for (int h = 0; h < MAXH; h++) begin
      if (v_r[h]) begin
        n_c   = n_c + 1'b1;
        sz_c  = sz_c + LIN_W'(z_r[h]);
        sy_c  = sy_c + LIN_W'(y_r[h]);
        szz_c = szz_c + SUM_W'(z_r[h] * z_r[h]);
        szy_c = szy_c + SUM_W'(z_r[h] * y_r[h]);
      end
    end
  end

  // ---- numerators and denominator ----
  logic signed [NUM_W-1:0] d_c, nb_c, nm_c;
  always_comb begin
    d_c  = NUM_W'(n_r) * NUM_W'(szz_r) - NUM_W'(sz_r) * NUM_W'(sz_r);
    nb_c = NUM_W'(sy_r) * NUM_W'(szz_r) - NUM_W'(szy_r) * NUM_W'(sz_r);
    nm_c = (NUM_W'(n_r) * NUM_W'(szy_r) - NUM_W'(sy_r) * NUM_W'(sz_r)) <<< SLOPE_FRAC;
  end

  // ---- dividers ----
  logic div_start;
  logic db_busy, db_done, db_ovf, dm_busy, dm_done, dm_ovf;
  logic signed [LEN_W+1:0]   qb;
  logic signed [SLOPE_W-1:0] qm;

  seq_div #(.NUM_W(NUM_W), .DEN_W(DEN_W), .Q_W(LEN_W+2)) u_div_b (
    .clk, .rst, .start(div_start), .num(nb_r), .den(d_r),
    .busy(db_busy), .done(db_done), .q(qb), .ovf(db_ovf));
  seq_div #(.NUM_W(NUM_W), .DEN_W(DEN_W), .Q_W(SLOPE_W)) u_div_m (
    .clk, .rst, .start(div_start), .num(nm_r), .den(d_r),
    .busy(dm_busy), .done(dm_done), .q(qm), .ovf(dm_ovf));

  // ---- residuals ----
  logic [63:0] chi_c;
  always_comb begin
    chi_c = '0;
    for (int h = 0; h < MAXH; h++) begin
      if (v_r[h]) begin
        automatic logic signed [SLOPE_W+LEN_W:0] mzp = fit.m * z_r[h];
        automatic logic signed [LEN_W+4:0] res =
          (LEN_W+5)'(y_r[h]) - (LEN_W+5)'(mzp >>> SLOPE_FRAC) - (LEN_W+5)'(fit.b);
        chi_c = chi_c + 64'(res * res);
      end
    end
  end

  always_ff @(posedge clk) begin
    div_start <= 1'b0;
    done      <= 1'b0;
    if (rst) begin
      state <= S_IDLE;
      busy  <= 1'b0;
      fit   <= '0;
      n_r <= '0; sz_r <= '0; sy_r <= '0; szz_r <= '0; szy_r <= '0;
      nb_r <= '0; nm_r <= '0; d_r <= '0; degen <= 1'b0;
      for (int h = 0; h < MAXH; h++) begin
        v_r[h] <= 1'b0; y_r[h] <= '0; z_r[h] <= '0;
      end
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          for (int h = 0; h < MAXH; h++) begin
            v_r[h] <= hv[h]; y_r[h] <= yh[h]; z_r[h] <= zh[h];
          end
          busy  <= 1'b1;
          state <= S_SUM;
        end
        S_SUM: begin
          n_r <= n_c; sz_r <= sz_c; sy_r <= sy_c; szz_r <= szz_c; szy_r <= szy_c;
          state <= S_NUM;
        end
        S_NUM: begin
          nb_r <= nb_c;
          nm_r <= nm_c;
          d_r  <= DEN_W'(d_c);
          fit.n_hits <= 6'(n_r);
          // a degenerate candidate still runs the dividers (on 0/1) so that
          // every fit takes the same number of clocks
          degen     <= (n_r < NW'(2)) || (d_c <= 0);
          if ((n_r < NW'(2)) || (d_c <= 0)) begin
            nb_r <= '0;
            nm_r <= '0;
            d_r  <= DEN_W'(1);
          end
          div_start <= 1'b1;
          state     <= S_DIV;
        end
        S_DIV: if (db_done && dm_done) begin  // both dividers finish together
          fit.m     <= qm;
          fit.b     <= qb;
          fit.found <= !(db_ovf || dm_ovf || degen);
          state     <= S_CHI;
        end
        S_CHI: begin
          fit.chi2 <= degen ? '0 : (chi_c > 64'({CHI2_W{1'b1}})) ? {CHI2_W{1'b1}} : CHI2_W'(chi_c);
          busy  <= 1'b0;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
