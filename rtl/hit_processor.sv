// hit_processor: computes the two Hough intercepts of one drift-tube hit
// (one instance per tube layer, one hit per clock).
//   b+- = +-sec*r - (m*z_t - y_t),   sec = sqrt(1+m^2)      (paper Eq. 3)
// and the offsets from the tube centre to the point on the track,
//   dy = r*cos,  dz = r*sin                                  (paper Eq. 5)
// which the fitters use later. Each intercept is placed in the 256-bin fine
// grid centred on the seed intercept b_seed:
//   d = b - b_seed + HIST_HALF,  bin = d >> 5,  ok = 0 <= d < 8192.
// Products are truncated by arithmetic shift (rounding toward -inf).
// Timing: fully pipelined, one register stage (result one clock after input).
module hit_processor
  import mtfp_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst,
  input  dt_hit_t                   hit,
  input  logic signed [SLOPE_W-1:0] m,       // seed slope
  input  logic signed [LEN_W-1:0]   b_seed,  // seed intercept (histogram centre)
  input  logic [SEC_W-1:0]          sec,
  input  logic signed [TRIG_W-1:0]  cos_i,
  input  logic signed [TRIG_W-1:0]  sin_i,
  output hp_out_t                   out
);
  localparam int D_W = LEN_W + 4;

  logic signed [SLOPE_W+LEN_W-1:0] mz;
  logic signed [SEC_W+R_W:0]       sr;
  logic signed [D_W-1:0]           c, bp, bm, dp, dm;
  logic signed [TRIG_W+R_W:0]      ry, rz;

  assign mz = m * hit.z;
  assign sr = $signed({1'b0, sec}) * $signed({1'b0, hit.r});
  assign c  = D_W'(hit.y) - D_W'(mz >>> SLOPE_FRAC);
  assign bp = c + D_W'(sr >>> SLOPE_FRAC);
  assign bm = c - D_W'(sr >>> SLOPE_FRAC);
  assign dp = bp - D_W'(b_seed) + D_W'(HIST_HALF);
  assign dm = bm - D_W'(b_seed) + D_W'(HIST_HALF);
  assign ry = cos_i * $signed({1'b0, hit.r});
  assign rz = sin_i * $signed({1'b0, hit.r});

  always_ff @(posedge clk) begin
    if (rst) begin
      out <= '0;
    end else begin
      out.valid <= hit.valid;
      out.ok_p  <= (dp >= 0) && (dp < D_W'(2*HIST_HALF));
      out.ok_m  <= (dm >= 0) && (dm < D_W'(2*HIST_HALF));
      out.bin_p <= fine_idx_t'(dp >>> FINE_SHIFT);
      out.bin_m <= fine_idx_t'(dm >>> FINE_SHIFT);
      out.dy    <= LEN_W'(ry >>> TRIG_FRAC);
      out.dz    <= LEN_W'(rz >>> TRIG_FRAC);
    end
  end
endmodule
