// seed_prep: turns the pre-trigger seed slope m into the three trigonometric
// factors the segment finder needs:
//   sec = sqrt(1+m^2)          (for b+- = +-sec*r - (m*z_t - y_t), Eq. 3)
//   cos = 1/sqrt(1+m^2)        (dy = r*cos, Eq. 5)
//   sin = m/sqrt(1+m^2)        (dz = r*sin, Eq. 5)
// The paper gives only the formulas. Here sec comes from a bit-serial integer
// square root (one result bit per clock) of (1<<2F) + m^2, cos from the
// sequential divider (2^(F+TRIG_FRAC))/sec, and sin = m*cos >> F.
// Interface: pulse `start` with `m`; `done` pulses when sec/cos/sin are valid
// (about 20 + 23 + 1 clocks later) and they hold until the next start.
module seed_prep
  import mtfp_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      start,
  input  logic signed [SLOPE_W-1:0] m,
  output logic                      done,
  output logic [SEC_W-1:0]          sec,
  output logic signed [TRIG_W-1:0]  cos_o,
  output logic signed [TRIG_W-1:0]  sin_o
);
  localparam int X_W = 2*SLOPE_W + 1;

  typedef enum logic [1:0] {S_IDLE, S_SQRT, S_DIV, S_SIN} state_t;
  state_t state;

  logic [X_W-1:0]         x;       // (1<<2F) + m^2
  logic [SEC_W-1:0]       root;
  logic [$clog2(SEC_W)-1:0] bitpos;
  logic signed [SLOPE_W-1:0] m_r;
  logic [SEC_W-1:0]       trial;
  logic [2*SEC_W-1:0]     trial_sq;

  logic div_start, div_done, div_busy, div_ovf;
  logic signed [TRIG_W+1:0] div_q;

  logic [2*SLOPE_W-1:0] msq;
  assign msq      = m * m;
  assign trial    = root | (SEC_W'(1) << bitpos);
  assign trial_sq = trial * trial;

  seq_div #(.NUM_W(SLOPE_FRAC+TRIG_FRAC+2), .DEN_W(SEC_W), .Q_W(TRIG_W+2)) u_div (
    .clk, .rst, .start(div_start),
    .num((SLOPE_FRAC+TRIG_FRAC+2)'(1) << (SLOPE_FRAC+TRIG_FRAC)),
    .den(root), .busy(div_busy), .done(div_done), .q(div_q), .ovf(div_ovf)
  );

  logic signed [SLOPE_W+TRIG_W-1:0] msin;
  assign msin = m_r * cos_o;

  always_ff @(posedge clk) begin
    div_start <= 1'b0;
    done      <= 1'b0;
    if (rst) begin
      state  <= S_IDLE;
      root   <= '0;
      bitpos <= '0;
      x      <= '0;
      m_r    <= '0;
      sec    <= '0;
      cos_o  <= '0;
      sin_o  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          m_r    <= m;
          x      <= (X_W'(1) << (2*SLOPE_FRAC)) + X_W'(msq);
          root   <= '0;
          bitpos <= ($clog2(SEC_W))'(SEC_W-1);
          state  <= S_SQRT;
        end
        S_SQRT: begin
          if (trial_sq <= (2*SEC_W)'(x)) root <= trial;
          if (bitpos == 0) begin
            state     <= S_DIV;
            div_start <= 1'b1;
          end else begin
            bitpos <= bitpos - 1'b1;
          end
        end
        S_DIV: if (div_done) begin
          sec   <= root;
          cos_o <= TRIG_W'(div_q);
          state <= S_SIN;
        end
        S_SIN: begin
          sin_o <= TRIG_W'(msin >>> SLOPE_FRAC);
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
