// seq_div: sequential signed-by-unsigned divider (restoring, one quotient bit
// per clock). Used by the seed preparation and by the linear fitters.
//
// Interface: pulse `start` with `num` (signed) and `den` (unsigned, > 0).
// `done` pulses Q_W-1 clocks after `start` (one clock after it on overflow),
// with `q` = num/den truncated toward zero. If |num/den| does not fit in a signed
// Q_W-bit result (or den is zero) `ovf` is set together with `done` and `q`
// is saturated. `busy` is high from the clock after `start` until `done`.
// Only the Q_W-1 low magnitude bits are computed: the overflow test up front
// checks that all higher quotient bits are zero.
module seq_div #(
  parameter int NUM_W = 64,
  parameter int DEN_W = 48,
  parameter int Q_W   = 24
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    start,
  input  logic signed [NUM_W-1:0] num,
  input  logic [DEN_W-1:0]        den,
  output logic                    busy,
  output logic                    done,
  output logic signed [Q_W-1:0]   q,
  output logic                    ovf
);
  localparam int QM = Q_W - 1;  // magnitude bits of the quotient

  logic [NUM_W-1:0] mag;
  logic [NUM_W-1:0] hi_part;
  logic [DEN_W:0]   rem;
  logic [QM-1:0]    sh;       // dividend bits still to bring down
  logic [QM-1:0]    quo;
  logic [DEN_W-1:0] den_r;
  logic             neg;
  logic [$clog2(QM+1)-1:0] cnt;
  logic [DEN_W+1:0] trial;

  assign mag     = num[NUM_W-1] ? NUM_W'(-num) : NUM_W'(num);
  assign hi_part = mag >> QM;
  assign trial   = {rem, sh[QM-1]};

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst) begin
      busy <= 1'b0;
      cnt  <= '0;
      q    <= '0;
      ovf  <= 1'b0;
      rem  <= '0;
      sh   <= '0;
      quo  <= '0;
      neg  <= 1'b0;
      den_r <= '0;
    end else if (start) begin
      neg   <= num[NUM_W-1];
      den_r <= den;
      sh    <= mag[QM-1:0];
      quo   <= '0;
      if (den == '0 || hi_part >= NUM_W'(den)) begin
        // quotient magnitude would need more than QM bits
        busy <= 1'b0;
        done <= 1'b1;
        ovf  <= 1'b1;
        q    <= num[NUM_W-1] ? {1'b1, {QM{1'b0}}} : {1'b0, {QM{1'b1}}};
      end else begin
        busy <= 1'b1;
        ovf  <= 1'b0;
        rem  <= (DEN_W+1)'(hi_part);
        cnt  <= ($clog2(QM+1))'(QM);
      end
    end else if (busy) begin
      if (trial >= (DEN_W+2)'(den_r)) begin
        rem <= (DEN_W+1)'(trial - (DEN_W+2)'(den_r));
        quo <= {quo[QM-2:0], 1'b1};
      end else begin
        rem <= trial[DEN_W:0];
        quo <= {quo[QM-2:0], 1'b0};
      end
      sh  <= sh << 1;
      cnt <= cnt - 1'b1;
      if (cnt == 1) begin
        busy <= 1'b0;
        done <= 1'b1;
        q    <= neg ? -$signed({1'b0, (trial >= (DEN_W+2)'(den_r)) ? {quo[QM-2:0], 1'b1} : {quo[QM-2:0], 1'b0}})
                    :  $signed({1'b0, (trial >= (DEN_W+2)'(den_r)) ? {quo[QM-2:0], 1'b1} : {quo[QM-2:0], 1'b0}});
      end
    end
  end
endmodule
