// chi2_compare: picks, among the N fits of one chamber, the found fit with
// the lowest chi2 (lowest index on a tie) - the single-muon configuration of
// the paper. If no fit was found the output has found = 0.
// Interface: `in_valid` qualifies `fits`; one clock later `out_valid` pulses
// with the chosen `seg` and its index `best`.
module chi2_compare
  import mtfp_pkg::*;
#(
  parameter int N = N_FIT
) (
  input  logic     clk,
  input  logic     rst,
  input  logic     in_valid,
  input  segment_t fits [N],
  output logic     out_valid,
  output segment_t seg,
  output logic [$clog2(N)-1:0] best
);
  segment_t best_c;
  logic [$clog2(N)-1:0] best_i;

  always_comb begin
    best_c = '0;
    best_i = '0;
    for (int i = 0; i < N; i++) begin
      if (fits[i].found && (!best_c.found || fits[i].chi2 < best_c.chi2)) begin
        best_c = fits[i];
        best_i = ($clog2(N))'(i);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      seg       <= '0;
      best      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        seg  <= best_c;
        best <= best_i;
      end
    end
  end
endmodule
