// tb_chi2_compare: random sets of four fits (some not found, some with equal
// chi2) against a model that scans for the found fit with the smallest chi2,
// first index winning a tie; checks the one-clock latency.
module tb_chi2_compare;
  import mtfp_pkg::*;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  logic in_valid, out_valid;
  segment_t fits [N_FIT];
  segment_t seg;
  logic [1:0] best;

  chi2_compare dut (.*);

  int checks = 0, failures = 0, n_none = 0, n_tie = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0;
    for (int i = 0; i < N_FIT; i++) fits[i] = '0;
    repeat (3) @(posedge clk); #1;
    rst = 0;
    for (int ev = 0; ev < 2000; ev++) begin
      automatic int eb = -1;
      for (int i = 0; i < N_FIT; i++) begin
        fits[i].found  = ($urandom_range(3) != 0);
        fits[i].chi2   = CHI2_W'($urandom_range(7));
        fits[i].m      = SLOPE_W'($urandom);
        fits[i].b      = 18'($urandom);
        fits[i].n_hits = 6'($urandom_range(12));
      end
      for (int i = 0; i < N_FIT; i++)
        if (fits[i].found && (eb < 0 || fits[i].chi2 < fits[eb].chi2)) eb = i;
      for (int i = 0; i < N_FIT; i++)
        if (eb >= 0 && i != eb && fits[i].found && fits[i].chi2 == fits[eb].chi2) n_tie++;
      if (eb < 0) n_none++;
      in_valid = 1;
      @(posedge clk); #1;
      in_valid = 0;
      checks++;
      if (!out_valid || (eb < 0 && seg.found) || (eb >= 0 && (seg != fits[eb] || int'(best) != eb))) begin
        failures++;
        $display("FAIL ev=%0d best=%0d/%0d", ev, best, eb);
      end
      @(posedge clk); #1;
      checks++;
      if (out_valid) begin failures++; $display("FAIL: out_valid not a pulse"); end
    end
    checks++;
    if (n_none == 0 || n_tie == 0) begin failures++; $display("FAIL: corner cases missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
