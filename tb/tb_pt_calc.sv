// tb_pt_calc: checks the sagitta pT calculator against a real-valued model
// evaluated directly from the formulas
//   s = y2 - y1 - K (y3 - y1),  pT = (1/|s| - a0)/a1 + P(phi) + E(eta),
// with per-region constants written through the configuration port, one new
// input every clock (fully pipelined), and checks the seven-clock latency.
module tb_pt_calc;
  import mtfp_pkg::*;
  localparam int NREG = 64;
  localparam int NIN  = 40;

  logic clk = 0, rst = 1;
  always #2 clk = ~clk;

  logic in_valid;
  logic signed [LEN_W+1:0] b1, b2, b3;
  logic [5:0] region;
  logic signed [17:0] phi, eta;
  logic cfg_we;
  logic [8:0] cfg_addr;
  logic signed [31:0] cfg_data;
  logic out_valid, charge_neg;
  logic signed [31:0] pt;

  pt_calc dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // constants per region r: a0 = 100*r (Q20 scale), 1/a1 = (5000+100 r) GeV*LSB,
  // p = (1, 0.5, 0.25) + 0.01 r, e = (0.5, 0.2, 0.1)
  function automatic real c_a0(int r);    return 100.0 * r; endfunction
  function automatic real c_ia1(int r);   return 5000.0 + 100.0 * r; endfunction
  function automatic real c_p(int r, int i);
    return (i == 0 ? 1.0 : i == 1 ? 0.5 : 0.25) + 0.01 * r;
  endfunction
  function automatic real c_e(int i);     return (i == 0 ? 0.5 : i == 1 ? 0.2 : 0.1); endfunction

  real exp_pt [NIN];
  bit  exp_neg [NIN];
  int  in_cycle [NIN];
  int  n_out = 0;

  always @(posedge clk) if (!rst && out_valid) begin
    automatic real got = real'(pt) / 65536.0;
    automatic real tol = 0.01 * (exp_pt[n_out] < 0 ? -exp_pt[n_out] : exp_pt[n_out]) + 0.05;
    checks += 2;
    if ((got - exp_pt[n_out]) > tol || (exp_pt[n_out] - got) > tol || charge_neg != exp_neg[n_out]) begin
      failures++;
      $display("FAIL %0d: pt=%f exp=%f neg=%0d exp_neg=%0d", n_out, got, exp_pt[n_out], charge_neg, exp_neg[n_out]);
    end
    if (cycle - in_cycle[n_out] != 7) begin
      failures++;
      $display("FAIL latency %0d", cycle - in_cycle[n_out]);
    end
    n_out++;
  end

  initial begin
    in_valid = 0; b1 = 0; b2 = 0; b3 = 0; region = 0; phi = 0; eta = 0;
    cfg_we = 0; cfg_addr = 0; cfg_data = 0;
    repeat (3) @(posedge clk); #1;
    rst = 0;
    for (int r = 0; r < 4; r++) begin
      int vals [8];
      vals[0] = $rtoi(c_a0(r));
      vals[1] = $rtoi(c_ia1(r) * 65536.0);
      for (int i = 0; i < 3; i++) vals[2+i] = $rtoi(c_p(r, i) * 65536.0);
      for (int i = 0; i < 3; i++) vals[5+i] = $rtoi(c_e(i) * 65536.0);
      for (int k = 0; k < 8; k++) begin
        cfg_we = 1; cfg_addr = {r[5:0], k[2:0]}; cfg_data = vals[k];
        @(posedge clk); #1;
      end
    end
    cfg_we = 0;
    for (int n = 0; n < NIN; n++) begin
      automatic int r   = n % 4;
      automatic int y1  = $urandom_range(4000) - 2000;
      automatic int y3  = y1 + $urandom_range(4000) - 2000;
      automatic int sg  = $urandom_range(900) + 60;
      automatic int s   = (n % 3 == 0) ? -sg : sg;
      automatic int y2  = y1 + (y3 - y1) / 2 + s;   // K = 0.5
      automatic real ph = (real'($urandom_range(200)) - 100.0) / 200.0;
      automatic real et = (real'($urandom_range(200)) - 100.0) / 150.0;
      automatic real sr = real'(y2 - y1) - 0.5 * real'(y3 - y1);
      automatic real sa = sr < 0 ? -sr : sr;
      exp_neg[n] = sr < 0;
      exp_pt[n]  = (1.0 / sa - c_a0(r) / 1048576.0) * c_ia1(r)
                 + c_p(r, 0) + c_p(r, 1) * ph + c_p(r, 2) * ph * ph
                 + c_e(0) + c_e(1) * et + c_e(2) * et * et;
      in_valid = 1; b1 = 18'(y1); b2 = 18'(y2); b3 = 18'(y3); region = 6'(r);
      phi = 18'($rtoi(ph * 65536.0)); eta = 18'($rtoi(et * 65536.0));
      in_cycle[n] = cycle;
      @(posedge clk); #1;
    end
    in_valid = 0;
    repeat (12) @(posedge clk);
    checks++;
    if (n_out != NIN) begin failures++; $display("FAIL: %0d outputs", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
