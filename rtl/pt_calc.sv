// pt_calc: transverse-momentum calculator for one trigger tower (three
// chambers), sagitta method with the paper's parametrisation
//   pT = S(s) + P(phi) + E(eta)
//   S(s)   = (1/s - a0) / a1
//   P(phi) = p0 + p1*phi + p2*phi^2,  E(eta) = e0 + e1*eta + e2*eta^2
// The sagitta s is the distance of the middle segment from the straight line
// joining the inner and outer segments:
//   s = y2 - y1 - K*(y3 - y1),  K = (Z2-Z1)/(Z3-Z1),  y_i = b_i + Y0_i,
// where b_i is chamber i's fitted intercept (its position at the chamber's
// reference plane Z_i) and Y0_i the chamber offset. Geometry (K, Y0_i) is a
// parameter; the constants a0, 1/a1, p0..p2, e0..e2 are kept per detector
// region in block-RAM tables written through the cfg port, as in the paper
// (a BRAM holds the constants). 1/|s| comes from a reciprocal ROM
// recip[i] = floor(2^20 / i) (recip[0] = 2^20), |s| saturated at 1023 LSB.
// The charge is the sign of s and pT is returned as a magnitude.
// Formats (this design's choice): phi, eta, K signed Q16; p_i, e_i, 1/a1 and
// pT in Q16 GeV; a0 in the Q20 scale of 1/s.
// Timing: fully pipelined, one input per clock, result seven clocks after the
// input (the paper's latency of seven clocks).
module pt_calc
  import mtfp_pkg::*;
#(
  parameter int NREG  = 64,                   // detector regions (eta, phi)
  parameter int K_POS = 32768,                // (Z2-Z1)/(Z3-Z1) in Q16
  parameter int Y0_1  = 0,
  parameter int Y0_2  = 0,
  parameter int Y0_3  = 0,
  parameter int RECIP_N = 1024
) (
  input  logic                          clk,
  input  logic                          rst,
  // segment positions and region
  input  logic                          in_valid,
  input  logic signed [LEN_W+1:0]       b1,
  input  logic signed [LEN_W+1:0]       b2,
  input  logic signed [LEN_W+1:0]       b3,
  input  logic [$clog2(NREG)-1:0]       region,
  input  logic signed [17:0]            phi,
  input  logic signed [17:0]            eta,
  // constant tables: addr = {region, k}, k = 0:a0 1:inv_a1 2..4:p0..p2 5..7:e0..e2
  input  logic                          cfg_we,
  input  logic [$clog2(NREG)+2:0]       cfg_addr,
  input  logic signed [31:0]            cfg_data,
  // result
  output logic                          out_valid,
  output logic signed [31:0]            pt,
  output logic                          charge_neg
);
  localparam int RW = $clog2(NREG);
  localparam int RECIP_FRAC = 20;

  // ---- constant tables, one per coefficient ----
  logic signed [31:0] ctab [8][NREG];
  logic signed [31:0] c1 [8];   // read in stage 1
  always_ff @(posedge clk) begin
    if (cfg_we) ctab[cfg_addr[2:0]][cfg_addr[RW+2:3]] <= cfg_data;
    for (int k = 0; k < 8; k++) c1[k] <= ctab[k][region];
  end

  // ---- reciprocal ROM ----
  logic [RECIP_FRAC:0] recip_rom [RECIP_N];
  initial begin
    recip_rom[0] = (RECIP_FRAC+1)'(1 << RECIP_FRAC);
    for (int i = 1; i < RECIP_N; i++) recip_rom[i] = (RECIP_FRAC+1)'((1 << RECIP_FRAC) / i);
  end

  logic [5:0] v;
  // stage 1
  logic signed [LEN_W+3:0] y1_1, y2_1, y3_1;
  logic signed [17:0]      phi1, eta1;
  // stage 2
  logic signed [LEN_W+4:0] s2;
  logic signed [17:0]      phi2, eta2, phisq2, etasq2;
  logic signed [31:0]      c2 [8];
  // stage 3
  logic [RECIP_FRAC:0]     inv3;
  logic                    neg3;
  logic signed [31:0]      pl3, pq3, el3, eq3;
  logic signed [31:0]      c3 [8];
  // stage 4
  logic signed [32:0]      diff4;
  logic signed [33:0]      psum4, esum4;
  logic signed [31:0]      inva1_4;
  logic                    neg4;
  // stage 5
  logic signed [33:0]      s5, p5, e5;
  logic                    neg5;
  // stage 6
  logic signed [35:0]      sum6;
  logic                    neg6;

  logic signed [LEN_W+21:0] ks;
  logic [LEN_W+4:0]         sabs;
  logic signed [65:0]       sprod;
  assign ks    = (LEN_W+22)'(K_POS) * (LEN_W+22)'(y3_1 - y1_1);
  assign sabs  = s2[LEN_W+4] ? (LEN_W+5)'(-s2) : (LEN_W+5)'(s2);
  assign sprod = 66'(diff4) * 66'(inva1_4);

  always_ff @(posedge clk) begin
    if (rst) begin
      v <= '0;
      out_valid <= 1'b0;
      pt <= '0;
      charge_neg <= 1'b0;
    end else begin
      v <= {v[4:0], in_valid};
      out_valid <= v[5];
    end
    // stage 1: chamber offsets, table read (c1 above)
    y1_1 <= (LEN_W+4)'(b1) + (LEN_W+4)'(Y0_1);
    y2_1 <= (LEN_W+4)'(b2) + (LEN_W+4)'(Y0_2);
    y3_1 <= (LEN_W+4)'(b3) + (LEN_W+4)'(Y0_3);
    phi1 <= phi;
    eta1 <= eta;
    // stage 2: sagitta, squares
    s2     <= (LEN_W+5)'(y2_1 - y1_1) - (LEN_W+5)'(ks >>> 16);
    phi2   <= phi1;
    eta2   <= eta1;
    phisq2 <= 18'((36'(phi1) * 36'(phi1)) >>> 16);
    etasq2 <= 18'((36'(eta1) * 36'(eta1)) >>> 16);
    c2     <= c1;
    // stage 3: reciprocal look-up, polynomial products
    inv3 <= recip_rom[(sabs >= (LEN_W+5)'(RECIP_N)) ? RECIP_N-1 : int'(sabs)];
    neg3 <= s2 < 0;
    pl3  <= 32'((50'(c2[3]) * 50'(phi2))   >>> 16);
    pq3  <= 32'((50'(c2[4]) * 50'(phisq2)) >>> 16);
    el3  <= 32'((50'(c2[6]) * 50'(eta2))   >>> 16);
    eq3  <= 32'((50'(c2[7]) * 50'(etasq2)) >>> 16);
    c3   <= c2;
    // stage 4: 1/s - a0, polynomial sums
    diff4   <= 33'($signed({1'b0, inv3})) - 33'(c3[0]);
    inva1_4 <= c3[1];
    psum4   <= 34'(c3[2]) + 34'(pl3) + 34'(pq3);
    esum4   <= 34'(c3[5]) + 34'(el3) + 34'(eq3);
    neg4    <= neg3;
    // stage 5: S(s) = (1/s - a0) * (1/a1)
    s5   <= 34'(sprod >>> RECIP_FRAC);
    p5   <= psum4;
    e5   <= esum4;
    neg5 <= neg4;
    // stage 6: sum
    sum6 <= 36'(s5) + 36'(p5) + 36'(e5);
    neg6 <= neg5;
    // stage 7: output
    if (!rst && v[5]) begin
      pt         <= (sum6 > 36'sh7fffffff) ? 32'sh7fffffff :
                    (sum6 < -36'sh80000000) ? -32'sh80000000 : 32'(sum6);
      charge_neg <= neg6;
    end
  end
endmodule
