// mtfp_top: Muon Track Finder Processor of one trigger tower (three drift-tube
// chambers), the programmable-logic part of the demonstrator.
// For each chamber a hit FIFO buffers the RoI packets until the pre-trigger
// seed of that chamber arrives; a segment finder then reconstructs the
// chamber's segment. The three segments leave on seg_* (where the processor
// system would read them over AXI) and also feed the on-chip pT calculator
// once all three of an event are in. pt_ok tells whether all three chambers
// found a segment; without them pT is computed from whatever was there and
// flagged invalid.
// Interface: per chamber, hit rows (one hit per tube layer) with hit_valid,
// exactly N_SLOTS rows per packet, and the seed with a valid/ready handshake;
// packets and seeds of a chamber must arrive in the same order. The RoI
// region/phi/eta for the pT constants are sampled when chamber 0 accepts its
// seed. Constant tables of the pT calculator are written through cfg_*.
module mtfp_top
  import mtfp_pkg::*;
#(
  parameter int N_CH       = 3,
  parameter int FIFO_DEPTH = 64,
  parameter int NREG       = 64
) (
  input  logic                      clk,
  input  logic                      rst,
  // DT hits, per chamber
  input  logic                      hit_valid [N_CH],
  input  hit_row_t                  hit_row   [N_CH],
  output logic                      fifo_overflow [N_CH],
  // pre-trigger seeds and RoI
  input  logic                      seed_valid [N_CH],
  input  seed_t                     seed       [N_CH],
  output logic                      seed_ready [N_CH],
  input  logic [$clog2(NREG)-1:0]   roi_region,
  input  logic signed [17:0]        roi_phi,
  input  logic signed [17:0]        roi_eta,
  // segments towards the processing system
  output logic                      seg_valid [N_CH],
  output segment_t                  seg       [N_CH],
  // pT calculator constants and result
  input  logic                      cfg_we,
  input  logic [$clog2(NREG)+2:0]   cfg_addr,
  input  logic signed [31:0]        cfg_data,
  output logic                      pt_valid,
  output logic                      pt_ok,
  output logic signed [31:0]        pt,
  output logic                      charge_neg
);
  localparam int ROW_W = $bits(hit_row_t);

  logic     got [N_CH];
  segment_t seg_r [N_CH];

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    logic [ROW_W-1:0] rd_data;
    logic empty, full, pop;
    logic [$clog2(FIFO_DEPTH):0] count;
    logic [2:0] n_cand;

    hit_fifo #(.WIDTH(ROW_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst, .push(hit_valid[c]), .wr_data(hit_row[c]), .pop(pop),
      .rd_data(rd_data), .empty(empty), .full(full), .count(count),
      .overflow(fifo_overflow[c]));

    segment_finder u_sf (
      .clk, .rst, .seed_valid(seed_valid[c]), .seed(seed[c]), .seed_ready(seed_ready[c]),
      .row_avail(!empty), .row(hit_row_t'(rd_data)), .row_pop(pop),
      .seg_valid(seg_valid[c]), .seg(seg[c]), .n_cand(n_cand));
  end

  // ---- gather the three segments of an event, then compute pT ----
  logic all_in, pt_start;
  logic [$clog2(NREG)-1:0] region_r;
  logic signed [17:0] phi_r, eta_r;
  logic [6:0] ok_pipe;

  always_comb begin
    all_in = 1'b1;
    for (int c = 0; c < N_CH; c++) all_in &= got[c];
  end
  assign pt_start = all_in;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int c = 0; c < N_CH; c++) begin
        got[c] <= 1'b0;
        seg_r[c] <= '0;
      end
      region_r <= '0;
      phi_r    <= '0;
      eta_r    <= '0;
      ok_pipe  <= '0;
    end else begin
      for (int c = 0; c < N_CH; c++) begin
        if (seg_valid[c]) begin
          got[c]   <= 1'b1;
          seg_r[c] <= seg[c];
        end else if (pt_start) begin
          got[c] <= 1'b0;
        end
      end
      if (seed_valid[0] && seed_ready[0]) begin
        region_r <= roi_region;
        phi_r    <= roi_phi;
        eta_r    <= roi_eta;
      end
      begin
        automatic logic ok = 1'b1;
        for (int c = 0; c < N_CH; c++) ok &= seg_r[c].found;
        ok_pipe <= {ok_pipe[5:0], ok};
      end
    end
  end
  assign pt_ok = ok_pipe[6];

  pt_calc #(.NREG(NREG)) u_pt (
    .clk, .rst, .in_valid(pt_start),
    .b1(seg_r[0].b), .b2(seg_r[1].b), .b3(seg_r[N_CH-1].b),
    .region(region_r), .phi(phi_r), .eta(eta_r),
    .cfg_we, .cfg_addr, .cfg_data,
    .out_valid(pt_valid), .pt(pt), .charge_neg(charge_neg));
endmodule
