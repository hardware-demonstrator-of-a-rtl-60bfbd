// tb_hit_processor: random hits and seed slopes; the expected intercept bins
// and offsets are recomputed from Eq. 3 and Eq. 5 in the testbench, with the
// fixed-point truncations written as floor() of real quotients, and compared
// bit-exactly one clock after each input (the unit's latency).
module tb_hit_processor;
  import mtfp_pkg::*;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;

  dt_hit_t hit;
  logic signed [SLOPE_W-1:0] m;
  logic signed [LEN_W-1:0]   b_seed;
  logic [SEC_W-1:0]          sec;
  logic signed [TRIG_W-1:0]  cos_i, sin_i;
  hp_out_t out;

  hit_processor dut (.*);

  int checks = 0, failures = 0, n_in = 0, n_out_range = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint fl(longint x, int k);
    return longint'($floor(real'(x) / real'(longint'(1) << k)));
  endfunction

  hp_out_t expq [$];

  initial begin
    hit = '0; m = 0; b_seed = 0; sec = 4096; cos_i = 0; sin_i = 0;
    repeat (3) @(posedge clk); #1;
    rst = 0;
    for (int n = 0; n < 3000; n++) begin
      automatic real mr = (real'($urandom_range(4000)) - 2000.0) / 1000.0;
      automatic longint mi = longint'($rtoi(mr * 4096.0));
      automatic real a = $atan(real'(mi) / 4096.0);
      automatic hp_out_t e;
      automatic longint c, bp, bm, dp, dm, rs;
      m      = SLOPE_W'(mi);
      sec    = SEC_W'($rtoi($sqrt(1.0 + (real'(mi) / 4096.0) ** 2) * 4096.0));
      cos_i  = TRIG_W'($rtoi($cos(a) * 65536.0));
      sin_i  = TRIG_W'($rtoi($sin(a) * 65536.0));
      b_seed = LEN_W'($urandom_range(4000) - 2000);
      hit.valid = ($urandom_range(9) != 0);
      hit.y = LEN_W'($urandom_range(20000) - 10000);
      hit.z = LEN_W'($urandom_range(20000) - 10000);
      hit.r = R_W'($urandom_range(520));
      // reference
      c  = longint'(hit.y) - fl(mi * longint'(hit.z), SLOPE_FRAC);
      rs = fl(longint'(sec) * longint'(hit.r), SLOPE_FRAC);
      bp = c + rs;
      bm = c - rs;
      dp = bp - longint'(b_seed) + 4096;
      dm = bm - longint'(b_seed) + 4096;
      e.valid = hit.valid;
      e.ok_p  = dp >= 0 && dp < 8192;
      e.ok_m  = dm >= 0 && dm < 8192;
      e.bin_p = fine_idx_t'(fl(dp, 5));
      e.bin_m = fine_idx_t'(fl(dm, 5));
      e.dy    = LEN_W'(fl(longint'(cos_i) * longint'(hit.r), TRIG_FRAC));
      e.dz    = LEN_W'(fl(longint'(sin_i) * longint'(hit.r), TRIG_FRAC));
      if (!e.ok_p || !e.ok_m) n_out_range++;
      @(posedge clk); #1;
      checks++;
      if (out !== e) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d got %p exp %p", n, out, e);
      end
    end
    checks++;
    if (n_out_range == 0) begin failures++; $display("FAIL: range check never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
