// tb_hit_fifo: random push/pop traffic against a queue model; checks data
// order, empty/full/count, the drop-on-full rule and the sticky overflow flag.
module tb_hit_fifo;
  localparam int W = 20, D = 8;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  logic push, pop, empty, full, overflow;
  logic [W-1:0] wr_data, rd_data;
  logic [$clog2(D):0] count;

  hit_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] q [$];
  bit exp_ovf = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; wr_data = 0;
    repeat (3) @(posedge clk); #1;
    rst = 0;
    for (int t = 0; t < 2000; t++) begin
      // compare state before this clock
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == D) || int'(count) != q.size()
          || overflow != exp_ovf || (q.size() > 0 && rd_data != q[0])) begin
        failures++;
        $display("FAIL t=%0d size=%0d count=%0d empty=%0d full=%0d", t, q.size(), count, empty, full);
      end
      push = ($urandom_range(99) < (t < 1000 ? 60 : 40));
      pop  = !empty && ($urandom_range(99) < 50);
      wr_data = W'($urandom);
      @(posedge clk);
      begin
        automatic bit was_full = (q.size() == D);
        if (pop) void'(q.pop_front());
        if (push) begin
          if (!was_full) q.push_back(wr_data);
          else exp_ovf = 1;     // a push into a full FIFO is dropped
        end
      end
      #1;
    end
    checks++;
    if (!exp_ovf) begin failures++; $display("FAIL: overflow never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
