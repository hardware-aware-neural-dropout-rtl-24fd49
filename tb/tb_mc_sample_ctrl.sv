// tb_mc_sample_ctrl: self-checking test of mc_sample_ctrl.
// Runs 20 inferences. A feeder model accepts pass requests after random
// delays and a network model returns each pass's result a random number of
// cycles later. Checks that exactly three requests are issued with sample
// indices 0, 1, 2, that done comes with the third result and not before,
// that start is ignored while busy, and that `cycles` equals the latency
// measured by the testbench.
module tb_mc_sample_ctrl;
  localparam int unsigned S = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, feed_valid, feed_ready, result_valid, done;
  logic [1:0]  feed_sample;
  logic [31:0] cycles;

  mc_sample_ctrl #(.NUM_SAMPLES(S)) dut (.*);

  int checks = 0, failures = 0;
  int issued = 0, results = 0, dones = 0;
  int pending [$];   // cycle at which each accepted pass returns its result
  int cyc = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at t=%0t", what, $time); end
  endtask

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n) begin
    feed_ready <= ($urandom_range(0, 2) == 0);
    result_valid <= 0;
    if (feed_valid && feed_ready) begin
      chk(int'(feed_sample) == issued, "sample index");
      issued++;
      pending.push_back(cyc + $urandom_range(3, 30));
    end
    if (pending.size() != 0 && cyc >= pending[0]) begin
      result_valid <= 1;
      void'(pending.pop_front());
    end
    if (result_valid) results++;
    if (done) dones++;
  end

  initial begin
    start = 0; feed_ready = 0; result_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 20; it++) begin
      int t_start, t_done;
      issued = 0; results = 0; dones = 0;
      @(negedge clk); start = 1;
      @(posedge clk); t_start = cyc;
      @(negedge clk); start = 0;
      chk(busy, "busy after start");
      // a second start while busy must be ignored
      repeat (2) @(negedge clk);
      start = 1; @(negedge clk); start = 0;
      @(posedge clk iff done);
      t_done = cyc;
      @(negedge clk);
      chk(issued == S, $sformatf("%0d requests issued", issued));
      chk(results == S, $sformatf("done after %0d results", results));
      chk(!busy, "idle after done");
      chk(int'(cycles) == t_done - 1 - t_start, $sformatf("latency %0d vs %0d", cycles, t_done - 1 - t_start));
      repeat (40) @(negedge clk);
      chk(issued == S && dones == 1, "no extra requests or done pulses");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
