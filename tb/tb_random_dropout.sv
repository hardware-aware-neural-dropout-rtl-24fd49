// tb_random_dropout: self-checking test of random_dropout.
// Streams random pixels with random input gaps and output back-pressure,
// compares every output element with a reference drawn from an independent
// model of the generators, checks the drop rate is near 1/4, and checks that
// an unstalled burst runs at one beat per cycle with one cycle of latency.
module tb_random_dropout;
  import dropout_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned CH = 4;
  localparam int unsigned N  = 400;
  localparam logic [31:0] SEED = 32'h1357_9bdf;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  fix_t [CH-1:0] in_data, out_data;
  logic [CH-1:0] out_keep;

  random_dropout #(.CH(CH), .SEED(SEED)) dut (.*);

  int checks = 0, failures = 0;
  int unsigned st [CH];
  fix_t [CH-1:0] exp_d [$];
  logic [CH-1:0] exp_k [$];
  int sent = 0, recv = 0, dropped = 0, total = 0;
  bit stall_mode = 1;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at t=%0t", what, $time); end
  endtask

  // reference model fed at each accepted input beat
  always @(posedge clk) if (rst_n && in_valid && in_ready) begin
    fix_t [CH-1:0] d; logic [CH-1:0] k;
    for (int c = 0; c < CH; c++) begin
      k[c] = (st[c] >> 16) >= 16384;
      d[c] = k[c] ? ref_scale(in_data[c], 341) : 0;
      st[c] = ref_xs(st[c]);
    end
    exp_d.push_back(d); exp_k.push_back(k);
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    fix_t [CH-1:0] d; logic [CH-1:0] k;
    if (exp_d.size() == 0) chk(0, "unexpected output");
    else begin
      d = exp_d[0]; k = exp_k[0];
      void'(exp_d.pop_front()); void'(exp_k.pop_front());
      for (int c = 0; c < CH; c++) begin
        chk(out_data[c] == d[c] && out_keep[c] == k[c], "data/keep");
        total++; if (!k[c]) dropped++;
      end
    end
    recv++;
  end

  // driver
  always @(posedge clk) begin
    if (!rst_n) begin in_valid <= 0; out_ready <= 0; end
    else begin
      if (stall_mode) out_ready <= ($urandom_range(0, 3) != 0);
      else            out_ready <= 1;
      if (!in_valid || in_ready) begin
        if (sent < N && (!stall_mode || $urandom_range(0, 4) != 0)) begin
          in_valid <= 1;
          for (int c = 0; c < CH; c++) in_data[c] <= fix_t'($urandom);
          sent++;
        end else in_valid <= 0;
      end
    end
  end

  initial begin
    for (int c = 0; c < CH; c++) st[c] = ref_seed(SEED, c);
    in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (recv == N);
    chk(exp_d.size() == 0, "all outputs drained");
    chk(dropped > total / 8 && dropped < total * 3 / 8, "drop rate near 0.25");
    // throughput: an unstalled burst of 50 beats, one per cycle
    sent = N; stall_mode = 0;
    begin
      longint t0, t1;
      repeat (3) @(negedge clk);
      sent = 0; recv = 0;
      // allow N more beats; time from first accept to last output
      @(posedge clk iff (in_valid && in_ready));
      t0 = $time;
      @(posedge clk iff (out_valid && out_ready && recv == N - 1));
      t1 = $time;
      chk((t1 - t0) / 10 == N, $sformatf("burst of %0d beats took %0d cycles", N, (t1 - t0) / 10));
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
