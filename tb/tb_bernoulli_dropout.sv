// tb_bernoulli_dropout: self-checking test of bernoulli_dropout.
// Streams 40 forward passes of PIX pixels with random gaps and back-pressure.
// The reference draws one keep bit per channel on the first beat of each
// pass from an independent model of the generators and holds it for the
// pass. Checks every output element, that the mask is constant within a pass,
// that it changes between passes, the drop rate and the one-beat-per-cycle
// throughput of an unstalled burst.
module tb_bernoulli_dropout;
  import dropout_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned CH   = 8;
  localparam int unsigned PIX  = 6;
  localparam int unsigned N    = PIX * 40;
  localparam logic [31:0] SEED = 32'h2468_ace1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  fix_t [CH-1:0] in_data, out_data;
  logic [CH-1:0] out_keep;

  bernoulli_dropout #(.CH(CH), .PIX(PIX), .SEED(SEED)) dut (.*);

  int checks = 0, failures = 0;
  int unsigned st [CH];
  fix_t [CH-1:0] exp_d [$];
  logic [CH-1:0] exp_k [$];
  logic [CH-1:0] ref_mask, prev_pass_mask, last_out_mask;
  int sent = 0, recv = 0, dropped = 0, total = 0, in_beat = 0, out_beat = 0, mask_changes = 0;
  bit stall_mode = 1;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at t=%0t", what, $time); end
  endtask

  always @(posedge clk) if (rst_n && in_valid && in_ready) begin
    fix_t [CH-1:0] d;
    if (in_beat == 0) begin
      for (int c = 0; c < CH; c++) begin
        ref_mask[c] = (st[c] >> 16) >= 16384;
        st[c] = ref_xs(st[c]);
      end
    end
    for (int c = 0; c < CH; c++) d[c] = ref_mask[c] ? ref_scale(in_data[c], 341) : 0;
    exp_d.push_back(d); exp_k.push_back(ref_mask);
    in_beat = (in_beat == PIX - 1) ? 0 : in_beat + 1;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (exp_d.size() == 0) chk(0, "unexpected output");
    else begin
      chk(out_data == exp_d[0], "data");
      chk(out_keep == exp_k[0], "keep");
      void'(exp_d.pop_front()); void'(exp_k.pop_front());
      if (out_beat != 0) chk(out_keep == last_out_mask, "mask constant within pass");
      else if (recv != 0 && out_keep != last_out_mask) mask_changes++;
      last_out_mask = out_keep;
      for (int c = 0; c < CH; c++) begin total++; if (!out_keep[c]) dropped++; end
    end
    out_beat = (out_beat == PIX - 1) ? 0 : out_beat + 1;
    recv++;
  end

  always @(posedge clk) begin
    if (!rst_n) begin in_valid <= 0; out_ready <= 0; end
    else begin
      out_ready <= stall_mode ? ($urandom_range(0, 3) != 0) : 1'b1;
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
    chk(mask_changes > 30, $sformatf("mask redrawn between passes (%0d changes)", mask_changes));
    chk(dropped > total / 8 && dropped < total * 3 / 8, "drop rate near 0.25");
    sent = N; stall_mode = 0;
    begin
      longint t0, t1;
      repeat (3) @(negedge clk);
      sent = 0; recv = 0;
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
